// tb_spm: random byte-enabled writes and reads against a reference array;
// checks the one-cycle read latency (through bus_access) and that a read in
// the cycle after a write returns the new data.
module tb_spm;
  import wbp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  bus_req_t req = '0; bus_rsp_t rsp;
  int checks = 0, failures = 0;
  `include "tb_bus_tasks.svh"

  spm #(.BYTES(1024)) dut (.clk, .rst_n, .req, .rsp);

  logic [31:0] ref_m [256];
  initial begin
    logic [31:0] q;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 256; i++) begin ref_m[i] = $urandom; bus_wr(i * 4, ref_m[i]); end
    for (int n = 0; n < 400; n++) begin
      int a; logic [3:0] be; logic [31:0] d;
      a = $urandom_range(0, 255); be = 4'($urandom); d = $urandom;
      bus_access(1'b1, be, a * 4, d, q);
      for (int b = 0; b < 4; b++) if (be[b]) ref_m[a][8*b +: 8] = d[8*b +: 8];
      begin
        int r; r = $urandom_range(0, 255);
        if (n % 4 == 0) r = a;   // read right after the write
        expect_rd("read back", r * 4, ref_m[r]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
