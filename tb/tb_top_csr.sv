// tb_top_csr: cluster interrupt vector, done/result output and information.
module tb_top_csr;
  import wbp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  bus_req_t req = '0; bus_rsp_t rsp;
  logic [4:0] cluster_irq = 0;
  logic done; logic [31:0] result;
  `include "tb_bus_tasks.svh"
  top_csr #(.NUM_CLUSTERS(5), .NUM_TILES(9)) dut (.clk, .rst_n, .req, .rsp, .cluster_irq, .done, .result);
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    expect_eq("not done", done, 0);
    cluster_irq = 5'b10010;
    expect_rd("irq vector", 4 * TOPCSR_IRQ, 32'h12);
    expect_rd("info", 4 * TOPCSR_INFO, 32'h0000_0905);
    bus_wr(4 * TOPCSR_DONE, 32'h1234_5678);
    expect_eq("done", done, 1);
    expect_eq("result", result, 32'h1234_5678);
    expect_rd("result readback", 4 * TOPCSR_DONE, 32'h1234_5678);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
