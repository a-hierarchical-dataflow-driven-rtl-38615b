// tb_tspm_arbiter: three random requesters (outside, core, VXU) share one
// memory through the arbiter while port_dir toggles. Checks that only the
// owner side is granted (VXU before core), that every response reaches the
// requester that was granted, with the right data, and counts grants.
module tb_tspm_arbiter;
  import wbp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic port_dir = 0;
  bus_req_t r [3]; bus_rsp_t q [3];
  bus_req_t mreq; bus_rsp_t mrsp;
  int grants [3] = '{0, 0, 0};

  tspm_arbiter dut (.clk, .rst_n, .port_dir,
    .ext_req(r[0]), .ext_rsp(q[0]), .core_req(r[1]), .core_rsp(q[1]),
    .vxu_req(r[2]), .vxu_rsp(q[2]), .mem_req(mreq), .mem_rsp(mrsp));
  spm #(.BYTES(256)) u_mem (.clk, .rst_n, .req(mreq), .rsp(mrsp));

  logic [31:0] model [64];
  logic        exp_v [3];
  logic [31:0] exp_d [3];

  initial begin
    for (int i = 0; i < 3; i++) begin r[i] = '0; exp_v[i] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); r[0] = '{1, 1, 4'hF, 32'(4 * i), 32'(i * 3)}; model[i] = i * 3;
    end
    @(negedge clk); r[0] = '0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // check responses of the previous cycle's grants
      for (int i = 0; i < 3; i++) begin
        checks++;
        if (q[i].rvalid !== exp_v[i] || (exp_v[i] && q[i].rdata !== exp_d[i])) begin
          failures++; $display("FAIL response of requester %0d at %0d", i, n);
        end
      end
      if (n % 50 == 0) port_dir = ~port_dir;
      for (int i = 0; i < 3; i++) begin
        int a; a = $urandom_range(0, 63);
        r[i] = '{($urandom_range(0, 1) == 1), 1'b0, 4'hF, 32'(4 * a), 32'h0};
      end
      #1;
      begin
        int want;
        want = !port_dir ? (r[0].valid ? 0 : -1) : (r[2].valid ? 2 : (r[1].valid ? 1 : -1));
        for (int i = 0; i < 3; i++) begin
          checks++;
          if (q[i].gnt !== (i == want)) begin failures++; $display("FAIL grant %0d dir %0d", i, port_dir); end
          exp_v[i] = (i == want);
          if (i == want) begin exp_d[i] = model[r[i].addr[7:2]]; grants[i]++; end
        end
      end
    end
    for (int i = 0; i < 3; i++) begin
      checks++; if (grants[i] == 0) begin failures++; $display("FAIL requester %0d never granted", i); end
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
