// tb_thread_manager: the inquiry / registration / run / completion cycle of
// the per-cluster thread table. Fills all slots (inquiry must then answer
// "no room"), frees one in the middle and checks it is reused, checks the
// per-slot state words, and that bad requests are refused and counted.
module tb_thread_manager;
  import wbp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  bus_req_t req = '0; bus_rsp_t rsp;
  `include "tb_bus_tasks.svh"
  thread_manager #(.SLOTS(4)) dut (.clk, .rst_n, .req, .rsp);

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    expect_rd("empty query", 4 * TM_QUERY, 32'h0000_0001);
    for (int t = 0; t < 4; t++) begin
      bus_wr(4 * TM_REGISTER, 8'h10 + t);
      expect_rd("slot", 4 * (TM_SLOT0 + t), {22'b0, TS_READY, 8'(8'h10 + t)});
    end
    expect_rd("full query", 4 * TM_QUERY, {8'd0, 8'd0, 8'd4, 8'h00});
    bus_wr(4 * TM_REGISTER, 8'h20);                    // refused: full
    bus_wr(4 * TM_RUN, 8'h12);
    expect_rd("running", 4 * (TM_SLOT0 + 2), {22'b0, TS_RUNNING, 8'h12});
    bus_wr(4 * TM_COMPLETE, 8'h11);
    expect_rd("slot 1 free", 4 * TM_QUERY, {8'd1, 8'd0, 8'd3, 4'd1, 3'b0, 1'b1});
    bus_wr(4 * TM_REGISTER, 8'h30);
    expect_rd("reused slot", 4 * (TM_SLOT0 + 1), {22'b0, TS_READY, 8'h30});
    bus_wr(4 * TM_COMPLETE, 8'h99);                    // refused: unknown
    bus_wr(4 * TM_REGISTER, 8'h30);                    // refused: already there (and full)
    expect_rd("errors counted", 4 * TM_QUERY, {8'd3, 8'd0, 8'd4, 8'h00});
    for (int t = 0; t < 4; t++) bus_wr(4 * TM_COMPLETE, (t == 1) ? 8'h30 : 8'h10 + t);
    expect_rd("all free", 4 * TM_QUERY, {8'd3, 8'd0, 8'd0, 8'h01});
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
