// tb_cluster_csr: run bit, done/result with interrupt and clearing, the
// tile interrupt vector, the mailbox and the information word.
module tb_cluster_csr;
  import wbp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  bus_req_t req = '0; bus_rsp_t rsp;
  logic [8:0] tile_irq = 0;
  logic sched_run, irq;
  `include "tb_bus_tasks.svh"
  cluster_csr #(.NUM_TILES(9), .LARGE_MASK(16'h0155), .CLUSTER_ID(3)) dut (
    .clk, .rst_n, .req, .rsp, .tile_irq, .sched_run, .irq);
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    expect_eq("scheduler held", sched_run, 0);
    bus_wr(4 * CCSR_CTRL, 1);
    expect_eq("scheduler run", sched_run, 1);
    expect_rd("ctrl", 4 * CCSR_CTRL, 1);
    tile_irq = 9'h105;
    expect_rd("tile irq vector", 4 * CCSR_TILEIRQ, 32'h105);
    bus_wr(4 * CCSR_MBOX, 32'hCAFE_0001);
    expect_rd("mailbox", 4 * CCSR_MBOX, 32'hCAFE_0001);
    expect_eq("no done yet", irq, 0);
    bus_wr(4 * CCSR_DONE, 32'd77);
    expect_eq("done irq", irq, 1);
    expect_rd("result", 4 * CCSR_DONE, 77);
    expect_rd("irq pending", 4 * CCSR_IRQ, 1);
    bus_wr(4 * CCSR_IRQ, 1);
    expect_eq("irq cleared", irq, 0);
    expect_rd("info", 4 * CCSR_INFO, {16'h0155, 8'd9, 8'd3});
    bus_wr(4 * CCSR_CTRL, 0);
    expect_eq("scheduler stopped", sched_run, 0);
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
