// tb_tile_csr: the pack-and-ship register sequence on the tile CSR. The
// scheduler side turns the port to the bus, to the core and releases the
// core with read-modify-write accesses; the core side writes RETCNT, which
// must give the port back, stop the core and raise the interrupt; the
// interrupt clears on a write of 1; INFO reports the tile's configuration.
module tb_tile_csr;
  import wbp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  bus_req_t req = '0, creq = '0; bus_rsp_t rsp, crsp;
  logic port_dir, core_run, irq;
  `include "tb_bus_tasks.svh"

  tile_csr #(.LANES(8), .NUM_VRF(64), .TSPM_BYTES(32768), .LARGE(0)) dut (
    .clk, .rst_n, .ext_req(req), .ext_rsp(rsp), .core_req(creq), .core_rsp(crsp),
    .port_dir, .core_run, .irq);

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    expect_eq("reset: port on bus", port_dir, 0);
    expect_eq("reset: core held", core_run, 0);
    expect_rd("info", TILE_CSR_OFS + 4 * TCSR_INFO, {1'b0, 15'd32, 8'd64, 8'd8});
    bus_wr(4 * TCSR_CTRL, 32'h1);
    expect_eq("port to core", port_dir, 1);
    bus_wr(4 * TCSR_CTRL, 32'h3);
    expect_eq("core released", core_run, 1);
    expect_rd("ctrl", 4 * TCSR_CTRL, 3);
    // core reports 5 return values (core port, both ports at once: ext wins)
    fork
      begin
        @(negedge clk); creq = '{valid: 1, we: 1, be: 4'hF, addr: 4 * TCSR_RETCNT, wdata: 5};
        #1; while (!crsp.gnt) begin @(negedge clk); #1; end
        @(negedge clk); creq = '0;
      end
      expect_rd("ext read while core writes", 4 * TCSR_CTRL, 3);
    join
    repeat (2) @(negedge clk);
    expect_eq("done: port back on bus", port_dir, 0);
    expect_eq("done: core stopped", core_run, 0);
    expect_eq("done: irq", irq, 1);
    expect_rd("retcnt", 4 * TCSR_RETCNT, 5);
    expect_rd("irq pending", 4 * TCSR_IRQ, 1);
    bus_wr(4 * TCSR_IRQ, 1);
    expect_eq("irq cleared", irq, 0);
    // an outside write of RETCNT does not end a task
    bus_wr(4 * TCSR_CTRL, 32'h3);
    bus_wr(4 * TCSR_RETCNT, 9);
    expect_eq("ext retcnt keeps core", core_run, 1);
    expect_eq("ext retcnt no irq", irq, 0);
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
