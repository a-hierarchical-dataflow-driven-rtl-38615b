// tb_tile: one tile driven from its cluster-side bus port, following the
// pack-and-ship life of a task. The testbench (standing in for the cluster
// DMA/scheduler) writes a program and two input vectors into the T-SPM while
// the port belongs to the bus, hands the port to the core and releases it.
// The program runs scalar and vector code (SETVL, vector load, add, multiply,
// store, reduction, integer divide) and finally writes RETCNT, which must
// stop the core, return the port and raise irq. The results are then read
// back over the bus and compared with a model. Also checks that the bus
// cannot reach the T-SPM while the core owns it (an access is held off)
// and the INFO word. Run once for an L tile and once for an S tile.
module tb_tile;
  import wbp_pkg::*;
  import rv_asm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  bus_req_t req = '0, req_l, req_s; bus_rsp_t rsp, rsp_l, rsp_s;
  logic irq_l, irq_s, busy_l, busy_s;
  int sel = 0;
  assign req_l = sel == 0 ? req : '0;
  assign req_s = sel == 1 ? req : '0;
  assign rsp   = sel == 0 ? rsp_l : rsp_s;
  wire irq = sel == 0 ? irq_l : irq_s;
  `include "tb_bus_tasks.svh"

  tile #(.LANES(16), .NUM_VRF(32), .TSPM_BYTES(65536), .LARGE(1)) u_l (
    .clk, .rst_n, .bus_req(req_l), .bus_rsp(rsp_l), .irq(irq_l), .busy(busy_l));
  tile #(.LANES(8), .NUM_VRF(64), .TSPM_BYTES(32768), .LARGE(0)) u_s (
    .clk, .rst_n, .bus_req(req_s), .bus_rsp(rsp_s), .irq(irq_s), .busy(busy_s));

  localparam int N = 40;
  task automatic run_tile(int which, logic [31:0] info);
    w_t p[$];
    logic [31:0] a [N], b [N], q;
    int unsigned sum, cyc;
    sel = which;
    // program
    li(p, 1, N);          emit(p, vsetvl(2, 1));
    li(p, 3, 32'h1000);   emit(p, vld(0, 3));
    li(p, 4, 32'h1100);   emit(p, vld(8, 4));
    emit(p, vadd(16, 0, 8));
    emit(p, vmul(24, 0, 8));
    li(p, 5, 32'h1200);   emit(p, vst(16, 5));
    li(p, 6, 32'h1300);   emit(p, vst(24, 6));
    emit(p, vredsum(7, 16));
    li(p, 8, 32'h1400);   emit(p, sw(7, 8, 0));  emit(p, sw(2, 8, 4));
    li(p, 9, 100000);     li(p, 10, -7);
    emit(p, div_(11, 9, 10)); emit(p, rem(12, 9, 10));
    emit(p, sw(11, 8, 8));    emit(p, sw(12, 8, 12));
    li(p, 13, 4);         li(p, 14, TILE_CSR_OFS + 4 * TCSR_RETCNT);
    emit(p, sw(13, 14, 0));
    emit(p, jal(0, 0));
    expect_rd("info", TILE_CSR_OFS + 4 * TCSR_INFO, info);
    // pack: port is on the bus after reset
    for (int i = 0; i < p.size(); i++) bus_wr(4 * i, p[i]);
    sum = 0;
    for (int i = 0; i < N; i++) begin
      a[i] = $urandom; b[i] = $urandom_range(0, 1000) - 500;
      bus_wr(32'h1000 + 4 * i, a[i]); bus_wr(32'h1100 + 4 * i, b[i]);
      sum += a[i] + b[i];
    end
    expect_rd("T-SPM readable by bus", 32'h1000, a[0]);
    // ship: port to core, then release
    bus_wr(TILE_CSR_OFS + 4 * TCSR_CTRL, 1);
    // while the core owns the port, a bus access to the T-SPM is held off
    @(negedge clk); req = '{valid: 1'b1, we: 1'b0, be: 4'hF, addr: 32'h1000, wdata: '0};
    repeat (4) begin #1; expect_eq("T-SPM held from bus", rsp.gnt, 0); @(negedge clk); end
    req = '0;
    bus_wr(TILE_CSR_OFS + 4 * TCSR_CTRL, 3);
    cyc = 0;
    while (!irq && cyc < 20000) begin @(posedge clk); cyc++; end
    expect_eq("tile irq", irq, 1);
    expect_rd("ctrl after done", TILE_CSR_OFS + 4 * TCSR_CTRL, 0);
    expect_rd("retcnt", TILE_CSR_OFS + 4 * TCSR_RETCNT, 4);
    for (int i = 0; i < N; i++) begin
      expect_rd("vadd", 32'h1200 + 4 * i, a[i] + b[i]);
      expect_rd("vmul", 32'h1300 + 4 * i, a[i] * b[i]);
    end
    expect_rd("redsum", 32'h1400, sum);
    expect_rd("vl", 32'h1404, N);
    expect_rd("div", 32'h1408, -14285);
    expect_rd("rem", 32'h140C, 5);
    expect_rd("untouched", 32'h1200 + 4 * N, 0);
    bus_wr(TILE_CSR_OFS + 4 * TCSR_IRQ, 1);
    expect_eq("irq cleared", irq, 0);
    $display("tile %0d ran %0d cycles", which, cyc);
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    // zero the result area first so "untouched" is meaningful
    sel = 0; for (int i = 0; i < 2 * N; i++) bus_wr(32'h1200 + 4 * i, 0);
    sel = 1; for (int i = 0; i < 2 * N; i++) bus_wr(32'h1200 + 4 * i, 0);
    run_tile(0, {1'b1, 15'd64, 8'd32, 8'd16});
    run_tile(1, {1'b0, 15'd32, 8'd64, 8'd8});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
