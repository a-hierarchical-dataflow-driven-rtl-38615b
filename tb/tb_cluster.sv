// tb_cluster: a full cluster (9 tiles, L and S mixed) run from its external
// port the way the main scheduler would use it. The testbench loads the L2
// scheduler image into the CD-SPM and one task image per tile into the
// CS-SPM, registers the threads in the thread manager and starts the L2
// scheduler. The scheduler ships a task to every tile (atomic port switch,
// L2 DMA, atomic release), sleeps on WFI, collects each result block with
// the L2 DMA and reports DONE. The testbench checks every result word
// against a model, the DONE word, the thread table after completion, and
// that each mechanism really happened: AMOs, WFI wake-ups, L2 DMA copies,
// T-SPM port switches, tile interrupts, vector instructions and more than
// one tile busy at the same time.
module tb_cluster;
  import wbp_pkg::*;
  import rv_asm_pkg::*;
  import sched_prog_pkg::*;
  localparam int NT = 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  bus_req_t req = '0; bus_rsp_t rsp;
  logic irq; logic [NT-1:0] tile_busy;
  `include "tb_bus_tasks.svh"

  cluster #(.NUM_TILES(NT)) dut (.clk, .rst_n, .ext_req(req), .ext_rsp(rsp), .irq, .tile_busy);

  // mechanism counters
  int n_amo = 0, n_wake = 0, n_dma = 0, n_port = 0, n_tirq = 0, n_vec = 0, max_busy = 0;
  logic sl_q = 0, dirq_q = 0;
  logic [NT-1:0] pd_q = '0, ti_q = '0;
  logic [NT-1:0] pd_now, ti_now, vq_now;
  for (genvar t = 0; t < NT; t++) begin : g_probe
    assign pd_now[t] = dut.g_tile[t].u_tile.port_dir;
    assign ti_now[t] = dut.g_tile[t].u_tile.irq;
    assign vq_now[t] = dut.g_tile[t].u_tile.vqo_valid && dut.g_tile[t].u_tile.vqo_ready;
  end
  always @(posedge clk) if (rst_n) begin
    if (dut.u_sched.mem_req.valid && dut.u_sched.mem_rsp.gnt && dut.u_sched.mem_req.we &&
        dut.u_sched.instr[6:0] == 7'h2F) n_amo++;
    if (sl_q && !dut.u_sched.sleeping) n_wake++;
    if (dut.dma_irq && !dirq_q) n_dma++;
    n_port += $countones(pd_now & ~pd_q);
    n_tirq += $countones(ti_now & ~ti_q);
    n_vec  += $countones(vq_now);
    if ($countones(tile_busy) > max_busy) max_busy = $countones(tile_busy);
    sl_q <= dut.u_sched.sleeping; dirq_q <= dut.dma_irq; pd_q <= pd_now; ti_q <= ti_now;
  end

  w_t xs [NT][N], ws [NT][N];

  initial begin
    w_t img[$];
    int cyc;
    logic [31:0] sum;
    repeat (2) @(posedge clk); rst_n = 1;
    l2_image(img, NT);
    foreach (img[i]) bus_wr(4 * i, img[i]);
    for (int j = 0; j < NT; j++) begin
      for (int i = 0; i < N; i++) begin
        xs[j][i] = $urandom_range(0, 65535) - 32768;
        ws[j][i] = $urandom_range(0, 65535) - 32768;
      end
      task_image(img, xs[j], ws[j]);
      foreach (img[i]) bus_wr(CL_CSSPM + 4 * (j * IMG_WORDS + i), img[i]);
      bus_wr(CL_TMGR + 4 * TM_REGISTER, j + 1);
    end
    // more tasks than thread slots: the first four are tracked, the other five
    // registrations are refused and counted, as are their run/complete writes
    expect_rd("threads registered", CL_TMGR + 4 * TM_QUERY, {8'd5, 8'd0, 8'd4, 8'h00});
    bus_wr(CL_CSR + 4 * CCSR_CTRL, 1);
    cyc = 0;
    while (!irq && cyc < 200000) begin @(posedge clk); cyc++; end
    $display("cluster finished in %0d cycles", cyc);
    expect_eq("cluster done irq", irq, 1);
    expect_rd("done word", CL_CSR + 4 * CCSR_DONE, NT);
    bus_wr(CL_CSR + 4 * CCSR_CTRL, 0);
    for (int j = 0; j < NT; j++) begin
      sum = 0;
      for (int i = 0; i < N; i++) begin
        expect_rd($sformatf("y[%0d][%0d]", j, i), CL_CSSPM + CS_RES - CS_IMG + j * RES_STRIDE + 4 * i,
                  model_y(xs[j][i], ws[j][i]));
        sum += model_y(xs[j][i], ws[j][i]);
      end
      expect_rd("sum", CL_CSSPM + CS_RES - CS_IMG + j * RES_STRIDE + 4 * N, sum);
      expect_rd("saved x1", CL_CSSPM + CS_RES - CS_IMG + j * RES_STRIDE + 4 * N + 4, N);
      expect_rd("saved x3", CL_CSSPM + CS_RES - CS_IMG + j * RES_STRIDE + 4 * N + 12, 32'h200);
    end
    expect_rd("thread table empty", CL_TMGR + 4 * TM_QUERY, {8'd15, 8'd0, 8'd0, 8'h01});
    $display("amo=%0d wake=%0d dma=%0d port=%0d tirq=%0d vec=%0d max_busy=%0d",
             n_amo, n_wake, n_dma, n_port, n_tirq, n_vec, max_busy);
    expect_eq("AMO operations", n_amo, 3 * NT);
    expect_eq("L2 DMA copies", n_dma, 2 * NT);
    expect_eq("port switches to core", n_port, NT);
    expect_eq("tile interrupts", n_tirq, NT);
    expect_eq("vector instructions", n_vec, VEC_PER_TASK * NT);
    expect_eq("WFI wake-ups happened", n_wake > 0, 1);
    expect_eq("tiles ran concurrently", max_busy > 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
