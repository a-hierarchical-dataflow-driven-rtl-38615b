// tb_wbp_top: end-to-end test of the whole design at its default size
// (5 clusters of 9 tiles). The testbench only provides the clock, reset and
// a main-memory model on the top's memory port (one-cycle read latency,
// grants withheld at random). Main memory holds the main scheduler's
// program at address 0, the L2 scheduler image and one set of task images
// per cluster. After reset everything runs on the design's own cores: the
// main scheduler queries and registers threads, ships images to every
// cluster with the main DMA, starts the L2 schedulers, sleeps until all
// clusters report, DMAs the results back and writes DONE. The testbench then
// checks every result word in main memory against a model and the DONE
// value, and counts each mechanism, failing any that never happened:
// main-DMA and L2-DMA copies, AMOs, WFI wake-ups of each scheduler level,
// T-SPM port switches, tile interrupts, cluster interrupts, thread
// registrations, vector instructions, and several tiles busy at once.
module tb_wbp_top;
  import wbp_pkg::*;
  import rv_asm_pkg::*;
  import sched_prog_pkg::*;
  localparam int NC = 5, NT = 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  bus_req_t mm_req; bus_rsp_t mm_rsp;
  logic done; logic [31:0] result; logic [NC*NT-1:0] tile_busy;

  wbp_top dut (.clk, .rst_n, .mm_req, .mm_rsp, .done, .result, .tile_busy);

  // ---------------- main memory model (1 MiB) ----------------
  logic [31:0] mem [262144];
  logic g_r, rv_q; logic [31:0] rd_q;
  always_ff @(posedge clk) g_r <= ($urandom_range(0, 7) != 0);
  assign mm_rsp.gnt = mm_req.valid && g_r;
  assign mm_rsp.rvalid = rv_q;
  assign mm_rsp.rdata = rd_q;
  always_ff @(posedge clk) begin
    rv_q <= mm_rsp.gnt;
    if (mm_rsp.gnt) begin
      rd_q <= mem[mm_req.addr[19:2]];
      if (mm_req.we)
        for (int b = 0; b < 4; b++)
          if (mm_req.be[b]) mem[mm_req.addr[19:2]][8*b +: 8] <= mm_req.wdata[8*b +: 8];
    end
  end

  task automatic expect_eq(string what, logic [31:0] got, logic [31:0] e);
    checks++;
    if (got !== e) begin
      failures++;
      $display("FAIL %s: got %08h expected %08h", what, got, e);
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_amo = 0, n_l2wake = 0, n_mwake = 0, n_l2dma = 0, n_mdma = 0, n_port = 0;
  int n_tirq = 0, n_cirq = 0, n_reg = 0, n_vec = 0, max_busy = 0;
  logic msl_q = 0, mdirq_q = 0;
  logic [NC-1:0] l2sl_q = '0, l2dirq_q = '0, ci_q = '0;
  logic [NC-1:0] l2sl, l2dirq, l2amo, ci, treg;
  logic [NC*NT-1:0] pd_q = '0, ti_q = '0, pd_now, ti_now, vq_now;
  for (genvar c = 0; c < NC; c++) begin : g_pc
    assign l2sl[c]   = dut.g_cl[c].u_cluster.u_sched.sleeping;
    assign l2dirq[c] = dut.g_cl[c].u_cluster.dma_irq;
    assign l2amo[c]  = dut.g_cl[c].u_cluster.u_sched.mem_req.valid &&
                       dut.g_cl[c].u_cluster.u_sched.mem_rsp.gnt &&
                       dut.g_cl[c].u_cluster.u_sched.mem_req.we &&
                       dut.g_cl[c].u_cluster.u_sched.instr[6:0] == 7'h2F;
    assign ci[c]     = dut.g_cl[c].u_cluster.irq;
    assign treg[c]   = dut.g_cl[c].u_cluster.u_tm.req.valid && dut.g_cl[c].u_cluster.u_tm.rsp.gnt &&
                       dut.g_cl[c].u_cluster.u_tm.req.we &&
                       dut.g_cl[c].u_cluster.u_tm.req.addr[5:2] == TM_REGISTER;
    for (genvar t = 0; t < NT; t++) begin : g_pt
      assign pd_now[c*NT+t] = dut.g_cl[c].u_cluster.g_tile[t].u_tile.port_dir;
      assign ti_now[c*NT+t] = dut.g_cl[c].u_cluster.g_tile[t].u_tile.irq;
      assign vq_now[c*NT+t] = dut.g_cl[c].u_cluster.g_tile[t].u_tile.vqo_valid &&
                              dut.g_cl[c].u_cluster.g_tile[t].u_tile.vqo_ready;
    end
  end
  always @(posedge clk) if (rst_n) begin
    n_amo    += $countones(l2amo);
    n_l2wake += $countones(l2sl_q & ~l2sl);
    n_l2dma  += $countones(l2dirq & ~l2dirq_q);
    n_cirq   += $countones(ci & ~ci_q);
    n_reg    += $countones(treg);
    n_port   += $countones(pd_now & ~pd_q);
    n_tirq   += $countones(ti_now & ~ti_q);
    n_vec    += $countones(vq_now);
    if (msl_q && !dut.u_main_sched.sleeping) n_mwake++;
    if (dut.dma_irq && !mdirq_q) n_mdma++;
    if ($countones(tile_busy) > max_busy) max_busy = $countones(tile_busy);
    l2sl_q <= l2sl; l2dirq_q <= l2dirq; ci_q <= ci; pd_q <= pd_now; ti_q <= ti_now;
    msl_q <= dut.u_main_sched.sleeping; mdirq_q <= dut.dma_irq;
  end

  w_t xs [NC][NT][N], ws [NC][NT][N];

  initial begin
    w_t img[$];
    int cyc;
    logic [31:0] sum;
    foreach (mem[i]) mem[i] = '0;
    main_prog(img, NC, NT);
    foreach (img[i]) mem[i] = img[i];
    l2_image(img, NT);
    foreach (img[i]) mem[MM_L2 / 4 + i] = img[i];
    for (int c = 0; c < NC; c++)
      for (int j = 0; j < NT; j++) begin
        for (int i = 0; i < N; i++) begin
          xs[c][j][i] = $urandom_range(0, 65535) - 32768;
          ws[c][j][i] = $urandom_range(0, 65535) - 32768;
        end
        task_image(img, xs[c][j], ws[c][j]);
        foreach (img[i]) mem[(MM_IMG + c * MM_IMG_STRIDE) / 4 + j * IMG_WORDS + i] = img[i];
      end
    repeat (3) @(posedge clk); rst_n = 1;
    cyc = 0;
    while (!done && cyc < 190000) begin @(posedge clk); cyc++; end
    $display("design finished in %0d cycles", cyc);
    expect_eq("done", done, 1);
    // every cluster had room (+NC) and finished NT tasks
    expect_eq("result", result, NC * NT + NC);
    for (int c = 0; c < NC; c++)
      for (int j = 0; j < NT; j++) begin
        int base;
        base = (MM_RES + c * MM_RES_STRIDE + j * RES_STRIDE) / 4;
        sum = 0;
        for (int i = 0; i < N; i++) begin
          expect_eq($sformatf("y c%0d t%0d [%0d]", c, j, i), mem[base + i], model_y(xs[c][j][i], ws[c][j][i]));
          sum += model_y(xs[c][j][i], ws[c][j][i]);
        end
        expect_eq("sum", mem[base + N], sum);
        expect_eq("saved vl", mem[base + N + 2], N);
      end
    $display("amo=%0d l2wake=%0d mwake=%0d l2dma=%0d mdma=%0d port=%0d tirq=%0d cirq=%0d reg=%0d vec=%0d max_busy=%0d",
             n_amo, n_l2wake, n_mwake, n_l2dma, n_mdma, n_port, n_tirq, n_cirq, n_reg, n_vec, max_busy);
    expect_eq("AMO operations", n_amo, 3 * NC * NT);
    expect_eq("L2 DMA copies", n_l2dma, 2 * NC * NT);
    expect_eq("main DMA copies", n_mdma, 3 * NC);
    expect_eq("port switches to core", n_port, NC * NT);
    expect_eq("tile interrupts", n_tirq, NC * NT);
    expect_eq("cluster interrupts", n_cirq, NC);
    expect_eq("thread registrations", n_reg, NC * NT);
    expect_eq("vector instructions", n_vec, VEC_PER_TASK * NC * NT);
    expect_eq("L2 scheduler WFI wake-ups", n_l2wake > 0, 1);
    expect_eq("main scheduler WFI wake-ups", n_mwake > 0, 1);
    expect_eq("tiles ran concurrently", max_busy > 1, 1);
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
