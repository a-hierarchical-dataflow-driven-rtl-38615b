// sched_prog_pkg: the software images used by the cluster and top
// testbenches, built with rv_asm_pkg.
//
//  tile_prog   the task kernel a tile runs: y = mulq(x, w) + x over N
//              elements with vector instructions (REPEAT times, giving
//              the same result, to make the task long enough to overlap others), the reduction sum of y,
//              then the end-of-task sequence (step I: store registers to the
//              T-SPM, step II: write the return-value count to RETCNT).
//  l2_image    the L2 scheduler's CD-SPM image: the scheduling program at
//              address 0 and the job table at JOB_TABLE. For every job it
//              runs pack-and-ship steps 1-4 (atomic port-to-bus, L2 DMA of
//              the task image from the CS-SPM into the T-SPM, atomic
//              port-to-core, atomic core release) and marks the thread
//              running in the thread manager. Then for every job it sleeps
//              (WFI) until the tile's interrupt, DMAs the result block back
//              to the CS-SPM (steps III-IV), clears the interrupt and
//              completes the thread. Finally it writes the job count to the
//              cluster DONE register.
//  main_prog   the main scheduler's program in main memory: for every
//              cluster it asks the thread manager for room, registers the
//              threads, DMAs the L2 image into the CD-SPM and the task images
//              into the CS-SPM and starts the L2 scheduler; it then sleeps
//              until every cluster is done, DMAs the results back to main
//              memory, adds up the clusters' DONE words and writes the sum to
//              the top DONE register.
//  model_y     reference result of one element.
// Addresses, layouts and the kernel are this design's choice.
package sched_prog_pkg;
  import wbp_pkg::*;
  import rv_asm_pkg::*;

  localparam int N          = 32;          // elements per task
  localparam int REPEAT     = 4;           // the kernel body runs this many times
  localparam int VEC_PER_TASK = 1 + 6 * REPEAT;  // vector instructions per task
  localparam int IMG_WORDS  = 192;         // task image: code 0x000, x 0x200, w 0x280
  localparam int RES_OFS    = 32'h400;     // result block in the T-SPM
  localparam int RES_WORDS  = N + 5;       // y[N], sum, 4 saved registers
  localparam int RES_STRIDE = 32'h100;     // result block spacing in the CS-SPM
  localparam int CS_IMG     = 32'h10_0000; // task images in the CS-SPM
  localparam int CS_RES     = 32'h11_0000; // result blocks in the CS-SPM
  localparam int JOB_TABLE  = 32'h400;     // in the CD-SPM
  localparam int MM_L2      = 32'h0001_0000;
  localparam int MM_IMG     = 32'h0002_0000;  // + cluster * MM_IMG_STRIDE
  localparam int MM_IMG_STRIDE = 32'h2000;
  localparam int MM_RES     = 32'h0008_0000;  // + cluster * MM_RES_STRIDE
  localparam int MM_RES_STRIDE = 32'h1000;

  function automatic int l2_words(int ntiles);
    return JOB_TABLE / 4 + 1 + 8 * ntiles;
  endfunction

  function automatic logic [31:0] model_y(logic [31:0] x, logic [31:0] w);
    logic signed [63:0] p;
    p = $signed(x) * $signed(w);
    return p[46:15] + x;
  endfunction

  task automatic tile_prog(ref w_t p[$]);
    int l;
    p.delete();
    li(p, 1, N);        emit(p, vsetvl(2, 1));
    emit(p, addi(19, 0, REPEAT));
    l = p.size();
    li(p, 3, 32'h200);  emit(p, vld(0, 3));
    li(p, 4, 32'h280);  emit(p, vld(8, 4));
    emit(p, vmulq(16, 0, 8));
    emit(p, vadd(16, 16, 0));
    emit(p, vredsum(5, 16));
    li(p, 6, RES_OFS);  emit(p, vst(16, 6));
    emit(p, addi(19, 19, -1));
    emit(p, bne(19, 0, 4 * (l - p.size())));
    emit(p, sw(5, 6, 4 * N));
    // step I: save registers
    emit(p, sw(1, 6, 4 * N + 4));  emit(p, sw(2, 6, 4 * N + 8));
    emit(p, sw(3, 6, 4 * N + 12)); emit(p, sw(4, 6, 4 * N + 16));
    // step II: return-value count (gives the port back and interrupts)
    li(p, 7, TILE_CSR_OFS + 4 * TCSR_RETCNT); li(p, 8, RES_WORDS);
    emit(p, sw(8, 7, 0));
    emit(p, jal(0, 0));
  endtask

  // wait for a DMA at base register rd (x20) and clear its done flag
  task automatic dma_wait(ref w_t p[$], input int base);
    int l;
    l = p.size();
    emit(p, wfi());
    emit(p, lw(15, base, 4 * DMA_STAT));
    emit(p, andi(15, 15, 1));
    emit(p, beq(15, 0, 4 * (l - p.size())));
    emit(p, sw(14, base, 4 * DMA_STAT));
  endtask

  task automatic l2_image(ref w_t img[$], input int ntiles);
    w_t p[$];
    int la, lb, lt;
    li(p, 1, JOB_TABLE);  emit(p, lw(2, 1, 0));
    emit(p, addi(4, 1, 4)); emit(p, addi(3, 0, 0));
    li(p, 20, CL_DMA);  li(p, 21, CL_CSR);  li(p, 22, CL_TMGR);  li(p, 12, TILE_CSR_OFS);
    emit(p, addi(14, 0, 1)); emit(p, addi(16, 0, 2)); emit(p, addi(13, 0, -4));
    // ---- ship every job
    la = p.size();
    emit(p, lw(5, 4, 0)); emit(p, lw(6, 4, 4)); emit(p, lw(7, 4, 8)); emit(p, lw(18, 4, 24));
    emit(p, add(11, 5, 12));
    emit(p, amoand(0, 11, 13));                       // 1: port to bus, core held
    emit(p, sw(6, 20, 4 * DMA_SRC)); emit(p, sw(5, 20, 4 * DMA_DST));
    emit(p, sw(7, 20, 4 * DMA_LEN)); emit(p, sw(14, 20, 4 * DMA_CTRL));
    dma_wait(p, 20);                                  // 2: code and data in
    emit(p, amoor(0, 11, 14));                        // 3: port to core
    emit(p, amoor(0, 11, 16));                        // 4: release the core
    emit(p, sw(18, 22, 4 * TM_RUN));
    emit(p, addi(3, 3, 1)); emit(p, addi(4, 4, 32));
    emit(p, blt(3, 2, 4 * (la - p.size())));
    // ---- collect every job
    emit(p, addi(4, 1, 4)); emit(p, addi(3, 0, 0));
    lb = p.size();
    emit(p, lw(5, 4, 0)); emit(p, lw(8, 4, 12)); emit(p, lw(9, 4, 16));
    emit(p, lw(10, 4, 20)); emit(p, lw(18, 4, 24));
    emit(p, add(11, 5, 12));
    lt = p.size();
    emit(p, wfi());
    emit(p, lw(15, 11, 4 * TCSR_IRQ));
    emit(p, beq(15, 0, 4 * (lt - p.size())));
    emit(p, sw(8, 20, 4 * DMA_SRC)); emit(p, sw(9, 20, 4 * DMA_DST));
    emit(p, sw(10, 20, 4 * DMA_LEN)); emit(p, sw(14, 20, 4 * DMA_CTRL));
    dma_wait(p, 20);                                  // IV: results out
    emit(p, sw(14, 11, 4 * TCSR_IRQ));
    emit(p, sw(18, 22, 4 * TM_COMPLETE));
    emit(p, addi(3, 3, 1)); emit(p, addi(4, 4, 32));
    emit(p, blt(3, 2, 4 * (lb - p.size())));
    emit(p, sw(2, 21, 4 * CCSR_DONE));
    emit(p, jal(0, 0));
    // image
    img.delete();
    foreach (p[i]) img.push_back(p[i]);
    while (img.size() < JOB_TABLE / 4) img.push_back('0);
    img.push_back(ntiles);
    for (int j = 0; j < ntiles; j++) begin
      img.push_back(CL_TILE0 + j * TILE_SPAN);                 // tile base
      img.push_back(CS_IMG + j * IMG_WORDS * 4);               // image source
      img.push_back(IMG_WORDS);                                // image words
      img.push_back(CL_TILE0 + j * TILE_SPAN + RES_OFS);       // result source
      img.push_back(CS_RES + j * RES_STRIDE);                  // result destination
      img.push_back(RES_WORDS);
      img.push_back(j + 1);                                    // thread id
      img.push_back('0);
    end
  endtask

  // one task image: code, then x at 0x200 and w at 0x280
  task automatic task_image(ref w_t img[$], input w_t x[N], input w_t w[N]);
    w_t p[$];
    tile_prog(p);
    img.delete();
    foreach (p[i]) img.push_back(p[i]);
    while (img.size() < 32'h200 / 4) img.push_back('0);
    for (int i = 0; i < N; i++) img.push_back(x[i]);
    for (int i = 0; i < N; i++) img.push_back(w[i]);
  endtask

  task automatic main_prog(ref w_t p[$], input int nclusters, input int ntiles);
    int lc, lr, lw_, lk;
    p.delete();
    emit(p, addi(1, 0, 0));  li(p, 2, nclusters);  li(p, 3, TOP_CLUSTER);
    li(p, 20, TOP_DMA);      li(p, 21, TOP_CSR);   emit(p, addi(14, 0, 1));
    li(p, 25, 32'h0100_0000); li(p, 27, MM_IMG);   li(p, 24, ntiles);
    li(p, 29, (1 << nclusters) - 1);
    li(p, 5, CL_TMGR);  li(p, 6, CL_CSR);  li(p, 7, CS_IMG);  li(p, 8, CS_RES);
    li(p, 9, MM_L2);    li(p, 10, l2_words(ntiles));  li(p, 11, ntiles * IMG_WORDS);
    emit(p, addi(26, 0, 0)); emit(p, addi(30, 0, 0));
    // ---- dispatch to every cluster
    lc = p.size();
    emit(p, add(22, 3, 5));
    emit(p, lw(15, 22, 4 * TM_QUERY));               // inquiry
    emit(p, andi(15, 15, 1)); emit(p, add(26, 26, 15));
    emit(p, addi(23, 0, 1));
    lr = p.size();
    emit(p, sw(23, 22, 4 * TM_REGISTER));            // registration
    emit(p, addi(23, 23, 1));
    emit(p, bge(24, 23, 4 * (lr - p.size())));
    emit(p, sw(9, 20, 4 * DMA_SRC)); emit(p, sw(3, 20, 4 * DMA_DST));
    emit(p, sw(10, 20, 4 * DMA_LEN)); emit(p, sw(14, 20, 4 * DMA_CTRL));
    dma_wait(p, 20);
    emit(p, add(28, 3, 7));
    emit(p, sw(27, 20, 4 * DMA_SRC)); emit(p, sw(28, 20, 4 * DMA_DST));
    emit(p, sw(11, 20, 4 * DMA_LEN)); emit(p, sw(14, 20, 4 * DMA_CTRL));
    dma_wait(p, 20);
    emit(p, add(28, 3, 6));
    emit(p, sw(14, 28, 4 * CCSR_CTRL));              // start the L2 scheduler
    li(p, 15, MM_IMG_STRIDE); emit(p, add(27, 27, 15));
    emit(p, add(3, 3, 25)); emit(p, addi(1, 1, 1));
    emit(p, blt(1, 2, 4 * (lc - p.size())));
    // ---- wait for all clusters
    lw_ = p.size();
    emit(p, wfi());
    emit(p, lw(15, 21, 4 * TOPCSR_IRQ));
    emit(p, bne(15, 29, 4 * (lw_ - p.size())));
    // ---- collect
    emit(p, addi(1, 0, 0));  li(p, 3, TOP_CLUSTER);  li(p, 27, MM_RES);
    li(p, 11, ntiles * RES_STRIDE / 4);
    lk = p.size();
    emit(p, add(28, 3, 8));
    emit(p, sw(28, 20, 4 * DMA_SRC)); emit(p, sw(27, 20, 4 * DMA_DST));
    emit(p, sw(11, 20, 4 * DMA_LEN)); emit(p, sw(14, 20, 4 * DMA_CTRL));
    dma_wait(p, 20);
    emit(p, add(28, 3, 6));
    emit(p, lw(15, 28, 4 * CCSR_DONE)); emit(p, add(30, 30, 15));
    emit(p, sw(14, 28, 4 * CCSR_IRQ));
    li(p, 15, MM_RES_STRIDE); emit(p, add(27, 27, 15));
    emit(p, add(3, 3, 25)); emit(p, addi(1, 1, 1));
    emit(p, blt(1, 2, 4 * (lk - p.size())));
    emit(p, add(30, 30, 26));                        // + clusters found with room
    emit(p, sw(30, 21, 4 * TOPCSR_DONE));
    emit(p, jal(0, 0));
  endtask
endpackage
