// cluster: one cluster of heterogeneous tiles with its own scheduler.
//
// Contents: NUM_TILES tiles (L or S type after TILE_LARGE), the shared
// CS-SPM, the L2 scheduler (rv32im_core) with its dedicated CD-SPM, the L2 DMA
// engine, the cluster CSR, the thread manager and the bus matrix (bus_xbar)
// joining them. Bus masters: the L2 scheduler, the L2 DMA and the external
// port (the design top: main scheduler and main DMA). Slaves: CD-SPM, CS-SPM,
// cluster CSR, L2 DMA registers, thread manager and every tile (map in
// wbp_pkg; only address bits [23:0] are decoded).
//
// The L2 scheduler boots from CD-SPM address 0 when the cluster CSR sets run.
// Its CD-SPM accesses go straight to the CD-SPM through a port multiplexer
// (the same one a tile uses before its T-SPM); while run is 0 that memory
// belongs to the bus so the main DMA can load the scheduler's code. Its WFI
// wakes on any tile completion or on the L2 DMA's done flag. irq is the
// cluster's done interrupt to the main scheduler.
// Tile mix, CS-SPM and CD-SPM sizes are this design's choices; the cluster
// organisation follows the architecture.
module cluster import wbp_pkg::*; #(
  parameter int unsigned NUM_TILES   = 9,
  parameter logic [15:0] TILE_LARGE  = 16'h0155,
  parameter int unsigned CSSPM_BYTES = 262144,
  parameter int unsigned CDSPM_BYTES = 16384,
  parameter int unsigned CLUSTER_ID  = 0,
  parameter int unsigned TM_SLOTS    = 4,
  parameter int unsigned DMA_BURST   = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t ext_req,
  output bus_rsp_t ext_rsp,
  output logic     irq,
  output logic [NUM_TILES-1:0] tile_busy
);
  localparam int unsigned NM = 3;
  localparam int unsigned NS = 5 + NUM_TILES;

  function automatic logic [NS-1:0][31:0] f_base();
    logic [NS-1:0][31:0] v;
    v[0] = 32'(CL_CDSPM);
    v[1] = 32'(CL_CSSPM);
    v[2] = 32'(CL_CSR);
    v[3] = 32'(CL_DMA);
    v[4] = 32'(CL_TMGR);
    for (int t = 0; t < NUM_TILES; t++) v[5 + t] = 32'(CL_TILE0) + 32'(t) * TILE_SPAN;
    return v;
  endfunction
  function automatic logic [NS-1:0][31:0] f_mask();
    logic [NS-1:0][31:0] v;
    v[0] = 32'h00F0_0000;
    v[1] = 32'h00F0_0000;
    v[2] = 32'h00FF_0000;
    v[3] = 32'h00FF_0000;
    v[4] = 32'h00FF_0000;
    for (int t = 0; t < NUM_TILES; t++) v[5 + t] = 32'h00FE_0000;
    return v;
  endfunction
  localparam logic [NS-1:0][31:0] BASE = f_base();
  localparam logic [NS-1:0][31:0] MASK = f_mask();
  localparam logic [1:0][31:0] SBASE = {32'h0, 32'(CL_CDSPM)};
  localparam logic [1:0][31:0] SMASK = {32'h0, 32'h00F0_0000};

  bus_req_t m_req [NM]; bus_rsp_t m_rsp [NM];
  bus_req_t s_req [NS]; bus_rsp_t s_rsp [NS];

  logic sched_run, dma_irq, dma_busy, sched_sleep;
  logic [NUM_TILES-1:0] tile_irq;

  // ---------------- L2 scheduler and CD-SPM ----------------
  bus_req_t sch_req;  bus_rsp_t sch_rsp;
  bus_req_t sreq [1]; bus_rsp_t srsp [1];
  bus_req_t sdec_req [2]; bus_rsp_t sdec_rsp [2];
  bus_req_t cd_req; bus_rsp_t cd_rsp;
  bus_rsp_t unused_rsp;
  vq_entry_t unused_vq;
  logic      unused_vq_valid, unused_vr_ready;

  rv32im_core u_sched (
    .clk, .rst_n, .run(sched_run),
    .mem_req(sch_req), .mem_rsp(sch_rsp),
    .vq_valid(unused_vq_valid), .vq_data(unused_vq), .vq_ready(1'b1),
    .vr_valid(1'b1), .vr_data(32'h0), .vr_ready(unused_vr_ready),
    .vxu_idle(1'b1), .irq(|tile_irq || dma_irq), .sleeping(sched_sleep)
  );
  assign sreq[0] = sch_req;
  assign sch_rsp = srsp[0];
  bus_xbar #(.NM(1), .NS(2), .BASE(SBASE), .MASK(SMASK)) u_sched_dec (
    .clk, .rst_n, .m_req(sreq), .m_rsp(srsp), .s_req(sdec_req), .s_rsp(sdec_rsp)
  );
  assign m_req[0]    = sdec_req[1];
  assign sdec_rsp[1] = m_rsp[0];

  tspm_arbiter u_cd_mux (
    .clk, .rst_n, .port_dir(sched_run),
    .ext_req(s_req[0]), .ext_rsp(s_rsp[0]),
    .core_req(sdec_req[0]), .core_rsp(sdec_rsp[0]),
    .vxu_req('0), .vxu_rsp(unused_rsp),
    .mem_req(cd_req), .mem_rsp(cd_rsp)
  );
  spm #(.BYTES(CDSPM_BYTES)) u_cdspm (.clk, .rst_n, .req(cd_req), .rsp(cd_rsp));

  // ---------------- bus matrix ----------------
  assign m_req[2] = ext_req;
  assign ext_rsp  = m_rsp[2];
  bus_xbar #(.NM(NM), .NS(NS), .BASE(BASE), .MASK(MASK)) u_xbar (
    .clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp
  );

  spm #(.BYTES(CSSPM_BYTES)) u_csspm (.clk, .rst_n, .req(s_req[1]), .rsp(s_rsp[1]));

  cluster_csr #(.NUM_TILES(NUM_TILES), .LARGE_MASK(TILE_LARGE), .CLUSTER_ID(CLUSTER_ID)) u_csr (
    .clk, .rst_n, .req(s_req[2]), .rsp(s_rsp[2]), .tile_irq, .sched_run, .irq
  );

  dma_engine #(.BURST(DMA_BURST)) u_dma (
    .clk, .rst_n, .cfg_req(s_req[3]), .cfg_rsp(s_rsp[3]),
    .m_req(m_req[1]), .m_rsp(m_rsp[1]), .irq(dma_irq), .busy(dma_busy)
  );

  thread_manager #(.SLOTS(TM_SLOTS)) u_tm (.clk, .rst_n, .req(s_req[4]), .rsp(s_rsp[4]));

  // ---------------- tiles ----------------
  for (genvar t = 0; t < NUM_TILES; t++) begin : g_tile
    localparam bit L = TILE_LARGE[t];
    tile #(
      .LANES     (L ? 16 : 8),
      .NUM_VRF   (L ? 32 : 64),
      .TSPM_BYTES(L ? 65536 : 32768),
      .LARGE     (L)
    ) u_tile (
      .clk, .rst_n, .bus_req(s_req[5 + t]), .bus_rsp(s_rsp[5 + t]),
      .irq(tile_irq[t]), .busy(tile_busy[t])
    );
  end

  logic unused;
  assign unused = ^{unused_rsp, unused_vq, unused_vq_valid, unused_vr_ready, dma_busy, sched_sleep};
endmodule
