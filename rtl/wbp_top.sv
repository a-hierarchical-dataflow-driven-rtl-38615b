// wbp_top: the design top of the hierarchical baseband manycore.
//
// Contents: NUM_CLUSTERS clusters of NUM_TILES tiles each, the main scheduler
// (rv32im_core), the main DMA engine, the top CSR and the top bus matrix. The
// main memory (DDR SDRAM with its controller) is outside: its bus port is
// mm_req/mm_rsp and it occupies 0x0000_0000..0x0FFF_FFFF. The main scheduler
// boots from main-memory address 0 after reset, hands threads to clusters
// (loading each cluster's CD-SPM and CS-SPM through the main DMA and
// releasing its L2 scheduler via the cluster CSR) and sleeps in WFI until a
// cluster reports done or the main DMA finishes. done/result come from the top
// CSR. Default size 5 clusters x 9 tiles is the largest prototype (45 cores).
module wbp_top import wbp_pkg::*; #(
  parameter int unsigned NUM_CLUSTERS = 5,
  parameter int unsigned NUM_TILES    = 9,
  parameter logic [15:0] TILE_LARGE   = 16'h0155,
  parameter int unsigned CSSPM_BYTES  = 262144,
  parameter int unsigned CDSPM_BYTES  = 16384
) (
  input  logic        clk,
  input  logic        rst_n,
  output bus_req_t    mm_req,
  input  bus_rsp_t    mm_rsp,
  output logic        done,
  output logic [31:0] result,
  output logic [NUM_CLUSTERS*NUM_TILES-1:0] tile_busy
);
  localparam int unsigned NM = 2;
  localparam int unsigned NS = 3 + NUM_CLUSTERS;

  function automatic logic [NS-1:0][31:0] f_base();
    logic [NS-1:0][31:0] v;
    v[0] = TOP_MAINMEM;
    v[1] = TOP_CSR;
    v[2] = TOP_DMA;
    for (int c = 0; c < NUM_CLUSTERS; c++) v[3 + c] = TOP_CLUSTER + (32'(c) << 24);
    return v;
  endfunction
  function automatic logic [NS-1:0][31:0] f_mask();
    logic [NS-1:0][31:0] v;
    v[0] = 32'hF000_0000;
    for (int s = 1; s < NS; s++) v[s] = 32'hFF00_0000;
    return v;
  endfunction
  localparam logic [NS-1:0][31:0] BASE = f_base();
  localparam logic [NS-1:0][31:0] MASK = f_mask();

  bus_req_t m_req [NM]; bus_rsp_t m_rsp [NM];
  bus_req_t s_req [NS]; bus_rsp_t s_rsp [NS];
  logic [NUM_CLUSTERS-1:0] cl_irq;
  logic dma_irq, dma_busy, sch_sleep, vq_valid, vr_ready;
  vq_entry_t vq_data;

  rv32im_core u_main_sched (
    .clk, .rst_n, .run(1'b1),
    .mem_req(m_req[0]), .mem_rsp(m_rsp[0]),
    .vq_valid, .vq_data, .vq_ready(1'b1),
    .vr_valid(1'b1), .vr_data(32'h0), .vr_ready,
    .vxu_idle(1'b1), .irq(|cl_irq || dma_irq), .sleeping(sch_sleep)
  );

  dma_engine u_main_dma (
    .clk, .rst_n, .cfg_req(s_req[2]), .cfg_rsp(s_rsp[2]),
    .m_req(m_req[1]), .m_rsp(m_rsp[1]), .irq(dma_irq), .busy(dma_busy)
  );

  bus_xbar #(.NM(NM), .NS(NS), .BASE(BASE), .MASK(MASK)) u_xbar (
    .clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp
  );

  assign mm_req   = s_req[0];
  assign s_rsp[0] = mm_rsp;

  top_csr #(.NUM_CLUSTERS(NUM_CLUSTERS), .NUM_TILES(NUM_TILES)) u_csr (
    .clk, .rst_n, .req(s_req[1]), .rsp(s_rsp[1]), .cluster_irq(cl_irq), .done, .result
  );

  for (genvar c = 0; c < NUM_CLUSTERS; c++) begin : g_cl
    cluster #(
      .NUM_TILES(NUM_TILES), .TILE_LARGE(TILE_LARGE),
      .CSSPM_BYTES(CSSPM_BYTES), .CDSPM_BYTES(CDSPM_BYTES), .CLUSTER_ID(c)
    ) u_cluster (
      .clk, .rst_n, .ext_req(s_req[3 + c]), .ext_rsp(s_rsp[3 + c]),
      .irq(cl_irq[c]), .tile_busy(tile_busy[c*NUM_TILES +: NUM_TILES])
    );
  end

  logic unused;
  assign unused = ^{dma_busy, sch_sleep, vq_valid, vq_data, vr_ready};
endmodule
