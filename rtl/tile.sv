// tile: one processing tile of a cluster.
//
// Contents: a RISC-V scalar core (rv32im_core), the instruction queue to the
// VXU and the result queue back (sync_fifo), the vector extension unit (vxu),
// the private single-port T-SPM (spm), the tile CSR (tile_csr) and the
// multiplexer in front of the T-SPM (tspm_arbiter).
//
// Tile-local addresses (both from the core and, offset by the tile's base,
// from the cluster bus): T-SPM at 0x0000_0000, CSR at 0x0001_0000. The core
// boots at address 0 of its T-SPM whenever the CSR releases it.
//
// Life of a task (pack-and-ship): with port_dir=0 the cluster's DMA fills the
// T-SPM with code and data; the scheduler then sets port_dir=1 and core_run=1;
// the core runs, leaves its results in the T-SPM and writes the number of
// return values to RETCNT, which gives the T-SPM back to the bus, stops the
// core and raises irq. An L tile has 16 lanes and 32 vector registers, an S
// tile 8 lanes and 64 registers; the T-SPM sizes 64 KiB and 32 KiB printed in
// the tile figures are assigned to L and S tiles here.
module tile import wbp_pkg::*; #(
  parameter int unsigned LANES      = 16,
  parameter int unsigned NUM_VRF    = 32,
  parameter int unsigned TSPM_BYTES = 65536,
  parameter bit          LARGE      = 1'b1,
  parameter int unsigned QDEPTH     = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t bus_req,
  output bus_rsp_t bus_rsp,
  output logic     irq,
  output logic     busy
);
  localparam logic [1:0][31:0] DEC_BASE = {TILE_CSR_OFS, 32'h0};
  localparam logic [1:0][31:0] DEC_MASK = {TILE_CSR_OFS, TILE_CSR_OFS};

  logic port_dir, core_run;

  // core side
  bus_req_t core_req;   bus_rsp_t core_rsp;
  bus_req_t cdec_req [2]; bus_rsp_t cdec_rsp [2];
  // outside
  bus_req_t edec_req [2]; bus_rsp_t edec_rsp [2];
  bus_req_t ext_req [1];  bus_rsp_t ext_rsp [1];
  bus_req_t creq [1];     bus_rsp_t crsp [1];
  // T-SPM
  bus_req_t vxu_req, spm_req; bus_rsp_t vxu_rsp, spm_rsp;

  // queues
  logic      vq_valid, vq_ready, vqo_valid, vqo_ready;
  vq_entry_t vq_data, vqo_data;
  logic      vr_valid, vr_ready, vri_valid, vri_ready;
  logic [31:0] vr_data, vri_data;
  logic [$clog2(QDEPTH+1)-1:0] vq_cnt, vr_cnt;
  logic      vxu_idle, core_sleep;

  assign ext_req[0] = bus_req;
  assign bus_rsp    = ext_rsp[0];
  assign creq[0]    = core_req;
  assign core_rsp   = crsp[0];

  rv32im_core u_core (
    .clk, .rst_n, .run(core_run),
    .mem_req(core_req), .mem_rsp(core_rsp),
    .vq_valid, .vq_data, .vq_ready,
    .vr_valid, .vr_data, .vr_ready,
    .vxu_idle(vxu_idle && vq_cnt == '0),
    .irq(1'b0), .sleeping(core_sleep)
  );

  bus_xbar #(.NM(1), .NS(2), .BASE(DEC_BASE), .MASK(DEC_MASK)) u_core_dec (
    .clk, .rst_n, .m_req(creq), .m_rsp(crsp), .s_req(cdec_req), .s_rsp(cdec_rsp)
  );
  bus_xbar #(.NM(1), .NS(2), .BASE(DEC_BASE), .MASK(DEC_MASK)) u_ext_dec (
    .clk, .rst_n, .m_req(ext_req), .m_rsp(ext_rsp), .s_req(edec_req), .s_rsp(edec_rsp)
  );

  sync_fifo #(.WIDTH($bits(vq_entry_t)), .DEPTH(QDEPTH)) u_vq (
    .clk, .rst_n,
    .push_valid(vq_valid), .push_ready(vq_ready), .push_data(vq_data),
    .pop_valid(vqo_valid), .pop_ready(vqo_ready), .pop_data(vqo_data),
    .count(vq_cnt)
  );
  sync_fifo #(.WIDTH(32), .DEPTH(QDEPTH)) u_vr (
    .clk, .rst_n,
    .push_valid(vri_valid), .push_ready(vri_ready), .push_data(vri_data),
    .pop_valid(vr_valid), .pop_ready(vr_ready), .pop_data(vr_data),
    .count(vr_cnt)
  );

  vxu #(.LANES(LANES), .NUM_VRF(NUM_VRF)) u_vxu (
    .clk, .rst_n,
    .q_valid(vqo_valid), .q_ready(vqo_ready), .q_data(vqo_data),
    .r_valid(vri_valid), .r_ready(vri_ready), .r_data(vri_data),
    .mem_req(vxu_req), .mem_rsp(vxu_rsp), .idle(vxu_idle)
  );

  tspm_arbiter u_arb (
    .clk, .rst_n, .port_dir,
    .ext_req(edec_req[0]), .ext_rsp(edec_rsp[0]),
    .core_req(cdec_req[0]), .core_rsp(cdec_rsp[0]),
    .vxu_req, .vxu_rsp,
    .mem_req(spm_req), .mem_rsp(spm_rsp)
  );

  spm #(.BYTES(TSPM_BYTES)) u_tspm (.clk, .rst_n, .req(spm_req), .rsp(spm_rsp));

  tile_csr #(.LANES(LANES), .NUM_VRF(NUM_VRF), .TSPM_BYTES(TSPM_BYTES), .LARGE(LARGE)) u_csr (
    .clk, .rst_n,
    .ext_req(edec_req[1]), .ext_rsp(edec_rsp[1]),
    .core_req(cdec_req[1]), .core_rsp(cdec_rsp[1]),
    .port_dir, .core_run, .irq
  );

  assign busy = core_run && !core_sleep;

  logic unused;
  assign unused = ^{vr_cnt, core_sleep};
endmodule
