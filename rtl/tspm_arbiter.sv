// tspm_arbiter: the multiplexer in front of a tile's single-port T-SPM.
//
// port_dir (from the tile CSR) decides who owns the memory:
//   0: the outside (cluster bus matrix, i.e. the L2 DMA or scheduler)
//   1: the inside of the tile, where the VXU has priority over the core.
// A requester that does not own the port is not granted and waits. The
// response is routed back by a registered record of the granted requester.
// The port-direction multiplexer is the architecture's; the VXU-first
// priority inside the tile is this design's choice.
module tspm_arbiter import wbp_pkg::*; (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     port_dir,
  input  bus_req_t ext_req,
  output bus_rsp_t ext_rsp,
  input  bus_req_t core_req,
  output bus_rsp_t core_rsp,
  input  bus_req_t vxu_req,
  output bus_rsp_t vxu_rsp,
  output bus_req_t mem_req,
  input  bus_rsp_t mem_rsp
);
  typedef enum logic [1:0] { O_NONE, O_EXT, O_CORE, O_VXU } owner_e;
  owner_e sel, last;

  always_comb begin
    sel = O_NONE;
    if (!port_dir)          sel = ext_req.valid  ? O_EXT  : O_NONE;
    else if (vxu_req.valid) sel = O_VXU;
    else if (core_req.valid) sel = O_CORE;
  end

  always_comb begin
    unique case (sel)
      O_EXT:   mem_req = ext_req;
      O_CORE:  mem_req = core_req;
      O_VXU:   mem_req = vxu_req;
      default: mem_req = '0;
    endcase
  end

  assign ext_rsp.gnt   = (sel == O_EXT)  && mem_rsp.gnt;
  assign core_rsp.gnt  = (sel == O_CORE) && mem_rsp.gnt;
  assign vxu_rsp.gnt   = (sel == O_VXU)  && mem_rsp.gnt;
  assign ext_rsp.rvalid  = (last == O_EXT)  && mem_rsp.rvalid;
  assign core_rsp.rvalid = (last == O_CORE) && mem_rsp.rvalid;
  assign vxu_rsp.rvalid  = (last == O_VXU)  && mem_rsp.rvalid;
  assign ext_rsp.rdata  = mem_rsp.rdata;
  assign core_rsp.rdata = mem_rsp.rdata;
  assign vxu_rsp.rdata  = mem_rsp.rdata;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) last <= O_NONE;
    else        last <= (sel != O_NONE && mem_rsp.gnt) ? sel : O_NONE;

  // the outside never reaches the T-SPM while the tile owns it
  assert property (@(posedge clk) disable iff (!rst_n)
    port_dir |-> !ext_rsp.gnt);
endmodule
