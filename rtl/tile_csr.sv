// tile_csr: control and status registers of a tile.
//
// Two ports with the wbp_pkg protocol: ext (from the cluster bus, used by the
// L2 scheduler) and core (from the tile's own scalar core); ext wins when both
// request in the same cycle. Registers (word offsets, see wbp_pkg):
//   CTRL   [0] port_dir: 0 = T-SPM on the bus matrix, 1 = T-SPM on the core
//          [1] core_run: releases the scalar core from reset
//   RETCNT number of return values the tile left in its T-SPM. A write from
//          the core marks the end of the task: the T-SPM port turns back to
//          the bus, the core is held in reset and the interrupt is raised.
//   IRQ    [0] completion interrupt pending; writing 1 clears it
//   INFO   read-only {large, T-SPM KiB, register count, lanes}
// Deployment follows the pack-and-ship steps: the scheduler sets port_dir=0,
// loads the T-SPM by DMA, sets port_dir=1 and core_run=1; the tile reports
// completion through RETCNT. The register layout is this design's choice.
module tile_csr import wbp_pkg::*; #(
  parameter int unsigned LANES      = 16,
  parameter int unsigned NUM_VRF    = 32,
  parameter int unsigned TSPM_BYTES = 65536,
  parameter bit          LARGE      = 1'b1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t ext_req,
  output bus_rsp_t ext_rsp,
  input  bus_req_t core_req,
  output bus_rsp_t core_rsp,
  output logic     port_dir,
  output logic     core_run,
  output logic     irq
);
  logic [31:0] retcnt, rdata_q;
  logic        ext_rv, core_rv;
  logic [31:0] info;
  assign info = {LARGE, 15'(TSPM_BYTES / 1024), 8'(NUM_VRF), 8'(LANES)};

  bus_req_t r;
  logic     from_core;
  assign from_core = !ext_req.valid && core_req.valid;
  assign r         = ext_req.valid ? ext_req : core_req;

  assign ext_rsp.gnt     = ext_req.valid;
  assign core_rsp.gnt    = from_core;
  assign ext_rsp.rvalid  = ext_rv;
  assign core_rsp.rvalid = core_rv;
  assign ext_rsp.rdata   = rdata_q;
  assign core_rsp.rdata  = rdata_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      port_dir <= 1'b0;
      core_run <= 1'b0;
      irq      <= 1'b0;
      retcnt   <= '0;
      rdata_q  <= '0;
      ext_rv   <= 1'b0;
      core_rv  <= 1'b0;
    end else begin
      ext_rv  <= ext_req.valid;
      core_rv <= from_core;
      if (r.valid) begin
        unique case (r.addr[5:2])
          TCSR_CTRL:   rdata_q <= {30'b0, core_run, port_dir};
          TCSR_RETCNT: rdata_q <= retcnt;
          TCSR_IRQ:    rdata_q <= {31'b0, irq};
          TCSR_INFO:   rdata_q <= info;
          default:     rdata_q <= '0;
        endcase
        if (r.we) begin
          unique case (r.addr[5:2])
            TCSR_CTRL: begin
              port_dir <= r.wdata[0];
              core_run <= r.wdata[1];
            end
            TCSR_RETCNT: begin
              retcnt <= r.wdata;
              if (from_core) begin
                port_dir <= 1'b0;
                core_run <= 1'b0;
                irq      <= 1'b1;
              end
            end
            TCSR_IRQ: if (r.wdata[0]) irq <= 1'b0;
            default: ;
          endcase
        end
      end
    end
  end
endmodule
