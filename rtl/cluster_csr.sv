// cluster_csr: control and status registers of a cluster.
//
// One bus port (wbp_pkg protocol), reached by the main scheduler through the
// cluster's external port and by the L2 scheduler. Registers (word offsets):
//   CTRL    [0] run: releases the L2 scheduler from reset and gives the
//           CD-SPM port to it; while 0 the CD-SPM is loadable from the bus
//   DONE    write: result word of the cluster's thread; raises irq
//   IRQ     [0] done pending, write 1 to clear
//   TILEIRQ read-only vector of tile completion interrupts
//   MBOX    free read/write word for passing an argument to the L2 scheduler
//   INFO    read-only {L-tile mask[31:16], tile count[15:8], cluster id[7:0]}
// This mirrors the tile CSR with fewer settings, as the cluster-level
// transfers are done the same way; the layout is this design's choice.
module cluster_csr import wbp_pkg::*; #(
  parameter int unsigned NUM_TILES  = 9,
  parameter logic [15:0] LARGE_MASK = 16'h0155,
  parameter int unsigned CLUSTER_ID = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  bus_req_t             req,
  output bus_rsp_t             rsp,
  input  logic [NUM_TILES-1:0] tile_irq,
  output logic                 sched_run,
  output logic                 irq
);
  logic [31:0] result, mbox, rd;
  logic        rv;

  assign rsp.gnt    = req.valid;
  assign rsp.rvalid = rv;
  assign rsp.rdata  = rd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sched_run <= 1'b0;
      irq       <= 1'b0;
      result    <= '0;
      mbox      <= '0;
      rv        <= 1'b0;
      rd        <= '0;
    end else begin
      rv <= req.valid;
      if (req.valid) begin
        unique case (req.addr[5:2])
          CCSR_CTRL:    rd <= {31'b0, sched_run};
          CCSR_DONE:    rd <= result;
          CCSR_IRQ:     rd <= {31'b0, irq};
          CCSR_TILEIRQ: rd <= 32'(tile_irq);
          CCSR_MBOX:    rd <= mbox;
          CCSR_INFO:    rd <= {LARGE_MASK, 8'(NUM_TILES), 8'(CLUSTER_ID)};
          default:      rd <= '0;
        endcase
        if (req.we) begin
          unique case (req.addr[5:2])
            CCSR_CTRL: sched_run <= req.wdata[0];
            CCSR_DONE: begin result <= req.wdata; irq <= 1'b1; end
            CCSR_IRQ:  if (req.wdata[0]) irq <= 1'b0;
            CCSR_MBOX: mbox <= req.wdata;
            default: ;
          endcase
        end
      end
    end
  end
endmodule
