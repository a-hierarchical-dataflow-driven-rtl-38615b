// top_csr: control and status registers of the design top.
//
// One bus port (wbp_pkg protocol) used by the main scheduler. Registers:
//   IRQ  read-only vector of cluster done interrupts
//   DONE write: result word of the whole run; sets the done output
//   INFO read-only {tiles per cluster[15:8], cluster count[7:0]}
// The layout is this design's choice.
module top_csr import wbp_pkg::*; #(
  parameter int unsigned NUM_CLUSTERS = 5,
  parameter int unsigned NUM_TILES    = 9
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  bus_req_t                req,
  output bus_rsp_t                rsp,
  input  logic [NUM_CLUSTERS-1:0] cluster_irq,
  output logic                    done,
  output logic [31:0]             result
);
  logic [31:0] rd;
  logic        rv;
  assign rsp.gnt    = req.valid;
  assign rsp.rvalid = rv;
  assign rsp.rdata  = rd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= 1'b0; result <= '0; rv <= 1'b0; rd <= '0;
    end else begin
      rv <= req.valid;
      if (req.valid) begin
        unique case (req.addr[5:2])
          TOPCSR_IRQ:  rd <= 32'(cluster_irq);
          TOPCSR_DONE: rd <= result;
          TOPCSR_INFO: rd <= {16'b0, 8'(NUM_TILES), 8'(NUM_CLUSTERS)};
          default:     rd <= '0;
        endcase
        if (req.we && req.addr[5:2] == TOPCSR_DONE) begin
          result <= req.wdata;
          done   <= 1'b1;
        end
      end
    end
  end
endmodule
