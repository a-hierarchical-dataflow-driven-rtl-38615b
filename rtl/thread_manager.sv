// thread_manager: per-cluster hardware table of software threads.
//
// The main scheduler asks it, before registering a thread on the cluster,
// whether the cluster can take one more (QUERY reads {active count[15:8],
// free slot index[7:4], free[0]}). Writing a thread ID to REGISTER takes the
// lowest free slot (state READY); the L2 scheduler writes the ID to RUN when
// it starts the thread's tasks and to COMPLETE when the thread ends, which
// frees the slot. Slot i reads {state[9:8], thread id[7:0]} at SLOT0+i.
// Several slots let one cluster hold several threads at once (multi-
// threading). Writes naming an unknown ID, or REGISTER with no free slot, are
// ignored and counted in the high bits of QUERY ([31:24]). The slot count and
// register layout are this design's choices.
module thread_manager import wbp_pkg::*; #(
  parameter int unsigned SLOTS = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t req,
  output bus_rsp_t rsp
);
  localparam int unsigned SW = (SLOTS > 1) ? $clog2(SLOTS) : 1;
  thread_state_e st  [SLOTS];
  logic [7:0]    tid [SLOTS];
  logic          rv;
  logic [31:0]   rd;
  logic [7:0]    errors;

  logic          free;
  logic [SW-1:0] free_idx;
  logic [7:0]    active;
  logic          hit;
  logic [SW-1:0] hit_idx;

  always_comb begin
    free = 1'b0; free_idx = '0; active = '0; hit = 1'b0; hit_idx = '0;
    for (int i = SLOTS - 1; i >= 0; i--) begin
      if (st[i] == TS_FREE) begin free = 1'b1; free_idx = SW'(i); end
      if (st[i] != TS_FREE && tid[i] == req.wdata[7:0]) begin hit = 1'b1; hit_idx = SW'(i); end
    end
    for (int i = 0; i < SLOTS; i++) if (st[i] != TS_FREE) active = active + 1'b1;
  end

  assign rsp.gnt    = req.valid;
  assign rsp.rvalid = rv;
  assign rsp.rdata  = rd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SLOTS; i++) begin st[i] <= TS_FREE; tid[i] <= '0; end
      rv <= 1'b0; rd <= '0; errors <= '0;
    end else begin
      rv <= req.valid;
      if (req.valid) begin
        if (req.addr[5:2] >= TM_SLOT0 && 32'(req.addr[5:2] - TM_SLOT0) < SLOTS)
          rd <= {22'b0, st[SW'(req.addr[5:2] - TM_SLOT0)], tid[SW'(req.addr[5:2] - TM_SLOT0)]};
        else if (req.addr[5:2] == TM_QUERY)
          rd <= {errors, 8'b0, active, 4'(free_idx), 3'b0, free};
        else rd <= '0;
        if (req.we) begin
          unique case (req.addr[5:2])
            TM_REGISTER: if (free && !hit) begin
              st[free_idx]  <= TS_READY;
              tid[free_idx] <= req.wdata[7:0];
            end else errors <= errors + 1'b1;
            TM_RUN:      if (hit) st[hit_idx] <= TS_RUNNING; else errors <= errors + 1'b1;
            TM_COMPLETE: if (hit) st[hit_idx] <= TS_FREE;    else errors <= errors + 1'b1;
            default: ;
          endcase
        end
      end
    end
  end
endmodule
