// sync_fifo: synchronous FIFO, used for the two queues between the scalar
// core and the VXU (vector instructions in one direction, scalar results in
// the other).
//
// Valid/ready on both sides: a word is written when push_valid && push_ready,
// read when pop_valid && pop_ready. A full FIFO deasserts push_ready; pop data
// is the oldest entry and is valid whenever the FIFO is not empty. Push and
// pop may happen in the same cycle. The depth is this design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 96,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push_valid,
  output logic             push_ready,
  input  logic [WIDTH-1:0] push_data,
  output logic             pop_valid,
  input  logic             pop_ready,
  output logic [WIDTH-1:0] pop_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] buf_q [DEPTH];
  logic [PW-1:0]    rd_ptr, wr_ptr;
  logic             do_push, do_pop;

  assign push_ready = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign pop_valid  = (count != '0);
  assign pop_data   = buf_q[rd_ptr];
  assign do_push    = push_valid && push_ready;
  assign do_pop     = pop_valid && pop_ready;

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= inc(wr_ptr);
      if (do_pop)  rd_ptr <= inc(rd_ptr);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk)
    if (do_push) buf_q[wr_ptr] <= push_data;

  // a push into a full FIFO or a pop from an empty one is never performed
  assert property (@(posedge clk) disable iff (!rst_n) 32'(count) <= DEPTH);
endmodule
