// vxu_lane: the arithmetic of one SIMD lane of the vector extension unit.
//
// Purely combinational: y = op(a, b) on 32-bit two's-complement elements.
// MULQ is the signed Q15 product (a*b) >>> 15 used for fixed-point signal
// processing; MIN/MAX/ABS serve min-sum decoding; SRA/SLL shift by b[4:0];
// PASSB forwards b (broadcast). The VXU holds LANES copies, all fed the same
// operation. Element width and operation set are this design's choice.
module vxu_lane import wbp_pkg::*; (
  input  lane_op_e    op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic signed [63:0] prod;
  assign prod = $signed(a) * $signed(b);

  always_comb begin
    unique case (op)
      LOP_ADD:   y = a + b;
      LOP_SUB:   y = a - b;
      LOP_MUL:   y = prod[31:0];
      LOP_MULQ:  y = prod[46:15];
      LOP_MIN:   y = ($signed(a) < $signed(b)) ? a : b;
      LOP_MAX:   y = ($signed(a) > $signed(b)) ? a : b;
      LOP_ABS:   y = a[31] ? -a : a;
      LOP_AND:   y = a & b;
      LOP_OR:    y = a | b;
      LOP_XOR:   y = a ^ b;
      LOP_SRA:   y = 32'($signed(a) >>> b[4:0]);
      LOP_SLL:   y = a << b[4:0];
      default:   y = b;
    endcase
  end
endmodule
