// vxu_exe: element exchange engine (EXE), the inter-lane part of the VXU.
//
// Combinational network over one vector register of LANES elements:
//   EXE_XCHG: vout[i] = vin[i ^ k]             (butterfly partner exchange)
//   EXE_ROT : vout[i] = vin[(i + k) mod LANES]  (rotation / slide)
//   EXE_SUM : vout[0] = sum of vin[i] with mask[i] set, other elements 0
// k is taken modulo LANES (LANES must be a power of two). The architecture
// names the EXE as the engine for inter-lane execution; the three exchange
// kinds are this design's choice (butterflies for FFT and polar BP, rotation,
// and reductions).
module vxu_exe import wbp_pkg::*; #(
  parameter int unsigned LANES = 16
) (
  input  exe_mode_e          mode,
  input  logic [31:0]        k,
  input  logic [LANES-1:0]   mask,
  input  logic [LANES-1:0][31:0] vin,
  output logic [LANES-1:0][31:0] vout
);
  localparam int unsigned LW = (LANES > 1) ? $clog2(LANES) : 1;
  logic [LW-1:0] kk;
  assign kk = k[LW-1:0];

  always_comb begin
    logic [31:0] acc;
    vout = '0;
    acc  = '0;
    unique case (mode)
      EXE_XCHG: for (int i = 0; i < LANES; i++) vout[i] = vin[LW'(i) ^ kk];
      EXE_ROT:  for (int i = 0; i < LANES; i++) vout[i] = vin[LW'(LW'(i) + kk)];
      default: begin
        for (int i = 0; i < LANES; i++) if (mask[i]) acc = acc + vin[i];
        vout[0] = acc;
      end
    endcase
  end
endmodule
