// vxu: vector extension unit of a tile.
//
// Parts: a sequencer (seq), a vector register file of NUM_VRF registers of
// LANES 32-bit elements, LANES lane ALUs (vxu_lane) and the element exchange
// engine (vxu_exe). Instructions arrive from the scalar core through the
// instruction queue (q_*) as {instr, x[rs1], x[rs2]}; scalar results leave
// through the result queue (r_*).
//
// Vector length: SETVL sets vl (at most VLMAX = LANES*NUM_VRF). A vector of
// vl elements occupies ceil(vl/LANES) consecutive registers starting at the
// named register (wrapping at NUM_VRF), so more registers give longer vectors.
// Element e lives in register base + e/LANES, lane e mod LANES.
//
// Timing: one cycle to accept an instruction, then
//   lane ops / XCHG / ROT / MVSX: one register (LANES elements) per cycle
//   REDSUM: one register per cycle, then the result is pushed
//   LD / ST: one element per cycle through the single T-SPM port (mem_*)
//   SETVL / MVXS: one cycle, then the result is pushed.
// Elements at or beyond vl are left unchanged. idle is high when no
// instruction is in progress. Lane count and register count follow the
// architecture's L tile (16 lanes, 32 registers) and S tile (8, 64); the
// sequencing, memory width and instruction set are this design's choices.
module vxu import wbp_pkg::*; #(
  parameter int unsigned LANES   = 16,
  parameter int unsigned NUM_VRF = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        q_valid,
  output logic        q_ready,
  input  vq_entry_t   q_data,
  output logic        r_valid,
  input  logic        r_ready,
  output logic [31:0] r_data,
  output bus_req_t    mem_req,
  input  bus_rsp_t    mem_rsp,
  output logic        idle
);
  localparam int unsigned LW    = $clog2(LANES);
  localparam int unsigned RW    = $clog2(NUM_VRF);
  localparam int unsigned VLMAX = LANES * NUM_VRF;
  localparam int unsigned EW    = $clog2(VLMAX + 1);

  typedef enum logic [2:0] { V_IDLE, V_ALU, V_LD, V_ST, V_RES } vstate_e;

  vstate_e     state;
  vq_entry_t   cur;
  logic [EW-1:0] vl;
  logic [RW:0]   grp;        // registers in the current vector
  logic [RW:0]   g;          // register step
  logic [EW-1:0] e_issue, e_done;
  logic [31:0]   acc;

  logic [LANES-1:0][31:0] vrf [NUM_VRF];

  vfunct_e     fn;
  logic [RW-1:0] vd, vs1, vs2;
  assign fn  = vfunct_e'(cur.instr[31:25]);
  assign vd  = RW'({cur.instr[12], cur.instr[11:7]});
  assign vs1 = RW'({cur.instr[13], cur.instr[19:15]});
  assign vs2 = RW'({cur.instr[14], cur.instr[24:20]});

  // ---------------- datapath ----------------
  lane_op_e lop;
  logic     use_scalar_b;
  always_comb begin
    use_scalar_b = 1'b0;
    unique case (fn)
      VF_ADD:  lop = LOP_ADD;
      VF_SUB:  lop = LOP_SUB;
      VF_MUL:  lop = LOP_MUL;
      VF_MULQ: lop = LOP_MULQ;
      VF_MIN:  lop = LOP_MIN;
      VF_MAX:  lop = LOP_MAX;
      VF_ABS:  lop = LOP_ABS;
      VF_AND:  lop = LOP_AND;
      VF_OR:   lop = LOP_OR;
      VF_XOR:  lop = LOP_XOR;
      VF_SRA:  begin lop = LOP_SRA;   use_scalar_b = 1'b1; end
      VF_SLL:  begin lop = LOP_SLL;   use_scalar_b = 1'b1; end
      default: begin lop = LOP_PASSB; use_scalar_b = 1'b1; end
    endcase
  end

  logic [RW-1:0] rd_reg, rs1_reg, rs2_reg;
  assign rd_reg  = vd  + RW'(g);
  assign rs1_reg = vs1 + RW'(g);
  assign rs2_reg = vs2 + RW'(g);

  logic [LANES-1:0][31:0] va, vb, vlane, vexe;
  logic [LANES-1:0]       emask;
  assign va = vrf[rs1_reg];
  assign vb = vrf[rs2_reg];

  // elements of register step g that are below vl
  always_comb
    for (int i = 0; i < LANES; i++)
      emask[i] = (32'(g) * LANES + i) < 32'(vl);

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    vxu_lane u_lane (
      .op(lop), .a(va[l]),
      .b(use_scalar_b ? ((fn == VF_MVSX) ? cur.rs1 : cur.rs2) : vb[l]),
      .y(vlane[l])
    );
  end

  exe_mode_e emode;
  assign emode = (fn == VF_XCHG) ? EXE_XCHG : (fn == VF_ROT) ? EXE_ROT : EXE_SUM;
  vxu_exe #(.LANES(LANES)) u_exe (
    .mode(emode), .k(cur.rs2), .mask(emask), .vin(va), .vout(vexe)
  );

  // ---------------- memory port ----------------
  logic [RW-1:0] ld_reg, st_reg;
  logic [LW-1:0] ld_lane, st_lane;
  assign ld_reg  = vd + RW'(e_done >> LW);
  assign ld_lane = LW'(e_done);
  assign st_reg  = vd + RW'(e_issue >> LW);
  assign st_lane = LW'(e_issue);

  always_comb begin
    mem_req = '0;
    if ((state == V_LD || state == V_ST) && e_issue < vl) begin
      mem_req.valid = 1'b1;
      mem_req.we    = (state == V_ST);
      mem_req.be    = 4'hF;
      mem_req.addr  = cur.rs1 + 32'(e_issue) * 4;
      mem_req.wdata = vrf[st_reg][st_lane];
    end
  end

  assign q_ready = (state == V_IDLE);
  assign r_valid = (state == V_RES);
  assign r_data  = acc;
  assign idle    = (state == V_IDLE);

  // ---------------- sequencer ----------------
  vfunct_e     f;     // operation of the instruction at the queue head
  logic [31:0] n;     // SETVL: granted vector length
  assign f = vfunct_e'(q_data.instr[31:25]);
  assign n = (q_data.rs1 > VLMAX) ? VLMAX : q_data.rs1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= V_IDLE;
      cur     <= '0;
      vl      <= EW'(LANES);
      grp     <= '0;
      g       <= '0;
      e_issue <= '0;
      e_done  <= '0;
      acc     <= '0;
    end else begin
      unique case (state)
        V_IDLE: if (q_valid) begin
          cur     <= q_data;
          g       <= '0;
          e_issue <= '0;
          e_done  <= '0;
          acc     <= '0;
          grp     <= (RW+1)'((32'(vl) + LANES - 1) / LANES);
          unique case (f)
            VF_SETVL: begin
              vl  <= EW'(n);
              acc <= n;
              state <= V_RES;
            end
            VF_LD:   state <= V_LD;
            VF_ST:   state <= V_ST;
            VF_MVXS: state <= V_ALU;
            default: state <= ((32'(vl) + LANES - 1) / LANES == 0) ?
                              (f == VF_REDSUM ? V_RES : V_IDLE) : V_ALU;
          endcase
        end
        V_ALU: begin
          if (fn == VF_MVXS) begin
            acc   <= vrf[vs1 + RW'(cur.rs2 >> LW)][LW'(cur.rs2)];
            state <= V_RES;
          end else begin
            if (fn == VF_REDSUM) acc <= acc + vexe[0];
            g <= g + 1'b1;
            if (g + 1'b1 == grp) state <= (fn == VF_REDSUM) ? V_RES : V_IDLE;
          end
        end
        V_LD, V_ST: begin
          if (mem_req.valid && mem_rsp.gnt) e_issue <= e_issue + 1'b1;
          if (mem_rsp.rvalid) begin
            e_done <= e_done + 1'b1;
            if (e_done + 1'b1 == vl) state <= V_IDLE;
          end
          if (vl == '0) state <= V_IDLE;
        end
        V_RES: if (r_ready) state <= V_IDLE;
        default: state <= V_IDLE;
      endcase
    end
  end

  // vector register writes
  always_ff @(posedge clk) begin
    if (state == V_ALU && fn != VF_MVXS && fn != VF_REDSUM) begin
      for (int i = 0; i < LANES; i++)
        if (emask[i])
          vrf[rd_reg][i] <= (fn == VF_XCHG || fn == VF_ROT) ? vexe[i] : vlane[i];
    end
    if (state == V_LD && mem_rsp.rvalid)
      vrf[ld_reg][ld_lane] <= mem_rsp.rdata;
  end

  // a scalar result is only offered while the core can be waiting for it
  assert property (@(posedge clk) disable iff (!rst_n)
    r_valid |-> vec_has_result(cur.instr));
endmodule
