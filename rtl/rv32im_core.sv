// rv32im_core: small multi-cycle RISC-V core (RV32IM + AMO word atomics +
// WFI + a custom-0 offload port). The same core serves as the scalar core of
// every tile, as the L2 scheduler of every cluster and as the main scheduler.
//
// How it works: one instruction at a time through FETCH -> EXEC and, when
// needed, MEM (load/store/AMO read, then AMO write), DIV (32-cycle restoring
// divider), VPUSH/VRES (custom vector instruction) or WFI. Instruction fetch
// and data share one bus port (wbp_pkg protocol: request held until gnt,
// response one cycle after gnt). MUL/MULH* take one cycle in EXEC.
//
// Vector offload: a custom-0 instruction is pushed into the VXU queue together
// with the values of rs1 and rs2; instructions that return a scalar (SETVL,
// REDSUM, MVXS) then wait for the VXU result queue and write rd. Scalar loads,
// stores, AMOs and FENCE wait until the VXU is idle, which keeps scalar and
// vector memory accesses in program order.
//
// AMO: amoswap/amoadd/amoand/amoor/amoxor.w read, then write the same word;
// the scheduler uses them to flip bits in a tile CSR. WFI (0x10500073) stalls
// until irq is high. There are no trap CSRs: ECALL/EBREAK and unknown opcodes
// execute as no-ops. While run is low the core is held in reset at BOOT_ADDR.
// The ISA and the queue come from the architecture description; the
// micro-architecture, AMO, WFI and ordering rule are this design's choices.
module rv32im_core import wbp_pkg::*; #(
  parameter logic [31:0] BOOT_ADDR = 32'h0000_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        run,
  output bus_req_t    mem_req,
  input  bus_rsp_t    mem_rsp,
  output logic        vq_valid,
  output vq_entry_t   vq_data,
  input  logic        vq_ready,
  input  logic        vr_valid,
  input  logic [31:0] vr_data,
  output logic        vr_ready,
  input  logic        vxu_idle,
  input  logic        irq,
  output logic        sleeping
);
  typedef enum logic [3:0] {
    S_FETCH, S_FWAIT, S_EXEC, S_MEM, S_MWAIT, S_AMOW, S_AMOWAIT,
    S_DIV, S_VPUSH, S_VRES, S_WFI
  } state_e;

  localparam logic [6:0] OP_LUI = 7'b0110111, OP_AUIPC = 7'b0010111,
    OP_JAL = 7'b1101111, OP_JALR = 7'b1100111, OP_BR = 7'b1100011,
    OP_LD = 7'b0000011, OP_ST = 7'b0100011, OP_IMM = 7'b0010011,
    OP_REG = 7'b0110011, OP_FENCE = 7'b0001111, OP_SYS = 7'b1110011,
    OP_AMO = 7'b0101111;

  state_e      state;
  logic [31:0] pc, instr;
  logic [31:0] rf [32];
  logic [31:0] amo_old;

  // divider
  logic [31:0] div_q, div_d;
  logic [32:0] div_r;
  logic [5:0]  div_cnt;
  logic        div_negq, div_negr, div_rem;

  // ---------------- decode ----------------
  logic [6:0]  opc;
  logic [2:0]  f3;
  logic [6:0]  f7;
  logic [4:0]  rd, rs1, rs2;
  logic [31:0] a, b, imm_i, imm_s, imm_b, imm_u, imm_j;
  assign opc = instr[6:0];
  assign f3  = instr[14:12];
  assign f7  = instr[31:25];
  assign rd  = instr[11:7];
  assign rs1 = instr[19:15];
  assign rs2 = instr[24:20];
  assign a   = rf[rs1];
  assign b   = rf[rs2];
  assign imm_i = {{20{instr[31]}}, instr[31:20]};
  assign imm_s = {{20{instr[31]}}, instr[31:25], instr[11:7]};
  assign imm_b = {{19{instr[31]}}, instr[31], instr[7], instr[30:25], instr[11:8], 1'b0};
  assign imm_u = {instr[31:12], 12'b0};
  assign imm_j = {{11{instr[31]}}, instr[31], instr[19:12], instr[20], instr[30:21], 1'b0};

  // ---------------- ALU ----------------
  logic [31:0] opb, alu;
  logic        is_m, is_div, br_taken;
  logic [63:0] mul_ss, mul_su, mul_uu;
  assign opb    = (opc == OP_REG) ? b : imm_i;
  assign is_m   = (opc == OP_REG) && (f7 == 7'b0000001);
  assign is_div = is_m && f3[2];
  // divider: operand signs and the next partial remainder
  logic        sa, sb;
  logic [32:0] r;
  assign sa = !f3[0] && a[31];
  assign sb = !f3[0] && b[31];
  assign r  = {div_r[31:0], div_q[31]};
  assign mul_ss = $signed(a) * $signed(b);
  assign mul_uu = a * b;
  assign mul_su = 64'($signed({{32{a[31]}}, a}) * $signed({32'b0, b}));

  always_comb begin
    alu = '0;
    if (is_m) begin
      unique case (f3[1:0])
        2'b00: alu = mul_ss[31:0];
        2'b01: alu = mul_ss[63:32];
        2'b10: alu = mul_su[63:32];
        default: alu = mul_uu[63:32];
      endcase
    end else begin
      unique case (f3)
        3'b000: alu = (opc == OP_REG && f7[5]) ? a - opb : a + opb;
        3'b001: alu = a << opb[4:0];
        3'b010: alu = {31'b0, $signed(a) < $signed(opb)};
        3'b011: alu = {31'b0, a < opb};
        3'b100: alu = a ^ opb;
        3'b101: alu = f7[5] ? 32'($signed(a) >>> opb[4:0]) : a >> opb[4:0];
        3'b110: alu = a | opb;
        default: alu = a & opb;
      endcase
    end
  end

  always_comb begin
    unique case (f3)
      3'b000: br_taken = (a == b);
      3'b001: br_taken = (a != b);
      3'b100: br_taken = $signed(a) < $signed(b);
      3'b101: br_taken = $signed(a) >= $signed(b);
      3'b110: br_taken = a < b;
      3'b111: br_taken = a >= b;
      default: br_taken = 1'b0;
    endcase
  end

  // ---------------- memory access ----------------
  logic [31:0] maddr, st_data, ld_val, amo_new;
  logic [3:0]  st_be;
  logic [1:0]  bo;
  assign maddr = (opc == OP_AMO) ? a : (a + ((opc == OP_ST) ? imm_s : imm_i));
  assign bo    = maddr[1:0];
  always_comb begin
    unique case (f3[1:0])
      2'b00:   begin st_be = 4'b0001 << bo; st_data = {4{b[7:0]}};  end
      2'b01:   begin st_be = 4'b0011 << bo; st_data = {2{b[15:0]}}; end
      default: begin st_be = 4'b1111;       st_data = b;            end
    endcase
  end
  always_comb begin
    logic [31:0] sh;
    sh = mem_rsp.rdata >> (8 * bo);
    unique case (f3)
      3'b000:  ld_val = {{24{sh[7]}}, sh[7:0]};
      3'b001:  ld_val = {{16{sh[15]}}, sh[15:0]};
      3'b100:  ld_val = {24'b0, sh[7:0]};
      3'b101:  ld_val = {16'b0, sh[15:0]};
      default: ld_val = mem_rsp.rdata;
    endcase
  end
  always_comb begin
    unique case (instr[31:27])
      5'b00001: amo_new = b;
      5'b00000: amo_new = amo_old + b;
      5'b01100: amo_new = amo_old & b;
      5'b01000: amo_new = amo_old | b;
      default:  amo_new = amo_old ^ b;
    endcase
  end

  always_comb begin
    mem_req = '0;
    unique case (state)
      S_FETCH: begin
        mem_req.valid = 1'b1;
        mem_req.be    = 4'hF;
        mem_req.addr  = pc;
      end
      S_MEM: begin
        mem_req.valid = 1'b1;
        mem_req.we    = (opc == OP_ST);
        mem_req.be    = (opc == OP_ST) ? st_be : 4'hF;
        mem_req.addr  = {maddr[31:2], 2'b00};
        mem_req.wdata = st_data;
      end
      S_AMOW: begin
        mem_req.valid = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.be    = 4'hF;
        mem_req.addr  = {a[31:2], 2'b00};
        mem_req.wdata = amo_new;
      end
      default: ;
    endcase
  end

  assign vq_valid = (state == S_VPUSH);
  assign vq_data  = '{instr: instr, rs1: a, rs2: b};
  assign vr_ready = (state == S_VRES);
  assign sleeping = (state == S_WFI);

  // ---------------- sequencing ----------------
  logic        wen;
  logic [31:0] wval;
  always_comb begin
    wen  = 1'b0;
    wval = alu;
    unique case (state)
      S_EXEC: begin
        unique case (opc)
          OP_LUI:   begin wen = 1'b1; wval = imm_u; end
          OP_AUIPC: begin wen = 1'b1; wval = pc + imm_u; end
          OP_JAL, OP_JALR: begin wen = 1'b1; wval = pc + 4; end
          OP_IMM:   wen = 1'b1;
          OP_REG:   wen = !is_div;
          default:  ;
        endcase
      end
      S_MWAIT:   begin wen = mem_rsp.rvalid && (opc == OP_LD); wval = ld_val; end
      S_AMOWAIT: begin wen = mem_rsp.rvalid; wval = amo_old; end
      S_DIV: begin
        wen  = (div_cnt == 6'd0);
        wval = div_rem ? (div_negr ? -div_r[31:0] : div_r[31:0])
                       : (div_negq ? -div_q : div_q);
      end
      S_VRES:    begin wen = vr_valid; wval = vr_data; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 32; i++) rf[i] <= '0;
    end else if (wen && rd != 5'd0) begin
      rf[rd] <= wval;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_FETCH;
      pc      <= BOOT_ADDR;
      instr   <= 32'h0000_0013;
      amo_old <= '0;
      div_q <= '0; div_d <= '0; div_r <= '0; div_cnt <= '0;
      div_negq <= 1'b0; div_negr <= 1'b0; div_rem <= 1'b0;
    end else if (!run) begin
      state <= S_FETCH;
      pc    <= BOOT_ADDR;
    end else begin
      unique case (state)
        S_FETCH: if (mem_rsp.gnt) state <= S_FWAIT;
        S_FWAIT: if (mem_rsp.rvalid) begin
          instr <= mem_rsp.rdata;
          state <= S_EXEC;
        end
        S_EXEC: begin
          state <= S_FETCH;
          pc    <= pc + 4;
          unique case (opc)
            OP_JAL:  pc <= pc + imm_j;
            OP_JALR: pc <= (a + imm_i) & ~32'd1;
            OP_BR:   if (br_taken) pc <= pc + imm_b;
            OP_LD, OP_ST, OP_AMO: begin
              pc <= pc;
              state <= vxu_idle ? S_MEM : S_EXEC;
            end
            OP_FENCE: if (!vxu_idle) begin pc <= pc; state <= S_EXEC; end
            OP_SYS: if (instr == 32'h1050_0073) begin pc <= pc; state <= S_WFI; end
            OPC_CUSTOM0: begin pc <= pc; state <= S_VPUSH; end
            OP_REG: if (is_div) begin
              pc       <= pc;
              state    <= S_DIV;
              div_cnt  <= 6'd33;
              div_rem  <= f3[1];
              div_negq <= (sa ^ sb) && (b != 0);
              div_negr <= sa;
              div_q    <= sa ? -a : a;
              div_d    <= sb ? -b : b;
              div_r    <= '0;
            end
            default: ;
          endcase
        end
        S_MEM:   if (mem_rsp.gnt) state <= S_MWAIT;
        S_MWAIT: if (mem_rsp.rvalid) begin
          if (opc == OP_AMO) begin
            amo_old <= mem_rsp.rdata;
            state   <= S_AMOW;
          end else begin
            pc    <= pc + 4;
            state <= S_FETCH;
          end
        end
        S_AMOW:    if (mem_rsp.gnt) state <= S_AMOWAIT;
        S_AMOWAIT: if (mem_rsp.rvalid) begin pc <= pc + 4; state <= S_FETCH; end
        S_DIV: begin
          if (div_cnt == 6'd0) begin
            pc    <= pc + 4;
            state <= S_FETCH;
          end else begin
            div_cnt <= div_cnt - 1'b1;
            if (div_cnt != 6'd33) begin
              if (r >= {1'b0, div_d}) begin
                div_r <= r - {1'b0, div_d};
                div_q <= {div_q[30:0], 1'b1};
              end else begin
                div_r <= r;
                div_q <= {div_q[30:0], 1'b0};
              end
            end
          end
        end
        S_VPUSH: if (vq_ready) begin
          if (vec_has_result(instr)) state <= S_VRES;
          else begin pc <= pc + 4; state <= S_FETCH; end
        end
        S_VRES: if (vr_valid) begin pc <= pc + 4; state <= S_FETCH; end
        S_WFI:  if (irq) begin pc <= pc + 4; state <= S_FETCH; end
        default: state <= S_FETCH;
      endcase
    end
  end
endmodule
