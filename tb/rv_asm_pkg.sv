// rv_asm_pkg: tiny RISC-V assembler for the testbenches.
//
// Each function returns one 32-bit instruction word (RV32IM, the AMO word
// instructions, WFI and the custom-0 vector instructions of wbp_pkg), so a
// testbench can build a program as a list of calls and store it into a
// memory. Register arguments are plain numbers 0..31 (vector registers
// 0..63). li() expands to two words (lui + addi).
package rv_asm_pkg;
  typedef logic [31:0] w_t;

  function automatic w_t r_t(int f7, int rs2, int rs1, int f3, int rd, int opc);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'(opc)};
  endfunction
  function automatic w_t i_t(int imm, int rs1, int f3, int rd, int opc);
    return {12'(imm), 5'(rs1), 3'(f3), 5'(rd), 7'(opc)};
  endfunction
  function automatic w_t s_t(int imm, int rs2, int rs1, int f3, int opc);
    logic [11:0] m; m = 12'(imm);
    return {m[11:5], 5'(rs2), 5'(rs1), 3'(f3), m[4:0], 7'(opc)};
  endfunction

  function automatic w_t addi(int rd, int rs1, int imm); return i_t(imm, rs1, 0, rd, 7'h13); endfunction
  function automatic w_t slli(int rd, int rs1, int sh);  return i_t(sh, rs1, 1, rd, 7'h13);  endfunction
  function automatic w_t srli(int rd, int rs1, int sh);  return i_t(sh, rs1, 5, rd, 7'h13);  endfunction
  function automatic w_t srai(int rd, int rs1, int sh);  return i_t(sh | 12'h400, rs1, 5, rd, 7'h13); endfunction
  function automatic w_t andi(int rd, int rs1, int imm); return i_t(imm, rs1, 7, rd, 7'h13); endfunction
  function automatic w_t ori (int rd, int rs1, int imm); return i_t(imm, rs1, 6, rd, 7'h13); endfunction
  function automatic w_t xori(int rd, int rs1, int imm); return i_t(imm, rs1, 4, rd, 7'h13); endfunction
  function automatic w_t slti(int rd, int rs1, int imm); return i_t(imm, rs1, 2, rd, 7'h13); endfunction
  function automatic w_t sltiu(int rd, int rs1, int imm); return i_t(imm, rs1, 3, rd, 7'h13); endfunction
  function automatic w_t lui (int rd, int imm20);        return {20'(imm20), 5'(rd), 7'h37}; endfunction
  function automatic w_t auipc(int rd, int imm20);       return {20'(imm20), 5'(rd), 7'h17}; endfunction

  function automatic w_t add (int rd, int a, int b); return r_t(0,  b, a, 0, rd, 7'h33); endfunction
  function automatic w_t sub (int rd, int a, int b); return r_t(32, b, a, 0, rd, 7'h33); endfunction
  function automatic w_t sll (int rd, int a, int b); return r_t(0,  b, a, 1, rd, 7'h33); endfunction
  function automatic w_t slt (int rd, int a, int b); return r_t(0,  b, a, 2, rd, 7'h33); endfunction
  function automatic w_t sltu(int rd, int a, int b); return r_t(0,  b, a, 3, rd, 7'h33); endfunction
  function automatic w_t xor_(int rd, int a, int b); return r_t(0,  b, a, 4, rd, 7'h33); endfunction
  function automatic w_t srl (int rd, int a, int b); return r_t(0,  b, a, 5, rd, 7'h33); endfunction
  function automatic w_t sra (int rd, int a, int b); return r_t(32, b, a, 5, rd, 7'h33); endfunction
  function automatic w_t or_ (int rd, int a, int b); return r_t(0,  b, a, 6, rd, 7'h33); endfunction
  function automatic w_t and_(int rd, int a, int b); return r_t(0,  b, a, 7, rd, 7'h33); endfunction
  function automatic w_t mul   (int rd, int a, int b); return r_t(1, b, a, 0, rd, 7'h33); endfunction
  function automatic w_t mulh  (int rd, int a, int b); return r_t(1, b, a, 1, rd, 7'h33); endfunction
  function automatic w_t mulhsu(int rd, int a, int b); return r_t(1, b, a, 2, rd, 7'h33); endfunction
  function automatic w_t mulhu (int rd, int a, int b); return r_t(1, b, a, 3, rd, 7'h33); endfunction
  function automatic w_t div_  (int rd, int a, int b); return r_t(1, b, a, 4, rd, 7'h33); endfunction
  function automatic w_t divu  (int rd, int a, int b); return r_t(1, b, a, 5, rd, 7'h33); endfunction
  function automatic w_t rem   (int rd, int a, int b); return r_t(1, b, a, 6, rd, 7'h33); endfunction
  function automatic w_t remu  (int rd, int a, int b); return r_t(1, b, a, 7, rd, 7'h33); endfunction

  function automatic w_t lw (int rd, int rs1, int imm); return i_t(imm, rs1, 2, rd, 7'h03); endfunction
  function automatic w_t lh (int rd, int rs1, int imm); return i_t(imm, rs1, 1, rd, 7'h03); endfunction
  function automatic w_t lhu(int rd, int rs1, int imm); return i_t(imm, rs1, 5, rd, 7'h03); endfunction
  function automatic w_t lb (int rd, int rs1, int imm); return i_t(imm, rs1, 0, rd, 7'h03); endfunction
  function automatic w_t lbu(int rd, int rs1, int imm); return i_t(imm, rs1, 4, rd, 7'h03); endfunction
  function automatic w_t sw (int rs2, int rs1, int imm); return s_t(imm, rs2, rs1, 2, 7'h23); endfunction
  function automatic w_t sh (int rs2, int rs1, int imm); return s_t(imm, rs2, rs1, 1, 7'h23); endfunction
  function automatic w_t sb (int rs2, int rs1, int imm); return s_t(imm, rs2, rs1, 0, 7'h23); endfunction

  function automatic w_t b_t(int f3, int a, int b, int off);
    logic [12:0] m; m = 13'(off);
    return {m[12], m[10:5], 5'(b), 5'(a), 3'(f3), m[4:1], m[11], 7'h63};
  endfunction
  function automatic w_t beq (int a, int b, int off); return b_t(0, a, b, off); endfunction
  function automatic w_t bne (int a, int b, int off); return b_t(1, a, b, off); endfunction
  function automatic w_t blt (int a, int b, int off); return b_t(4, a, b, off); endfunction
  function automatic w_t bge (int a, int b, int off); return b_t(5, a, b, off); endfunction
  function automatic w_t bltu(int a, int b, int off); return b_t(6, a, b, off); endfunction
  function automatic w_t bgeu(int a, int b, int off); return b_t(7, a, b, off); endfunction
  function automatic w_t jal (int rd, int off);
    logic [20:0] m; m = 21'(off);
    return {m[20], m[10:1], m[11], m[19:12], 5'(rd), 7'h6f};
  endfunction
  function automatic w_t jalr(int rd, int rs1, int imm); return i_t(imm, rs1, 0, rd, 7'h67); endfunction

  // AMO word: funct5 swap=1 add=0 xor=4 and=12 or=8
  function automatic w_t amo(int f5, int rd, int rs1, int rs2);
    return {5'(f5), 2'b00, 5'(rs2), 5'(rs1), 3'b010, 5'(rd), 7'h2f};
  endfunction
  function automatic w_t amoswap(int rd, int rs1, int rs2); return amo(1,  rd, rs1, rs2); endfunction
  function automatic w_t amoadd (int rd, int rs1, int rs2); return amo(0,  rd, rs1, rs2); endfunction
  function automatic w_t amoor  (int rd, int rs1, int rs2); return amo(8,  rd, rs1, rs2); endfunction
  function automatic w_t amoand (int rd, int rs1, int rs2); return amo(12, rd, rs1, rs2); endfunction
  function automatic w_t amoxor (int rd, int rs1, int rs2); return amo(4,  rd, rs1, rs2); endfunction
  function automatic w_t wfi();   return 32'h1050_0073; endfunction
  function automatic w_t fence(); return 32'h0ff0_000f; endfunction
  function automatic w_t nop();   return 32'h0000_0013; endfunction

  // custom vector instruction: vector registers are 6 bits, top bits in funct3
  function automatic w_t vop(int f7, int vd, int vs1, int vs2);
    logic [5:0] d, a, b;
    d = 6'(vd); a = 6'(vs1); b = 6'(vs2);
    return {7'(f7), b[4:0], a[4:0], b[5], a[5], d[5], d[4:0], 7'b0001011};
  endfunction
  function automatic w_t vsetvl(int rd, int rs1);   return vop(0, rd, rs1, 0); endfunction
  function automatic w_t vld  (int vd, int rs1);    return vop(1, vd, rs1, 0); endfunction
  function automatic w_t vst  (int vs, int rs1);    return vop(2, vs, rs1, 0); endfunction
  function automatic w_t vadd (int vd, int a, int b); return vop(3, vd, a, b); endfunction
  function automatic w_t vsub (int vd, int a, int b); return vop(4, vd, a, b); endfunction
  function automatic w_t vmul (int vd, int a, int b); return vop(5, vd, a, b); endfunction
  function automatic w_t vmulq(int vd, int a, int b); return vop(6, vd, a, b); endfunction
  function automatic w_t vmin (int vd, int a, int b); return vop(7, vd, a, b); endfunction
  function automatic w_t vmax (int vd, int a, int b); return vop(8, vd, a, b); endfunction
  function automatic w_t vabs (int vd, int a);        return vop(9, vd, a, 0); endfunction
  function automatic w_t vsra (int vd, int a, int xs); return vop(13, vd, a, xs); endfunction
  function automatic w_t vmvsx(int vd, int xs);       return vop(15, vd, xs, 0); endfunction
  function automatic w_t vxchg(int vd, int a, int xs); return vop(16, vd, a, xs); endfunction
  function automatic w_t vrot (int vd, int a, int xs); return vop(17, vd, a, xs); endfunction
  function automatic w_t vredsum(int rd, int a);      return vop(18, rd, a, 0); endfunction
  function automatic w_t vmvxs(int rd, int a, int xs); return vop(19, rd, a, xs); endfunction

  // program builder helpers: append to a queue of words
  task automatic emit(ref w_t p[$], input w_t w); p.push_back(w); endtask
  task automatic li(ref w_t p[$], input int rd, input logic [31:0] v);
    logic [31:0] hi;
    hi = (v + 32'h800) >> 12;
    p.push_back(lui(rd, int'(hi)));
    p.push_back(addi(rd, rd, int'(v[11:0])));
  endtask
endpackage
