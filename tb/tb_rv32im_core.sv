// tb_rv32im_core: self-checking test of the scalar core.
//
// A behavioural memory (random grant stalls, response one cycle after the
// grant) holds a program built with rv_asm_pkg. The program exercises the
// ALU, shifts, compares, M-extension multiply/divide (including divide by
// zero and overflow), byte/half loads and stores, branches, JAL/JALR, AUIPC,
// the AMO atomics, a custom vector instruction answered by a model VXU, and
// WFI woken by irq. Each result is stored to memory and compared with a value
// computed here in SystemVerilog.
module tb_rv32im_core;
  import wbp_pkg::*;
  import rv_asm_pkg::*;

  logic clk = 0, rst_n = 0, run = 0, irq = 0;
  always #5 clk = ~clk;

  bus_req_t req; bus_rsp_t rsp;
  logic vq_valid, vq_ready, vr_valid, vr_ready, sleeping;
  vq_entry_t vq_data;
  logic [31:0] vr_data;
  int checks = 0, failures = 0;

  rv32im_core dut (.clk, .rst_n, .run, .mem_req(req), .mem_rsp(rsp),
    .vq_valid, .vq_data, .vq_ready, .vr_valid, .vr_data, .vr_ready,
    .vxu_idle(1'b1), .irq, .sleeping);

  // memory model
  logic [31:0] mem [1024];
  logic gnt_r, rv_q;
  logic [31:0] rd_q;
  always_ff @(posedge clk) gnt_r <= ($urandom_range(0, 3) != 0);
  assign rsp.gnt = req.valid && gnt_r;
  assign rsp.rvalid = rv_q;
  assign rsp.rdata = rd_q;
  always_ff @(posedge clk) begin
    rv_q <= rsp.gnt;
    if (rsp.gnt) begin
      rd_q <= mem[req.addr[11:2]];
      if (req.we) for (int b = 0; b < 4; b++)
        if (req.be[b]) mem[req.addr[11:2]][8*b +: 8] <= req.wdata[8*b +: 8];
    end
  end

  // model VXU: accepts with random stalls, result = rs1 + rs2
  logic pend; logic [31:0] pend_v; int vq_count = 0;
  always_ff @(posedge clk) vq_ready <= ($urandom_range(0, 1) != 0);
  assign vr_valid = pend;
  assign vr_data  = pend_v;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) pend <= 0;
    else begin
      if (vq_valid && vq_ready) begin
        vq_count <= vq_count + 1;
        if (vec_has_result(vq_data.instr)) begin pend <= 1; pend_v <= vq_data.rs1 + vq_data.rs2; end
      end
      if (pend && vr_ready) pend <= 0;
    end

  w_t p[$];
  localparam int RES = 32'h400;   // result area
  int n_res = 0;
  // store register r to the next result slot
  task automatic put(int r); emit(p, sw(r, 10, 4 * n_res)); n_res++; endtask

  logic [31:0] A = 32'h8765_4321, B = 32'hFFFF_FFF9, C = 32'd13;
  logic [31:0] exp_q[$];

  task automatic check(string what, logic [31:0] got, logic [31:0] expv);
    checks++;
    if (got !== expv) begin
      failures++;
      $display("FAIL %s: got %08x expected %08x", what, got, expv);
    end
  endtask

  initial begin
    logic [63:0] t64;
    li(p, 10, RES);
    li(p, 1, A); li(p, 2, B); li(p, 3, C);
    emit(p, add(4, 1, 2));   put(4); exp_q.push_back(A + B);
    emit(p, sub(4, 1, 2));   put(4); exp_q.push_back(A - B);
    emit(p, sll(4, 1, 3));   put(4); exp_q.push_back(A << 13);
    emit(p, sra(4, 1, 3));   put(4); exp_q.push_back(32'($signed(A) >>> 13));
    emit(p, srl(4, 1, 3));   put(4); exp_q.push_back(A >> 13);
    emit(p, slt(4, 1, 2));   put(4); exp_q.push_back(32'($signed(A) < $signed(B)));
    emit(p, sltu(4, 1, 2));  put(4); exp_q.push_back(32'(A < B));
    emit(p, xor_(4, 1, 2));  put(4); exp_q.push_back(A ^ B);
    emit(p, or_(4, 1, 3));   put(4); exp_q.push_back(A | C);
    emit(p, and_(4, 1, 2));  put(4); exp_q.push_back(A & B);
    emit(p, addi(4, 1, -100)); put(4); exp_q.push_back(A - 100);
    emit(p, srai(4, 1, 4));  put(4); exp_q.push_back(32'($signed(A) >>> 4));
    emit(p, sltiu(4, 3, 14)); put(4); exp_q.push_back(1);
    emit(p, mul(4, 1, 2));   put(4); exp_q.push_back(A * B);
    t64 = 64'($signed(A) * $signed(B));
    emit(p, mulh(4, 1, 2));  put(4); exp_q.push_back(t64[63:32]);
    t64 = 64'({32'b0, A} * {32'b0, B});
    emit(p, mulhu(4, 1, 2)); put(4); exp_q.push_back(t64[63:32]);
    t64 = 64'($signed({{32{A[31]}}, A}) * $signed({32'b0, B}));
    emit(p, mulhsu(4, 1, 2)); put(4); exp_q.push_back(t64[63:32]);
    emit(p, div_(4, 1, 3));  put(4); exp_q.push_back(32'($signed(A) / $signed(C)));
    emit(p, rem(4, 1, 3));   put(4); exp_q.push_back(32'($signed(A) % $signed(C)));
    emit(p, divu(4, 1, 3));  put(4); exp_q.push_back(A / C);
    emit(p, remu(4, 1, 3));  put(4); exp_q.push_back(A % C);
    emit(p, div_(4, 1, 2));  put(4); exp_q.push_back(32'($signed(A) / $signed(B)));
    emit(p, rem(4, 1, 2));   put(4); exp_q.push_back(32'($signed(A) % $signed(B)));
    emit(p, div_(4, 1, 0));  put(4); exp_q.push_back(32'hFFFF_FFFF);
    emit(p, remu(4, 1, 0));  put(4); exp_q.push_back(A);
    li(p, 5, 32'h8000_0000); li(p, 6, 32'hFFFF_FFFF);
    emit(p, div_(4, 5, 6));  put(4); exp_q.push_back(32'h8000_0000);
    // byte / half stores and loads at 0x300
    li(p, 7, 32'h300);
    emit(p, sw(1, 7, 0));
    emit(p, sb(3, 7, 1));
    emit(p, sh(2, 7, 4)); emit(p, sh(1, 7, 6));
    emit(p, lw(4, 7, 0));  put(4); exp_q.push_back({A[31:16], 8'd13, A[7:0]});
    emit(p, lb(4, 7, 3));  put(4); exp_q.push_back({{24{A[31]}}, A[31:24]});
    emit(p, lbu(4, 7, 3)); put(4); exp_q.push_back({24'b0, A[31:24]});
    emit(p, lh(4, 7, 6));  put(4); exp_q.push_back({{16{A[15]}}, A[15:0]});
    emit(p, lhu(4, 7, 4)); put(4); exp_q.push_back({16'b0, B[15:0]});
    // loop: sum 1..10 with bne, blt
    emit(p, addi(8, 0, 0)); emit(p, addi(9, 0, 10));
    emit(p, add(8, 8, 9)); emit(p, addi(9, 9, -1)); emit(p, bne(9, 0, -8));
    put(8); exp_q.push_back(55);
    emit(p, addi(9, 0, -3)); emit(p, blt(9, 0, 8)); emit(p, addi(8, 0, 99)); // skipped
    put(8); exp_q.push_back(55);
    emit(p, bgeu(9, 0, 8)); emit(p, addi(8, 0, 77)); // -3 >=u 0: skipped
    put(8); exp_q.push_back(55);
    // jal / jalr: call a subroutine placed after the program
    emit(p, auipc(11, 0)); put(11); exp_q.push_back(4 * (p.size() - 2));
    // amo on word 0x380
    li(p, 12, 32'h380); emit(p, sw(3, 12, 0));
    emit(p, addi(13, 0, 5)); emit(p, amoadd(4, 12, 13)); put(4); exp_q.push_back(13);
    emit(p, addi(13, 0, 32'h100)); emit(p, amoor(4, 12, 13)); put(4); exp_q.push_back(18);
    emit(p, lw(4, 12, 0)); put(4); exp_q.push_back(32'h112);
    emit(p, amoswap(4, 12, 3)); put(4); exp_q.push_back(32'h112);
    emit(p, lw(4, 12, 0)); put(4); exp_q.push_back(13);
    // custom vector instruction with a scalar result: x4 = x1 + x3 (model)
    emit(p, vmvxs(4, 1, 3)); put(4); exp_q.push_back(A + C);
    emit(p, vadd(1, 2, 3));  // no result
    // wfi
    emit(p, wfi()); emit(p, addi(4, 0, 42)); put(4); exp_q.push_back(42);
    // jal to subroutine at +12 that returns via jalr
    emit(p, jal(1, 16)); put(4); exp_q.push_back(43);
    emit(p, sw(4, 0, 32'h7FC)); emit(p, jal(0, 0));
    emit(p, addi(4, 4, 1)); emit(p, jalr(0, 1, 0));
    for (int i = 0; i < 1024; i++) mem[i] = '0;
    foreach (p[i]) mem[i] = p[i];

    repeat (3) @(posedge clk);
    rst_n = 1; @(posedge clk); run = 1;
    wait (sleeping);
    repeat (20) @(posedge clk);
    check("core sleeps in WFI", {31'b0, sleeping}, 1);
    @(negedge clk); irq = 1; @(negedge clk); irq = 0;
    wait (mem[32'h7FC >> 2] == 43);
    repeat (5) @(posedge clk);
    foreach (exp_q[i]) check($sformatf("result %0d", i), mem[(RES >> 2) + i], exp_q[i]);
    check("vector instructions offloaded", vq_count, 2);
    // run low holds the core in reset: it restarts the program from 0
    run = 0; mem[32'h7FC >> 2] = 0; repeat (3) @(posedge clk); run = 1;
    wait (sleeping); @(negedge clk); irq = 1; @(negedge clk); irq = 0;
    wait (mem[32'h7FC >> 2] == 43);
    check("restart after run", mem[32'h7FC >> 2], 43);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired pc=%08x state=%0d", dut.pc, dut.state);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
