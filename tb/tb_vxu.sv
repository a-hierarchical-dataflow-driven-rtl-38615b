// tb_vxu: the vector extension unit with a behavioural T-SPM (random grant
// stalls). Instructions are pushed into its queue as the scalar core would.
// Checks vector loads/stores, lane operations, EXE exchanges, reduction,
// element extraction, SETVL clamping at VLMAX = LANES*NUM_VRF, that elements
// at or past vl are left unchanged, and the cycle count of a lane operation
// (one register of LANES elements per cycle).
module tb_vxu;
  import wbp_pkg::*;
  import rv_asm_pkg::*;
  localparam int L = 16, NV = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic q_valid = 0, q_ready, r_valid, r_ready = 0, idle;
  vq_entry_t q_data = '0;
  logic [31:0] r_data;
  bus_req_t mreq; bus_rsp_t mrsp;

  vxu #(.LANES(L), .NUM_VRF(NV)) dut (.clk, .rst_n, .q_valid, .q_ready, .q_data,
    .r_valid, .r_ready, .r_data, .mem_req(mreq), .mem_rsp(mrsp), .idle);

  logic [31:0] mem [4096];
  logic g_r, rv_q; logic [31:0] rd_q;
  always_ff @(posedge clk) g_r <= ($urandom_range(0, 3) != 0);
  assign mrsp.gnt = mreq.valid && g_r;
  assign mrsp.rvalid = rv_q;
  assign mrsp.rdata = rd_q;
  always_ff @(posedge clk) begin
    rv_q <= mrsp.gnt;
    if (mrsp.gnt) begin
      rd_q <= mem[mreq.addr[13:2]];
      if (mreq.we) mem[mreq.addr[13:2]] <= mreq.wdata;
    end
  end

  task automatic issue(w_t ins, logic [31:0] s1, logic [31:0] s2);
    @(negedge clk);
    q_valid = 1; q_data = '{instr: ins, rs1: s1, rs2: s2};
    #1; while (!q_ready) begin @(negedge clk); #1; end
    @(negedge clk); q_valid = 0;
  endtask
  task automatic result(output logic [31:0] v);
    @(negedge clk); r_ready = 1;
    #1; while (!r_valid) begin @(negedge clk); #1; end
    v = r_data;
    @(negedge clk); r_ready = 0;
  endtask
  task automatic wait_idle();
    @(negedge clk); while (!idle) @(negedge clk);
  endtask
  task automatic check(string w, logic [31:0] g, logic [31:0] e);
    checks++;
    if (g !== e) begin failures++; $display("FAIL %s: got %h expected %h", w, g, e); end
  endtask

  int busy_cycles;
  always_ff @(posedge clk) if (!idle) busy_cycles <= busy_cycles + 1;

  initial begin
    logic [31:0] v, s;
    localparam int VL = 40;
    for (int i = 0; i < 4096; i++) mem[i] = 0;
    for (int i = 0; i < 64; i++) begin
      mem[32'h100/4 + i] = 32'($urandom_range(0, 65535)) - 32768;
      mem[32'h200/4 + i] = 32'($urandom_range(0, 65535)) - 32768;
    end
    repeat (2) @(posedge clk); rst_n = 1;
    // fill v8.. with 7 over 48 elements, then work with vl = 40
    issue(vsetvl(0, 0), 48, 0); result(v); check("setvl 48", v, 48);
    issue(vmvsx(8, 0), 7, 0);
    issue(vsetvl(0, 0), VL, 0); result(v); check("setvl 40", v, VL);
    issue(vld(0, 0), 32'h100, 0);
    issue(vld(4, 0), 32'h200, 0);
    wait_idle();
    busy_cycles = 0;
    issue(vadd(8, 0, 4), 0, 0);
    wait_idle();
    check("add takes ceil(vl/LANES) cycles", busy_cycles, (VL + L - 1) / L);
    issue(vmulq(12, 0, 4), 0, 0);
    issue(vmin(16, 0, 4), 0, 0);
    issue(vxchg(20, 0, 0), 0, 1);
    issue(vrot(24, 0, 0), 0, 3);
    issue(vsra(28, 0, 0), 0, 2);
    issue(vst(8,  0), 32'h400, 0);
    issue(vst(12, 0), 32'h500, 0);
    issue(vst(16, 0), 32'h600, 0);
    issue(vst(20, 0), 32'h700, 0);
    issue(vst(24, 0), 32'h800, 0);
    issue(vst(28, 0), 32'h900, 0);
    issue(vmvxs(0, 8, 0), 0, 45); result(v); check("tail undisturbed", v, 7);
    issue(vabs(12, 0), 0, 0);
    issue(vsub(16, 0, 4), 0, 0);
    issue(vmax(20, 0, 4), 0, 0);
    issue(vmul(24, 0, 4), 0, 0);
    issue(vst(12, 0), 32'hA00, 0);
    issue(vst(16, 0), 32'hB00, 0);
    issue(vst(20, 0), 32'hC00, 0);
    issue(vst(24, 0), 32'hD00, 0);
    wait_idle();
    for (int i = 0; i < VL; i++) begin
      logic [31:0] a, b; longint p;
      a = mem[32'h100/4 + i]; b = mem[32'h200/4 + i];
      p = longint'($signed(a)) * longint'($signed(b));
      check($sformatf("add %0d", i),  mem[32'h400/4 + i], a + b);
      check($sformatf("mulq %0d", i), mem[32'h500/4 + i], 32'(p >>> 15));
      check($sformatf("min %0d", i),  mem[32'h600/4 + i], ($signed(a) < $signed(b)) ? a : b);
      check($sformatf("xchg %0d", i), mem[32'h700/4 + i], mem[32'h100/4 + (i / L) * L + ((i % L) ^ 1)]);
      if ((i / L) * L + ((i % L) + 3) % L < VL)
        check($sformatf("rot %0d", i),  mem[32'h800/4 + i], mem[32'h100/4 + (i / L) * L + ((i % L) + 3) % L]);
      check($sformatf("sra %0d", i),  mem[32'h900/4 + i], 32'($signed(a) >>> 2));
      check($sformatf("abs %0d", i),  mem[32'hA00/4 + i], a[31] ? -a : a);
      check($sformatf("sub %0d", i),  mem[32'hB00/4 + i], a - b);
      check($sformatf("max %0d", i),  mem[32'hC00/4 + i], ($signed(a) > $signed(b)) ? a : b);
      check($sformatf("mul %0d", i),  mem[32'hD00/4 + i], 32'(p));
    end
    check("store stops at vl", mem[32'h400/4 + VL], 0);
    issue(vmvxs(0, 0, 0), 0, 17); result(v); check("mvxs", v, mem[32'h100/4 + 17]);
    s = 0; for (int i = 0; i < VL; i++) s += mem[32'h100/4 + i];
    issue(vredsum(0, 0), 0, 0); result(v); check("redsum", v, s);
    issue(vsetvl(0, 0), 100000, 0); result(v); check("setvl clamps to VLMAX", v, L * NV);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
