// tb_polar_bp_minsum: the node update of min-sum belief-propagation decoding
// of a polar code, N = 512, run as a vector program on one L tile at its
// default size. For every pair of incoming messages (a, b) a processing
// element needs
//     f(a, b) = sign(a) sign(b) min(|a|, |b|)     and     g(a, b) = a + b.
// The program strip-mines the 512 pairs into 4 strips of 128 elements
// (8 vector registers each on 16 lanes) and computes f with vabs, vmin, vxor,
// vsra and vsub (conditional negation (m ^ s) - s with s = (a ^ b) >>> 31),
// and g with vadd. Messages are random 16-bit signed values. The testbench
// loads the messages over the tile's bus port, runs the tile to its RETCNT
// completion, reads both result arrays back and compares them with a model,
// and reports the cycle count of the update (a size from the evaluated
// decoder; the kernel itself is this design's own code).
module tb_polar_bp_minsum;
  import wbp_pkg::*;
  import rv_asm_pkg::*;
  localparam int NPAIR = 512, STRIP = 128;
  localparam int A = 32'h1000, B = 32'h2000, F = 32'h3000, G = 32'h4000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  bus_req_t req = '0; bus_rsp_t rsp;
  logic irq, busy;
  `include "tb_bus_tasks.svh"

  tile dut (.clk, .rst_n, .bus_req(req), .bus_rsp(rsp), .irq, .busy);

  function automatic logic [31:0] f_model(logic [31:0] a, logic [31:0] b);
    logic [31:0] ma, mb, m;
    ma = a[31] ? -a : a;
    mb = b[31] ? -b : b;
    m  = ($signed(ma) < $signed(mb)) ? ma : mb;
    return (a[31] ^ b[31]) ? -m : m;
  endfunction

  initial begin
    w_t p[$];
    logic [31:0] a [NPAIR], b [NPAIR];
    int l, cyc;
    repeat (2) @(posedge clk); rst_n = 1;
    li(p, 1, STRIP);  emit(p, vsetvl(2, 1));
    emit(p, addi(31, 0, 31));
    li(p, 3, A); li(p, 4, B); li(p, 5, F); li(p, 6, G);
    li(p, 7, NPAIR / STRIP);
    l = p.size();
    emit(p, vld(0, 3));  emit(p, vld(8, 4));
    emit(p, vop(12, 16, 0, 8));      // vxor  s = a ^ b
    emit(p, vsra(16, 16, 31));       //       s = s >>> 31
    emit(p, vadd(24, 0, 8));         // g
    emit(p, vst(24, 6));
    emit(p, vabs(0, 0)); emit(p, vabs(8, 8));
    emit(p, vmin(0, 0, 8));
    emit(p, vop(12, 0, 0, 16));      // m ^ s
    emit(p, vsub(0, 0, 16));         // (m ^ s) - s
    emit(p, vst(0, 5));
    emit(p, addi(3, 3, 4 * STRIP)); emit(p, addi(4, 4, 4 * STRIP));
    emit(p, addi(5, 5, 4 * STRIP)); emit(p, addi(6, 6, 4 * STRIP));
    emit(p, addi(7, 7, -1));
    emit(p, bne(7, 0, 4 * (l - p.size())));
    li(p, 8, TILE_CSR_OFS + 4 * TCSR_RETCNT); emit(p, addi(9, 0, 2));
    emit(p, sw(9, 8, 0));
    emit(p, jal(0, 0));
    foreach (p[i]) bus_wr(4 * i, p[i]);
    for (int i = 0; i < NPAIR; i++) begin
      a[i] = $urandom_range(0, 65535) - 32768;
      b[i] = $urandom_range(0, 65535) - 32768;
      bus_wr(A + 4 * i, a[i]); bus_wr(B + 4 * i, b[i]);
    end
    bus_wr(TILE_CSR_OFS + 4 * TCSR_CTRL, 1);
    bus_wr(TILE_CSR_OFS + 4 * TCSR_CTRL, 3);
    cyc = 0;
    while (!irq && cyc < 100000) begin @(posedge clk); cyc++; end
    expect_eq("tile finished", irq, 1);
    $display("min-sum node update of %0d pairs: %0d cycles", NPAIR, cyc);
    for (int i = 0; i < NPAIR; i++) begin
      expect_rd($sformatf("f[%0d]", i), F + 4 * i, f_model(a[i], b[i]));
      expect_rd($sformatf("g[%0d]", i), G + 4 * i, a[i] + b[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
