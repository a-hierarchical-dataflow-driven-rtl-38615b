// tb_fft_stage: the first radix-2 decimation-in-frequency stage of an
// N-point complex FFT, for N = 128, 512 and 2048, run as a vector program on
// one L tile at its default size. For k < N/2, with x = X[k], y = X[k+N/2]
// and twiddle w = exp(-2*pi*i*k/N) in Q15:
//     X[k]     <- x + y
//     X[k+N/2] <- (x - y) * w      (complex product with Q15 multiplies)
// Real and imaginary parts are separate word arrays in the T-SPM, laid out
// at 0x1000: Re X, Im X (N words each), then Re w, Im w (N/2 words each).
// The program works on strips of 64 elements (4 registers of 16 lanes per
// vector, 8 vectors live), in place. The testbench loads data and twiddles
// over the bus, runs the tile to its RETCNT completion, compares all N
// outputs with a model and reports the cycles of the stage. The sizes are
// the evaluated FFT sizes; the full transform (all log2 N stages and the
// bit-reversal) and its published cycle counts are not reproduced here.
module tb_fft_stage;
  import wbp_pkg::*;
  import rv_asm_pkg::*;
  localparam int STRIP = 64, BASE = 32'h1000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  bus_req_t req = '0; bus_rsp_t rsp;
  logic irq, busy;
  `include "tb_bus_tasks.svh"

  tile dut (.clk, .rst_n, .bus_req(req), .bus_rsp(rsp), .irq, .busy);

  function automatic logic [31:0] q15(logic [31:0] a, logic [31:0] b);
    logic signed [63:0] p;
    p = $signed(a) * $signed(b);
    return p[46:15];
  endfunction

  task automatic run_stage(int n);
    w_t p[$];
    logic [31:0] xr [], xi [], wr [], wi [];
    logic [31:0] tr, ti;
    int l, cyc, h;
    int a_xr, a_xi, a_wr, a_wi;
    h = n / 2;
    a_xr = BASE; a_xi = BASE + 4 * n; a_wr = BASE + 8 * n; a_wi = BASE + 8 * n + 4 * h;
    xr = new[n]; xi = new[n]; wr = new[h]; wi = new[h];
    li(p, 1, STRIP); emit(p, vsetvl(2, 1));
    li(p, 3, a_xr); li(p, 4, a_xi); li(p, 5, a_xr + 4 * h); li(p, 6, a_xi + 4 * h);
    li(p, 10, a_wr); li(p, 11, a_wi); li(p, 7, h / STRIP);
    l = p.size();
    emit(p, vld(0, 3));  emit(p, vld(4, 4));  emit(p, vld(8, 5));  emit(p, vld(12, 6));
    emit(p, vld(16, 10)); emit(p, vld(20, 11));
    emit(p, vsub(24, 0, 8));  emit(p, vsub(28, 4, 12));     // t = x - y
    emit(p, vadd(0, 0, 8));   emit(p, vadd(4, 4, 12));      // x + y
    emit(p, vst(0, 3));       emit(p, vst(4, 4));
    emit(p, vmulq(0, 24, 16)); emit(p, vmulq(4, 28, 20));
    emit(p, vsub(0, 0, 4));                                 // Re t*w
    emit(p, vmulq(4, 24, 20)); emit(p, vmulq(8, 28, 16));
    emit(p, vadd(4, 4, 8));                                 // Im t*w
    emit(p, vst(0, 5));       emit(p, vst(4, 6));
    for (int r = 3; r <= 6; r++) emit(p, addi(r, r, 4 * STRIP));
    emit(p, addi(10, 10, 4 * STRIP)); emit(p, addi(11, 11, 4 * STRIP));
    emit(p, addi(7, 7, -1));
    emit(p, bne(7, 0, 4 * (l - p.size())));
    li(p, 8, TILE_CSR_OFS + 4 * TCSR_RETCNT); li(p, 9, 2 * n);
    emit(p, sw(9, 8, 0));
    emit(p, jal(0, 0));
    foreach (p[i]) bus_wr(4 * i, p[i]);
    for (int i = 0; i < n; i++) begin
      xr[i] = $urandom_range(0, 32767) - 16384; xi[i] = $urandom_range(0, 32767) - 16384;
      bus_wr(a_xr + 4 * i, xr[i]); bus_wr(a_xi + 4 * i, xi[i]);
    end
    for (int k = 0; k < h; k++) begin
      wr[k] = $rtoi($floor(32767.0 * $cos(2.0 * 3.14159265358979 * k / n) + 0.5));
      wi[k] = $rtoi($floor(-32767.0 * $sin(2.0 * 3.14159265358979 * k / n) + 0.5));
      bus_wr(a_wr + 4 * k, wr[k]); bus_wr(a_wi + 4 * k, wi[k]);
    end
    bus_wr(TILE_CSR_OFS + 4 * TCSR_CTRL, 1);
    bus_wr(TILE_CSR_OFS + 4 * TCSR_CTRL, 3);
    cyc = 0;
    while (!irq && cyc < 100000) begin @(posedge clk); cyc++; end
    expect_eq("tile finished", irq, 1);
    $display("FFT N=%0d first DIF stage: %0d cycles", n, cyc);
    for (int k = 0; k < h; k++) begin
      tr = xr[k] - xr[k + h]; ti = xi[k] - xi[k + h];
      expect_rd("Re top", a_xr + 4 * k, xr[k] + xr[k + h]);
      expect_rd("Im top", a_xi + 4 * k, xi[k] + xi[k + h]);
      expect_rd("Re bottom", a_xr + 4 * (k + h), q15(tr, wr[k]) - q15(ti, wi[k]));
      expect_rd("Im bottom", a_xi + 4 * (k + h), q15(tr, wi[k]) + q15(ti, wr[k]));
    end
    bus_wr(TILE_CSR_OFS + 4 * TCSR_IRQ, 1);
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    run_stage(128);
    run_stage(512);
    run_stage(2048);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
