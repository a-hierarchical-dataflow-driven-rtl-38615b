// tb_vxu_exe: butterfly exchange, rotation and masked reduction of random
// 16-element vectors against index arithmetic done here.
module tb_vxu_exe;
  import wbp_pkg::*;
  localparam int L = 16;
  int checks = 0, failures = 0;
  exe_mode_e mode; logic [31:0] k; logic [L-1:0] mask;
  logic [L-1:0][31:0] vin, vout;
  vxu_exe #(.LANES(L)) dut (.mode, .k, .mask, .vin, .vout);
  initial begin
    for (int n = 0; n < 600; n++) begin
      logic [31:0] s;
      for (int i = 0; i < L; i++) vin[i] = $urandom;
      k = $urandom; mask = 16'($urandom);
      mode = exe_mode_e'(n % 3);
      #1;
      s = 0;
      for (int i = 0; i < L; i++) if (mask[i]) s += vin[i];
      for (int i = 0; i < L; i++) begin
        logic [31:0] e;
        case (mode)
          EXE_XCHG: e = vin[i ^ (k % L)];
          EXE_ROT:  e = vin[(i + k) % L];
          default:  e = (i == 0) ? s : 0;
        endcase
        checks++;
        if (vout[i] !== e) begin failures++; $display("FAIL mode %0d i %0d", mode, i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
