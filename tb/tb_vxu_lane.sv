// tb_vxu_lane: every lane operation on random and corner operands against
// a reference written with SystemVerilog operators.
module tb_vxu_lane;
  import wbp_pkg::*;
  int checks = 0, failures = 0;
  lane_op_e op; logic [31:0] a, b, y;
  vxu_lane dut (.op, .a, .b, .y);

  function automatic logic [31:0] model(lane_op_e o, logic [31:0] x, logic [31:0] z);
    longint p;
    p = longint'($signed(x)) * longint'($signed(z));
    case (o)
      LOP_ADD: return x + z;
      LOP_SUB: return x - z;
      LOP_MUL: return 32'(p);
      LOP_MULQ: return 32'(p >>> 15);
      LOP_MIN: return ($signed(x) < $signed(z)) ? x : z;
      LOP_MAX: return ($signed(x) > $signed(z)) ? x : z;
      LOP_ABS: return ($signed(x) < 0) ? 0 - x : x;
      LOP_AND: return x & z;
      LOP_OR:  return x | z;
      LOP_XOR: return x ^ z;
      LOP_SRA: return 32'($signed(x) >>> z[4:0]);
      LOP_SLL: return x << z[4:0];
      default: return z;
    endcase
  endfunction

  initial begin
    for (int n = 0; n < 3000; n++) begin
      op = lane_op_e'(n % 13);
      a = (n % 7 == 0) ? 32'h8000_0000 : $urandom;
      b = (n % 5 == 0) ? 32'($urandom_range(0, 40000)) : $urandom;
      #1;
      checks++;
      if (y !== model(op, a, b)) begin
        failures++;
        $display("FAIL op %0d a %h b %h y %h exp %h", op, a, b, y, model(op, a, b));
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
