// tb_atomic_alu: checks every atomic operation on random operands against a
// reference computed in the testbench.
module tb_atomic_alu;
  import piuma_pkg::*;
  int checks = 0, failures = 0;
  atop_e op;
  logic [63:0] o, a, b, n, exp;
  atomic_alu dut (.op(op), .old_val(o), .operand(a), .operand2(b), .new_val(n));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      op = atop_e'($urandom_range(0, 7));
      o  = {$urandom, $urandom};
      a  = {$urandom, $urandom};
      b  = (t % 3 == 0) ? o : {$urandom, $urandom};
      if (t % 5 == 0) a[63] = ~o[63];
      #1;
      case (op)
        AT_ADD:  exp = o + a;
        AT_AND:  exp = o & a;
        AT_OR:   exp = o | a;
        AT_XOR:  exp = o ^ a;
        AT_MIN:  exp = (longint'(a) < longint'(o)) ? a : o;
        AT_MAX:  exp = (longint'(a) > longint'(o)) ? a : o;
        AT_SWAP: exp = a;
        default: exp = (o == b) ? a : o;
      endcase
      checks++;
      if (n !== exp) begin
        failures++;
        if (failures < 5) $display("op %0d old %h opnd %h: got %h exp %h", op, o, a, n, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
