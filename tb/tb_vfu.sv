// tb_vfu: random operands through every VFU operation, compared with values computed here.
module tb_vfu;
  import panther_pkg::*;
  opcode_e op;
  logic signed [15:0] a, b, y;
  int checks = 0, failures = 0;
  vfu #(.FRAC(8)) dut (.*);
  function automatic int sat(longint v);
    return v > 32767 ? 32767 : v < -32768 ? -32768 : int'(v);
  endfunction
  initial begin
    opcode_e ops [5] = '{OP_VADD, OP_VSUB, OP_VMUL, OP_VRELU, OP_VDRELU};
    for (int t = 0; t < 5000; t++) begin
      int e;
      op = ops[t % 5]; a = 16'($urandom); b = 16'($urandom); #1;
      case (op)
        OP_VADD:  e = sat(longint'(a) + longint'(b));
        OP_VSUB:  e = sat(longint'(a) - longint'(b));
        OP_VMUL:  e = sat((longint'(a) * longint'(b)) >>> 8);
        OP_VRELU: e = a > 0 ? int'(a) : 0;
        default:  e = a > 0 ? int'(b) : 0;
      endcase
      checks++;
      if (int'(y) != e) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
