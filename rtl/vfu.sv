// vfu: vector functional unit of a core -- the digital arithmetic and non-linear operations
// that run between matrix operations (error terms, activation functions and their derivatives,
// learning-rate scaling).
//
// One element per call, combinational: y = f(op, a, b) on 16-bit two's complement fixed-point
// values with FRAC fraction bits. Supported: add and subtract (saturating), multiply (product
// shifted right by FRAC, saturating), ReLU, and "error times ReLU derivative" (b if a > 0, else 0).
// The core feeds it one element per step and loops over the vector length.
//
// The paper gives only the unit's role (arithmetic and non-linear functions, executed by the
// VFU instructions of the ISA). The operation set, the fixed-point format and the single lane
// are this design's own choices.
module vfu
  import panther_pkg::*;
#(
  parameter int unsigned FRAC = 8
) (
  input  opcode_e                    op,
  input  logic signed [IN_BITS-1:0]  a,
  input  logic signed [IN_BITS-1:0]  b,
  output logic signed [IN_BITS-1:0]  y
);
  function automatic logic signed [IN_BITS-1:0] sat(input logic signed [31:0] v);
    if (v > 32'sd32767)       return 16'sh7fff;
    else if (v < -32'sd32768) return 16'sh8000;
    else                      return v[15:0];
  endfunction

  logic signed [31:0] prod;
  always_comb begin
    prod = 32'(a) * 32'(b);
    unique case (op)
      OP_VADD:   y = sat(32'(a) + 32'(b));
      OP_VSUB:   y = sat(32'(a) - 32'(b));
      OP_VMUL:   y = sat(prod >>> FRAC);
      OP_VRELU:  y = (a > 0) ? a : '0;
      OP_VDRELU: y = (a > 0) ? b : '0;
      default:   y = a;
    endcase
  end
endmodule
