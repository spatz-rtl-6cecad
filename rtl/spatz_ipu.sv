// Integer processing unit (IPU): one 64-bit SIMD integer datapath of the vector arithmetic unit.
//
// Processes 64 bits per cycle whatever the element width: eight 8-bit, four 16-bit, two 32-bit
// or one 64-bit element, as the paper requires of every Spatz functional unit. Operations:
// add, sub, mul (low half), macc (c + a*b) and move (result = b), with a = vs2, b = vs1 or the
// scalar operand, c = vd. Which integer instructions exist beyond the multiply-accumulate is
// not listed in the paper; this set is what the cluster's kernels use and is this design's
// choice. Purely combinational; the VAU registers the result.
module spatz_ipu
  import spatz_pkg::*;
(
  input  op_e         op_i,
  input  sew_e        sew_i,
  input  logic [63:0] a_i,
  input  logic [63:0] b_i,
  input  logic [63:0] c_i,
  output logic [63:0] r_o
);

  // Apply the operation to every element of width 8 << sew.
  function automatic logic [63:0] simd(op_e op, int unsigned ew,
                                       logic [63:0] a, logic [63:0] b, logic [63:0] c);
    logic [63:0] r, ea, eb, ec, m, er;
    r = '0;
    m = (ew == 64) ? '1 : ((64'd1 << ew) - 64'd1);
    for (int unsigned i = 0; i < 64 / ew; i++) begin
      ea = (a >> (i * ew)) & m;
      eb = (b >> (i * ew)) & m;
      ec = (c >> (i * ew)) & m;
      unique case (op)
        OP_VADD:  er = ea + eb;
        OP_VSUB:  er = ea - eb;
        OP_VMUL:  er = ea * eb;
        OP_VMACC: er = ec + ea * eb;
        OP_VMV:   er = eb;
        default:  er = '0;
      endcase
      r = r | ((er & m) << (i * ew));
    end
    return r;
  endfunction

  always_comb begin
    unique case (sew_i)
      EW8:     r_o = simd(op_i, 8,  a_i, b_i, c_i);
      EW16:    r_o = simd(op_i, 16, a_i, b_i, c_i);
      EW32:    r_o = simd(op_i, 32, a_i, b_i, c_i);
      default: r_o = simd(op_i, 64, a_i, b_i, c_i);
    endcase
  end

endmodule
