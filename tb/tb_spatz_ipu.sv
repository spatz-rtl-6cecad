// Testbench of spatz_ipu, the SIMD integer unit: random 64-bit operands for every operation
// (add, sub, mul, macc, mv) and element width (8..64), compared element by element with a
// reference computed here. Watchdog included.
module tb_spatz_ipu;
  import spatz_pkg::*;
  op_e op; sew_e sew;
  logic [63:0] a, b, c, r;
  int checks = 0, failures = 0;
  spatz_ipu dut (.op_i (op), .sew_i (sew), .a_i (a), .b_i (b), .c_i (c), .r_o (r));

  function automatic logic [63:0] ref_of(op_e o, sew_e s, logic [63:0] x, logic [63:0] y, logic [63:0] z);
    int w; logic [63:0] res, m, e;
    w = 8 << int'(s);
    m = (w == 64) ? '1 : ((64'd1 << w) - 1);
    res = '0;
    for (int k = 0; k < 64 / w; k++) begin
      logic [63:0] xa, yb, zc;
      xa = (x >> (k * w)) & m; yb = (y >> (k * w)) & m; zc = (z >> (k * w)) & m;
      case (o)
        OP_VADD:  e = xa + yb;
        OP_VSUB:  e = xa - yb;
        OP_VMUL:  e = xa * yb;
        OP_VMACC: e = zc + xa * yb;
        default: e = yb;
      endcase
      res |= (e & m) << (k * w);
    end
    return res;
  endfunction

  initial begin
    #100000;
    $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  initial begin
    op_e ops [5] = '{OP_VADD, OP_VSUB, OP_VMUL, OP_VMACC, OP_VMV};
    for (int i = 0; i < 2000; i++) begin
      op  = ops[$urandom_range(0, 4)];
      sew = sew_e'($urandom_range(0, 3));
      a = {$urandom, $urandom}; b = {$urandom, $urandom}; c = {$urandom, $urandom};
      #1;
      checks++;
      if (r !== ref_of(op, sew, a, b, c)) begin
        failures++;
        if (failures < 10) $display("FAIL %s sew=%0d: %h", op.name(), sew, r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
