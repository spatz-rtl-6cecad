// Testbench of spatz_fma64, the combinational fp64 fused multiply-add (r = a*b + c).
// Random operands are drawn as small integer values and powers of two so that the exact
// result is representable and the reference ($realtobits of a real product and sum) is the
// correctly rounded answer; special cases (zeros, infinities, NaN, inf*0, cancellation) are
// checked against their IEEE 754 results with the canonical quiet NaN. Watchdog included.
module tb_spatz_fma64;
  logic [63:0] a, b, c, r;
  int checks = 0, failures = 0;
  spatz_fma64 dut (.a_i (a), .b_i (b), .c_i (c), .r_o (r));

  localparam logic [63:0] PINF = 64'h7FF0000000000000, NINF = 64'hFFF0000000000000,
                          QNAN = 64'h7FF8000000000000;

  task automatic chk(logic [63:0] ea, logic [63:0] eb, logic [63:0] ec, logic [63:0] exp);
    a = ea; b = eb; c = ec;
    #1;
    checks++;
    if (r !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL fma(%h,%h,%h) = %h expected %h", ea, eb, ec, r, exp);
    end
  endtask

  function automatic real rnd_small();
    int v, e;
    real sc;
    v  = int'($urandom_range(0, 2000)) - 1000;
    e  = int'($urandom_range(0, 20));
    sc = 1.0 / 1024.0;
    for (int k = 0; k < e; k++) sc = sc * 2.0;
    return real'(v) * sc;
  endfunction

  initial begin
    #100000;
    $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  initial begin
    a = '0; b = '0; c = '0;
    for (int i = 0; i < 3000; i++) begin
      real x, y, z;
      x = rnd_small(); y = rnd_small(); z = rnd_small();
      if (x * y + z != 0.0) chk($realtobits(x), $realtobits(y), $realtobits(z), $realtobits(x * y + z));
    end
    chk($realtobits(1.5), $realtobits(2.0), $realtobits(-3.0), 64'h0);           // exact cancel
    chk($realtobits(3.0), 64'h0, $realtobits(-2.5), $realtobits(-2.5));         // zero product
    chk(PINF, $realtobits(2.0), $realtobits(1.0), PINF);
    chk(PINF, 64'h0, $realtobits(1.0), QNAN);                                   // inf * 0
    chk(PINF, $realtobits(1.0), NINF, QNAN);                                    // inf - inf
    chk(QNAN, $realtobits(1.0), $realtobits(1.0), QNAN);
    chk($realtobits(1.0), $realtobits(1.0), 64'h3C30000000000000, $realtobits(1.0)); // 1 + 2^-60
    chk(64'h3FF0000000000001, 64'h3FF0000000000001, 64'h0, 64'h3FF0000000000002); // rounds down
    chk(64'h3FF0000000000001, 64'h3FF8000000000000, 64'h0, 64'h3FF8000000000002); // tie to even
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
