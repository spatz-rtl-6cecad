// End-to-end testbench of the Spatz cluster at its default (full) size: 2 Spatz, 16 x 8 KiB banks.
//
// The testbench plays the two scalar cores: it sends RISC-V vector and FP instructions over
// each core's X-interface, with the scalar register operands (base addresses, AVL, slide
// amounts) attached as the core would. Both cores run the same kernel on their own data at
// the same time, so their memory traffic competes for the banks. The kernel, on 32 doubles
// (SEW = 64, LMUL = 4):
//   vsetvli (checks the returned vl) ; fld f1 ; vle64 v0 <- X ; vle64 v4 <- Y ;
//   vfmacc.vf v4 += f1 * v0 (axpy) ; vse64 v4 -> Z ; vlse64 v8 <- X with stride 16 ;
//   vfadd.vv v12 = v8 + v0 ; vslidedown.vi v16 = v12 >> 3 ; vmv.v.x v20 ; vslideup.vx v20 ;
//   vse64 of v12, v16, v20 ; fsd f1 ; vfmul.vv, vfsub.vv ; vsetvli e32 ; integer vle32,
//   vmacc.vx, vse32.
// The SPM is loaded and read back by hierarchical access to the bank arrays. Data values are
// small integers, so every floating-point result is exact and is compared bit for bit.
// Mechanisms counted (each must occur at least once, else a failure is counted): chaining
// (the VAU reads operands while an older load is still writing them), scoreboard stall,
// reorder-buffer wait (a lane's data held while another lane is late), bank conflict in the
// crossbar, memory-ordering stall (Spatz held while the core's LSU is busy), issue
// backpressure, slide-unit writes and FPU-sequencer memory accesses.
module tb_spatz_cluster;
  import spatz_pkg::*;

  localparam int NC = N_CC;
  localparam int NB = N_BANKS;
  localparam int BW = BANK_BYTES / 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NC-1:0]        iv, irdy, iacc, rv, rrdy, lbusy, mbusy, busy;
  xif_issue_t [NC-1:0]  ii;
  xif_result_t [NC-1:0] ro;

  spatz_cluster dut (
    .clk_i (clk), .rst_ni (rst_n),
    .issue_valid_i (iv), .issue_ready_o (irdy), .issue_i (ii), .issue_accept_o (iacc),
    .result_valid_o (rv), .result_ready_i (rrdy), .result_o (ro),
    .lsu_busy_i (lbusy), .spatz_mem_busy_o (mbusy), .busy_o (busy)
  );

  int checks = 0, failures = 0;

  // ---------------- SPM backdoor ----------------
  logic [63:0] img  [NB][BW];
  logic [63:0] back [NB][BW];
  event load_ev, dump_ev;
  for (genvar s = 0; s < NB; s++) begin : g_bd
    always @(load_ev) for (int r = 0; r < BW; r++) dut.g_bank[s].i_bank.mem[r] = img[s][r];
    always @(dump_ev) for (int r = 0; r < BW; r++) back[s][r] = dut.g_bank[s].i_bank.mem[r];
  end
  function automatic void put(int a, logic [63:0] d);
    img[(a >> 3) % NB][(a >> 7) % BW] = d;
  endfunction
  function automatic logic [63:0] get(int a);
    return back[(a >> 3) % NB][(a >> 7) % BW];
  endfunction

  // ---------------- instruction encodings ----------------
  localparam logic [6:0] OPV = 7'b1010111, LDF = 7'b0000111, STF = 7'b0100111;
  function automatic logic [31:0] vsetvli(logic [7:0] vt);
    return {1'b0, 3'b000, vt, 5'd10, 3'b111, 5'd11, OPV};
  endfunction
  function automatic logic [31:0] vop(logic [5:0] f6, logic [2:0] f3, int vd, int vs2, int vs1);
    return {f6, 1'b1, 5'(vs2), 5'(vs1), f3, 5'(vd), OPV};
  endfunction
  function automatic logic [31:0] vld(int vd, logic [2:0] w, logic str);
    return {3'b000, 1'b0, str ? 2'b10 : 2'b00, 1'b1, str ? 5'd12 : 5'd0, 5'd10, w, 5'(vd), LDF};
  endfunction
  function automatic logic [31:0] vst(int vs3, logic [2:0] w);
    return {3'b000, 1'b0, 2'b00, 1'b1, 5'd0, 5'd10, w, 5'(vs3), STF};
  endfunction
  function automatic logic [31:0] fld(int rd);
    return {12'd0, 5'd10, 3'b011, 5'(rd), LDF};
  endfunction
  function automatic logic [31:0] fsd(int rs2);
    return {7'd0, 5'(rs2), 5'd10, 3'b011, 5'd0, STF};
  endfunction

  // ---------------- per-core layout ----------------
  function automatic int base(int c); return c * 32'h8000; endfunction
  localparam int OX = 'h0000, OY = 'h1000, OZ = 'h2000, OS1 = 'h3000, OS2 = 'h4000,
                 OA = 'h5000, OW = 'h5008, OP = 'h5800, OQ = 'h6000, OI = 'h6800, OJ = 'h7000;
  localparam int VL = 32;
  function automatic real xval(int c, int i); return real'(i + 1 + 100 * c); endfunction
  function automatic real yval(int c, int i); return real'(2 * i - 7 * c); endfunction
  function automatic real aval(int c);        return 3.0 + real'(c); endfunction

  task automatic issue(int c, logic [31:0] ins, logic [63:0] rs1, logic [63:0] rs2 = '0);
    @(negedge clk);
    iv[c] = 1'b1;
    ii[c].instr = ins;
    ii[c].rs1   = rs1;
    ii[c].rs2   = rs2;
    #1;
    while (!irdy[c]) begin @(negedge clk); #1; end
    checks++;
    if (!iacc[c]) begin
      failures++;
      $display("FAIL core %0d: instruction %h not accepted", c, ins);
    end
    @(posedge clk);
    #1 iv[c] = 1'b0;
  endtask

  logic [63:0] vl_seen [NC][$];
  always @(posedge clk) for (int c = 0; c < NC; c++)
    if (rst_n && rv[c] && rrdy[c]) vl_seen[c].push_back(ro[c].data);

  task automatic kernel(int c);
    int b;
    b = base(c);
    issue(c, vsetvli(8'h1A), 64'(VL));                         // e64, m4
    issue(c, fld(1), 64'(b + OA));
    if (c == 0) begin
      lbusy[0] = 1'b1;                                        // the core's LSU is busy
      fork begin repeat (12) @(negedge clk); lbusy[0] = 1'b0; end join_none
    end
    issue(c, vld(0, 3'b111, 1'b0), 64'(b + OX));
    issue(c, vld(4, 3'b111, 1'b0), 64'(b + OY));
    issue(c, vop(6'b101100, 3'b101, 4, 0, 1), '0);            // vfmacc.vf v4, f1, v0
    issue(c, vst(4, 3'b111), 64'(b + OZ));
    issue(c, vld(8, 3'b111, 1'b1), 64'(b + OX), 64'd16);      // vlse64 v8, stride 16
    issue(c, vop(6'b000000, 3'b001, 12, 8, 0), '0);           // vfadd.vv v12, v8, v0
    issue(c, vop(6'b001111, 3'b011, 16, 12, 3), '0);          // vslidedown.vi v16, v12, 3
    issue(c, vop(6'b010111, 3'b100, 20, 0, 5), 64'h4059000000000000); // vmv.v.x v20 (100.0)
    issue(c, vop(6'b001110, 3'b100, 20, 16, 6), 64'd5);       // vslideup.vx v20, v16, 5
    issue(c, vst(12, 3'b111), 64'(b + OS1));
    issue(c, vst(16, 3'b111), 64'(b + OS2));
    issue(c, vst(20, 3'b111), 64'(b + OS2 + 'h400));
    issue(c, fsd(1), 64'(b + OW));
    issue(c, vop(6'b100100, 3'b001, 24, 0, 4), '0);           // vfmul.vv v24, v0, v4
    issue(c, vop(6'b000010, 3'b001, 28, 24, 12), '0);         // vfsub.vv v28, v24, v12
    issue(c, vst(28, 3'b111), 64'(b + OP));
    issue(c, vsetvli(8'h10), 64'd16);                         // e32, m1
    issue(c, vld(1, 3'b110, 1'b0), 64'(b + OI));              // vle32 v1
    issue(c, vop(6'b101101, 3'b110, 1, 1, 9), 64'd7);         // vmacc.vx v1, x, v1: v1 += 7*v1
    issue(c, vst(1, 3'b110), 64'(b + OJ));
  endtask

  // ---------------- mechanism counters ----------------
  int n_chain[NC], n_sbstall[NC], n_rob[NC], n_conf, n_order[NC], n_bp[NC], n_slide[NC], n_fseq[NC];
  for (genvar c = 0; c < NC; c++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_cc[c].i_spatz.sb[2].valid && dut.g_cc[c].i_spatz.sb[2].wr_en &&
          dut.g_cc[c].i_spatz.sb[2].wr_ptr < dut.g_cc[c].i_spatz.sb[2].wr_n &&
          dut.g_cc[c].i_spatz.sb[0].valid &&
          older(dut.g_cc[c].i_spatz.sb[2].seq, dut.g_cc[c].i_spatz.sb[0].seq) &&
          |(dut.g_cc[c].i_spatz.rd_req[2:0] & dut.g_cc[c].i_spatz.rd_gnt[2:0]))
        n_chain[c]++;
      if (dut.g_cc[c].i_spatz.sb[0].valid && !dut.g_cc[c].i_spatz.sb_rd_ok[0]) n_sbstall[c]++;
      if (dut.g_cc[c].i_spatz.i_vlsu.act_q && dut.g_cc[c].i_spatz.i_vlsu.is_load &&
          (dut.g_cc[c].i_spatz.i_vlsu.cnt_q != '0) && !(&dut.g_cc[c].i_spatz.i_vlsu.lane_rdy))
        n_rob[c]++;
      if (iv[c] && !irdy[c] && lbusy[c]) n_order[c]++;
      if (iv[c] && !irdy[c]) n_bp[c]++;
      if (dut.g_cc[c].i_spatz.wr_req[2] && dut.g_cc[c].i_spatz.wr_gnt[2]) n_slide[c]++;
      if (dut.g_cc[c].i_spatz.mem_req_valid_o[N_FPU] && dut.g_cc[c].i_spatz.mem_gnt_i[N_FPU])
        n_fseq[c]++;
    end
  end
  always @(posedge clk) if (rst_n && |(dut.m_valid & ~dut.m_gnt)) n_conf++;

  task automatic mech(string name, int n);
    checks++;
    $display("mechanism %-28s %0d", name, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", name); end
  endtask

  task automatic expect64(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    #2000000;
    $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  initial begin
    iv = '0; ii = '0; rrdy = '1; lbusy = '0;
    for (int s = 0; s < NB; s++) for (int r = 0; r < BW; r++) img[s][r] = '0;
    for (int c = 0; c < NC; c++) begin
      for (int i = 0; i < 2 * VL; i++) put(base(c) + OX + 8 * i, $realtobits(xval(c, i)));
      for (int i = 0; i < VL; i++)     put(base(c) + OY + 8 * i, $realtobits(yval(c, i)));
      put(base(c) + OA, $realtobits(aval(c)));
      for (int i = 0; i < 8; i++)
        put(base(c) + OI + 8 * i, {32'(3 * i + 1 + c), 32'(3 * i + c)});
    end
    ->load_ev;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    fork
      kernel(0);
      kernel(1);
    join
    while (|busy) @(posedge clk);
    repeat (5) @(posedge clk);
    ->dump_ev;
    #1;
    for (int c = 0; c < NC; c++) begin
      int b;
      real v12 [VL], v16 [VL];
      b = base(c);
      checks++;
      if (vl_seen[c].size() != 2 || vl_seen[c][0] != 64'(VL) || vl_seen[c][1] != 64'd16) begin
        failures++;
        $display("FAIL core %0d: vsetvli results wrong (%0d seen)", c, vl_seen[c].size());
      end
      for (int i = 0; i < VL; i++) begin
        v12[i] = xval(c, 2 * i) + xval(c, i);
        expect64("axpy", get(b + OZ + 8 * i), $realtobits(aval(c) * xval(c, i) + yval(c, i)));
        expect64("vlse+vfadd", get(b + OS1 + 8 * i), $realtobits(v12[i]));
      end
      for (int i = 0; i < VL; i++) begin
        v16[i] = (i + 3 < VL) ? v12[i + 3] : 0.0;
        expect64("vslidedown", get(b + OS2 + 8 * i), $realtobits(v16[i]));
        expect64("vslideup", get(b + OS2 + 'h400 + 8 * i),
                 (i < 5) ? 64'h4059000000000000 : $realtobits(v16[i - 5]));
        expect64("vfmul/vfsub", get(b + OP + 8 * i),
                 $realtobits(xval(c, i) * (aval(c) * xval(c, i) + yval(c, i)) - v12[i]));
      end
      for (int i = 0; i < 8; i++) begin
        logic [63:0] w;
        w = {32'(8 * (3 * i + 1 + c)), 32'(8 * (3 * i + c))};
        expect64("vmacc.vx e32", get(b + OJ + 8 * i), w);
      end
      expect64("fsd", get(b + OW), $realtobits(aval(c)));
      mech($sformatf("chaining core%0d", c), n_chain[c]);
      mech($sformatf("scoreboard stall core%0d", c), n_sbstall[c]);
      mech($sformatf("issue backpressure core%0d", c), n_bp[c]);
      mech($sformatf("slide writes core%0d", c), n_slide[c]);
      mech($sformatf("FPU sequencer mem core%0d", c), n_fseq[c]);
    end
    mech("memory-ordering stall core0", n_order[0]);
    mech("bank conflict", n_conf);
    mech("ROB wait (any core)", n_rob[0] + n_rob[NC - 1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
