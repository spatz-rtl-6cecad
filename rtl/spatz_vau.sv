// Vector arithmetic unit (VAU): F floating-point lanes and one integer unit (IPU).
//
// The VAU walks the VRF words of an instruction in ascending order. In one cycle it reads
// all operands of a word (vs1, vs2 and, for multiply-accumulates, vd) through three VRF read
// ports of the same bank, so vfmacc runs at one word = F double-precision FMAs per cycle, as
// in the paper. Floating-point words go through the F fp64 FMA lanes and a four-cycle
// pipeline (the FMA latency the paper quotes) before they are written back. Integer words
// are processed by the single IPU, 64 bits per cycle, so an integer word takes F cycles
// (G = 1 as in the paper) and then follows the same pipeline, which keeps writes in order.
// Scalar operands (.vx/.vf/.vi forms) are broadcast to all elements.
// Supported: vfadd, vfsub, vfmul, vfmacc (SEW = 64 only), vadd, vsub, vmul, vmacc, vmv.v
// (SEW = 8..64). Masking, reductions, widening and the other FP formats are not built.
// Interface: one instruction at a time on req_valid/req_ready; a new one is accepted as soon
// as the previous one has read all its operands (its results keep draining through the
// pipeline), so back-to-back instructions overlap. Writes are never stalled: the VAU is the
// first VRF writer and checks at read time that the later write of that word is allowed.
// Scoreboard entries: sb_o[0] for the instruction still reading, sb_o[1] for the one draining.
module spatz_vau
  import spatz_pkg::*;
(
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            req_valid_i,
  output logic            req_ready_o,
  input  vreq_t           req_i,
  output logic            busy_o,
  // VRF: read ports 0 = vs1, 1 = vs2, 2 = vd; one write port
  output logic [2:0]      rd_req_o,
  output vaddr_t [2:0]    rd_addr_o,
  input  logic [2:0]      rd_gnt_i,
  input  vword_t [2:0]    rd_data_i,
  output logic            wr_req_o,
  output vaddr_t          wr_addr_o,
  output vword_t          wr_data_o,
  output vbe_t            wr_be_o,
  input  logic            wr_gnt_i,
  // scoreboard
  output sb_entry_t [1:0] sb_o,
  input  logic            rd_ok_i,
  input  logic            wr_ok_at_rd_i
);

  localparam int unsigned F = N_FPU;
  localparam int unsigned DEPTH = 4;            // read -> write latency of FP words
  localparam logic [63:0] FP_ONE  = 64'h3FF0_0000_0000_0000;
  localparam logic [63:0] FP_NZERO = 64'h8000_0000_0000_0000;

  typedef struct packed {
    logic   valid;
    logic   tag;
    vaddr_t waddr;
    vbe_t   be;
    vword_t data;
  } wb_t;

  // ---------------- instruction in its read phase ----------------
  vreq_t       cur_q;
  logic        act_q, tag_q;
  logic [6:0]  n_q, rdp_q, wrp_q;
  // ---------------- instruction draining ----------------
  logic        dr_valid_q, dr_tag_q;
  logic [7:0]  dr_seq_q;
  vaddr_t      dr_base_q;
  logic [6:0]  dr_n_q, dr_wrp_q;

  logic is_fp, rd_vs1, rd_vs2, rd_vd;
  always_comb begin
    is_fp  = cur_q.op inside {OP_VFADD, OP_VFSUB, OP_VFMUL, OP_VFMACC};
    rd_vs1 = !cur_q.use_scalar;
    rd_vs2 = (cur_q.op != OP_VMV);
    rd_vd  = cur_q.op inside {OP_VMACC, OP_VFMACC};
  end

  // ---------------- stage 1: operand registers ----------------
  logic        s1_valid_q, s1_fp_q, s1_tag_q;
  op_e         s1_op_q;
  sew_e        s1_sew_q;
  vaddr_t      s1_waddr_q;
  vbe_t        s1_be_q;
  vword_t      s1_a_q, s1_b_q, s1_c_q;   // a = vs2, b = vs1/scalar, c = vd
  logic [$clog2(F)-1:0] chunk_q;
  vword_t      ires_q;
  logic        s1_adv, s1_free;
  wb_t [DEPTH-1:1] pipe_q;               // pipe_q[DEPTH-1] presents the write

  // Integer words need F cycles in the single IPU.
  assign s1_adv  = s1_valid_q && (s1_fp_q || (chunk_q == $clog2(F)'(F - 1)));
  assign s1_free = !s1_valid_q || s1_adv;

  logic   do_read;
  vaddr_t vd_a, vs1_a, vs2_a;
  assign vd_a  = vaddr_t'({cur_q.vd, 1'b0})  + vaddr_t'(rdp_q);
  assign vs1_a = vaddr_t'({cur_q.vs1, 1'b0}) + vaddr_t'(rdp_q);
  assign vs2_a = vaddr_t'({cur_q.vs2, 1'b0}) + vaddr_t'(rdp_q);

  always_comb begin
    rd_req_o  = '0;
    rd_addr_o = {vd_a, vs2_a, vs1_a};
    if (act_q && rdp_q < n_q && s1_free && rd_ok_i && wr_ok_at_rd_i)
      rd_req_o = {rd_vd, rd_vs2, rd_vs1};
  end
  assign do_read = act_q && rdp_q < n_q && s1_free && rd_ok_i && wr_ok_at_rd_i &&
                   ((rd_req_o & rd_gnt_i) == rd_req_o);

  // Scalar operand broadcast to the element width.
  function automatic vword_t bcast(logic [63:0] s, sew_e sew);
    logic [63:0] w;
    unique case (sew)
      EW8:     w = {8{s[7:0]}};
      EW16:    w = {4{s[15:0]}};
      EW32:    w = {2{s[31:0]}};
      default: w = s;
    endcase
    return {F{w}};
  endfunction

  // ---------------- lane datapath ----------------
  vword_t fp_res, int_res_word;
  logic [63:0] ipu_r;
  for (genvar l = 0; l < F; l++) begin : g_fpu
    logic [63:0] fa, fb, fc;
    always_comb begin
      unique case (s1_op_q)
        OP_VFMACC: begin fa = s1_b_q[l*64 +: 64]; fb = s1_a_q[l*64 +: 64]; fc = s1_c_q[l*64 +: 64]; end
        OP_VFMUL:  begin fa = s1_a_q[l*64 +: 64]; fb = s1_b_q[l*64 +: 64]; fc = FP_NZERO; end
        OP_VFSUB:  begin fa = s1_a_q[l*64 +: 64]; fb = FP_ONE; fc = s1_b_q[l*64 +: 64] ^ FP_NZERO; end
        default:   begin fa = s1_a_q[l*64 +: 64]; fb = FP_ONE; fc = s1_b_q[l*64 +: 64]; end
      endcase
    end
    spatz_fma64 i_fma (.a_i(fa), .b_i(fb), .c_i(fc), .r_o(fp_res[l*64 +: 64]));
  end

  spatz_ipu i_ipu (
    .op_i  (s1_op_q),
    .sew_i (s1_sew_q),
    .a_i   (s1_a_q[chunk_q*64 +: 64]),
    .b_i   (s1_b_q[chunk_q*64 +: 64]),
    .c_i   (s1_c_q[chunk_q*64 +: 64]),
    .r_o   (ipu_r)
  );

  always_comb begin
    int_res_word = ires_q;
    int_res_word[chunk_q*64 +: 64] = ipu_r;
  end

  // ---------------- write port ----------------
  assign wr_req_o  = pipe_q[DEPTH-1].valid;
  assign wr_addr_o = pipe_q[DEPTH-1].waddr;
  assign wr_data_o = pipe_q[DEPTH-1].data;
  assign wr_be_o   = pipe_q[DEPTH-1].be;

  logic wr_fire, wr_cur, wr_dr;
  assign wr_fire = wr_req_o && wr_gnt_i;
  assign wr_dr   = wr_fire && dr_valid_q && (pipe_q[DEPTH-1].tag == dr_tag_q);
  assign wr_cur  = wr_fire && act_q && (pipe_q[DEPTH-1].tag == tag_q) && !wr_dr;

  // The read phase is over; hand the entry over to the drain slot when it is free.
  logic handover, dr_free, last_read;
  assign dr_free   = !dr_valid_q || (wr_dr && dr_wrp_q + 7'd1 == dr_n_q);
  assign last_read = do_read && (rdp_q + 7'd1 == n_q);
  assign handover  = act_q && ((rdp_q == n_q) || last_read) && dr_free;
  assign req_ready_o = !act_q || handover;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      act_q      <= 1'b0;
      tag_q      <= 1'b0;
      cur_q      <= '0;
      n_q        <= '0;
      rdp_q      <= '0;
      wrp_q      <= '0;
      dr_valid_q <= 1'b0;
      dr_tag_q   <= 1'b0;
      dr_seq_q   <= '0;
      dr_base_q  <= '0;
      dr_n_q     <= '0;
      dr_wrp_q   <= '0;
      s1_valid_q <= 1'b0;
      s1_fp_q    <= 1'b0;
      s1_tag_q   <= 1'b0;
      s1_op_q    <= OP_NONE;
      s1_sew_q   <= EW64;
      s1_waddr_q <= '0;
      s1_be_q    <= '0;
      s1_a_q     <= '0;
      s1_b_q     <= '0;
      s1_c_q     <= '0;
      chunk_q    <= '0;
      ires_q     <= '0;
      pipe_q     <= '0;
    end else begin
      // read
      if (do_read) begin
        rdp_q      <= rdp_q + 7'd1;
        s1_valid_q <= 1'b1;
        s1_fp_q    <= is_fp;
        s1_tag_q   <= tag_q;
        s1_op_q    <= cur_q.op;
        s1_sew_q   <= cur_q.sew;
        s1_waddr_q <= vd_a;
        s1_be_q    <= word_be(rdp_q, cur_q.vl, cur_q.sew);
        s1_a_q     <= rd_data_i[1];
        s1_b_q     <= cur_q.use_scalar ? bcast(cur_q.scalar, cur_q.sew) : rd_data_i[0];
        s1_c_q     <= rd_data_i[2];
        chunk_q    <= '0;
      end else if (s1_adv) begin
        s1_valid_q <= 1'b0;
      end
      if (s1_valid_q && !s1_fp_q && !s1_adv) begin
        chunk_q <= chunk_q + 1'b1;
        ires_q  <= int_res_word;
      end
      // pipeline: FP words enter at stage 1, integer words at the last stage
      for (int i = DEPTH - 1; i > 1; i--) pipe_q[i] <= pipe_q[i-1];
      pipe_q[1] <= '0;
      if (s1_adv)
        pipe_q[1] <= '{valid: 1'b1, tag: s1_tag_q, waddr: s1_waddr_q, be: s1_be_q,
                       data: s1_fp_q ? fp_res : int_res_word};
      // write accounting
      if (wr_cur) wrp_q <= wrp_q + 7'd1;
      if (wr_dr) begin
        dr_wrp_q <= dr_wrp_q + 7'd1;
        if (dr_wrp_q + 7'd1 == dr_n_q) dr_valid_q <= 1'b0;
      end
      if (handover) begin
        act_q      <= 1'b0;
        dr_valid_q <= (wrp_q + 7'(wr_cur)) != n_q;
        dr_tag_q   <= tag_q;
        dr_seq_q   <= cur_q.seq;
        dr_base_q  <= vaddr_t'({cur_q.vd, 1'b0});
        dr_n_q     <= n_q;
        dr_wrp_q   <= wrp_q + 7'(wr_cur);
      end
      // accept
      if (req_valid_i && req_ready_o) begin
        cur_q <= req_i;
        n_q   <= words_of(req_i.vl, req_i.sew);
        rdp_q <= '0;
        wrp_q <= '0;
        tag_q <= ~tag_q;
        act_q <= (words_of(req_i.vl, req_i.sew) != 7'd0);
      end
    end
  end

  always_comb begin
    sb_o = '0;
    sb_o[0].valid   = act_q;
    sb_o[0].seq     = cur_q.seq;
    sb_o[0].wr_en   = 1'b1;
    sb_o[0].wr_base = vaddr_t'({cur_q.vd, 1'b0});
    sb_o[0].wr_n    = n_q;
    sb_o[0].wr_ptr  = wrp_q;
    sb_o[0].rd_en   = {rd_vd, rd_vs2, rd_vs1};
    sb_o[0].rd_base = {vaddr_t'({cur_q.vd, 1'b0}), vaddr_t'({cur_q.vs2, 1'b0}),
                       vaddr_t'({cur_q.vs1, 1'b0})};
    sb_o[0].rd_n    = n_q;
    sb_o[0].rd_ptr  = rdp_q;
    sb_o[1].valid   = dr_valid_q;
    sb_o[1].seq     = dr_seq_q;
    sb_o[1].wr_en   = 1'b1;
    sb_o[1].wr_base = dr_base_q;
    sb_o[1].wr_n    = dr_n_q;
    sb_o[1].wr_ptr  = dr_wrp_q;
  end

  assign busy_o = act_q || dr_valid_q || s1_valid_q || (|pipe_q);

  // The VAU is the VRF's first writer: its writes are always granted.
  assert property (@(posedge clk_i) disable iff (!rst_ni) wr_req_o |-> wr_gnt_i);

endmodule
