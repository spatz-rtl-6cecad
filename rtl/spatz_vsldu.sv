// Vector slide unit (VSLDU): vslideup / vslidedown by a scalar or immediate amount.
//
// Output word j (F elements) of a slide by d elements (d = +amount for slidedown, -amount for
// slideup) takes its elements from source words j + floor(d/F) and j + floor(d/F) + 1. The
// unit reads the source register group once, in ascending order; two private 64F-bit
// registers (the paper's double buffer: the previous source word and the output word) hold
// the data; once both source words of an output word are present, an all-to-all lane
// selection (lane m takes lane (m + d mod F) of the pair) forms the result, which is
// committed to the VRF as one 64F-bit word. In steady state one
// word is produced per cycle, the rate of the other units.
// RVV semantics kept: slidedown fills elements whose source lies at or past VLMAX with zero;
// slideup leaves elements below the slide amount unchanged; elements at or past vl are not
// written. Only 64-bit elements are built (this design's restriction), without masking.
module spatz_vsldu
  import spatz_pkg::*;
(
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic      req_valid_i,
  output logic      req_ready_o,
  input  vreq_t     req_i,
  output logic      busy_o,
  output logic      rd_req_o,
  output vaddr_t    rd_addr_o,
  input  logic      rd_gnt_i,
  input  vword_t    rd_data_i,
  output logic      wr_req_o,
  output vaddr_t    wr_addr_o,
  output vword_t    wr_data_o,
  output vbe_t      wr_be_o,
  input  logic      wr_gnt_i,
  output sb_entry_t sb_o,
  input  logic      rd_ok_i,
  input  logic      wr_ok_i
);

  localparam int unsigned F  = N_FPU;
  localparam int unsigned LF = $clog2(F);

  vreq_t              cur_q;
  logic               act_q, down;
  logic [6:0]         n_q, nmax_q;          // output words, source words in the group
  logic signed [15:0] d_q;                  // element shift
  logic [LF-1:0]      r;                    // d mod F
  logic signed [15:0] sx_q;                 // next source word to fetch
  logic [7:0]         nfetch_q;             // source words fetched
  vword_t             buf1_q;               // previously fetched source word
  logic [6:0]         j_q;                  // next output word to build
  logic               ov_q;                 // output register holds a word
  vword_t             od_q;
  vbe_t               obe_q;
  logic [6:0]         ow_q;                 // word index held in the output register
  logic [6:0]         wc_q;                 // words committed

  assign down = (cur_q.op == OP_VSLIDEDOWN);
  assign r    = LF'(d_q);

  logic in_range, out_free, fetch, build;
  assign in_range = (sx_q >= 0) && (sx_q < 16'(nmax_q));
  assign out_free = !ov_q || (wr_req_o && wr_gnt_i);
  // Fetch the next source word while there is output left to build and room for it.
  assign fetch    = act_q && (j_q < n_q) && out_free &&
                    (!in_range || (rd_ok_i && rd_gnt_i));
  assign rd_req_o  = act_q && (j_q < n_q) && out_free && in_range && rd_ok_i;
  assign rd_addr_o = vaddr_t'({cur_q.vs2, 1'b0}) + vaddr_t'(sx_q);
  // After a fetch, the buffers hold source words sx-1 and sx of output word j if >= 2 fetched.
  assign build    = fetch && (nfetch_q >= 8'd1);

  vword_t src_new, res;
  vbe_t   be;
  assign src_new = in_range ? rd_data_i : '0;

  always_comb begin
    vword_t lo, hi;
    lo = buf1_q;      // source word j + k   (fetched previously)
    hi = src_new;     // source word j + k + 1 (fetched now)
    for (int m = 0; m < int'(F); m++) begin
      int t;
      t = m + int'(r);
      res[m*64 +: 64] = (t < int'(F)) ? lo[t*64 +: 64] : hi[(t - int'(F))*64 +: 64];
      for (int b = 0; b < 8; b++) begin
        int e;
        e = int'(j_q) * int'(F) + m;
        be[m*8 + b] = (e < int'(cur_q.vl)) && (down || (e >= -int'(d_q)));
      end
    end
  end

  assign wr_req_o  = ov_q && wr_ok_i;
  assign wr_addr_o = vaddr_t'({cur_q.vd, 1'b0}) + vaddr_t'(ow_q);
  assign wr_data_o = od_q;
  assign wr_be_o   = obe_q;

  assign req_ready_o = !act_q;
  assign busy_o      = act_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      act_q <= 1'b0;  cur_q <= '0;  n_q <= '0;  nmax_q <= '0;  d_q <= '0;
      sx_q <= '0;  nfetch_q <= '0;  buf1_q <= '0;  j_q <= '0;
      ov_q <= 1'b0;  od_q <= '0;  obe_q <= '0;  ow_q <= '0;  wc_q <= '0;
    end else begin
      if (wr_req_o && wr_gnt_i) begin
        ov_q <= 1'b0;
        wc_q <= wc_q + 7'd1;
        if (wc_q + 7'd1 == n_q) act_q <= 1'b0;
      end
      if (fetch) begin
        buf1_q   <= src_new;
        sx_q     <= sx_q + 16'sd1;
        nfetch_q <= nfetch_q + 8'd1;
      end
      if (build) begin
        ov_q  <= 1'b1;
        od_q  <= res;
        obe_q <= be;
        ow_q  <= j_q;
        j_q   <= j_q + 7'd1;
      end
      if (req_valid_i && req_ready_o) begin
        logic [12:0] amt;
        logic signed [15:0] dd;
        amt      = (req_i.scalar >= 64'(req_i.vlmax)) ? req_i.vlmax : 13'(req_i.scalar);
        dd       = (req_i.op == OP_VSLIDEDOWN) ? $signed({3'b000, amt}) : -$signed({3'b000, amt});
        cur_q    <= req_i;
        n_q      <= words_of(req_i.vl, EW64);
        nmax_q   <= words_of(req_i.vlmax, EW64);
        d_q      <= dd;
        sx_q     <= dd >>> LF;   // first source word: floor(d / F)
        nfetch_q <= '0;
        j_q      <= '0;
        wc_q     <= '0;
        act_q    <= (words_of(req_i.vl, EW64) != 7'd0);
      end
    end
  end

  always_comb begin
    sb_o            = '0;
    sb_o.valid      = act_q;
    sb_o.seq        = cur_q.seq;
    sb_o.wr_en      = 1'b1;
    sb_o.wr_base    = vaddr_t'({cur_q.vd, 1'b0});
    sb_o.wr_n       = n_q;
    sb_o.wr_ptr     = wc_q;
    sb_o.rd_en      = 3'b001;
    sb_o.rd_base[0] = vaddr_t'({cur_q.vs2, 1'b0});
    sb_o.rd_n       = nmax_q;
    sb_o.rd_ptr     = (sx_q < 0) ? 7'd0 : 7'(sx_q);
  end

endmodule
