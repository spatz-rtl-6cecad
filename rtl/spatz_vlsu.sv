// Vector load/store unit (VLSU) with F independent 64-bit memory ports and a reorder buffer.
//
// Each VRF word (F 64-bit lanes) is moved through the F memory ports in parallel, lane p on
// port p, so no coalescing into wide transfers is needed, as the paper describes:
//  * unit-stride (vle/vse, any element width): lane p of word w is the 64-bit memory word at
//    base + w*8F + 8p; the base must be 8-byte aligned (this design's restriction);
//  * constant-stride (vlse/vsse, 64-bit elements): element e = wF + p at base + e*stride.
// Loads: each port issues its requests in order, as soon as it has a free slot in its
// response queue (depth ROB_DEPTH). The L1 interconnect returns responses of different ports
// at different times, so the per-port queues form the reorder buffer: a VRF word is written
// only when every active lane's response for it is present, and words are written strictly
// in order. Stores: one VRF word is read into a store buffer and its lanes are issued on the
// ports as each port is granted; the next word is read as soon as the last lane goes out.
// Elements past vl are neither fetched nor written (tail undisturbed).
// Memory protocol (this design's): req_valid/req/gnt handshake; read data comes back one or
// more cycles later with rsp.valid, in order per port; writes get no response.
// Indexed (scatter/gather) accesses and masking are not built.
module spatz_vlsu
  import spatz_pkg::*;
#(
  parameter int unsigned ROB_DEPTH = 4
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               req_valid_i,
  output logic               req_ready_o,
  input  vreq_t              req_i,
  output logic               busy_o,
  // memory ports
  output logic [N_FPU-1:0]   mem_req_valid_o,
  output mem_req_t [N_FPU-1:0] mem_req_o,
  input  logic [N_FPU-1:0]   mem_gnt_i,
  input  mem_rsp_t [N_FPU-1:0] mem_rsp_i,
  // VRF
  output logic               rd_req_o,
  output vaddr_t             rd_addr_o,
  input  logic               rd_gnt_i,
  input  vword_t             rd_data_i,
  output logic               wr_req_o,
  output vaddr_t             wr_addr_o,
  output vword_t             wr_data_o,
  output vbe_t               wr_be_o,
  input  logic               wr_gnt_i,
  // scoreboard
  output sb_entry_t          sb_o,
  input  logic               rd_ok_i,
  input  logic               wr_ok_i
);

  localparam int unsigned F  = N_FPU;
  localparam int unsigned CW = $clog2(ROB_DEPTH + 1);

  vreq_t      cur_q;
  logic       act_q, is_load, strided;
  logic [6:0] n_q;
  assign is_load = cur_q.op inside {OP_VLE, OP_VLSE};
  assign strided = cur_q.op inside {OP_VLSE, OP_VSSE};

  // Address and byte strobe of lane p of word w.
  function automatic logic [AW-1:0] lane_addr(vreq_t r, logic str, logic [6:0] w, int p);
    logic [63:0] e;
    if (str) begin
      e = 64'(w) * 64'(F) + 64'(p);
      return AW'(r.scalar + e * r.stride);
    end
    return AW'(r.scalar + 64'(w) * 64'(WORD_B) + 64'(8 * p));
  endfunction

  function automatic logic [7:0] lane_be(vreq_t r, logic str, logic [6:0] w, int p);
    vbe_t be;
    if (str) return ((32'(w) * 32'(F) + 32'(p)) < 32'(r.vl)) ? 8'hFF : 8'h00;
    be = word_be(w, r.vl, r.sew);
    return be[p*8 +: 8];
  endfunction

  // ---------------- loads: request side and reorder buffer ----------------
  logic [F-1:0][6:0]            lrq_q;      // next word to request, per port
  logic [F-1:0][CW-1:0]         outst_q;    // requests granted, response not yet back
  logic [F-1:0][ROB_DEPTH-1:0][63:0] rob_q;
  logic [F-1:0][$clog2(ROB_DEPTH)-1:0] wp_q, rp_q;
  logic [F-1:0][CW-1:0]         cnt_q;
  logic [6:0]                   cw_q;       // next word to commit to the VRF
  logic [F-1:0]                 lane_act, lane_rdy, push, pop;
  logic                         commit;

  // ---------------- stores ----------------
  logic [6:0]   srd_q;                      // words read from the VRF
  vword_t       sbuf_q;
  logic [F-1:0] spend_q;                    // lanes of sbuf still to send
  logic [6:0]   sw_q;                       // word held in sbuf
  logic         sread, sbuf_done;

  always_comb begin
    mem_req_valid_o = '0;
    mem_req_o       = '0;
    for (int p = 0; p < int'(F); p++) begin
      if (act_q && is_load) begin
        mem_req_o[p].addr = lane_addr(cur_q, strided, lrq_q[p], p);
        mem_req_o[p].we   = 1'b0;
        mem_req_o[p].be   = lane_be(cur_q, strided, lrq_q[p], p);
        mem_req_valid_o[p] = (lrq_q[p] < n_q) && (mem_req_o[p].be != '0) &&
                             (32'(outst_q[p]) + 32'(cnt_q[p]) < ROB_DEPTH);
      end else if (act_q) begin
        mem_req_o[p].addr  = lane_addr(cur_q, strided, sw_q, p);
        mem_req_o[p].we    = 1'b1;
        mem_req_o[p].be    = lane_be(cur_q, strided, sw_q, p);
        mem_req_o[p].wdata = sbuf_q[p*64 +: 64];
        mem_req_valid_o[p] = spend_q[p];
      end
    end
  end

  // Lanes of the word to commit that carry data, and whether they have it.
  always_comb begin
    for (int p = 0; p < int'(F); p++) begin
      lane_act[p] = lane_be(cur_q, strided, cw_q, p) != '0;
      lane_rdy[p] = !lane_act[p] || (cnt_q[p] != '0);
      push[p]     = mem_rsp_i[p].valid;
    end
  end

  vword_t cdata;
  always_comb begin
    for (int p = 0; p < int'(F); p++) cdata[p*64 +: 64] = rob_q[p][rp_q[p]];
  end

  assign wr_req_o  = act_q && is_load && (cw_q < n_q) && (&lane_rdy) && wr_ok_i;
  assign wr_addr_o = vaddr_t'({cur_q.vd, 1'b0}) + vaddr_t'(cw_q);
  assign wr_data_o = cdata;
  assign wr_be_o   = word_be(cw_q, cur_q.vl, strided ? EW64 : cur_q.sew);
  assign commit    = wr_req_o && wr_gnt_i;
  assign pop       = commit ? lane_act : '0;

  // Store: read the next word when the buffer is empty or being emptied now.
  assign sbuf_done = ((spend_q & ~mem_gnt_i) == '0);
  assign rd_req_o  = act_q && !is_load && (srd_q < n_q) && sbuf_done && rd_ok_i;
  assign rd_addr_o = vaddr_t'({cur_q.vd, 1'b0}) + vaddr_t'(srd_q);
  assign sread     = rd_req_o && rd_gnt_i;

  logic done;
  assign done = act_q && (is_load ? (cw_q == n_q) : (srd_q == n_q && spend_q == '0));
  assign req_ready_o = !act_q;
  assign busy_o = act_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      act_q   <= 1'b0;
      cur_q   <= '0;
      n_q     <= '0;
      lrq_q   <= '0;
      outst_q <= '0;
      rob_q   <= '0;
      wp_q    <= '0;
      rp_q    <= '0;
      cnt_q   <= '0;
      cw_q    <= '0;
      srd_q   <= '0;
      sbuf_q  <= '0;
      spend_q <= '0;
      sw_q    <= '0;
    end else begin
      for (int p = 0; p < int'(F); p++) begin
        logic g;
        g = mem_req_valid_o[p] && mem_gnt_i[p];
        if (is_load) begin
          // skip lanes without data (tail of the last word)
          if (act_q && lrq_q[p] < n_q && (g || mem_req_o[p].be == '0)) lrq_q[p] <= lrq_q[p] + 7'd1;
          outst_q[p] <= outst_q[p] + CW'(g) - CW'(push[p]);
        end
        if (push[p]) begin
          rob_q[p][wp_q[p]] <= mem_rsp_i[p].rdata;
          wp_q[p] <= wp_q[p] + 1'b1;
        end
        if (pop[p]) rp_q[p] <= rp_q[p] + 1'b1;
        cnt_q[p] <= cnt_q[p] + CW'(push[p]) - CW'(pop[p]);
        if (!is_load && g) spend_q[p] <= 1'b0;
      end
      if (commit) cw_q <= cw_q + 7'd1;
      if (sread) begin
        srd_q  <= srd_q + 7'd1;
        sbuf_q <= rd_data_i;
        sw_q   <= srd_q;
        for (int p = 0; p < int'(F); p++)
          spend_q[p] <= lane_be(cur_q, strided, srd_q, p) != '0;
      end
      if (done) act_q <= 1'b0;
      if (req_valid_i && req_ready_o) begin
        cur_q <= req_i;
        n_q   <= words_of(req_i.vl, (req_i.op inside {OP_VLSE, OP_VSSE}) ? EW64 : req_i.sew);
        act_q <= 1'b1;
        lrq_q <= '0;
        cw_q  <= '0;
        srd_q <= '0;
      end
    end
  end

  always_comb begin
    sb_o         = '0;
    sb_o.valid   = act_q;
    sb_o.seq     = cur_q.seq;
    sb_o.wr_en   = is_load;
    sb_o.wr_base = vaddr_t'({cur_q.vd, 1'b0});
    sb_o.wr_n    = n_q;
    sb_o.wr_ptr  = cw_q;
    sb_o.rd_en   = {2'b00, !is_load};
    sb_o.rd_base = {vaddr_t'(0), vaddr_t'(0), vaddr_t'({cur_q.vd, 1'b0})};
    sb_o.rd_n    = n_q;
    sb_o.rd_ptr  = srd_q;
  end

  // Every response has a request behind it, and the reorder buffer never overflows.
  for (genvar p = 0; p < F; p++) begin : g_assert
    assert property (@(posedge clk_i) disable iff (!rst_ni)
      mem_rsp_i[p].valid |-> (outst_q[p] != '0));
    assert property (@(posedge clk_i) disable iff (!rst_ni)
      32'(cnt_q[p]) <= ROB_DEPTH);
  end

endmodule
