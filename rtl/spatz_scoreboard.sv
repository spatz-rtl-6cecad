// Element-wise (VRF-word-wise) scoreboard of Spatz: operand backpressure and chaining.
//
// Every functional unit publishes one entry per in-flight instruction (sb_entry_t): its issue
// number, the VRF word range it writes and how many words it has written so far, the ranges
// it reads and how many words it has read so far. From these the scoreboard tells each entry
// whether its next read and its next write may proceed:
//  * read of word a  : no older entry still has to write a (RAW);
//  * write of word a : no older entry still has to write a (WAW) or to read a (WAR).
// Because all units walk their ranges in ascending order, a consumer may start reading the
// first words of a register group as soon as the producer has written them: this is the
// chaining the paper describes. The paper chains per element; here the unit of progress is
// one VRF word (F 64-bit elements), which is this design's choice. Purely combinational.
// wr_ok_at_rd checks the write of word wr_base + rd_ptr; the VAU uses it so that once it has
// read a word, its later write of the result can never be held back.
module spatz_scoreboard
  import spatz_pkg::*;
(
  input  sb_entry_t [N_SB-1:0] sb_i,
  output logic [N_SB-1:0]      rd_ok_o,
  output logic [N_SB-1:0]      wr_ok_o,
  output logic [N_SB-1:0]      wr_ok_at_rd_o
);

  function automatic logic in_pending(logic [7:0] a, logic [7:0] base, logic [6:0] n,
                                      logic [6:0] ptr);
    logic [7:0] off;
    off = a - base;
    return (a >= base) && (off < 8'(n)) && (off >= 8'(ptr));
  endfunction

  function automatic logic pend_wr(sb_entry_t o, logic [7:0] a);
    return o.valid && o.wr_en && in_pending(a, 8'(o.wr_base), o.wr_n, o.wr_ptr);
  endfunction

  function automatic logic pend_rd(sb_entry_t o, logic [7:0] a);
    logic p;
    p = 1'b0;
    for (int k = 0; k < 3; k++)
      if (o.valid && o.rd_en[k] && in_pending(a, 8'(o.rd_base[k]), o.rd_n, o.rd_ptr)) p = 1'b1;
    return p;
  endfunction

  always_comb begin
    for (int s = 0; s < int'(N_SB); s++) begin
      logic [7:0] wa, wra;
      rd_ok_o[s]       = 1'b1;
      wr_ok_o[s]       = 1'b1;
      wr_ok_at_rd_o[s] = 1'b1;
      wa  = 8'(sb_i[s].wr_base) + 8'(sb_i[s].wr_ptr);
      wra = 8'(sb_i[s].wr_base) + 8'(sb_i[s].rd_ptr);
      for (int o = 0; o < int'(N_SB); o++) begin
        if (o != s && sb_i[o].valid && older(sb_i[o].seq, sb_i[s].seq)) begin
          for (int k = 0; k < 3; k++)
            if (sb_i[s].rd_en[k] &&
                pend_wr(sb_i[o], 8'(sb_i[s].rd_base[k]) + 8'(sb_i[s].rd_ptr)))
              rd_ok_o[s] = 1'b0;
          if (pend_wr(sb_i[o], wa) || pend_rd(sb_i[o], wa))   wr_ok_o[s] = 1'b0;
          if (pend_wr(sb_i[o], wra) || pend_rd(sb_i[o], wra)) wr_ok_at_rd_o[s] = 1'b0;
        end
      end
    end
  end

endmodule
