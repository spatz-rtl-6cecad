// L1 interconnect: a fully connected 64-bit crossbar from NM masters to NS SPM banks.
//
// In the cluster, NM = 10 (five ports of each of the two Spatz: four VLSU ports and the FPU
// sequencer port) and NS = 16 banks, the "10 masters x 16 slaves 64-bit-wide crossbar" of the
// paper's cluster figure. Addresses are interleaved on 64-bit words: byte address bits
// [3 +: log2 NS] select the bank and the bits above them the row, so consecutive words go to
// consecutive banks (the interleaving is this design's choice). Each bank has a round-robin
// arbiter; a master gets gnt in the cycle its request is accepted and, for a read, rsp.valid
// with the data one cycle later. Writes get no response. Responses of one master come back
// in request order; those of different masters are independent, which is why the VLSU needs
// its reorder buffer. Conflicting masters are stalled (no gnt) and retry.
module spatz_xbar
  import spatz_pkg::*;
#(
  parameter int unsigned NM    = 10,
  parameter int unsigned NS    = 16,
  parameter int unsigned WORDS = 1024,   // rows per bank
  localparam int unsigned SW = $clog2(NS),
  localparam int unsigned RW = $clog2(WORDS)
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [NM-1:0]        req_valid_i,
  input  mem_req_t [NM-1:0]    req_i,
  output logic [NM-1:0]        gnt_o,
  output mem_rsp_t [NM-1:0]    rsp_o,
  // bank side
  output logic [NS-1:0]        bank_req_o,
  output logic [NS-1:0]        bank_we_o,
  output logic [NS-1:0][RW-1:0] bank_addr_o,
  output logic [NS-1:0][63:0]  bank_wdata_o,
  output logic [NS-1:0][7:0]   bank_be_o,
  input  logic [NS-1:0][63:0]  bank_rdata_i
);

  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;

  logic [NS-1:0][MW-1:0] rr_q;         // highest-priority master per bank
  logic [NM-1:0]         rvalid_q;
  logic [NM-1:0][SW-1:0] rbank_q;

  function automatic logic [SW-1:0] bank_of(logic [AW-1:0] a);
    return a[3 +: SW];
  endfunction

  logic [NS-1:0][MW-1:0] winner;
  logic [NS-1:0]         has_winner;

  always_comb begin
    gnt_o        = '0;
    bank_req_o   = '0;
    bank_we_o    = '0;
    bank_addr_o  = '0;
    bank_wdata_o = '0;
    bank_be_o    = '0;
    winner       = '0;
    has_winner   = '0;
    for (int s = 0; s < int'(NS); s++) begin
      for (int k = 0; k < int'(NM); k++) begin
        int m;
        m = (int'(rr_q[s]) + k) % int'(NM);
        if (!has_winner[s] && req_valid_i[m] && bank_of(req_i[m].addr) == SW'(s)) begin
          has_winner[s] = 1'b1;
          winner[s]     = MW'(m);
        end
      end
      if (has_winner[s]) begin
        gnt_o[winner[s]] = 1'b1;
        bank_req_o[s]    = 1'b1;
        bank_we_o[s]     = req_i[winner[s]].we;
        bank_addr_o[s]   = req_i[winner[s]].addr[3 + SW +: RW];
        bank_wdata_o[s]  = req_i[winner[s]].wdata;
        bank_be_o[s]     = req_i[winner[s]].be;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q     <= '0;
      rvalid_q <= '0;
      rbank_q  <= '0;
    end else begin
      for (int s = 0; s < int'(NS); s++)
        if (has_winner[s])
          rr_q[s] <= (int'(winner[s]) == int'(NM) - 1) ? '0 : winner[s] + 1'b1;
      for (int m = 0; m < int'(NM); m++) begin
        rvalid_q[m] <= gnt_o[m] && !req_i[m].we;
        rbank_q[m]  <= bank_of(req_i[m].addr);
      end
    end
  end

  always_comb begin
    for (int m = 0; m < int'(NM); m++) begin
      rsp_o[m].valid = rvalid_q[m];
      rsp_o[m].rdata = bank_rdata_i[rbank_q[m]];
    end
  end

  // A master is granted by at most one bank, and only when it asks.
  for (genvar m = 0; m < NM; m++) begin : g_assert
    assert property (@(posedge clk_i) disable iff (!rst_ni) gnt_o[m] |-> req_valid_i[m]);
  end

endmodule
