// Spatz vector register file: 32 registers of VLENB bytes in two 3R1W latch SCM banks.
//
// Each bank is VLENB/2 bytes (= 64F bits) wide and has one row per vector register, so a
// register occupies one row in each bank; the VRF word address used throughout the design is
// {register, half}, and the low bit selects the bank. This split follows the paper. The
// centralised VRF serves all functional units through five read requesters
// (0..2: VAU operands vs1, vs2, vd; 3: VLSU store data / index; 4: VSLDU) and three write
// requesters (0: VAU, 1: VLSU, 2: VSLDU). Per bank, the three read ports go to the first three
// requesters (in that fixed order) that address the bank, and the write port to the first
// writer; a requester without a grant simply retries (this is how operand backpressure
// reaches the units). The arbitration order is this design's choice: the VAU comes first so
// that a vfmacc always obtains its three operands in one cycle.
// Timing: reads are combinational (grant and data in the same cycle); a granted write is
// visible to reads from the next cycle on (see vrf_scm).
module spatz_vrf
  import spatz_pkg::*;
#(
  parameter int unsigned NRD = 5,
  parameter int unsigned NWR = 3
) (
  input  logic                  clk_i,
  input  logic [NRD-1:0]        rd_req_i,
  input  vaddr_t [NRD-1:0]      rd_addr_i,
  output logic [NRD-1:0]        rd_gnt_o,
  output vword_t [NRD-1:0]      rd_data_o,
  input  logic [NWR-1:0]        wr_req_i,
  input  vaddr_t [NWR-1:0]      wr_addr_i,
  input  vword_t [NWR-1:0]      wr_data_i,
  input  vbe_t [NWR-1:0]        wr_be_i,
  output logic [NWR-1:0]        wr_gnt_o
);

  localparam int unsigned ROWS = NR_WORDS / 2;
  localparam int unsigned RW   = $clog2(ROWS);

  logic [1:0]                 b_we;
  logic [1:0][RW-1:0]         b_waddr;
  vword_t [1:0]               b_wdata;
  vbe_t [1:0]                 b_wbe;
  logic [1:0][2:0][RW-1:0]    b_raddr;
  vword_t [1:0][2:0]          b_rdata;
  logic [NRD-1:0][1:0]        rd_port;  // which bank port serves each read requester

  always_comb begin
    rd_gnt_o = '0;
    rd_port  = '0;
    b_raddr  = '0;
    for (int bk = 0; bk < 2; bk++) begin
      int unsigned used;
      used = 0;
      for (int i = 0; i < int'(NRD); i++) begin
        if (rd_req_i[i] && (rd_addr_i[i][0] == bk[0]) && used < 3) begin
          rd_gnt_o[i] = 1'b1;
          rd_port[i]  = 2'(used);
          b_raddr[bk][used] = rd_addr_i[i][WADDR_W-1:1];
          used++;
        end
      end
    end
  end

  for (genvar i = 0; i < NRD; i++) begin : g_rdata
    assign rd_data_o[i] = b_rdata[rd_addr_i[i][0]][rd_port[i]];
  end

  always_comb begin
    wr_gnt_o = '0;
    b_we     = '0;
    b_waddr  = '0;
    b_wdata  = '0;
    b_wbe    = '0;
    for (int bk = 0; bk < 2; bk++) begin
      for (int i = 0; i < int'(NWR); i++) begin
        if (wr_req_i[i] && (wr_addr_i[i][0] == bk[0]) && !b_we[bk]) begin
          wr_gnt_o[i]  = 1'b1;
          b_we[bk]     = 1'b1;
          b_waddr[bk]  = wr_addr_i[i][WADDR_W-1:1];
          b_wdata[bk]  = wr_data_i[i];
          b_wbe[bk]    = wr_be_i[i];
        end
      end
    end
  end

  for (genvar bk = 0; bk < 2; bk++) begin : g_bank
    vrf_scm #(.W(WORD_B), .R(ROWS)) i_bank (
      .clk_i   (clk_i),
      .we_i    (b_we[bk]),
      .waddr_i (b_waddr[bk]),
      .wdata_i (b_wdata[bk]),
      .wbe_i   (b_wbe[bk]),
      .raddr_i (b_raddr[bk]),
      .rdata_o (b_rdata[bk])
    );
  end

endmodule
