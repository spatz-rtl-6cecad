// 3R1W latch-based standard-cell memory (SCM): one bank of the vector register file.
//
// R rows of W bytes. One write port (WE, WADDR, WDATA, WBE byte strobes) and three read
// ports (RADDR[i] -> RDATA[i]). Structure as in the paper's SCM figure:
//  * the write data passes through sampling registers (flip-flops) before the latch array;
//  * the write address is decoded into one word line per row (WWL_r) and every row and every
//    byte column (WBE_b) has its own clock gate (ICG); each 8-latch cell is opened by an
//    AND2 of its row's gated clock and its byte column's gated clock;
//  * each read address directly drives a row multiplexer; reads are combinational.
// Timing: a write presented in cycle k is sampled at the rising edge that ends cycle k and the
// latches are transparent during the high phase that follows; a read in cycle k+1 therefore
// returns the new data at the edge ending cycle k+1 (one cycle, like a flip-flop file).
// Reading a row while it is being written in the same cycle returns the new data at the
// capturing edge (write-through). The ICG is modelled as the usual low-transparent enable
// latch ANDed with the clock; the paper does not print its polarity, so that is this
// design's choice. The latches hold whatever was last written; there is no reset, as in the
// paper. The circuit warnings about latches in this file are intended: the array is latches.
module vrf_scm #(
  parameter int unsigned W = 32,  // bytes per row
  parameter int unsigned R = 32,  // rows
  localparam int unsigned AW = (R > 1) ? $clog2(R) : 1
) (
  input  logic                 clk_i,
  input  logic                 we_i,
  input  logic [AW-1:0]        waddr_i,
  input  logic [W*8-1:0]       wdata_i,
  input  logic [W-1:0]         wbe_i,
  input  logic [2:0][AW-1:0]   raddr_i,
  output logic [2:0][W*8-1:0]  rdata_o
);

  // Sampling registers for the write data.
  logic [W-1:0][7:0] wdata_q;
  always_ff @(posedge clk_i) begin
    if (we_i) wdata_q <= wdata_i;
  end

  // Clock gates: row word lines and byte-column strobes.
  logic [R-1:0] row_en, row_en_l, row_gclk;
  logic [W-1:0] col_en, col_en_l, col_gclk;

  for (genvar r = 0; r < R; r++) begin : g_row_icg
    assign row_en[r] = we_i && (waddr_i == AW'(r));
    always_latch begin
      if (!clk_i) row_en_l[r] <= row_en[r];
    end
    assign row_gclk[r] = clk_i & row_en_l[r];
  end

  for (genvar b = 0; b < W; b++) begin : g_col_icg
    assign col_en[b] = we_i && wbe_i[b];
    always_latch begin
      if (!clk_i) col_en_l[b] <= col_en[b];
    end
    assign col_gclk[b] = clk_i & col_en_l[b];
  end

  // Latch array: each cell is 8 latches opened by AND2(row clock, column clock).
  logic [R-1:0][W-1:0][7:0] mem;
  for (genvar r = 0; r < R; r++) begin : g_array_row
    for (genvar b = 0; b < W; b++) begin : g_array_cell
      logic       cell_en;
      logic [7:0] cell_q;
      assign cell_en = row_gclk[r] & col_gclk[b];
      always_latch begin
        if (cell_en) cell_q <= wdata_q[b];
      end
      assign mem[r][b] = cell_q;
    end
  end

  // Read multiplexers.
  for (genvar i = 0; i < 3; i++) begin : g_read
    assign rdata_o[i] = mem[raddr_i[i]];
  end

endmodule
