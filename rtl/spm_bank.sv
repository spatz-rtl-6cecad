// One bank of the L1 scratchpad memory (SPM): 8 KiB as 1024 words of 64 bits.
//
// The paper builds the L1 SPM from 16 single-port (1RW) SRAM macros of 8 KiB; here the bank
// is written as a synthesizable array with the same behaviour, to be mapped onto an SRAM
// macro by the implementation flow. One access per cycle: a write (with byte strobes) is
// performed at the clock edge; a read returns its word in the following cycle (one cycle of
// latency). No reset: the contents are undefined until written.
module spm_bank #(
  parameter int unsigned WORDS = 1024,
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic          clk_i,
  input  logic          req_i,
  input  logic          we_i,
  input  logic [AW-1:0] addr_i,
  input  logic [63:0]   wdata_i,
  input  logic [7:0]    be_i,
  output logic [63:0]   rdata_o
);

  logic [63:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 8; b++)
          if (be_i[b]) mem[addr_i][b*8 +: 8] <= wdata_i[b*8 +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end

endmodule
