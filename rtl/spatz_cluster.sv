// Spatz shared-L1 cluster: two Spatz vector units sharing a 128 KiB multi-banked scratchpad.
//
// The cluster of the paper's evaluation: N_CC = 2 core complexes, each a scalar core driving
// a Spatz with F = 4 fp64 FPUs and one integer unit (2 KiB of VRF each, 4 KiB in total), and
// an L1 scratchpad of 16 banks x 8 KiB reached through a 10 x 16 64-bit crossbar (each Spatz
// has F + 1 = 5 ports). The scalar cores and the instruction cache they share are not part of
// this RTL: each core's X-interface (issue, result) and its LSU-busy handshake are ports of
// the cluster, so any core model or a testbench can drive the vector units. Memory map: the
// SPM occupies byte addresses [0, 128 KiB), word-interleaved over the banks; higher address
// bits are ignored.
module spatz_cluster
  import spatz_pkg::*;
#(
  parameter int unsigned NR_CC      = N_CC,
  parameter int unsigned NR_BANKS   = N_BANKS,
  parameter int unsigned BANK_WORDS = BANK_BYTES / 8
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic [NR_CC-1:0]           issue_valid_i,
  output logic [NR_CC-1:0]           issue_ready_o,
  input  xif_issue_t [NR_CC-1:0]     issue_i,
  output logic [NR_CC-1:0]           issue_accept_o,
  output logic [NR_CC-1:0]           result_valid_o,
  input  logic [NR_CC-1:0]           result_ready_i,
  output xif_result_t [NR_CC-1:0]    result_o,
  input  logic [NR_CC-1:0]           lsu_busy_i,
  output logic [NR_CC-1:0]           spatz_mem_busy_o,
  output logic [NR_CC-1:0]           busy_o
);

  localparam int unsigned NM = NR_CC * MEM_PORTS;
  localparam int unsigned RW = $clog2(BANK_WORDS);

  logic [NM-1:0]     m_valid, m_gnt;
  mem_req_t [NM-1:0] m_req;
  mem_rsp_t [NM-1:0] m_rsp;

  for (genvar c = 0; c < NR_CC; c++) begin : g_cc
    spatz i_spatz (
      .clk_i, .rst_ni,
      .issue_valid_i    (issue_valid_i[c]),
      .issue_ready_o    (issue_ready_o[c]),
      .issue_i          (issue_i[c]),
      .issue_accept_o   (issue_accept_o[c]),
      .result_valid_o   (result_valid_o[c]),
      .result_ready_i   (result_ready_i[c]),
      .result_o         (result_o[c]),
      .lsu_busy_i       (lsu_busy_i[c]),
      .spatz_mem_busy_o (spatz_mem_busy_o[c]),
      .busy_o           (busy_o[c]),
      .mem_req_valid_o  (m_valid[c*MEM_PORTS +: MEM_PORTS]),
      .mem_req_o        (m_req[c*MEM_PORTS +: MEM_PORTS]),
      .mem_gnt_i        (m_gnt[c*MEM_PORTS +: MEM_PORTS]),
      .mem_rsp_i        (m_rsp[c*MEM_PORTS +: MEM_PORTS])
    );
  end

  logic [NR_BANKS-1:0]          b_req, b_we;
  logic [NR_BANKS-1:0][RW-1:0]  b_addr;
  logic [NR_BANKS-1:0][63:0]    b_wdata, b_rdata;
  logic [NR_BANKS-1:0][7:0]     b_be;

  spatz_xbar #(.NM(NM), .NS(NR_BANKS), .WORDS(BANK_WORDS)) i_xbar (
    .clk_i, .rst_ni,
    .req_valid_i (m_valid), .req_i (m_req), .gnt_o (m_gnt), .rsp_o (m_rsp),
    .bank_req_o (b_req), .bank_we_o (b_we), .bank_addr_o (b_addr),
    .bank_wdata_o (b_wdata), .bank_be_o (b_be), .bank_rdata_i (b_rdata)
  );

  for (genvar s = 0; s < NR_BANKS; s++) begin : g_bank
    spm_bank #(.WORDS(BANK_WORDS)) i_bank (
      .clk_i,
      .req_i   (b_req[s]),
      .we_i    (b_we[s]),
      .addr_i  (b_addr[s]),
      .wdata_i (b_wdata[s]),
      .be_i    (b_be[s]),
      .rdata_o (b_rdata[s])
    );
  end

endmodule
