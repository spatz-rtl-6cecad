// Spatz: a compact RVV vector unit, the processing element of the shared-L1 cluster.
//
// Composition as in the paper: a controller (decoder, CSRs, dispatcher) with the FPU
// sequencer and its scalar FP register file, a centralised VRF of two 3R1W latch SCM banks,
// and three functional units: the VAU (F fp64 FMA lanes + one integer unit), the VLSU
// (F 64-bit memory ports with a reorder buffer) and the VSLDU (slides). Instructions arrive
// from a scalar core over the X-interface; Spatz has F + 1 64-bit memory ports into the L1
// interconnect: ports 0..F-1 belong to the VLSU, port F to the FPU sequencer.
// VRF requesters (see spatz_vrf): reads 0..2 VAU, 3 VLSU, 4 VSLDU; writes 0 VAU, 1 VLSU,
// 2 VSLDU. Scoreboard entries: 0 VAU (reading), 1 VAU (draining), 2 VLSU, 3 VSLDU.
module spatz
  import spatz_pkg::*;
(
  input  logic                      clk_i,
  input  logic                      rst_ni,
  // X-interface
  input  logic                      issue_valid_i,
  output logic                      issue_ready_o,
  input  xif_issue_t                issue_i,
  output logic                      issue_accept_o,
  output logic                      result_valid_o,
  input  logic                      result_ready_i,
  output xif_result_t               result_o,
  input  logic                      lsu_busy_i,
  output logic                      spatz_mem_busy_o,
  output logic                      busy_o,
  // memory ports
  output logic [MEM_PORTS-1:0]      mem_req_valid_o,
  output mem_req_t [MEM_PORTS-1:0]  mem_req_o,
  input  logic [MEM_PORTS-1:0]      mem_gnt_i,
  input  mem_rsp_t [MEM_PORTS-1:0]  mem_rsp_i
);

  vreq_t vreq;
  logic  vau_valid, vau_ready, vau_busy;
  logic  vlsu_valid, vlsu_ready, vlsu_busy;
  logic  vsldu_valid, vsldu_ready, vsldu_busy;
  logic  fseq_valid, fseq_ready, fseq_store, fseq_busy, fpr_pending;
  logic [4:0] fseq_freg, fpr_raddr;
  logic [AW-1:0] fseq_addr;
  logic [63:0] fpr_rdata;

  logic [4:0]   rd_req, rd_gnt;
  vaddr_t [4:0] rd_addr;
  vword_t [4:0] rd_data;
  logic [2:0]   wr_req, wr_gnt;
  vaddr_t [2:0] wr_addr;
  vword_t [2:0] wr_data;
  vbe_t [2:0]   wr_be;

  sb_entry_t [N_SB-1:0] sb;
  logic [N_SB-1:0] sb_rd_ok, sb_wr_ok, sb_wr_ok_at_rd;

  spatz_controller i_ctrl (
    .clk_i, .rst_ni,
    .issue_valid_i, .issue_ready_o, .issue_i, .issue_accept_o,
    .result_valid_o, .result_ready_i, .result_o,
    .lsu_busy_i, .spatz_mem_busy_o,
    .vreq_o        (vreq),
    .vau_valid_o   (vau_valid),   .vau_ready_i   (vau_ready),
    .vlsu_valid_o  (vlsu_valid),  .vlsu_ready_i  (vlsu_ready), .vlsu_busy_i (vlsu_busy),
    .vsldu_valid_o (vsldu_valid), .vsldu_ready_i (vsldu_ready),
    .fseq_valid_o  (fseq_valid),  .fseq_ready_i  (fseq_ready),
    .fseq_store_o  (fseq_store),  .fseq_freg_o   (fseq_freg),  .fseq_addr_o (fseq_addr),
    .fpr_raddr_o   (fpr_raddr),   .fpr_rdata_i   (fpr_rdata),  .fpr_pending_i (fpr_pending),
    .fseq_busy_i   (fseq_busy),
    .vl_o          (),
    .vtype_o       ()
  );

  spatz_fpu_sequencer i_fseq (
    .clk_i, .rst_ni,
    .req_valid_i     (fseq_valid),
    .req_ready_o     (fseq_ready),
    .req_store_i     (fseq_store),
    .req_freg_i      (fseq_freg),
    .req_addr_i      (fseq_addr),
    .fpr_raddr_i     (fpr_raddr),
    .fpr_rdata_o     (fpr_rdata),
    .fpr_pending_o   (fpr_pending),
    .busy_o          (fseq_busy),
    .mem_req_valid_o (mem_req_valid_o[N_FPU]),
    .mem_req_o       (mem_req_o[N_FPU]),
    .mem_gnt_i       (mem_gnt_i[N_FPU]),
    .mem_rsp_i       (mem_rsp_i[N_FPU])
  );

  spatz_vrf i_vrf (
    .clk_i,
    .rd_req_i  (rd_req),  .rd_addr_i (rd_addr), .rd_gnt_o (rd_gnt), .rd_data_o (rd_data),
    .wr_req_i  (wr_req),  .wr_addr_i (wr_addr), .wr_data_i (wr_data), .wr_be_i (wr_be),
    .wr_gnt_o  (wr_gnt)
  );

  spatz_scoreboard i_sb (
    .sb_i (sb), .rd_ok_o (sb_rd_ok), .wr_ok_o (sb_wr_ok), .wr_ok_at_rd_o (sb_wr_ok_at_rd)
  );

  spatz_vau i_vau (
    .clk_i, .rst_ni,
    .req_valid_i (vau_valid), .req_ready_o (vau_ready), .req_i (vreq), .busy_o (vau_busy),
    .rd_req_o  (rd_req[2:0]),  .rd_addr_o (rd_addr[2:0]), .rd_gnt_i (rd_gnt[2:0]),
    .rd_data_i (rd_data[2:0]),
    .wr_req_o  (wr_req[0]), .wr_addr_o (wr_addr[0]), .wr_data_o (wr_data[0]),
    .wr_be_o   (wr_be[0]),  .wr_gnt_i  (wr_gnt[0]),
    .sb_o (sb[1:0]), .rd_ok_i (sb_rd_ok[0]), .wr_ok_at_rd_i (sb_wr_ok_at_rd[0])
  );

  spatz_vlsu i_vlsu (
    .clk_i, .rst_ni,
    .req_valid_i (vlsu_valid), .req_ready_o (vlsu_ready), .req_i (vreq), .busy_o (vlsu_busy),
    .mem_req_valid_o (mem_req_valid_o[N_FPU-1:0]), .mem_req_o (mem_req_o[N_FPU-1:0]),
    .mem_gnt_i (mem_gnt_i[N_FPU-1:0]), .mem_rsp_i (mem_rsp_i[N_FPU-1:0]),
    .rd_req_o  (rd_req[3]),  .rd_addr_o (rd_addr[3]), .rd_gnt_i (rd_gnt[3]),
    .rd_data_i (rd_data[3]),
    .wr_req_o  (wr_req[1]), .wr_addr_o (wr_addr[1]), .wr_data_o (wr_data[1]),
    .wr_be_o   (wr_be[1]),  .wr_gnt_i  (wr_gnt[1]),
    .sb_o (sb[2]), .rd_ok_i (sb_rd_ok[2]), .wr_ok_i (sb_wr_ok[2])
  );

  spatz_vsldu i_vsldu (
    .clk_i, .rst_ni,
    .req_valid_i (vsldu_valid), .req_ready_o (vsldu_ready), .req_i (vreq), .busy_o (vsldu_busy),
    .rd_req_o  (rd_req[4]),  .rd_addr_o (rd_addr[4]), .rd_gnt_i (rd_gnt[4]),
    .rd_data_i (rd_data[4]),
    .wr_req_o  (wr_req[2]), .wr_addr_o (wr_addr[2]), .wr_data_o (wr_data[2]),
    .wr_be_o   (wr_be[2]),  .wr_gnt_i  (wr_gnt[2]),
    .sb_o (sb[3]), .rd_ok_i (sb_rd_ok[3]), .wr_ok_i (sb_wr_ok[3])
  );

  assign busy_o = vau_busy || vlsu_busy || vsldu_busy || fseq_busy;

endmodule
