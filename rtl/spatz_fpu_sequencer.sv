// FPU sequencer: owner of the scalar floating-point register file (FPR) inside Spatz.
//
// The scalar core has no FP registers of its own; Spatz keeps the 32 x 64-bit FPR, as the
// paper describes, together with
//  * a scoreboard (one pending bit per FP register): a register that a load is still filling
//    cannot be read; the controller holds any instruction that needs it (vector-scalar .vf
//    operands and fsd) until the bit clears;
//  * the scalar FP memory operations fld / fsd, performed on the sequencer's own 64-bit
//    memory port into the L1 scratchpad.
// Interface (this design's): the controller hands one fld/fsd at a time with its effective
// address (req_valid/req_ready); the FPR has one combinational read port for the controller
// (operand value and pending bit) and fsd reads its data itself. One load may be outstanding;
// its response writes the FPR and clears the pending bit. The paper also reuses the VAU to
// execute scalar FP arithmetic; that path is not built here.
module spatz_fpu_sequencer
  import spatz_pkg::*;
(
  input  logic          clk_i,
  input  logic          rst_ni,
  // fld / fsd from the controller
  input  logic          req_valid_i,
  output logic          req_ready_o,
  input  logic          req_store_i,
  input  logic [4:0]    req_freg_i,
  input  logic [AW-1:0] req_addr_i,
  // FP operand read port for the controller
  input  logic [4:0]    fpr_raddr_i,
  output logic [63:0]   fpr_rdata_o,
  output logic          fpr_pending_o,
  output logic          busy_o,
  // memory port
  output logic          mem_req_valid_o,
  output mem_req_t      mem_req_o,
  input  logic          mem_gnt_i,
  input  mem_rsp_t      mem_rsp_i
);

  logic [31:0][63:0] fpr_q;
  logic [31:0]       pend_q;
  logic              hold_q;        // request waiting for its grant
  mem_req_t          mreq_q;
  logic [4:0]        mreg_q;
  logic              ld_out_q;      // load granted, response not yet back
  logic [4:0]        ld_reg_q;

  assign fpr_rdata_o   = fpr_q[fpr_raddr_i];
  assign fpr_pending_o = pend_q[fpr_raddr_i];

  // An fsd must not read a register that a load is still filling.
  assign req_ready_o = !hold_q && !ld_out_q && !(req_store_i && pend_q[req_freg_i]);

  assign mem_req_valid_o = hold_q;
  assign mem_req_o       = mreq_q;
  assign busy_o          = hold_q || ld_out_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      fpr_q    <= '0;
      pend_q   <= '0;
      hold_q   <= 1'b0;
      mreq_q   <= '0;
      mreg_q   <= '0;
      ld_out_q <= 1'b0;
      ld_reg_q <= '0;
    end else begin
      if (mem_rsp_i.valid && ld_out_q) begin
        fpr_q[ld_reg_q]  <= mem_rsp_i.rdata;
        pend_q[ld_reg_q] <= 1'b0;
        ld_out_q         <= 1'b0;
      end
      if (hold_q && mem_gnt_i) begin
        hold_q <= 1'b0;
        if (!mreq_q.we) begin
          ld_out_q <= 1'b1;
          ld_reg_q <= mreg_q;
        end
      end
      if (req_valid_i && req_ready_o) begin
        hold_q       <= 1'b1;
        mreg_q       <= req_freg_i;
        mreq_q.addr  <= req_addr_i;
        mreq_q.we    <= req_store_i;
        mreq_q.be    <= 8'hFF;
        mreq_q.wdata <= fpr_q[req_freg_i];
        if (!req_store_i) pend_q[req_freg_i] <= 1'b1;
      end
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) mem_rsp_i.valid |-> ld_out_q);

endmodule
