// Spatz controller: decoder, vector CSRs, dispatcher and scoreboard owner.
//
// The scalar core only pre-decodes: it forwards every vector (and scalar FP load/store)
// instruction together with the values of its scalar operands rs1/rs2 over the X-interface
// issue channel. The controller
//  * decodes the RVV 1.0 encoding (OP-V, LOAD-FP, STORE-FP) of the subset listed below;
//  * keeps the vl and vtype CSRs and executes vsetvli / vsetivli, returning the new vl to the
//    scalar core on the X-interface result channel (the only instructions that write a GPR);
//  * dispatches each instruction, with a copy of vl/vtype and an issue number, to the VAU,
//    the VLSU, the VSLDU or the FPU sequencer; an instruction waits on the issue channel
//    (issue_ready low) while its unit is busy, which is the structural backpressure;
//  * fetches the FP scalar operand of .vf instructions from the FPU sequencer's register file,
//    waiting while that register is still being loaded;
//  * keeps memory accesses ordered: a vector or FP memory instruction is not dispatched while
//    the scalar core's LSU reports outstanding accesses (lsu_busy_i), nor while the other
//    memory path of Spatz (VLSU versus FPU sequencer) is busy; spatz_mem_busy_o tells the
//    scalar core to stall its own LSU in turn. This mutual stall is the paper's mechanism.
// Data hazards between vector instructions are not checked here: they are resolved word by
// word by spatz_scoreboard as the units run (operand backpressure and chaining).
// Decoded subset: vsetvli, vsetivli; vadd/vsub .vv/.vx/.vi(add only); vmul, vmacc .vv/.vx;
// vmv.v.v/.v.x/.v.i; vfadd, vfsub, vfmul, vfmacc .vv/.vf; vle/vse and vlse/vsse (EEW 8..64,
// strided EEW 64); vslideup/vslidedown .vx/.vi; fld, fsd. Masked forms (vm = 0) and every
// other encoding are refused: issue_accept_o is low for them and they are dropped.
module spatz_controller
  import spatz_pkg::*;
(
  input  logic          clk_i,
  input  logic          rst_ni,
  // X-interface: issue
  input  logic          issue_valid_i,
  output logic          issue_ready_o,
  input  xif_issue_t    issue_i,
  output logic          issue_accept_o,
  // X-interface: result (GPR write-back)
  output logic          result_valid_o,
  input  logic          result_ready_i,
  output xif_result_t   result_o,
  // memory ordering with the scalar core
  input  logic          lsu_busy_i,
  output logic          spatz_mem_busy_o,
  // functional units
  output vreq_t         vreq_o,
  output logic          vau_valid_o,
  input  logic          vau_ready_i,
  output logic          vlsu_valid_o,
  input  logic          vlsu_ready_i,
  input  logic          vlsu_busy_i,
  output logic          vsldu_valid_o,
  input  logic          vsldu_ready_i,
  // FPU sequencer
  output logic          fseq_valid_o,
  input  logic          fseq_ready_i,
  output logic          fseq_store_o,
  output logic [4:0]    fseq_freg_o,
  output logic [AW-1:0] fseq_addr_o,
  output logic [4:0]    fpr_raddr_o,
  input  logic [63:0]   fpr_rdata_i,
  input  logic          fpr_pending_i,
  input  logic          fseq_busy_i,
  // status
  output logic [12:0]   vl_o,
  output logic [7:0]    vtype_o
);

  localparam int unsigned VLEN = VLENB * 8;

  // ---------------- CSRs ----------------
  logic [12:0] vl_q;
  logic [7:0]  vtype_q;
  logic [7:0]  seq_q;
  logic        res_valid_q;
  xif_result_t res_q;

  assign vl_o    = vl_q;
  assign vtype_o = vtype_q;

  function automatic logic [12:0] vlmax_of(logic [7:0] vt);
    int unsigned lmul, sew;
    lmul = (vt[2] == 1'b1) ? 1 : (1 << vt[1:0]);   // fractional LMUL is treated as 1
    sew  = 8 << vt[4:3];
    return 13'(lmul * VLEN / sew);
  endfunction

  // ---------------- decode ----------------
  logic [31:0] ins;
  logic [6:0]  opcode;
  logic [2:0]  funct3;
  logic [5:0]  funct6;
  logic [4:0]  f_vd, f_vs1, f_vs2;
  logic        vm;
  assign ins    = issue_i.instr;
  assign opcode = ins[6:0];
  assign funct3 = ins[14:12];
  assign funct6 = ins[31:26];
  assign vm     = ins[25];
  assign f_vs2  = ins[24:20];
  assign f_vs1  = ins[19:15];
  assign f_vd   = ins[11:7];

  op_e         dop;
  unit_e       dunit;
  logic        legal, d_scalar, d_vf, d_cfg, d_fmem, d_store;
  sew_e        d_sew;
  logic [63:0] d_scal;
  logic [7:0]  new_vtype;
  logic [63:0] avl;
  logic [12:0] new_vl, new_vlmax;

  always_comb begin
    dop      = OP_NONE;
    dunit    = UNIT_NONE;
    legal    = 1'b0;
    d_scalar = 1'b0;
    d_vf     = 1'b0;
    d_cfg    = 1'b0;
    d_fmem   = 1'b0;
    d_store  = 1'b0;
    d_sew    = sew_e'(vtype_q[4:3]);
    d_scal   = issue_i.rs1;
    new_vtype = vtype_q;
    avl       = issue_i.rs1;
    unique case (opcode)
      7'b1010111: begin // OP-V
        unique case (funct3)
          3'b111: begin // vsetvli / vsetivli
            legal = (ins[31] == 1'b0) || (ins[31:30] == 2'b11);
            d_cfg = legal;
            dop   = OP_VSETVLI;
            new_vtype = ins[27:20];
            if (ins[31:30] == 2'b11) avl = 64'(f_vs1);
            else if (f_vs1 == 5'd0)  avl = (f_vd != 5'd0) ? 64'hFFFF : 64'(vl_q);
          end
          3'b000, 3'b100, 3'b011: begin // OPIVV, OPIVX, OPIVI
            d_scalar = (funct3 != 3'b000);
            if (funct3 == 3'b011) d_scal = {{59{f_vs1[4]}}, f_vs1};
            unique case (funct6)
              6'b000000: begin dop = OP_VADD; dunit = UNIT_VAU; legal = vm; end
              6'b000010: begin dop = OP_VSUB; dunit = UNIT_VAU; legal = vm && funct3 != 3'b011; end
              6'b010111: begin dop = OP_VMV;  dunit = UNIT_VAU; legal = vm && f_vs2 == 5'd0; end
              6'b001110, 6'b001111: begin
                dop   = (funct6 == 6'b001110) ? OP_VSLIDEUP : OP_VSLIDEDOWN;
                dunit = UNIT_VSLDU;
                legal = vm && funct3 != 3'b000 && vtype_q[4:3] == 2'b11;
                if (funct3 == 3'b011) d_scal = 64'(f_vs1);   // slide immediates are unsigned
              end
              default: ;
            endcase
          end
          3'b010, 3'b110: begin // OPMVV, OPMVX
            d_scalar = (funct3 == 3'b110);
            unique case (funct6)
              6'b100101: begin dop = OP_VMUL;  dunit = UNIT_VAU; legal = vm; end
              6'b101101: begin dop = OP_VMACC; dunit = UNIT_VAU; legal = vm; end
              default: ;
            endcase
          end
          3'b001, 3'b101: begin // OPFVV, OPFVF
            d_scalar = (funct3 == 3'b101);
            d_vf     = (funct3 == 3'b101);
            d_scal   = fpr_rdata_i;
            unique case (funct6)
              6'b000000: begin dop = OP_VFADD;  dunit = UNIT_VAU; end
              6'b000010: begin dop = OP_VFSUB;  dunit = UNIT_VAU; end
              6'b100100: begin dop = OP_VFMUL;  dunit = UNIT_VAU; end
              6'b101100: begin dop = OP_VFMACC; dunit = UNIT_VAU; end
              default: ;
            endcase
            legal = vm && (dunit == UNIT_VAU) && vtype_q[4:3] == 2'b11;
          end
          default: ;
        endcase
      end
      7'b0000111, 7'b0100111: begin // LOAD-FP, STORE-FP
        d_store = opcode[5];
        if (funct3 == 3'b011) begin
          d_fmem = 1'b1;
          dop    = d_store ? OP_FSD : OP_FLD;
          legal  = 1'b1;
        end else begin
          unique case (funct3)
            3'b000:  d_sew = EW8;
            3'b101:  d_sew = EW16;
            3'b110:  d_sew = EW32;
            default: d_sew = EW64;
          endcase
          dunit = UNIT_VLSU;
          if (ins[27:26] == 2'b00) begin
            dop   = d_store ? OP_VSE : OP_VLE;
            legal = vm && ins[31:28] == 4'b0000 && f_vs2 == 5'd0 &&
                    funct3 inside {3'b000, 3'b101, 3'b110, 3'b111};
          end else if (ins[27:26] == 2'b10) begin
            dop   = d_store ? OP_VSSE : OP_VLSE;
            legal = vm && ins[31:28] == 4'b0000 && funct3 == 3'b111;
          end
        end
      end
      default: ;
    endcase
    new_vlmax = vlmax_of(new_vtype);
    new_vl    = (avl > 64'(new_vlmax)) ? new_vlmax : 13'(avl);
  end

  // fld / fsd: FP register and effective address (rs1 + imm)
  logic [11:0] fimm;
  assign fimm        = d_store ? {ins[31:25], ins[11:7]} : ins[31:20];
  assign fpr_raddr_o = d_fmem ? (d_store ? f_vs2 : f_vd) : f_vs1;
  assign fseq_store_o = d_store;
  assign fseq_freg_o  = d_store ? f_vs2 : f_vd;
  assign fseq_addr_o  = AW'(issue_i.rs1 + {{52{fimm[11]}}, fimm});

  // ---------------- dispatch ----------------
  logic unit_ready, can_go;
  always_comb begin
    unique case (dunit)
      UNIT_VAU:   unit_ready = vau_ready_i;
      UNIT_VLSU:  unit_ready = vlsu_ready_i && !lsu_busy_i && !fseq_busy_i;
      UNIT_VSLDU: unit_ready = vsldu_ready_i;
      default:    unit_ready = 1'b0;
    endcase
    if (d_cfg)  unit_ready = !res_valid_q || result_ready_i;
    if (d_fmem) unit_ready = fseq_ready_i && !lsu_busy_i && !vlsu_busy_i;
    can_go = unit_ready && !(d_vf && fpr_pending_i);
  end

  assign issue_ready_o  = !legal || can_go;
  assign issue_accept_o = legal;

  logic fire;
  assign fire          = issue_valid_i && legal && can_go;
  assign vau_valid_o   = fire && dunit == UNIT_VAU && !d_cfg && !d_fmem;
  assign vlsu_valid_o  = fire && dunit == UNIT_VLSU && !d_fmem;
  assign vsldu_valid_o = fire && dunit == UNIT_VSLDU;
  assign fseq_valid_o  = fire && d_fmem;

  always_comb begin
    vreq_o            = '0;
    vreq_o.op         = dop;
    vreq_o.seq        = seq_q;
    vreq_o.sew        = d_sew;
    vreq_o.vl         = vl_q;
    vreq_o.vlmax      = vlmax_of(vtype_q);
    vreq_o.vd         = f_vd;
    vreq_o.vs1        = f_vs1;
    vreq_o.vs2        = f_vs2;
    vreq_o.use_scalar = d_scalar;
    vreq_o.scalar     = (dunit == UNIT_VLSU) ? issue_i.rs1 : d_scal;
    vreq_o.stride     = issue_i.rs2;
  end

  assign result_valid_o   = res_valid_q;
  assign result_o         = res_q;
  assign spatz_mem_busy_o = vlsu_busy_i || fseq_busy_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      vl_q        <= '0;
      vtype_q     <= 8'h18;   // SEW = 64, LMUL = 1
      seq_q       <= '0;
      res_valid_q <= 1'b0;
      res_q       <= '0;
    end else begin
      if (res_valid_q && result_ready_i) res_valid_q <= 1'b0;
      if (fire && !d_cfg && !d_fmem) seq_q <= seq_q + 8'd1;
      if (fire && d_cfg) begin
        vtype_q     <= new_vtype;
        vl_q        <= new_vl;
        res_valid_q <= 1'b1;
        res_q.rd    <= f_vd;
        res_q.data  <= 64'(new_vl);
      end
    end
  end

endmodule
