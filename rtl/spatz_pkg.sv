// Shared types and constants of the Spatz vector unit and its shared-L1 cluster.
//
// The default configuration is the one built in the cluster: F = 4 double-precision FPU
// lanes and one integer unit per Spatz, VLENB = 64 bytes per vector register (2 KiB of VRF
// split in two 3R1W banks), two Spatz per cluster and 16 banks of 8 KiB of L1 scratchpad
// behind a 64-bit crossbar. Those numbers follow the paper. The encodings of the internal
// operation enum, the request structs and the 32-bit byte address map are this design's own.
package spatz_pkg;

  // ---------------- configuration (paper values) ----------------
  localparam int unsigned N_FPU     = 4;            // F, FPUs per Spatz
  localparam int unsigned N_IPU     = 1;            // G, IPUs per Spatz
  localparam int unsigned VLENB     = 64;           // bytes per vector register
  localparam int unsigned NR_VREG   = 32;           // architectural vector registers
  localparam int unsigned ELEN      = 64;           // bits per 64-bit lane
  localparam int unsigned WORD_B    = 8 * N_FPU;    // bytes per VRF word (one bank row) = 64F bits
  localparam int unsigned WORDS_PER_VREG = VLENB / WORD_B; // 2: one row in each bank
  localparam int unsigned NR_WORDS  = NR_VREG * WORDS_PER_VREG;
  localparam int unsigned WADDR_W   = $clog2(NR_WORDS);    // absolute VRF word address
  localparam int unsigned N_CC      = 2;            // Spatz core complexes per cluster
  localparam int unsigned N_BANKS   = 16;           // L1 SPM banks
  localparam int unsigned BANK_BYTES = 8192;        // 8 KiB each
  localparam int unsigned MEM_PORTS = N_FPU + 1;    // VLSU ports + FPU sequencer port

  localparam int unsigned AW = 32;
  localparam int unsigned DW = 64;

  typedef logic [WORD_B*8-1:0] vword_t;
  typedef logic [WORD_B-1:0]   vbe_t;
  typedef logic [WADDR_W-1:0]  vaddr_t;

  // ---------------- memory (TCDM-style) port ----------------
  typedef struct packed {
    logic [AW-1:0] addr;
    logic          we;
    logic [7:0]    be;
    logic [DW-1:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic          valid;
    logic [DW-1:0] rdata;
  } mem_rsp_t;

  // ---------------- X-interface (accelerator offload) ----------------
  typedef struct packed {
    logic [31:0] instr;
    logic [63:0] rs1;
    logic [63:0] rs2;
  } xif_issue_t;

  typedef struct packed {
    logic [4:0]  rd;
    logic [63:0] data;
  } xif_result_t;

  // ---------------- element widths ----------------
  typedef enum logic [1:0] { EW8 = 2'd0, EW16 = 2'd1, EW32 = 2'd2, EW64 = 2'd3 } sew_e;

  // ---------------- decoded operations ----------------
  typedef enum logic [4:0] {
    OP_NONE, OP_VADD, OP_VSUB, OP_VMUL, OP_VMACC, OP_VMV,
    OP_VFADD, OP_VFSUB, OP_VFMUL, OP_VFMACC,
    OP_VLE, OP_VSE, OP_VLSE, OP_VSSE, OP_VLUXEI, OP_VSUXEI,
    OP_VSLIDEUP, OP_VSLIDEDOWN,
    OP_FLD, OP_FSD, OP_VSETVLI
  } op_e;

  typedef enum logic [1:0] { UNIT_NONE, UNIT_VAU, UNIT_VLSU, UNIT_VSLDU } unit_e;

  // One vector instruction as handed from the controller to a functional unit.
  typedef struct packed {
    op_e         op;
    logic [7:0]  seq;        // issue order, for the scoreboard's age compare
    sew_e        sew;
    logic [12:0] vl;         // elements
    logic [12:0] vlmax;      // elements in the register group
    logic [4:0]  vd;
    logic [4:0]  vs1;
    logic [4:0]  vs2;
    logic        use_scalar; // .vx/.vf/.vi form: operand 1 is the scalar below
    logic [63:0] scalar;     // rs1 value, FP register value or immediate
    logic [63:0] stride;     // rs2 value (strided memory ops)
  } vreq_t;

  // Scoreboard view of one in-flight instruction. Word pointers count VRF words (64F bits).
  typedef struct packed {
    logic         valid;
    logic [7:0]   seq;
    logic         wr_en;
    vaddr_t       wr_base;
    logic [6:0]   wr_n;
    logic [6:0]   wr_ptr;     // words already written
    logic [2:0]   rd_en;
    vaddr_t [2:0] rd_base;
    logic [6:0]   rd_n;
    logic [6:0]   rd_ptr;     // words already read
  } sb_entry_t;

  localparam int unsigned N_SB = 4; // VAU issue, VAU drain, VLSU, VSLDU

  // Number of VRF words covered by vl elements of width sew.
  function automatic logic [6:0] words_of(logic [12:0] vl, sew_e sew);
    logic [15:0] bytes;
    bytes = 16'(vl) << sew;
    return 7'((bytes + 16'(WORD_B - 1)) / 16'(WORD_B));
  endfunction

  // Byte-enable of VRF word w for vl elements of width sew.
  function automatic vbe_t word_be(logic [6:0] w, logic [12:0] vl, sew_e sew);
    logic [15:0] bytes;
    vbe_t be;
    bytes = 16'(vl) << sew;
    for (int b = 0; b < int'(WORD_B); b++)
      be[b] = (16'(w) * 16'(WORD_B) + 16'(b)) < bytes;
    return be;
  endfunction

  // True when a is older than b (issue numbers wrap; at most N_SB are in flight).
  function automatic logic older(logic [7:0] a, logic [7:0] b);
    logic [7:0] d;
    d = b - a;
    return (d != 8'd0) && !d[7];
  endfunction

endpackage
