// neu_pkg: shared constants and types of the NeuISA NPU core front end.
//
// The core has NX matrix engines (MEs) and NY vector engines (VEs) and keeps
// the contexts of NUM_VNPU virtual NPUs. NX = NY = 4 is the core the paper
// evaluates (4 MEs, 4 VEs). The number of vNPU contexts, the program-counter
// and group-index widths and every bit width of the instruction format are
// choices of this design: the paper shows the slot layout (one ME slot,
// NY VE slots and a misc slot; the misc slot holds opcode, destination
// register, source register and unused bits) but prints no widths.
//
// Instruction word (instr_t, 136 bits, packed MSB first):
//   misc slot (32) | VE slot NY-1 (24) | ... | VE slot 0 (24) | ME slot (8)
// A VE uTOp uses the same word with the ME slot left as ME_NOP.
package neu_pkg;

  // Core dimensions.
  localparam int NX        = 4;            // MEs (and ME-uTOp queues)
  localparam int NY        = 4;            // VEs (and VE-uTOp queues)
  localparam int NQ        = NX + NY;      // instruction queues
  localparam int NUM_VNPU  = 4;            // vNPU contexts kept in the core
  localparam int VID_W     = $clog2(NUM_VNPU);
  localparam int QID_W     = $clog2(NQ);
  localparam int SLOT_W    = $clog2(NY);
  localparam int NENT      = NX + 1;       // execution-table entries per row
  localparam int IDX_W     = $clog2(NENT); // uTOp index in a group (NX = VE uTOp)

  // Program and control widths.
  localparam int PC_W      = 8;            // instructions per vNPU code region
  localparam int GRP_W     = 6;            // uTOp groups per vNPU
  localparam int NREG      = 8;            // scalar registers per uTOp (r0 reads 0)
  localparam int REG_W     = $clog2(NREG);
  localparam int XLEN      = 32;           // scalar register width
  localparam int SS_WORDS  = 16;           // scalar SRAM words per vNPU
  localparam int SS_AW     = $clog2(SS_WORDS);
  localparam int IMEM_AW   = VID_W + PC_W;

  // Memory segmentation (paper: 2 MB SRAM and 1 GB HBM segments; 128 MB SRAM,
  // 64 GB HBM). SRAM is addressed in 4 KB vectors (8 x 128 FP32), so a 2 MB
  // segment holds 512 vectors.
  localparam int SEG_W      = 6;           // 64 segments
  localparam int SRAM_OFF_W = 9;           // 512 vectors per 2 MB segment
  localparam int SRAM_VA_W  = SEG_W + SRAM_OFF_W;
  localparam int HBM_OFF_W  = 30;          // bytes per 1 GB segment
  localparam int HBM_VA_W   = SEG_W + HBM_OFF_W;

  // ME slot.
  typedef enum logic [2:0] {
    ME_NOP  = 3'd0,
    ME_PUSH = 3'd1,      // push a weight/input row into the systolic array
    ME_POP  = 3'd2       // pop an 8x128 result vector
  } me_op_e;

  typedef struct packed {
    me_op_e     op;
    logic [4:0] vreg;    // vector register written or read
  } me_slot_t;

  // VE slot.
  typedef enum logic [3:0] {
    VE_NOP   = 4'd0,
    VE_LOAD  = 4'd1,     // vreg <- SRAM[addr]
    VE_STORE = 4'd2,     // SRAM[addr] <- vreg
    VE_ADD   = 4'd3,
    VE_MUL   = 4'd4,
    VE_RELU  = 4'd5
  } ve_op_e;

  typedef struct packed {
    ve_op_e                 op;
    logic [4:0]             vd;
    logic [SRAM_VA_W-1:0]   arg;   // {vs1, vs2, ...} for ALU ops, vector address for LOAD/STORE
  } ve_slot_t;

  // Misc slot: uTop.* control instructions and the scalar operations that
  // loops and branches inside a uTOp need.
  typedef enum logic [4:0] {
    MI_NOP       = 5'd0,
    MI_FINISH    = 5'd1,   // uTop.finish
    MI_NEXTGROUP = 5'd2,   // uTop.nextGroup %rs
    MI_GROUP     = 5'd3,   // uTop.group %rd
    MI_INDEX     = 5'd4,   // uTop.index %rd
    MI_LI        = 5'd5,   // rd <- sext(imm)
    MI_ADDI      = 5'd6,   // rd <- rs + sext(imm)
    MI_BEQ       = 5'd7,   // if (rd == rs) pc <- pc + sext(imm)
    MI_BNE       = 5'd8,   // if (rd != rs) pc <- pc + sext(imm)
    MI_BLT       = 5'd9,   // if (rd <  rs) pc <- pc + sext(imm), signed
    MI_SLD       = 5'd10,  // rd <- scalar SRAM[imm]
    MI_SST       = 5'd11   // scalar SRAM[imm] <- rs
  } misc_op_e;

  typedef struct packed {
    misc_op_e          op;
    logic [REG_W-1:0]  rd;
    logic [REG_W-1:0]  rs;
    logic [4:0]        unused;
    logic [15:0]       imm;
  } misc_slot_t;

  typedef struct packed {
    misc_slot_t          misc;
    ve_slot_t [NY-1:0]   ve;
    me_slot_t            me;
  } instr_t;

  localparam int INSTR_W     = $bits(instr_t);
  localparam int INSTR_WORDS = (INSTR_W + 31) / 32;

  // Execution-table entry: start PC of a uTOp code snippet, or null.
  typedef struct packed {
    logic            valid;
    logic [PC_W-1:0] pc;
  } tbl_entry_t;

  typedef tbl_entry_t [NENT-1:0] tbl_row_t;   // entries 0..NX-1: ME uTOps, NX: VE uTOp

  typedef logic [NREG-1:0][XLEN-1:0] regfile_t;

  // vNPU scheduling mode of the core.
  typedef enum logic {
    MODE_SPATIAL  = 1'b0,   // spatial-isolated with harvesting
    MODE_TEMPORAL = 1'b1    // temporal-sharing, priority-weighted
  } sched_mode_e;

  // vNPU status.
  typedef enum logic [2:0] {
    VS_IDLE  = 3'd0,
    VS_LOAD  = 3'd1,   // reading the next execution-table row
    VS_RUN   = 3'd2,
    VS_DONE  = 3'd3,
    VS_ERROR = 3'd4    // conflicting uTop.nextGroup targets or page fault
  } vnpu_state_e;

  // Per-uTOp state within the current group.
  typedef enum logic [1:0] {
    U_NULL = 2'd0,
    U_PEND = 2'd1,     // ready, not running (new or preempted)
    U_RUN  = 2'd2,
    U_DONE = 2'd3
  } utop_state_e;

endpackage
