// spn_pkg: shared configuration, types and arithmetic of the SPN processor.
//
// The processor evaluates sum-product networks with two binary trees of
// processing elements (PEs), each tree writing into its own banked register
// file, a crossbar that lets every tree input read any bank, and a data memory
// accessed one full register-file-wide vector at a time. The sizes below are
// the "Ptree" configuration: 2 trees of 4 PE levels (30 PEs), 32 register
// banks of 64 x 32-bit words (2K registers), and 64 KB of data memory.
//
// Own choices (not given by the architecture description): the number format
// (unsigned fixed point, 31 fractional bits, saturating), the instruction
// memory depth, and the exact layout of the VLIW instruction word defined here.
package spn_pkg;

  // ---- Configuration ------------------------------------------------------
  parameter int DATA_W       = 32;                    // register width
  parameter int FRAC_W       = 31;                    // fractional bits (own choice)
  parameter int N_TREES      = 2;                     // PE trees
  parameter int TREE_LEVELS  = 4;                     // PE levels per tree
  parameter int TREE_INPUTS  = 2 ** TREE_LEVELS;      // 16 leaf operands per tree
  parameter int TREE_PES     = 2 ** TREE_LEVELS - 1;  // 15 PEs per tree
  parameter int BANKS_PER_TREE = TREE_INPUTS;         // leaf PE i writes banks 2i, 2i+1
  parameter int N_BANKS      = N_TREES * BANKS_PER_TREE;  // 32
  parameter int N_INPUTS     = N_TREES * TREE_INPUTS;     // 32 crossbar outputs
  parameter int BANK_DEPTH   = 64;                    // registers per bank
  parameter int DMEM_BYTES   = 65536;                 // 64 KB data memory
  parameter int DMEM_DEPTH   = DMEM_BYTES / (N_BANKS * DATA_W / 8);  // 512 vectors
  parameter int IMEM_DEPTH   = 1024;                  // own choice

  parameter int RADDR_W = $clog2(BANK_DEPTH);
  parameter int XSEL_W  = $clog2(N_BANKS);
  parameter int LVL_W   = $clog2(TREE_LEVELS);
  parameter int DADDR_W = $clog2(DMEM_DEPTH);
  parameter int IADDR_W = $clog2(IMEM_DEPTH);
  // Host word address into the data memory: {vector address, bank}
  parameter int HADDR_W = DADDR_W + XSEL_W;

  // ---- Operation encodings -----------------------------------------------
  typedef enum logic [1:0] {
    PE_ADD    = 2'd0,
    PE_MUL    = 2'd1,
    PE_PASS_A = 2'd2,
    PE_PASS_B = 2'd3
  } pe_op_e;

  typedef enum logic [1:0] {
    MEM_NONE  = 2'd0,
    MEM_LOAD  = 2'd1,
    MEM_STORE = 2'd2
  } mem_op_e;

  // Write control of one register bank for one instruction.
  typedef struct packed {
    logic               en;        // write this bank
    logic               from_mem;  // 1: data-memory load register, 0: a PE output
    logic [LVL_W-1:0]   level;     // tree level of the writing PE (0 = leaves)
    logic [RADDR_W-1:0] addr;      // register address in the bank
  } bank_wr_t;

  // One VLIW instruction. Every field controls the cycle in which the
  // instruction executes.
  typedef struct packed {
    logic                                 halt;      // stop after this instruction
    mem_op_e                              mem_op;    // vector load / store
    logic [DADDR_W-1:0]                   mem_addr;  // vector address
    pe_op_e [N_TREES-1:0][TREE_PES-1:0]   pe_op;     // per-PE operation
    logic   [N_INPUTS-1:0][XSEL_W-1:0]    xbar_sel;  // bank read by each tree input
    logic   [N_BANKS-1:0][RADDR_W-1:0]    raddr;     // read address of each bank
    bank_wr_t [N_BANKS-1:0]               wr;        // write control of each bank
  } instr_t;

  parameter int INSTR_W = $bits(instr_t);

  typedef logic [DATA_W-1:0] word_t;

endpackage
