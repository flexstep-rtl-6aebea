// flexstep_pkg -- types and constants shared by the FlexStep error-detection units.
//
// FlexStep splits a user thread on a main core into checking segments. Each segment is sent to
// one or more checker cores as a stream of fixed-size entries through a per-core Data Buffer FIFO
// and a system interconnect. The stream of one segment is, in order:
//   SCP pairs + SCP_PC   start register checkpoint (all architectural registers, then next pc)
//   LDST ...             one entry per memory micro-op committed in user mode
//   IC                   number of user-mode instructions in the segment
//   ECP pairs + ECP_PC   end register checkpoint
// The components and their order follow the paper; the entry layout and the encodings below are
// this design's own choice (the paper gives none).
//
// Entry layout (136 bits): kind[3] | tag[5] | a[64] | b[64]. 64 entries of 136 bits are 1088
// bytes, the Data Buffer size reported for one core. A register-checkpoint entry carries two
// registers (tag = pair index), a pc entry carries the pc in a, an IC entry the count in a, and an
// LDST entry {uop, 1'b0, op} in tag, the address in a and the data in b.
package flexstep_pkg;

  parameter int unsigned XLEN       = 64;   // Rocket RV64 register width
  parameter int unsigned NREGS      = 64;   // 32 integer + 32 FP architectural registers
  parameter int unsigned RIDX_W     = 6;    // register index width (0..31 int, 32..63 FP)
  parameter int unsigned PC_W       = 48;   // pc bits kept in a checkpoint (6 bytes)
  parameter int unsigned IC_W       = 32;   // instruction counter width
  parameter int unsigned MAX_CORES  = 32;   // width of the core masks in the global register
  parameter int unsigned IC_LIMIT_DEFAULT = 5000; // default checking segment length

  typedef logic [MAX_CORES-1:0] core_mask_t;

  // Kind of a channel entry.
  typedef enum logic [2:0] {
    ENT_NONE   = 3'd0,
    ENT_LDST   = 3'd1,
    ENT_IC     = 3'd2,
    ENT_SCP    = 3'd3,
    ENT_SCP_PC = 3'd4,
    ENT_ECP    = 3'd5,
    ENT_ECP_PC = 3'd6
  } entry_kind_e;

  typedef struct packed {
    entry_kind_e      kind;
    logic [4:0]       tag;
    logic [XLEN-1:0]  a;
    logic [XLEN-1:0]  b;
  } entry_t;

  // Memory instruction classes seen by the Memory Access Log.
  typedef enum logic [2:0] {
    MEM_LOAD  = 3'd0,
    MEM_STORE = 3'd1,
    MEM_LR    = 3'd2,
    MEM_SC    = 3'd3,
    MEM_AMO   = 3'd4
  } mem_op_e;

  // LR, SC and AMO are logged as two entries (uop 0 and uop 1).
  function automatic logic is_multi_uop(mem_op_e op);
    return (op == MEM_LR) || (op == MEM_SC) || (op == MEM_AMO);
  endfunction

  // One instruction at the commit stage of the host core.
  typedef struct packed {
    logic             user;    // committed in user mode
    logic [PC_W-1:0]  pc;
    logic [PC_W-1:0]  npc;     // pc of the instruction that follows it
    logic             is_mem;
    mem_op_e          op;
    logic [XLEN-1:0]  addr;
    logic [XLEN-1:0]  wdata;   // store data / AMO result written / SC data
    logic [XLEN-1:0]  rdata;   // load data / AMO old value / SC result
  } commit_t;

  typedef enum logic [1:0] {
    ATTR_COMPUTE = 2'd0,
    ATTR_MAIN    = 2'd1,
    ATTR_CHECKER = 2'd2
  } core_attr_e;

  // Custom instructions (Table "FlexStep ISA").
  typedef enum logic [3:0] {
    FS_NONE        = 4'd0,
    FS_G_CONTAIN   = 4'd1,
    FS_G_CONFIGURE = 4'd2,
    FS_M_ASSOCIATE = 4'd3,
    FS_M_CHECK     = 4'd4,
    FS_C_STATE     = 4'd5,
    FS_C_RECORD    = 4'd6,
    FS_C_APPLY     = 4'd7,
    FS_C_JAL       = 4'd8,
    FS_C_RESULT    = 4'd9
  } fs_op_e;

  // Encoding: RISC-V custom-0 major opcode, R-type, funct3 = 0, funct7 = operation number 1..9.
  parameter logic [6:0] FS_OPCODE = 7'b0001011;

  // Write request from one core to the global configuration register.
  typedef struct packed {
    logic       configure;   // G.Configure
    core_mask_t main_mask;
    core_mask_t chk_mask;
    logic       assoc_we;    // M.associate
    core_mask_t assoc_mask;
    logic       check_we;    // M.check
    logic       check_val;
    logic       state_we;    // C.check_state
    logic       state_val;   // 1 = busy
  } gcfg_req_t;

endpackage
