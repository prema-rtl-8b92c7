// npu_pkg: types and constants shared by the NPU datapath, its controller
// and the preemption module.
//
// The NPU executes a small CISC instruction set (LOAD_TILE, STORE_TILE,
// GEMM_OP, CONV_OP, VECTOR_OP) as in a TPU-like accelerator. The operation
// names follow the design description; the binary encoding, the field
// widths and the control opcodes HALT / YIELD / RESUME (end of task, end of
// a checkpoint trap routine, return to the interrupted program) are this
// design's own choice. Addresses of off-chip memory and of the on-chip
// buffers are counted in rows: one row is SH (= SW) 16-bit values.
package npu_pkg;

  localparam int unsigned DATA_W   = 16;   // activation / weight width (16-bit MAC)
  localparam int unsigned PSUM_W   = 32;   // partial-sum / accumulator width
  localparam int unsigned DADDR_W  = 32;   // off-chip row address
  localparam int unsigned BADDR_W  = 16;   // on-chip buffer row address
  localparam int unsigned CNT_W    = 16;   // row counts
  localparam int unsigned PC_W     = 12;   // instruction-buffer address
  localparam int unsigned TID_W    = 4;    // TaskID (ASID) width, 16 tasks
  localparam int unsigned TIME_W   = 64;   // context-table field width

  typedef enum logic [3:0] {
    OP_NOP        = 4'd0,
    OP_LOAD_TILE  = 4'd1,   // DRAM -> UBUF or WBUF
    OP_STORE_TILE = 4'd2,   // UBUF -> DRAM
    OP_GEMM       = 4'd3,   // weight tile x activation tile -> ACCQ
    OP_CONV       = 4'd4,   // convolution lowered to GEMM by the compiler
    OP_VECTOR     = 4'd5,   // element-wise op, ACCQ -> UBUF
    OP_HALT       = 4'd6,   // end of the task's program
    OP_YIELD      = 4'd7,   // end of the checkpoint trap routine
    OP_RESUME     = 4'd8    // end of the restore routine: jump to saved PC
  } opcode_e;

  // LOAD_TILE target / STORE_TILE source. ACCQ rows are twice as wide as a
  // buffer row (32-bit sums), so each ACCQ row moves as two DMA rows.
  typedef enum logic [1:0] {BUF_UBUF = 2'd0, BUF_WBUF = 2'd1, BUF_ACCQ = 2'd2} buf_sel_e;

  typedef enum logic [1:0] {
    VF_PASS     = 2'd0,
    VF_RELU     = 2'd1,
    VF_ADD      = 2'd2,     // ACCQ row + UBUF row
    VF_ADD_RELU = 2'd3
  } vfunc_e;

  typedef struct packed {
    opcode_e              op;
    logic                 barrier;    // wait until every unit is idle before issue
    buf_sel_e             bsel;       // LOAD_TILE target / STORE_TILE source
    logic                 accumulate; // GEMM: add into ACCQ instead of overwrite
    vfunc_e               vfunc;
    logic [4:0]           shift;      // VECTOR: requantisation right shift
    logic [DADDR_W-1:0]   dram_addr;
    logic [BADDR_W-1:0]   buf_addr;   // DMA buffer row / GEMM UBUF row / VECTOR dst row
    logic [BADDR_W-1:0]   buf_addr2;  // GEMM WBUF row / VECTOR UBUF operand row
    logic [BADDR_W-1:0]   acc_addr;   // ACCQ row
    logic [CNT_W-1:0]     count;      // DMA / VECTOR rows; GEMM activation rows (<= ACC)
  } instr_t;

  // Preemption mechanisms (CHECKPOINT, KILL, DRAIN).
  typedef enum logic [1:0] {
    MECH_NONE       = 2'd0,
    MECH_CHECKPOINT = 2'd1,
    MECH_KILL       = 2'd2,
    MECH_DRAIN      = 2'd3
  } mech_e;

  // Mechanism policy of the preemption module: dynamic (Algorithm 3,
  // DRAIN vs CHECKPOINT) or one mechanism fixed.
  typedef enum logic [1:0] {
    MODE_DYNAMIC    = 2'd0,
    MODE_CHECKPOINT = 2'd1,
    MODE_KILL       = 2'd2
  } mech_mode_e;

  // User-defined priority level.
  typedef enum logic [1:0] {PRIO_LOW = 2'd0, PRIO_MED = 2'd1, PRIO_HIGH = 2'd2} prio_e;

  // Status kept in the context table's State field.
  typedef enum logic [1:0] {
    ST_READY     = 2'd0,   // dispatched, never run or killed
    ST_RUNNING   = 2'd1,
    ST_PREEMPTED = 2'd2    // checkpointed, resumes through its restore routine
  } task_status_e;

  // Request sent by the CPU for a new inference task.
  typedef struct packed {
    logic [TID_W-1:0]  task_id;
    prio_e             prio;
    logic [TIME_W-1:0] estimated;  // Time_estimated in cycles (Algorithm 1)
    logic [PC_W-1:0]   prog_pc;    // first instruction of the task
    logic [PC_W-1:0]   trap_pc;    // checkpoint trap routine; its restore routine follows its YIELD
  } task_req_t;

  // State field of a context-table entry (packed into one 64-bit field).
  typedef struct packed {
    logic [12:0]       rsvd;
    logic              valid;
    task_status_e      status;
    logic [PC_W-1:0]   prog_pc;    // first instruction (restart point after KILL)
    logic [PC_W-1:0]   trap_pc;    // checkpoint trap routine
    logic [PC_W-1:0]   restore_pc; // restore routine (instruction after the trap routine's YIELD)
    logic [PC_W-1:0]   resume_pc;  // PC at which a checkpointed task stopped
  } task_state_t;

  // One context-table entry: seven 64-bit fields.
  typedef struct packed {
    logic [TIME_W-1:0] task_id;
    logic [TIME_W-1:0] executed;
    logic [TIME_W-1:0] waited;
    logic [TIME_W-1:0] estimated;
    logic [TIME_W-1:0] prio_tokens;  // UserDefinedPriority token value (1/3/9)
    logic [TIME_W-1:0] token;      // fixed point, TOKEN_FRAC fractional bits
    task_state_t       state;
  } ctx_entry_t;

  localparam int unsigned TOKEN_FRAC = 8;

endpackage
