// ecc_pkg: shared constants and types of the diagonal-parity ECC for a MAGIC
// memristive crossbar.
//
// The data crossbar (MEM) is n x n and is cut into an imaginary grid of m x m
// blocks (m odd). Every block keeps one parity bit per wrap-around leading
// diagonal and one per wrap-around counter diagonal. For the cell at local
// position (i = row mod m, j = column mod m):
//   leading diagonal index  = (i + j) mod m
//   counter diagonal index  = (j - i) mod m
// Default sizes n = 1020, m = 15 and k = 3 processing crossbars follow the
// area case study of the design. Commands, their encoding and the
// processing-crossbar row map are this implementation's own choices.
package ecc_pkg;

  localparam int unsigned DEF_N = 1020;  // crossbar rows/columns
  localparam int unsigned DEF_M = 15;    // block edge (odd)
  localparam int unsigned DEF_K = 3;     // processing crossbars (leading+counter pairs)

  // Operation applied to the MEM crossbar in one cycle.
  typedef enum logic [2:0] {
    MEM_IDLE      = 3'd0,
    MEM_ROW_NOR   = 3'd1,  // in-row gate on all rows: col[out] = NOR(col[a], col[b])
    MEM_COL_NOR   = 3'd2,  // in-column gate on all columns: row[out] = NOR(row[a], row[b])
    MEM_WRITE_ROW = 3'd3,  // row[out] = wdata (write through the periphery)
    MEM_FLIP      = 3'd4   // invert cell (a, b): used to write back a corrected value
  } mem_op_e;

  // Host command opcodes.
  typedef enum logic [2:0] {
    CMD_NOP       = 3'd0,
    CMD_ROW_NOR   = 3'd1,
    CMD_COL_NOR   = 3'd2,
    CMD_WRITE_ROW = 3'd3,
    CMD_READ_ROW  = 3'd4,
    CMD_CHECK     = 3'd5
  } cmd_op_e;

  // Which MEM lines feed the shifters / which check-bit crossbar line is used.
  //   LINE_ROW : one MEM row (read on the bitlines), touches a row of blocks,
  //              i.e. one row of every check-bit crossbar.
  //   LINE_COL : one MEM column (read on the wordlines), touches a column of
  //              blocks, i.e. one column of every check-bit crossbar.
  typedef enum logic {
    LINE_ROW = 1'b0,
    LINE_COL = 1'b1
  } line_dir_e;

  // Outcome of decoding one block syndrome.
  typedef enum logic [2:0] {
    SYN_NONE    = 3'd0,  // syndrome is zero
    SYN_DATA    = 3'd1,  // single data-bit error, located
    SYN_CB_LEAD = 3'd2,  // single error in a leading check-bit
    SYN_CB_CNT  = 3'd3,  // single error in a counter check-bit
    SYN_UNCORR  = 3'd4   // detected, not correctable
  } syn_kind_e;

  // Processing-crossbar row map for XOR3 through eight MAGIC NORs.
  localparam int unsigned PC_ROWS  = 11;
  localparam int unsigned PC_R_A   = 0;   // NOT of old data / first operand
  localparam int unsigned PC_R_B   = 1;   // NOT of new data / second operand
  localparam int unsigned PC_R_C   = 2;   // NOT of stored check-bits
  localparam int unsigned PC_R_X2  = 10;  // result row: NOT of (a ^ b ^ c)
  localparam int unsigned XOR3_NORS = 8;

  typedef struct packed {
    cmd_op_e   op;
    logic      critical;  // NOR writes output memristors covered by the ECC
    line_dir_e dir;       // CMD_CHECK: LINE_ROW = row of blocks, LINE_COL = column of blocks
    logic [9:0] a;        // first input line (row or column index)
    logic [9:0] b;        // second input line
    logic [9:0] out;      // output line; for CMD_CHECK the block-row/column index
  } cmd_t;

  // One-cycle event pulses reported by the controller.
  typedef struct packed {
    logic upd;           // critical operation accepted (ECC update started)
    logic noncrit;       // non-critical operation executed
    logic read;          // row read executed
    logic stall_pc;      // critical operation held: no processing crossbar free
    logic stall_hazard;  // critical operation held: in-flight update on overlapping check-bits
    logic stall_drain;   // ECC check held until in-flight updates are written back
    logic wb;            // an update's new check-bits written back
    logic check_done;    // ECC check of a row/column of blocks finished
    logic fix_data;      // data-bit error corrected in the MEM
    logic fix_cb;        // check-bit error corrected in the Check Memory
    logic uncorr;        // uncorrectable block syndrome detected
  } ecc_ev_t;

endpackage
