// pim_pkg: sizes, latencies and command types shared by the NAND-SPIN
// processing-in-memory subarray, mat and bank.
//
// Array geometry follows the paper: a subarray is 256 rows x 128 columns,
// each column holding 32 NAND-SPIN devices of 8 MTJs (one device row =
// 8 consecutive rows sharing an erase strip), a mat has 4x4 subarrays and
// a group (bank here) has 4x4 mats.  The data bus is 128 bits wide.
//
// Latencies are in clock cycles of an assumed 1 GHz clock, rounded up from
// the paper's circuit results: erase of one device 8 x 0.3 ns = 2.4 ns
// -> 3 cycles, program 5 ns per bit -> 5 cycles, read/AND 0.17 ns -> 1 cycle.
package pim_pkg;

  localparam int unsigned ROWS        = 256;  // rows per subarray
  localparam int unsigned COLS        = 128;  // columns (SAs, bit-counter units)
  localparam int unsigned MTJ_PER_DEV = 8;    // MTJs in one NAND-SPIN device
  localparam int unsigned DEVS        = ROWS / MTJ_PER_DEV;
  localparam int unsigned CNT_W       = 8;    // bits per bit-counter unit (Fig. 3b "x8")
  localparam int unsigned BUF_ROWS    = 8;    // weight-buffer rows (assumed)
  localparam int unsigned SUBS        = 16;   // subarrays per mat (4x4)
  localparam int unsigned LDB_ROWS    = 8;    // local data buffer rows (assumed)
  localparam int unsigned MATS        = 16;   // mats per group / bank (4x4)
  localparam int unsigned GDB_ROWS    = 16;   // global data buffer rows (assumed)

  localparam int unsigned ROW_W  = $clog2(ROWS);
  localparam int unsigned DEV_W  = $clog2(DEVS);
  localparam int unsigned BUF_W  = $clog2(BUF_ROWS);
  localparam int unsigned SUB_W  = $clog2(SUBS);
  localparam int unsigned MAT_W  = $clog2(MATS);
  localparam int unsigned GDB_W  = $clog2(GDB_ROWS);

  // Device latencies in cycles (1 GHz clock assumed).
  localparam int unsigned T_ERASE   = 3;
  localparam int unsigned T_PROGRAM = 5;
  localparam int unsigned T_SENSE   = 1;

  // ---------------------------------------------------------------- subarray
  typedef enum logic [2:0] {
    SOP_ERASE     = 3'd0,  // erase device row: WE=1 ER=1 (all 8 MTJs -> AP, data 0)
    SOP_PROGRAM   = 3'd1,  // program one row: WE=1 R_y=1 C=data (AP -> P where C=1)
    SOP_SENSE     = 3'd2,  // read (FU=1) or AND (FU=buffer row); optional count
    SOP_BC_RESET  = 3'd3,  // bit-counter units -> 0
    SOP_BC_SHIFT  = 3'd4,  // bit-counter units >> 1
    SOP_BUF_WRITE = 3'd5,  // write one buffer row
    SOP_BUF_SLIDE = 3'd6,  // slide every buffer row by one column
    SOP_NOP       = 3'd7
  } sub_op_e;

  // Source of the column vector C for a program operation.
  typedef enum logic [0:0] { PSRC_DATA = 1'b0, PSRC_BC = 1'b1 } prog_src_e;

  // Source of a buffer-row write.
  typedef enum logic [1:0] {
    BSRC_DATA  = 2'd0,  // private data port
    BSRC_SA    = 2'd1,  // SA outputs
    BSRC_SA_N  = 2'd2,  // inverted SA outputs
    BSRC_BC    = 2'd3   // bit-counter LSBs
  } buf_src_e;

  typedef struct packed {
    sub_op_e           op;
    logic [ROW_W-1:0]  row;      // row for PROGRAM/SENSE; row[ROW_W-1:3] is the device for ERASE
    logic              fu_buf;   // SENSE: 1 = FU from buffer row (AND), 0 = FU all ones (read)
    logic [BUF_W-1:0]  buf_row;  // buffer row for SENSE (FU) and BUF_WRITE
    logic              count;    // SENSE: add SA outputs into the bit-counter
    prog_src_e         psrc;
    buf_src_e          bsrc;
    logic [COLS-1:0]   data;     // column data for PROGRAM / BUF_WRITE
  } sub_cmd_t;

  // --------------------------------------------------------------------- mat
  typedef enum logic [3:0] {
    MOP_ERASE    = 4'd0,   // erase device row_a[7:3] in every selected subarray
    MOP_PROGRAM  = 4'd1,   // program row_a with data
    MOP_READ     = 4'd2,   // read row_a of subarray src -> result
    MOP_BUF_LOAD = 4'd3,   // buffer row buf_row <- data
    MOP_SLIDE    = 4'd4,   // slide buffers by one column
    MOP_BC_RESET = 4'd5,
    MOP_BC_READ  = 4'd6,   // result <- bit-counter LSBs of src, then shift
    MOP_CONV     = 4'd7,   // bitwise convolution period
    MOP_MOVE     = 4'd8,   // in-mat transfer of bit-counter contents (cross-writing)
    MOP_ADD      = 4'd9,   // multi-operand vertical addition
    MOP_MUL      = 4'd10,  // vertical multiplication by the buffer's scale factor
    MOP_CMP      = 4'd11,  // bit-serial comparison, MSB first
    MOP_RELU     = 4'd12   // ReLU using the MSB
  } mat_op_e;

  typedef struct packed {
    mat_op_e           op;
    logic [SUBS-1:0]   mask;     // subarrays that take part (SIMD)
    logic [SUB_W-1:0]  src;      // source subarray (READ, BC_READ, MOVE)
    logic [SUB_W-1:0]  dst;      // destination subarray (MOVE)
    logic [ROW_W-1:0]  row_a;    // first operand row
    logic [ROW_W-1:0]  row_b;    // second operand row (CMP: vector B)
    logic [ROW_W-1:0]  row_c;    // destination row (ADD/MUL/RELU/MOVE), Result row (CMP)
    logic [ROW_W-1:0]  row_t;    // Tag row (CMP)
    logic [3:0]        wa;       // width of operand A / rows of a conv period
    logic [3:0]        wb;       // width of B (MUL), sum width (ADD)
    logic [3:0]        n;        // operand count (ADD), kernel width K (MOVE)
    logic [3:0]        s;        // slide offset of the period (MOVE)
    logic [BUF_W-1:0]  buf_row;  // first buffer row used
    logic [COLS-1:0]   data;
  } mat_cmd_t;

  // -------------------------------------------------------------------- bank
  typedef struct packed {
    logic [MAT_W-1:0]  mat;       // target mat
    logic              from_gdb;  // take mc.data from global buffer row gdb_row
    logic [GDB_W-1:0]  gdb_row;   // data source, and destination of a result
    mat_cmd_t          mc;
  } bank_cmd_t;

endpackage
