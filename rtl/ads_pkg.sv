// ads_pkg: types and constants shared by the in-memory sorting unit.
//
// The sorting unit stores 4-bit numbers bit-per-column in a partitioned
// SRAM array and sorts them by running a bitonic network whose
// compare-and-swap (CAS) blocks are micro-programs of two-input bitline
// operations (AND on BL, NOR on BLB). One array operation is one clock
// cycle. This package holds the array geometry, the micro-instruction that
// drives the array each cycle and the fixed row map of one CAS.
//
// Sizes that follow the paper: 4-bit data, 4 columns per partition, 22 rows
// per CAS, 4 partitions (16x22), two extra temporary rows, 28 cycles per CAS,
// 6 bitonic steps for 8 inputs and 6 extra cycles of data movement between
// steps. Row numbers here are 0-based: the paper's row 1 (all zeros) is
// ROW_ZERO = 0, its row 3 (A, later Min) is ROW_A = 2, and so on.
package ads_pkg;

  localparam int unsigned DATA_W      = 4;   // bit precision = columns per partition
  localparam int unsigned N_PART      = 4;   // partitions A, B, C, D
  localparam int unsigned PART_W      = 2;   // bits of a partition index
  localparam int unsigned N_CAS_ROWS  = 22;  // rows one CAS uses
  localparam int unsigned N_TEMP_ROWS = 2;   // temporary rows for inter-partition moves
  localparam int unsigned N_ROWS      = N_CAS_ROWS + N_TEMP_ROWS;
  localparam int unsigned ROW_W       = 5;
  localparam int unsigned N_INPUTS    = 2 * N_PART;  // 8 numbers sorted
  localparam int unsigned N_STEPS     = 6;   // log2(8)*(1+log2(8))/2
  localparam int unsigned CAS_CYCLES  = 28;  // 18 compare + 10 multiplex
  localparam int unsigned CMP_CYCLES  = 18;
  localparam int unsigned XFER_CYCLES = 6;   // 3*N/4 copy cycles between two steps
  localparam int unsigned SORT_CYCLES = N_STEPS * CAS_CYCLES + (N_STEPS - 1) * XFER_CYCLES;

  typedef logic [ROW_W-1:0]  row_t;
  typedef logic [PART_W-1:0] part_t;

  // Fixed rows (0-based).
  localparam row_t ROW_ZERO  = 5'd0;   // paper row 1: constant 0 (NOR with it = NOT)
  localparam row_t ROW_ONE   = 5'd1;   // paper row 2: constant 1 (AND with it = COPY)
  localparam row_t ROW_A     = 5'd2;   // paper row 3: operand A, then Min
  localparam row_t ROW_B     = 5'd3;   // paper row 4: operand B, then Max
  localparam row_t ROW_TEMP0 = 5'd22;  // temporary rows, outside the 22 CAS rows
  localparam row_t ROW_TEMP1 = 5'd23;

  // Which sense amplifier output is written back.
  typedef enum logic {
    OP_NOR = 1'b0,   // BLB sense amplifier
    OP_AND = 1'b1    // BL sense amplifier
  } imc_op_e;

  // The four write-back data movements, chosen by the 4x1 multiplexer.
  typedef enum logic [1:0] {
    WB_SAME      = 2'd0,  // (a) result back into its own column
    WB_RIGHT     = 2'd1,  // (b) result into the column to its right
    WB_LAST_ALL  = 2'd2,  // (c) last column's result into every column
    WB_THIRD_ALL = 2'd3   // (d) third column's result into every column
  } wb_mode_e;

  // One array operation: raise word lines wl_a and wl_b, sense, and write
  // the chosen result into row wl_dst of the partitions in part_en. With
  // xfer set, every enabled partition instead receives the (same-column)
  // result of partition xfer_src: the path used to move a word between
  // partitions.
  typedef struct packed {
    logic              valid;
    imc_op_e           op;
    row_t              wl_a;
    row_t              wl_b;
    row_t              wl_dst;
    wb_mode_e          wb;
    logic [N_PART-1:0] part_en;
    logic              xfer;
    part_t             xfer_src;
  } imc_instr_t;

  localparam imc_instr_t INSTR_NOP = '{
    valid: 1'b0, op: OP_NOR, wl_a: '0, wl_b: '0, wl_dst: '0, wb: WB_SAME,
    part_en: '0, xfer: 1'b0, xfer_src: '0
  };

endpackage
