// ambit_pkg: types and constants shared by the Ambit DRAM chip model and
// the Ambit memory controller.
//
// The DRAM command set is the ordinary DDR one (ACTIVATE, PRECHARGE, READ,
// WRITE) plus the RowClone-PSM TRANSFER command. Ambit itself adds no new
// command: triple-row activations and DCC accesses are ordinary ACTIVATEs
// to reserved row addresses of the B-group.
//
// Field widths of the command bus are fixed here at the largest
// configuration the design is meant for (8 banks, 32 subarrays of 1024 rows
// per bank, 8192-bit rows, 64-bit columns); the parameterised modules use the
// low bits of each field.
package ambit_pkg;

  // Column (bank I/O) width: one READ/WRITE moves 64 bits of a chip.
  localparam int unsigned IO_W    = 64;
  // Address field widths of the command bus.
  localparam int unsigned BANK_AW = 3;
  localparam int unsigned ROW_AW  = 15;
  localparam int unsigned COL_AW  = 7;

  // Rows of a subarray that are not data rows: 2 control rows (C0, C1)
  // and 16 B-group addresses.
  localparam int unsigned N_CROWS  = 2;
  localparam int unsigned N_BADDR  = 16;
  localparam int unsigned N_RESV   = N_CROWS + N_BADDR;

  // The eight wordlines of the B-group (index into an 8-bit mask).
  localparam int unsigned WL_T0    = 0;
  localparam int unsigned WL_T1    = 1;
  localparam int unsigned WL_T2    = 2;
  localparam int unsigned WL_T3    = 3;
  localparam int unsigned WL_DCC0  = 4;  // d-wordline of DCC row 0
  localparam int unsigned WL_DCC0N = 5;  // n-wordline of DCC row 0
  localparam int unsigned WL_DCC1  = 6;  // d-wordline of DCC row 1
  localparam int unsigned WL_DCC1N = 7;  // n-wordline of DCC row 1

  typedef logic [7:0] bwl_t;

  typedef enum logic [2:0] {
    CMD_NOP      = 3'd0,
    CMD_ACT      = 3'd1,
    CMD_PRE      = 3'd2,
    CMD_RD       = 3'd3,
    CMD_WR       = 3'd4,
    CMD_TRANSFER = 3'd5
  } cmd_e;

  // One command on the command/address bus.
  typedef struct packed {
    cmd_e                cmd;
    logic [BANK_AW-1:0]  bank;      // target bank (source bank of TRANSFER)
    logic [ROW_AW-1:0]   row;       // bank row address, ACTIVATE only
    logic [COL_AW-1:0]   col;       // column, READ/WRITE/TRANSFER source
    logic [BANK_AW-1:0]  dst_bank;  // TRANSFER destination bank
    logic [COL_AW-1:0]   dst_col;   // TRANSFER destination column
  } dram_cmd_t;

  // Bulk bitwise operations the controller executes.
  typedef enum logic [3:0] {
    OP_AND  = 4'd0,
    OP_OR   = 4'd1,
    OP_NAND = 4'd2,
    OP_NOR  = 4'd3,
    OP_XOR  = 4'd4,
    OP_XNOR = 4'd5,
    OP_NOT  = 4'd6,
    OP_COPY = 4'd7,   // RowClone-FPM copy Di -> Dk
    OP_ZERO = 4'd8,   // bulk zero of Dk from C0
    OP_ONE  = 4'd9    // bulk set of Dk from C1
  } bbop_e;

  // Row operand of one AAP/AP step: B0..B15 are 0..15.
  typedef enum logic [4:0] {
    SEL_B0 = 5'd0,  SEL_B1 = 5'd1,  SEL_B2 = 5'd2,  SEL_B3 = 5'd3,
    SEL_B4 = 5'd4,  SEL_B5 = 5'd5,  SEL_B6 = 5'd6,  SEL_B7 = 5'd7,
    SEL_B8 = 5'd8,  SEL_B9 = 5'd9,  SEL_B10 = 5'd10, SEL_B11 = 5'd11,
    SEL_B12 = 5'd12, SEL_B13 = 5'd13, SEL_B14 = 5'd14, SEL_B15 = 5'd15,
    SEL_DI = 5'd16, SEL_DJ = 5'd17, SEL_DK = 5'd18,
    SEL_C0 = 5'd19, SEL_C1 = 5'd20
  } rsel_e;

  // One step of a command sequence: AAP(a1, a2) or AP(a1).
  typedef struct packed {
    logic  valid;
    logic  is_ap;
    rsel_e a1;
    rsel_e a2;
  } step_t;

  localparam int unsigned MAX_STEPS = 7;

endpackage
