// ambit_system: an Ambit memory system, top level.
//
// An Ambit controller drives one Ambit DRAM chip over the ordinary DRAM
// command/address bus and a 64-bit data bus. The host side has two ports:
// bulk bitwise operations (bb_*) and ordinary column reads/writes (mem_*);
// see ambit_controller for the handshakes. A rank of several chips receives
// the same commands, so one chip stands for the rank here; the host CPU,
// caches and the DDR PHY are outside this design.
// Defaults: 8 banks of 32 subarrays, 1024 row addresses per subarray
// (1006 data rows), 8192-bit rows, 64-bit columns: a 2 Gb chip.
// `dram_err` reports a command the chip ignored (never expected).
module ambit_system
  import ambit_pkg::*;
#(
  parameter int unsigned NBANK         = 8,
  parameter int unsigned NSUB          = 32,
  parameter int unsigned ROWS          = 1024,
  parameter int unsigned COLS          = 8192,
  parameter bit          SPLIT_DECODER = 1'b1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               bb_valid,
  output logic               bb_ready,
  input  bbop_e              bb_op,
  input  logic [BANK_AW-1:0] bb_bank,
  input  logic [ROW_AW-1:0]  bb_dst,
  input  logic [ROW_AW-1:0]  bb_src1,
  input  logic [ROW_AW-1:0]  bb_src2,
  input  logic [ROW_AW:0]    bb_nrows,
  output logic [NBANK-1:0]   bb_busy,
  output logic [NBANK-1:0]   bb_done,
  output logic [NBANK-1:0]   bb_err,
  input  logic               mem_valid,
  output logic               mem_ready,
  input  logic               mem_we,
  input  logic [BANK_AW-1:0] mem_bank,
  input  logic [ROW_AW-1:0]  mem_row,
  input  logic [COL_AW-1:0]  mem_col,
  input  logic [IO_W-1:0]    mem_wdata,
  output logic               mem_done,
  output logic               mem_err,
  output logic [IO_W-1:0]    mem_rdata,
  output logic [NBANK-1:0]   aap_fast,
  output logic [NBANK-1:0]   aap_slow,
  output logic               dram_err
);

  dram_cmd_t       dram_cmd;
  logic [IO_W-1:0] dram_wdata, dram_rdata;
  logic            dram_rvalid;

  ambit_controller #(
    .NBANK(NBANK), .NSUB(NSUB), .ROWS(ROWS), .SPLIT_DECODER(SPLIT_DECODER)
  ) u_ctrl (
    .clk, .rst_n,
    .bb_valid, .bb_ready, .bb_op, .bb_bank, .bb_dst, .bb_src1, .bb_src2,
    .bb_nrows, .bb_busy, .bb_done, .bb_err,
    .mem_valid, .mem_ready, .mem_we, .mem_bank, .mem_row, .mem_col,
    .mem_wdata, .mem_done, .mem_err, .mem_rdata,
    .dram_cmd, .dram_wdata, .dram_rdata, .dram_rvalid,
    .aap_fast, .aap_slow
  );

  ambit_chip #(
    .NBANK(NBANK), .NSUB(NSUB), .ROWS(ROWS), .COLS(COLS)
  ) u_chip (
    .clk, .rst_n,
    .cmd    (dram_cmd),
    .wdata  (dram_wdata),
    .rdata  (dram_rdata),
    .rvalid (dram_rvalid),
    .err    (dram_err)
  );

endmodule
