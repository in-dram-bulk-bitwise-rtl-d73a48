// ambit_chip: an Ambit DRAM chip, NBANK banks on shared internal buses.
//
// All banks share the chip's command/address bus and its internal data bus.
// One command per cycle arrives on `cmd` (ambit_pkg::dram_cmd_t):
//   ACTIVATE bank,row   PRECHARGE bank   WRITE bank,col (data on `wdata`)
//   READ bank,col       -> `rdata` one cycle later with `rvalid`
//   TRANSFER bank,col -> dst_bank,dst_col   (RowClone-PSM: one column is
//     copied from the source bank's sense amplifiers to the destination
//     bank's over the internal bus, never leaving the chip; both banks must
//     have a row activated).
// Ambit needs no further command: bulk AND/OR/NOT happen inside a subarray
// when ACTIVATEs target the reserved B-group and C-group row addresses.
// The READ latency of one cycle and the omission of DRAM timing checks
// (the controller guarantees tRAS/tRP/tRCD/tWR) are this model's choices.
// `err` flags, for one cycle, a command the chip had to ignore: an
// ACTIVATE to a second subarray of an open bank, or a column command or
// TRANSFER to a bank with no open row.
module ambit_chip
  import ambit_pkg::*;
#(
  parameter int unsigned NBANK = 8,
  parameter int unsigned NSUB  = 32,
  parameter int unsigned ROWS  = 1024,
  parameter int unsigned COLS  = 8192,
  localparam int unsigned CAW  = (COLS / IO_W > 1) ? $clog2(COLS / IO_W) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  dram_cmd_t       cmd,
  input  logic [IO_W-1:0] wdata,
  output logic [IO_W-1:0] rdata,
  output logic            rvalid,
  output logic            err
);

  logic [IO_W-1:0] bank_rdata [NBANK];
  logic [NBANK-1:0] bank_open;
  logic [NBANK-1:0] bank_err;
  logic [IO_W-1:0] xfer_data;
  logic             col_bad;

  assign xfer_data = bank_rdata[cmd.bank];

  always_comb begin
    col_bad = 1'b0;
    unique case (cmd.cmd)
      CMD_RD, CMD_WR: col_bad = !bank_open[cmd.bank];
      CMD_TRANSFER:   col_bad = !bank_open[cmd.bank] || !bank_open[cmd.dst_bank];
      default: ;
    endcase
  end

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    cmd_e            b_cmd;
    logic [CAW-1:0]  b_col;
    logic [IO_W-1:0] b_wdata;
    always_comb begin
      b_cmd   = CMD_NOP;
      b_col   = CAW'(cmd.col);
      b_wdata = wdata;
      unique case (cmd.cmd)
        CMD_ACT, CMD_PRE, CMD_RD, CMD_WR:
          if (cmd.bank == BANK_AW'(b)) b_cmd = cmd.cmd;
        CMD_TRANSFER:
          if (!col_bad && cmd.dst_bank == BANK_AW'(b) && cmd.bank != BANK_AW'(b)) begin
            b_cmd   = CMD_WR;
            b_col   = CAW'(cmd.dst_col);
            b_wdata = xfer_data;
          end else if (cmd.bank == BANK_AW'(b)) begin
            b_cmd = CMD_RD;   // source drives the internal bus
          end
        default: ;
      endcase
      if ((b_cmd == CMD_RD || b_cmd == CMD_WR) && !bank_open[b]) b_cmd = CMD_NOP;
    end
    ambit_bank #(.NSUB(NSUB), .ROWS(ROWS), .COLS(COLS)) u_bank (
      .clk   (clk),
      .rst_n (rst_n),
      .cmd   (b_cmd),
      .row   (cmd.row),
      .col   (b_col),
      .wdata (b_wdata),
      .rdata (bank_rdata[b]),
      .open  (bank_open[b]),
      .err   (bank_err[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rdata  <= '0;
      rvalid <= 1'b0;
    end else begin
      rvalid <= (cmd.cmd == CMD_RD) && !col_bad;
      if (cmd.cmd == CMD_RD) rdata <= bank_rdata[cmd.bank];
    end
  end

  // Refused ACTIVATEs show on the bank's own flag, already one cycle late.
  logic col_err_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) col_err_q <= 1'b0;
    else        col_err_q <= col_bad;
  end

  assign err = col_err_q | (|bank_err);

endmodule
