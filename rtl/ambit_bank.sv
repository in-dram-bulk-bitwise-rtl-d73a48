// ambit_bank: one DRAM bank built from NSUB Ambit subarrays.
//
// The bank row address is {subarray, row-in-subarray}. The global row
// decoder sends an ACTIVATE to the subarray named by the high bits; the
// subarray's own split row decoder handles the low bits (D, C or B group).
// The bank remembers which subarray is open; PRECHARGE, READ and WRITE go to
// it. Column selection and the global sense amplifiers (bank I/O) move one
// IO_W-bit column between the open subarray's sense amplifiers and the
// chip's internal data bus: `rdata` is combinational from the open
// subarray, `wdata` is taken with a WRITE.
//
// An ACTIVATE to a second subarray while one is open is illegal in this
// model (Ambit keeps every copy inside one subarray, RowClone-FPM); it is
// ignored and flagged on `err` for one cycle.
// Interface: `cmd`, `row`, `col`, `wdata` are valid for one cycle; `open`
// tells whether a row of the bank is activated.
module ambit_bank
  import ambit_pkg::*;
#(
  parameter int unsigned NSUB = 32,
  parameter int unsigned ROWS = 1024,
  parameter int unsigned COLS = 8192,
  localparam int unsigned RAW = $clog2(ROWS),
  localparam int unsigned SAW = (NSUB > 1) ? $clog2(NSUB) : 1,
  localparam int unsigned CAW = (COLS / IO_W > 1) ? $clog2(COLS / IO_W) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  cmd_e            cmd,
  input  logic [ROW_AW-1:0] row,
  input  logic [CAW-1:0]  col,
  input  logic [IO_W-1:0] wdata,
  output logic [IO_W-1:0] rdata,
  output logic            open,
  output logic            err
);

  logic           open_q;
  logic [SAW-1:0] sub_q;
  logic [SAW-1:0] act_sub;
  logic [RAW-1:0] local_row;
  logic           bad_act;

  assign act_sub   = (NSUB > 1) ? SAW'(row >> RAW) : '0;
  assign local_row = row[RAW-1:0];
  assign bad_act   = (cmd == CMD_ACT) && open_q && (act_sub != sub_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_q <= 1'b0;
      sub_q  <= '0;
      err    <= 1'b0;
    end else begin
      err <= bad_act;
      if (cmd == CMD_ACT && !open_q) begin
        open_q <= 1'b1;
        sub_q  <= act_sub;
      end else if (cmd == CMD_PRE) begin
        open_q <= 1'b0;
      end
    end
  end

  assign open = open_q;

  logic [IO_W-1:0] sub_rdata [NSUB];

  for (genvar s = 0; s < NSUB; s++) begin : g_sub
    cmd_e s_cmd;
    logic s_act;
    always_comb begin
      s_cmd = CMD_NOP;
      unique case (cmd)
        CMD_ACT: if (!bad_act && act_sub == SAW'(s)) s_cmd = CMD_ACT;
        CMD_PRE, CMD_RD, CMD_WR:
                 if (open_q && sub_q == SAW'(s)) s_cmd = cmd;
        default: ;
      endcase
    end
    ambit_subarray #(.ROWS(ROWS), .COLS(COLS)) u_sub (
      .clk       (clk),
      .rst_n     (rst_n),
      .cmd       (s_cmd),
      .row       (local_row),
      .col       (col),
      .wdata     (wdata),
      .rdata     (sub_rdata[s]),
      .activated (s_act)
    );
    // The bank's record of the open subarray matches the subarrays.
    a_open_sub: assert property (@(posedge clk) disable iff (!rst_n)
      s_act == (open_q && sub_q == SAW'(s)))
      else $error("bank open-subarray record out of step");
  end

  assign rdata = sub_rdata[sub_q];

endmodule
