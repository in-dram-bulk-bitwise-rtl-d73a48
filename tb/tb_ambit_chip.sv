// tb_ambit_chip: a chip of 2 banks x 2 small subarrays (64 row addresses,
// 128-bit rows) driven over its command bus. Checks WRITE/READ per bank
// with the one-cycle READ latency, bank independence, the RowClone-PSM
// TRANSFER of a column from one bank's open row to another's, an in-DRAM
// OR issued as plain ACTIVATE/PRECHARGE commands, and the error flag for a
// column command to a bank with no open row.
module tb_ambit_chip;
  import ambit_pkg::*;

  localparam int NBANK = 2, NSUB = 2, ROWS = 64, COLS = 128, ND = ROWS - 18;
  typedef logic [COLS-1:0] row_t;

  logic clk = 0, rst_n = 0;
  dram_cmd_t cmd = '0;
  logic [63:0] wdata = '0, rdata;
  logic rvalid, err;
  int checks = 0, failures = 0;

  ambit_chip #(.NBANK(NBANK), .NSUB(NSUB), .ROWS(ROWS), .COLS(COLS)) dut (
    .clk, .rst_n, .cmd, .wdata, .rdata, .rvalid, .err);

  always #5 clk = ~clk;

  task automatic issue(cmd_e c, int bank, int r = 0, int cl = 0, logic [63:0] d = '0,
                       int dbank = 0, int dcol = 0);
    cmd = '0;
    cmd.cmd = c; cmd.bank = BANK_AW'(bank); cmd.row = ROW_AW'(r); cmd.col = COL_AW'(cl);
    cmd.dst_bank = BANK_AW'(dbank); cmd.dst_col = COL_AW'(dcol);
    wdata = d;
    @(posedge clk); #1;
    cmd = '0;
  endtask
  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask
  task automatic read_col(int bank, int r, int cl, output logic [63:0] v);
    issue(CMD_ACT, bank, r);
    issue(CMD_RD, bank, 0, cl);
    chk(rvalid, "rvalid one cycle after READ");
    v = rdata;
    issue(CMD_PRE, bank);
  endtask
  task automatic write_col(int bank, int r, int cl, logic [63:0] v);
    issue(CMD_ACT, bank, r); issue(CMD_WR, bank, 0, cl, v); issue(CMD_PRE, bank);
  endtask
  function automatic logic [63:0] r64();
    return {$urandom, $urandom};
  endfunction

  logic [63:0] a [2][2], x, y;

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int b = 0; b < 2; b++)
      for (int c = 0; c < 2; c++) begin a[b][c] = r64(); write_col(b, 3, c, a[b][c]); end
    for (int b = 0; b < 2; b++)
      for (int c = 0; c < 2; c++) begin
        read_col(b, 3, c, x);
        chk(x === a[b][c], $sformatf("bank %0d col %0d read back", b, c));
      end
    chk(!rvalid, "rvalid only after READ");
    // PSM TRANSFER bank0 row3 col1 -> bank1 row 7 col 0
    issue(CMD_ACT, 0, 3); issue(CMD_ACT, 1, 7);
    issue(CMD_TRANSFER, 0, 0, 1, '0, 1, 0);
    chk(!err, "TRANSFER with both banks open is legal");
    issue(CMD_PRE, 0); issue(CMD_PRE, 1);
    read_col(1, 7, 0, x);
    chk(x === a[0][1], "TRANSFER copied the column");
    read_col(0, 3, 1, x);
    chk(x === a[0][1], "TRANSFER kept the source");
    // OR of bank 1, row 3 and a second row, with raw ACTIVATEs (subarray 1)
    write_col(1, ROWS + 4, 0, 64'h0F0F_0000_FFFF_1234);
    write_col(1, ROWS + 5, 0, 64'h00FF_00FF_0000_4321);
    issue(CMD_ACT, 1, ROWS + 4); issue(CMD_ACT, 1, ROWS + ND + 2 + 0); issue(CMD_PRE, 1);
    issue(CMD_ACT, 1, ROWS + 5); issue(CMD_ACT, 1, ROWS + ND + 2 + 1); issue(CMD_PRE, 1);
    issue(CMD_ACT, 1, ROWS + ND + 1); issue(CMD_ACT, 1, ROWS + ND + 2 + 2); issue(CMD_PRE, 1);
    issue(CMD_ACT, 1, ROWS + ND + 2 + 12); issue(CMD_ACT, 1, ROWS + 6); issue(CMD_PRE, 1);
    read_col(1, ROWS + 6, 0, y);
    chk(y === (64'h0F0F_0000_FFFF_1234 | 64'h00FF_00FF_0000_4321), "in-DRAM OR");
    // READ to a closed bank
    issue(CMD_RD, 0, 0, 0);
    @(negedge clk);
    chk(err, "READ to a closed bank flagged");
    chk(!rvalid, "READ to a closed bank returns nothing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
