// tb_ambit_bank: a bank of 4 small subarrays (64 row addresses, 128-bit
// rows). Checks that the global row decoder sends each ACTIVATE to the
// subarray named by the high row-address bits (data written to the same
// local row of every subarray stays apart), that column select returns the
// right 64-bit column, that a triple-row AND in one subarray leaves the
// others alone, and that an ACTIVATE to a second subarray while one is
// open is refused and flagged.
module tb_ambit_bank;
  import ambit_pkg::*;

  localparam int NSUB = 4, ROWS = 64, COLS = 128, ND = ROWS - 18, NC = COLS / 64;
  typedef logic [COLS-1:0] row_t;

  logic clk = 0, rst_n = 0;
  cmd_e cmd = CMD_NOP;
  logic [ROW_AW-1:0] row = '0;
  logic [0:0] col = '0;
  logic [63:0] wdata = '0, rdata;
  logic open, err;
  int checks = 0, failures = 0;

  ambit_bank #(.NSUB(NSUB), .ROWS(ROWS), .COLS(COLS)) dut (
    .clk, .rst_n, .cmd, .row, .col, .wdata, .rdata, .open, .err);

  always #5 clk = ~clk;

  function automatic int R(int sub, int local_row); return sub * ROWS + local_row; endfunction
  function automatic int B(int i); return ND + 2 + i; endfunction

  task automatic issue(cmd_e c, int r = 0, int cl = 0, logic [63:0] d = '0);
    cmd = c; row = ROW_AW'(r); col = 1'(cl); wdata = d;
    @(posedge clk); #1;
    cmd = CMD_NOP;
  endtask
  task automatic aap(int a1, int a2);
    issue(CMD_ACT, a1); issue(CMD_ACT, a2); issue(CMD_PRE);
  endtask
  task automatic write_row(int r, row_t v);
    issue(CMD_ACT, r);
    for (int c = 0; c < NC; c++) issue(CMD_WR, 0, c, v[c*64 +: 64]);
    issue(CMD_PRE);
  endtask
  task automatic expect_row(int r, row_t exp, string what);
    row_t got;
    issue(CMD_ACT, r);
    for (int c = 0; c < NC; c++) begin col = 1'(c); #1; got[c*64 +: 64] = rdata; end
    issue(CMD_PRE);
    checks++;
    if (got !== exp) begin
      failures++; $display("FAIL %s: row %0d = %h expected %h", what, r, got, exp);
    end
  endtask
  function automatic row_t rnd();
    row_t v;
    for (int i = 0; i < COLS / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  row_t d [NSUB][3];

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int s = 0; s < NSUB; s++)
      for (int i = 0; i < 3; i++) begin d[s][i] = rnd(); write_row(R(s, i), d[s][i]); end
    for (int s = 0; s < NSUB; s++)
      for (int i = 0; i < 3; i++) expect_row(R(s, i), d[s][i], "per-subarray data");
    // AND of rows 0 and 1 into row 2, inside subarray 2 only
    aap(R(2, 0), R(2, B(0))); aap(R(2, 1), R(2, B(1)));
    aap(R(2, ND), R(2, B(2))); aap(R(2, B(12)), R(2, 2));
    expect_row(R(2, 2), d[2][0] & d[2][1], "AND in subarray 2");
    for (int s = 0; s < NSUB; s++)
      if (s != 2) expect_row(R(s, 2), d[s][2], "other subarrays untouched");
    // open flag
    issue(CMD_ACT, R(1, 0));
    checks++;
    if (!open) begin failures++; $display("FAIL bank not open"); end
    // second subarray while open: refused, flagged
    issue(CMD_ACT, R(3, 1));
    checks++;
    if (!err) begin failures++; $display("FAIL cross-subarray ACTIVATE not flagged"); end
    col = 0; #1;
    checks++;
    if (rdata !== d[1][0][63:0]) begin failures++; $display("FAIL open subarray changed"); end
    issue(CMD_PRE);
    checks++;
    if (open || err) begin failures++; $display("FAIL open/err after PRECHARGE"); end
    expect_row(R(3, 1), d[3][1], "refused ACTIVATE wrote nothing");
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
