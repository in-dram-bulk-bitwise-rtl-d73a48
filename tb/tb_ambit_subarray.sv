// tb_ambit_subarray: drives one small subarray (64 row addresses, 46 data
// rows, 128-bit rows) with raw ACTIVATE/PRECHARGE/READ/WRITE commands.
// Expected values are computed here from the Boolean functions the command
// sequences are meant to produce (copy, majority, and/or, not, nand, xor),
// not from the subarray's own rules. Checked: write/read-back, the preset
// control rows, RowClone-FPM copy, all four triple-row activations (result
// and overwrite of the three sources), the two-row copies B8-B11, the DCC
// NOT, and the paper's and/nand/xor command sequences.
module tb_ambit_subarray;
  import ambit_pkg::*;

  localparam int ROWS = 64;
  localparam int COLS = 128;
  localparam int ND   = ROWS - 18;
  localparam int NC   = COLS / 64;
  typedef logic [COLS-1:0] row_t;

  logic clk = 0, rst_n = 0;
  cmd_e cmd = CMD_NOP;
  logic [5:0] row = '0;
  logic [0:0] col = '0;
  logic [63:0] wdata = '0, rdata;
  logic activated;
  int checks = 0, failures = 0;

  ambit_subarray #(.ROWS(ROWS), .COLS(COLS)) dut (
    .clk, .rst_n, .cmd, .row, .col, .wdata, .rdata, .activated);

  always #5 clk = ~clk;

  function automatic int B(int i); return ND + 2 + i; endfunction
  localparam int C0 = ND, C1 = ND + 1;

  task automatic issue(cmd_e c, int r = 0, int cl = 0, logic [63:0] d = '0);
    cmd = c; row = 6'(r); col = 1'(cl); wdata = d;
    @(posedge clk); #1;
    cmd = CMD_NOP;
  endtask

  task automatic aap(int a1, int a2);
    issue(CMD_ACT, a1); issue(CMD_ACT, a2); issue(CMD_PRE);
  endtask
  task automatic ap(int a);
    issue(CMD_ACT, a); issue(CMD_PRE);
  endtask

  task automatic write_row(int r, row_t v);
    issue(CMD_ACT, r);
    for (int c = 0; c < NC; c++) issue(CMD_WR, r, c, v[c*64 +: 64]);
    issue(CMD_PRE);
  endtask

  task automatic read_row(int r, output row_t v);
    issue(CMD_ACT, r);
    for (int c = 0; c < NC; c++) begin
      col = 1'(c); #1;
      v[c*64 +: 64] = rdata;
    end
    issue(CMD_PRE);
  endtask

  task automatic expect_row(int r, row_t exp, string what);
    row_t got;
    read_row(r, got);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: row %0d = %h expected %h", what, r, got, exp);
    end
  endtask

  // Read a B-group row through a copy into scratch data row 45.
  task automatic expect_b(int baddr, row_t exp, string what);
    aap(B(baddr), 45);
    expect_row(45, exp, what);
  endtask

  function automatic row_t rnd();
    row_t v;
    for (int i = 0; i < COLS / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  function automatic row_t maj(row_t a, row_t b, row_t c);
    return (a & b) | (b & c) | (c & a);
  endfunction

  row_t d [8];

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // write / read back
    for (int i = 0; i < 8; i++) begin d[i] = rnd(); write_row(i, d[i]); end
    for (int i = 0; i < 8; i++) expect_row(i, d[i], "read back");
    checks++;
    if (activated) begin failures++; $display("FAIL activated after PRECHARGE"); end
    issue(CMD_ACT, 3);
    checks++;
    if (!activated) begin failures++; $display("FAIL not activated after ACTIVATE"); end
    issue(CMD_PRE);
    // control rows
    expect_row(C0, '0, "C0 all zeros");
    expect_row(C1, '1, "C1 all ones");
    // RowClone-FPM copy
    aap(2, 20);
    expect_row(20, d[2], "FPM copy");
    expect_row(2, d[2], "FPM copy keeps source");
    // triple-row activations: B12 = T0,T1,T2
    aap(0, B(0)); aap(1, B(1)); aap(2, B(2));
    ap(B(12));
    expect_b(0, maj(d[0], d[1], d[2]), "B12 result in T0");
    expect_b(1, maj(d[0], d[1], d[2]), "B12 overwrites T1");
    expect_b(2, maj(d[0], d[1], d[2]), "B12 overwrites T2");
    // B13 = T1,T2,T3
    aap(3, B(1)); aap(4, B(2)); aap(5, B(3));
    ap(B(13));
    expect_b(3, maj(d[3], d[4], d[5]), "B13 result in T3");
    // B14 = DCC0,T1,T2 (DCC0 loaded through its d-wordline B4)
    aap(6, B(4)); aap(7, B(1)); aap(0, B(2));
    ap(B(14));
    expect_b(4, maj(d[6], d[7], d[0]), "B14 result in DCC0");
    // B15 = DCC1,T0,T3
    aap(1, B(6)); aap(2, B(0)); aap(3, B(3));
    ap(B(15));
    expect_b(6, maj(d[1], d[2], d[3]), "B15 result in DCC1");
    // and / or through the control row
    aap(4, B(0)); aap(5, B(1)); aap(C0, B(2)); aap(B(12), 30);
    expect_row(30, d[4] & d[5], "AND sequence");
    aap(4, B(0)); aap(5, B(1)); aap(C1, B(2)); aap(B(12), 31);
    expect_row(31, d[4] | d[5], "OR sequence");
    // NOT through the n-wordline of DCC0 (B5) and back out through B4
    aap(6, B(5)); aap(B(4), 32);
    expect_row(32, ~d[6], "NOT via DCC0");
    aap(7, B(7)); aap(B(6), 33);
    expect_row(33, ~d[7], "NOT via DCC1");
    // B8: DCC0 = !src and T0 = src at once
    aap(0, B(8));
    expect_b(0, d[0], "B8 copies into T0");
    expect_b(4, ~d[0], "B8 negates into DCC0");
    aap(1, B(9));
    expect_b(1, d[1], "B9 copies into T1");
    expect_b(6, ~d[1], "B9 negates into DCC1");
    aap(C1, B(10));
    expect_b(2, '1, "B10 sets T2");
    expect_b(3, '1, "B10 sets T3");
    aap(C0, B(11));
    expect_b(0, '0, "B11 clears T0");
    expect_b(3, '0, "B11 clears T3");
    // the paper's nand sequence
    aap(2, B(0)); aap(3, B(1)); aap(C0, B(2)); aap(B(12), B(5)); aap(B(4), 34);
    expect_row(34, ~(d[2] & d[3]), "NAND sequence");
    // the paper's xor sequence
    aap(4, B(8)); aap(5, B(9)); aap(C0, B(10)); ap(B(14)); ap(B(15));
    aap(C1, B(2)); aap(B(12), 35);
    expect_row(35, d[4] ^ d[5], "XOR sequence");
    // sources untouched by all of it
    for (int i = 0; i < 8; i++) expect_row(i, d[i], "sources preserved");
    // a write to an activated row goes through to the cells
    issue(CMD_ACT, 36); issue(CMD_WR, 36, 1, 64'hDEAD_BEEF_0123_4567); issue(CMD_PRE);
    begin
      row_t got;
      read_row(36, got);
      checks++;
      if (got[127:64] !== 64'hDEAD_BEEF_0123_4567) begin
        failures++; $display("FAIL write-through, got %h", got[127:64]);
      end
    end
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
