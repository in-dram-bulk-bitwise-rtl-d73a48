// tb_ambit_system: end-to-end test of the Ambit system at reduced size
// (2 banks x 2 subarrays of 64 row addresses, 128-bit rows). Operands are
// written through the ordinary access port, every bulk bitwise operation is
// run, and the results are read back and compared with a reference
// computed here. Each cycle count of a one-row op is checked against the
// AAP/AP timing, and every mechanism (triple-row activation, DCC NOT,
// overlapped and serial AAPs, bank parallelism, ordinary access during a
// bbop, RowClone copy and initialisation, multi-row ops, the
// cross-subarray and range errors) must occur at least once.
module tb_ambit_system;
  import ambit_pkg::*;

  localparam int NBANK = 2, NSUB = 2, ROWS = 64, COLS = 128;
  localparam int ND = ROWS - 18, NC = COLS / 64;
  typedef logic [COLS-1:0] row_t;

  logic clk = 0, rst_n = 0;
  logic bb_valid = 0, bb_ready;
  bbop_e bb_op = OP_AND;
  logic [BANK_AW-1:0] bb_bank = '0;
  logic [ROW_AW-1:0] bb_dst = '0, bb_src1 = '0, bb_src2 = '0;
  logic [ROW_AW:0] bb_nrows = '0;
  logic [NBANK-1:0] bb_busy, bb_done, bb_err, aap_fast, aap_slow;
  logic mem_valid = 0, mem_ready, mem_we = 0, mem_done, mem_err, dram_err;
  logic [BANK_AW-1:0] mem_bank = '0;
  logic [ROW_AW-1:0] mem_row = '0;
  logic [COL_AW-1:0] mem_col = '0;
  logic [63:0] mem_wdata = '0, mem_rdata;
  int checks = 0, failures = 0;
  longint cyc = 0;

  ambit_system #(.NBANK(NBANK), .NSUB(NSUB), .ROWS(ROWS), .COLS(COLS)) dut (
    .clk, .rst_n, .bb_valid, .bb_ready, .bb_op, .bb_bank, .bb_dst, .bb_src1, .bb_src2,
    .bb_nrows, .bb_busy, .bb_done, .bb_err, .mem_valid, .mem_ready, .mem_we, .mem_bank,
    .mem_row, .mem_col, .mem_wdata, .mem_done, .mem_err, .mem_rdata, .aap_fast, .aap_slow,
    .dram_err);

  always #5 clk = ~clk;

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0d %s", cyc, msg); end
  endtask

  // ---- mechanism counters, from the command bus and the event outputs
  int n_tra = 0, n_dcc_not = 0, n_fast = 0, n_slow = 0, n_par = 0, n_overtake = 0;
  int n_fpm_copy = 0, n_init = 0, n_xsub = 0, n_range = 0, n_multi = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.u_ctrl.dram_cmd.cmd == CMD_ACT) begin
      int r;
      r = int'(dut.u_ctrl.dram_cmd.row) % ROWS;
      if (r >= ND + 2 + 12) n_tra++;                                   // B12..B15
      if (r == ND + 2 + 5 || r == ND + 2 + 7 || r == ND + 2 + 8 || r == ND + 2 + 9) n_dcc_not++;
    end
    n_fast += $countones(aap_fast);
    n_slow += $countones(aap_slow);
    if ($countones(bb_busy) > 1) n_par++;
    if (mem_done && bb_busy != 0) n_overtake++;
    if (rst_n && dram_err) chk(0, "chip flagged a command");
  end

  // ---- reference contents of the data rows
  row_t ref_mem [NBANK][int];

  function automatic row_t rnd();
    row_t v;
    for (int i = 0; i < COLS / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic mem_access(bit we, int bank, int r, int c, logic [63:0] wd, output logic [63:0] rd,
                            output bit e);
    @(negedge clk);
    mem_valid = 1; mem_we = we; mem_bank = BANK_AW'(bank); mem_row = ROW_AW'(r);
    mem_col = COL_AW'(c); mem_wdata = wd;
    do @(posedge clk); while (!mem_ready);
    @(negedge clk);
    mem_valid = 0;
    while (!mem_done) @(negedge clk);
    rd = mem_rdata; e = mem_err;
  endtask

  task automatic write_row(int bank, int r, row_t v);
    logic [63:0] rd; bit e;
    for (int c = 0; c < NC; c++) mem_access(1, bank, r, c, v[c*64 +: 64], rd, e);
    ref_mem[bank][r] = v;
  endtask

  task automatic check_row(int bank, int r, string what);
    logic [63:0] rd; bit e;
    row_t got;
    for (int c = 0; c < NC; c++) begin mem_access(0, bank, r, c, '0, rd, e); got[c*64 +: 64] = rd; end
    chk(got === ref_mem[bank][r], $sformatf("%s: bank %0d row %0d", what, bank, r));
  endtask

  task automatic bbop_issue(bbop_e o, int bank, int k, int i, int j, int n);
    @(negedge clk);
    bb_valid = 1; bb_op = o; bb_bank = BANK_AW'(bank); bb_dst = ROW_AW'(k);
    bb_src1 = ROW_AW'(i); bb_src2 = ROW_AW'(j); bb_nrows = (ROW_AW+1)'(n);
    do @(posedge clk); while (!bb_ready);
    @(negedge clk);
    bb_valid = 0;
  endtask

  function automatic row_t f(bbop_e o, row_t a, row_t b);
    case (o)
      OP_AND:  return a & b;
      OP_OR:   return a | b;
      OP_NAND: return ~(a & b);
      OP_NOR:  return ~(a | b);
      OP_XOR:  return a ^ b;
      OP_XNOR: return ~(a ^ b);
      OP_NOT:  return ~a;
      OP_COPY: return a;
      OP_ZERO: return '0;
      default: return '1;
    endcase
  endfunction

  // Run one bbop to completion and update the reference.
  task automatic bbop(bbop_e o, int bank, int k, int i, int j, int n, bit expect_err = 0);
    longint t0;
    bbop_issue(o, bank, k, i, j, n);
    t0 = cyc;
    while (!bb_done[bank]) @(negedge clk);
    chk(bb_err[bank] == expect_err, $sformatf("%s error flag", o.name()));
    if (!expect_err)
      for (int x = 0; x < n; x++)
        ref_mem[bank][k + x] = f(o, ref_mem[bank][i + x], ref_mem[bank][j + x]);
    if (o == OP_COPY) n_fpm_copy++;
    if (o == OP_ZERO || o == OP_ONE) n_init++;
    if (n > 1) n_multi++;
    if (expect_err) n_xsub++;
    // cycle count of one row: AAP 40 cycles overlapped, 64 serial, AP 36
    if (n == 1 && !expect_err) begin
      int exp_c;
      case (o)
        OP_AND, OP_OR: exp_c = 4 * 40;
        OP_NAND, OP_NOR: exp_c = 4 * 40 + 64;
        OP_XOR, OP_XNOR: exp_c = 5 * 40 + 2 * 36;
        OP_NOT: exp_c = 2 * 40;
        default: exp_c = 64;
      endcase
      chk(cyc - t0 >= exp_c && cyc - t0 <= exp_c + 4,
          $sformatf("%s took %0d cycles, expected %0d", o.name(), cyc - t0, exp_c));
    end
  endtask

  localparam int S1 = (NSUB - 1) * ND;   // first data row of the last subarray
  localparam int BL = NBANK - 1;         // last bank

  initial begin
    logic [63:0] rd; bit e;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // operands
    for (int r = 0; r < 6; r++) write_row(0, r, rnd());
    for (int r = S1; r < S1 + 3; r++) write_row(0, r, rnd());
    for (int r = 0; r < 3; r++) write_row(BL, r, rnd());
    // every op, one row, bank 0 subarray 0
    bbop(OP_AND,  0, 10, 0, 1, 1);
    bbop(OP_OR,   0, 11, 0, 1, 1);
    bbop(OP_NAND, 0, 12, 0, 1, 1);
    bbop(OP_NOR,  0, 13, 0, 1, 1);
    bbop(OP_XOR,  0, 15, 2, 3, 1);
    bbop(OP_NOT,  0, 16, 4, 0, 1);
    bbop(OP_COPY, 0, 17, 5, 0, 1);
    bbop(OP_ZERO, 0, 18, 0, 0, 1);
    bbop(OP_ONE,  0, 19, 0, 0, 1);
    bbop(OP_AND,  0, 20, 2, 4, 2);
    // an op in the last subarray
    bbop(OP_XOR,  0, S1 + 5, S1, S1 + 1, 1);
    // operands in different subarrays: refused
    bbop(OP_AND,  0, S1 + 6, 0, S1, 1, 1);
    // two banks at once, with an ordinary access to a third bank meanwhile
    bbop_issue(OP_XNOR, 0, 14, 0, 1, 1);
    bbop_issue(OP_NOT,  BL, 20, 2, 0, 1);
    ref_mem[0][14] = ~(ref_mem[0][0] ^ ref_mem[0][1]);
    ref_mem[BL][20] = ~ref_mem[BL][2];
    if (NBANK > 2) begin
      mem_access(1, 1, 7, 0, 64'h1234, rd, e);
      mem_access(0, 1, 7, 0, '0, rd, e);
      chk(rd == 64'h1234, "ordinary access during bbops");
    end else begin
      wait (bb_busy[0]); mem_access(0, BL, 0, 0, '0, rd, e);
      chk(rd == ref_mem[BL][0][63:0], "ordinary access during bbops");
    end
    while (bb_busy != 0) @(negedge clk);
    // an ordinary access out of range
    mem_access(0, 0, NSUB * ND, 0, '0, rd, e);
    chk(e, "row beyond the bank flagged");
    if (e) n_range++;
    // results
    for (int r = 10; r < 22; r++) if (ref_mem[0].exists(r)) check_row(0, r, "result");
    check_row(0, S1 + 5, "result in last subarray");
    check_row(BL, 20, "result in last bank");
    for (int r = 0; r < 6; r++) check_row(0, r, "operand kept");
    // mechanisms seen
    chk(n_tra > 0,      $sformatf("triple-row activations: %0d", n_tra));
    chk(n_dcc_not > 0,  $sformatf("DCC n-wordline activations: %0d", n_dcc_not));
    chk(n_fast > 0,     $sformatf("overlapped AAPs (split decoder): %0d", n_fast));
    chk(n_slow > 0,     $sformatf("serial AAPs: %0d", n_slow));
    chk(n_par > 0,      $sformatf("cycles with bbops on two banks: %0d", n_par));
    chk(n_overtake > 0, $sformatf("ordinary accesses done during a bbop: %0d", n_overtake));
    chk(n_fpm_copy > 0, $sformatf("RowClone-FPM copies: %0d", n_fpm_copy));
    chk(n_init > 0,     $sformatf("bulk initialisations: %0d", n_init));
    chk(n_xsub > 0,     $sformatf("cross-subarray refusals: %0d", n_xsub));
    chk(n_range > 0,    $sformatf("out-of-range accesses: %0d", n_range));
    chk(n_multi > 0,    $sformatf("multi-row bbops: %0d", n_multi));
    $display("mechanisms: TRA=%0d DCC-NOT=%0d fastAAP=%0d slowAAP=%0d parallel=%0d overtake=%0d copy=%0d init=%0d xsub=%0d range=%0d multirow=%0d",
             n_tra, n_dcc_not, n_fast, n_slow, n_par, n_overtake, n_fpm_copy, n_init, n_xsub, n_range, n_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
