// tb_bbop_sequencer: checks the command stream of the per-bank sequencer
// (64 row addresses per subarray, 2 subarrays) against the command
// sequences written out here for every op, including the row addresses of
// the reserved rows, the row-to-subarray mapping, multi-row ops, the
// cross-subarray error and the cycle timing:
//   overlapped AAP  ACT -8- ACT -24- PRE -8- next   (40 cycles)
//   serial AAP      ACT -28- ACT -28- PRE -8- next  (64 cycles)
//   AP              ACT -28- PRE -8- next           (36 cycles)
// A second instance built without the split decoder must run every AAP
// serially. The command grant is withheld at random in a second pass,
// which may only delay commands, never reorder or shorten gaps.
module tb_bbop_sequencer;
  import ambit_pkg::*;

  localparam int ROWS = 64, NSUB = 2, ND = ROWS - 18;

  logic clk = 0, rst_n = 0;
  logic start = 0;
  bbop_e op = OP_AND;
  logic [ROW_AW-1:0] dst = '0, src1 = '0, src2 = '0;
  logic [ROW_AW:0] nrows = '0;
  logic busy, done, err, cmd_valid, aap_fast, aap_slow;
  cmd_e cmd_kind;
  logic [ROW_AW-1:0] cmd_row;
  logic grant = 1;
  logic random_grant = 0;
  int checks = 0, failures = 0;
  longint cyc = 0;

  bbop_sequencer #(.ROWS(ROWS), .NSUB(NSUB)) dut (
    .clk, .rst_n, .start, .op, .dst, .src1, .src2, .nrows, .busy, .done, .err,
    .cmd_valid, .cmd_kind, .cmd_row, .cmd_grant(grant), .aap_fast, .aap_slow);

  // same sequencer without the split row decoder
  logic s_start = 0, s_busy, s_done, s_err, s_valid, s_fast, s_slow;
  cmd_e s_kind;
  logic [ROW_AW-1:0] s_row;
  bbop_sequencer #(.ROWS(ROWS), .NSUB(NSUB), .SPLIT_DECODER(1'b0)) dut_serial (
    .clk, .rst_n, .start(s_start), .op(OP_AND), .dst, .src1, .src2, .nrows,
    .busy(s_busy), .done(s_done), .err(s_err), .cmd_valid(s_valid), .cmd_kind(s_kind),
    .cmd_row(s_row), .cmd_grant(1'b1), .aap_fast(s_fast), .aap_slow(s_slow));

  always #5 clk = ~clk;

  typedef struct { longint t; cmd_e k; int r; } ev_t;
  ev_t log_q[$];
  ev_t slog_q[$];
  int n_fast = 0, n_slow = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && cmd_valid && grant) log_q.push_back('{cyc, cmd_kind, int'(cmd_row)});
    if (rst_n && s_valid) slog_q.push_back('{cyc, s_kind, int'(s_row)});
    if (aap_fast) n_fast++;
    if (aap_slow) n_slow++;
    if (random_grant) grant <= ($urandom % 3) != 0;
    else grant <= 1'b1;
  end

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // Bank row address of a data row number, and of reserved rows.
  function automatic int drow(int g); return (g / ND) * ROWS + g % ND; endfunction
  function automatic int brow(int sub, int i); return sub * ROWS + ND + 2 + i; endfunction
  function automatic int crow(int sub, int i); return sub * ROWS + ND + i; endfunction

  // Expected primitive list: AAP(a1,a2) has a2 >= 0, AP has a2 = -1.
  typedef struct { int a1; int a2; } prim_t;
  prim_t exp_q[$];

  task automatic build(bbop_e o, int k, int i, int j);
    int s, Di, Dj, Dk;
    s = k / ND; Di = drow(i); Dj = drow(j); Dk = drow(k);
    case (o)
      OP_AND, OP_OR: begin
        exp_q.push_back('{Di, brow(s, 0)});
        exp_q.push_back('{Dj, brow(s, 1)});
        exp_q.push_back('{crow(s, o == OP_OR), brow(s, 2)});
        exp_q.push_back('{brow(s, 12), Dk});
      end
      OP_NAND, OP_NOR: begin
        exp_q.push_back('{Di, brow(s, 0)});
        exp_q.push_back('{Dj, brow(s, 1)});
        exp_q.push_back('{crow(s, o == OP_NOR), brow(s, 2)});
        exp_q.push_back('{brow(s, 12), brow(s, 5)});
        exp_q.push_back('{brow(s, 4), Dk});
      end
      OP_XOR, OP_XNOR: begin
        exp_q.push_back('{Di, brow(s, 8)});
        exp_q.push_back('{Dj, brow(s, 9)});
        exp_q.push_back('{crow(s, o == OP_XNOR), brow(s, 10)});
        exp_q.push_back('{brow(s, 14), -1});
        exp_q.push_back('{brow(s, 15), -1});
        exp_q.push_back('{crow(s, o == OP_XOR), brow(s, 2)});
        exp_q.push_back('{brow(s, 12), Dk});
      end
      OP_NOT: begin
        exp_q.push_back('{Di, brow(s, 5)});
        exp_q.push_back('{brow(s, 4), Dk});
      end
      OP_COPY: exp_q.push_back('{Di, Dk});
      OP_ZERO: exp_q.push_back('{crow(s, 0), Dk});
      OP_ONE:  exp_q.push_back('{crow(s, 1), Dk});
      default: ;
    endcase
  endtask

  function automatic bit is_b(int r); return (r % ROWS) >= ND + 2; endfunction

  task automatic run(bbop_e o, int k, int i, int j, int n, bit exact_timing);
    longint t_start, t_prev;
    int idx;
    bit prev_pre;
    exp_q.delete(); log_q.delete();
    for (int x = 0; x < n; x++) build(o, k + x, i + x, j + x);
    @(negedge clk);
    op = o; dst = ROW_AW'(k); src1 = ROW_AW'(i); src2 = ROW_AW'(j); nrows = (ROW_AW+1)'(n);
    start = 1;
    @(negedge clk);
    start = 0;
    t_start = cyc;
    wait (done);
    @(negedge clk);
    chk(!err, $sformatf("%s: no error", o.name()));
    idx = 0;
    prev_pre = 0;
    t_prev = 0;
    foreach (exp_q[p]) begin
      bit fast;
      longint t_act1;
      fast = exp_q[p].a2 >= 0 && (is_b(exp_q[p].a1) != is_b(exp_q[p].a2));
      if (idx + (exp_q[p].a2 >= 0 ? 3 : 2) > log_q.size()) begin
        chk(0, $sformatf("%s: command stream too short", o.name()));
        break;
      end
      chk(log_q[idx].k == CMD_ACT && log_q[idx].r == exp_q[p].a1,
          $sformatf("%s prim %0d: ACTIVATE %0d, got %s %0d", o.name(), p, exp_q[p].a1,
                    log_q[idx].k.name(), log_q[idx].r));
      if (prev_pre) chk(exact_timing ? (log_q[idx].t - t_prev == 8) : (log_q[idx].t - t_prev >= 8),
                        $sformatf("%s prim %0d: tRP", o.name(), p));
      t_act1 = log_q[idx].t;
      idx++;
      if (exp_q[p].a2 >= 0) begin
        chk(log_q[idx].k == CMD_ACT && log_q[idx].r == exp_q[p].a2,
            $sformatf("%s prim %0d: second ACTIVATE %0d, got %0d", o.name(), p,
                      exp_q[p].a2, log_q[idx].r));
        if (exact_timing)
          chk(log_q[idx].t - t_act1 == (fast ? 8 : 28), $sformatf("%s prim %0d: ACT-ACT", o.name(), p));
        idx++;
        chk(log_q[idx].k == CMD_PRE, $sformatf("%s prim %0d: PRECHARGE", o.name(), p));
        chk(exact_timing ? (log_q[idx].t - t_act1 == (fast ? 32 : 56))
                         : (log_q[idx].t - t_act1 >= (fast ? 32 : 56)),
            $sformatf("%s prim %0d: ACT-PRE %0d", o.name(), p, log_q[idx].t - t_act1));
      end else begin
        chk(log_q[idx].k == CMD_PRE, $sformatf("%s prim %0d: AP PRECHARGE", o.name(), p));
        chk(exact_timing ? (log_q[idx].t - t_act1 == 28) : (log_q[idx].t - t_act1 >= 28),
            $sformatf("%s prim %0d: AP ACT-PRE", o.name(), p));
      end
      t_prev = log_q[idx].t;
      prev_pre = 1;
      idx++;
    end
    chk(idx == log_q.size(), $sformatf("%s: %0d commands, expected %0d", o.name(), log_q.size(), idx));
  endtask

  int f0, s0;

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // one row of each op, operands in subarray 1
    f0 = n_fast; s0 = n_slow;
    run(OP_AND, 50, 47, 48, 1, 1);
    chk(n_fast - f0 == 4 && n_slow == s0, "AND: four overlapped AAPs");
    f0 = n_fast; s0 = n_slow;
    run(OP_NAND, 50, 47, 48, 1, 1);
    chk(n_fast - f0 == 4 && n_slow - s0 == 1, "NAND: one serial AAP (B12, B5)");
    run(OP_OR,   51, 49, 47, 1, 1);
    run(OP_NOR,  51, 49, 47, 1, 1);
    run(OP_XOR,  52, 47, 48, 1, 1);
    run(OP_XNOR, 52, 47, 48, 1, 1);
    run(OP_NOT,  53, 47, 0, 1, 1);
    f0 = n_fast; s0 = n_slow;
    run(OP_COPY, 54, 47, 0, 1, 1);
    chk(n_slow - s0 == 1, "COPY: both addresses C/D, serial");
    run(OP_ZERO, 55, 0, 0, 1, 1);
    run(OP_ONE,  56, 0, 0, 1, 1);
    // several rows, subarray 0
    run(OP_AND, 10, 0, 5, 3, 1);
    // total time of one AND row: 4 x 40 cycles
    begin
      longint t0;
      @(negedge clk);
      op = OP_AND; dst = 20; src1 = 21; src2 = 22; nrows = 1; start = 1;
      @(negedge clk); start = 0; t0 = cyc;
      wait (done); @(negedge clk);
      chk(cyc - t0 >= 160 && cyc - t0 <= 163, $sformatf("AND row takes 160 cycles, took %0d", cyc - t0));
    end
    // cross-subarray operands: error, no command
    log_q.delete();
    @(negedge clk);
    op = OP_AND; dst = 50; src1 = 3; src2 = 47; nrows = 1; start = 1;
    @(negedge clk); start = 0;
    wait (done); @(negedge clk);
    chk(err, "cross-subarray op flagged");
    chk(log_q.size() == 0, "cross-subarray op issues nothing");
    // out of range
    @(negedge clk);
    op = OP_NOT; dst = ROW_AW'(2 * ND); src1 = 0; nrows = 1; start = 1;
    @(negedge clk); start = 0;
    wait (done); @(negedge clk);
    chk(err, "row beyond the bank flagged");
    // random stalls of the grant
    random_grant = 1;
    run(OP_XOR, 60, 62, 63, 2, 0);
    run(OP_NAND, 1, 2, 3, 1, 0);
    random_grant = 0;
    // without the split decoder: four serial AAPs, 4 x 64 cycles
    begin
      longint t0;
      @(negedge clk);
      dst = 20; src1 = 21; src2 = 22; nrows = 1; s_start = 1;
      @(negedge clk); s_start = 0; t0 = cyc;
      wait (s_done); @(negedge clk);
      chk(cyc - t0 >= 256 && cyc - t0 <= 259, $sformatf("serial AND row takes 256 cycles, took %0d", cyc - t0));
      chk(slog_q.size() == 12, "serial AND: 12 commands");
      chk(slog_q.size() >= 2 && slog_q[1].t - slog_q[0].t == 28, "serial AAP: ACT-ACT = tRAS");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
