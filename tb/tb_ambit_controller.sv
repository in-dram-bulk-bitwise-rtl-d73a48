// tb_ambit_controller: the controller (4 banks, 2 subarrays of 64 row
// addresses) against a DRAM model kept in this testbench: a column store
// keyed by bank/row/column plus a per-bank timing checker (tRAS, tRP, tRCD,
// tWR, one row buffer per bank). Checks ordinary writes and reads, the data
// row to subarray-row mapping, the range error, two bbops on different
// banks running at once with interleaved commands, an ordinary access to a
// free bank overtaking a running bbop, an ordinary access to a busy bank
// waiting for it, and the handshake (bb_ready low for a busy bank).
module tb_ambit_controller;
  import ambit_pkg::*;

  localparam int NBANK = 4, NSUB = 2, ROWS = 64, ND = ROWS - 18;
  localparam int T_RAS = 28, T_RP = 8, T_RCD = 8, T_WR = 12;

  logic clk = 0, rst_n = 0;
  logic bb_valid = 0, bb_ready;
  bbop_e bb_op = OP_AND;
  logic [BANK_AW-1:0] bb_bank = '0;
  logic [ROW_AW-1:0] bb_dst = '0, bb_src1 = '0, bb_src2 = '0;
  logic [ROW_AW:0] bb_nrows = '0;
  logic [NBANK-1:0] bb_busy, bb_done, bb_err, aap_fast, aap_slow;
  logic mem_valid = 0, mem_ready, mem_we = 0, mem_done, mem_err;
  logic [BANK_AW-1:0] mem_bank = '0;
  logic [ROW_AW-1:0] mem_row = '0;
  logic [COL_AW-1:0] mem_col = '0;
  logic [63:0] mem_wdata = '0, mem_rdata;
  dram_cmd_t dram_cmd;
  logic [63:0] dram_wdata, dram_rdata = '0;
  logic dram_rvalid = 0;
  int checks = 0, failures = 0;
  longint cyc = 0;

  ambit_controller #(.NBANK(NBANK), .NSUB(NSUB), .ROWS(ROWS)) dut (
    .clk, .rst_n, .bb_valid, .bb_ready, .bb_op, .bb_bank, .bb_dst, .bb_src1, .bb_src2,
    .bb_nrows, .bb_busy, .bb_done, .bb_err, .mem_valid, .mem_ready, .mem_we, .mem_bank,
    .mem_row, .mem_col, .mem_wdata, .mem_done, .mem_err, .mem_rdata, .dram_cmd,
    .dram_wdata, .dram_rdata, .dram_rvalid, .aap_fast, .aap_slow);

  always #5 clk = ~clk;

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0d %s", cyc, msg); end
  endtask

  // DRAM model
  logic [63:0] store [longint];
  bit     open_b [NBANK];
  int     open_row [NBANK];
  longint t_act [NBANK], t_pre [NBANK], t_wr [NBANK];
  int     ncmd [NBANK];
  int     timing_errs = 0;
  longint last_act_t [NBANK];
  int     last_act_row [NBANK];

  function automatic longint key(int b, int r, int c); return (longint'(b) << 32) | (r << 8) | c; endfunction

  initial for (int b = 0; b < NBANK; b++) begin
    t_act[b] = -1000; t_pre[b] = -1000; t_wr[b] = -1000; open_b[b] = 0; ncmd[b] = 0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    dram_rvalid <= 1'b0;
    if (rst_n && dram_cmd.cmd != CMD_NOP) begin
      int b;
      b = int'(dram_cmd.bank);
      ncmd[b]++;
      unique case (dram_cmd.cmd)
        CMD_ACT: begin
          if (!open_b[b]) begin
            if (cyc - t_pre[b] < T_RP) begin timing_errs++; $display("tRP violated bank %0d", b); end
            open_b[b] = 1; open_row[b] = int'(dram_cmd.row); t_act[b] = cyc;
          end
          last_act_t[b] = cyc; last_act_row[b] = int'(dram_cmd.row);
        end
        CMD_PRE: begin
          if (!open_b[b]) begin timing_errs++; $display("PRE to closed bank %0d", b); end
          if (cyc - t_act[b] < T_RAS) begin timing_errs++; $display("tRAS violated bank %0d", b); end
          if (cyc - t_wr[b] < T_WR) begin timing_errs++; $display("tWR violated bank %0d", b); end
          open_b[b] = 0; t_pre[b] = cyc;
        end
        CMD_RD, CMD_WR: begin
          if (!open_b[b]) begin timing_errs++; $display("column command to closed bank %0d", b); end
          if (cyc - t_act[b] < T_RCD) begin timing_errs++; $display("tRCD violated bank %0d", b); end
          if (dram_cmd.cmd == CMD_WR) begin
            store[key(b, open_row[b], int'(dram_cmd.col))] = dram_wdata;
            t_wr[b] = cyc;
          end else begin
            dram_rvalid <= 1'b1;
            dram_rdata  <= store.exists(key(b, open_row[b], int'(dram_cmd.col)))
                         ? store[key(b, open_row[b], int'(dram_cmd.col))] : 64'hBAD0_BAD0_BAD0_BAD0;
          end
        end
        default: ;
      endcase
    end
  end

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

  task automatic bbop(bbop_e o, int bank, int k, int i, int j, int n);
    @(negedge clk);
    bb_valid = 1; bb_op = o; bb_bank = BANK_AW'(bank); bb_dst = ROW_AW'(k);
    bb_src1 = ROW_AW'(i); bb_src2 = ROW_AW'(j); bb_nrows = (ROW_AW+1)'(n);
    do @(posedge clk); while (!bb_ready);
    @(negedge clk);
    bb_valid = 0;
  endtask

  logic [63:0] rd, v [8];
  bit e;
  int both_busy = 0;
  longint t_done0, t_mem2, t_mem0_act;
  bit seen_done0;

  always @(posedge clk) if (bb_busy[0] && bb_busy[1]) both_busy++;
  always @(posedge clk) if (bb_done[0]) begin t_done0 = cyc; seen_done0 = 1; end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // ordinary writes and reads, rows in both subarrays, several banks
    for (int x = 0; x < 8; x++) begin
      v[x] = {$urandom, $urandom};
      mem_access(1, x % NBANK, (x * 13) % (NSUB * ND), x % 2, v[x], rd, e);
      chk(!e, "write accepted");
      chk(last_act_row[x % NBANK] == ((x * 13) % (NSUB * ND)) / ND * ROWS + ((x * 13) % (NSUB * ND)) % ND,
          $sformatf("data row %0d mapped to bank row %0d", (x * 13) % (NSUB * ND), last_act_row[x % NBANK]));
    end
    for (int x = 0; x < 8; x++) begin
      mem_access(0, x % NBANK, (x * 13) % (NSUB * ND), x % 2, '0, rd, e);
      chk(rd === v[x], $sformatf("read back %0d: %h vs %h", x, rd, v[x]));
    end
    mem_access(0, 0, NSUB * ND, 0, '0, rd, e);
    chk(e, "row beyond the bank flagged");
    // two bbops at once on banks 0 and 1, plus an ordinary access to bank 2
    seen_done0 = 0;
    for (int b = 0; b < NBANK; b++) ncmd[b] = 0;
    bbop(OP_AND, 0, 50, 47, 48, 2);
    chk(!bb_ready || bb_bank != 0, "busy bank not ready");
    bb_bank = 0; #1;
    chk(!bb_ready, "bb_ready low for the busy bank");
    bbop(OP_XOR, 1, 10, 11, 12, 1);
    mem_access(0, 2, 0, 0, '0, rd, e);
    t_mem2 = cyc;
    chk(!seen_done0, "ordinary access to a free bank finishes during the bbop");
    // ordinary access to busy bank 0 waits for it
    mem_access(0, 0, (4 * 13) % (NSUB * ND), 0, '0, rd, e);
    chk(seen_done0, "ordinary access to the busy bank waits for the bbop");
    chk(t_act[0] > t_done0 - 1, "its ACTIVATE follows the bbop");
    chk(rd === v[4], "and reads the right data");
    wait (!bb_busy[1]);
    @(negedge clk);
    chk(both_busy > 100, $sformatf("banks 0 and 1 worked in parallel for %0d cycles", both_busy));
    chk(bb_err == 0, "no bbop error");
    chk(ncmd[0] == 2 * 12 + 3, $sformatf("bank 0 saw %0d commands", ncmd[0]));
    chk(ncmd[1] == 5 * 3 + 2 * 2, $sformatf("bank 1 saw %0d commands", ncmd[1]));
    chk(timing_errs == 0, $sformatf("%0d DRAM timing violations", timing_errs));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
