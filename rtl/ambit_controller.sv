// ambit_controller: memory controller with Ambit support for one chip/rank.
//
// Two kinds of host request share one DRAM command bus:
//   * bulk bitwise operations (bbop): op, bank, dst, src1, src2 and a
//     length in rows. Each bank has its own bbop_sequencer, so bbops on
//     different banks run at the same time and their AAP commands
//     interleave on the bus (bank-level parallelism).
//   * ordinary column reads and writes (`mem_*`), done closed-page:
//     ACTIVATE, tRCD, READ/WRITE, wait until tRAS (and tWR after a write),
//     PRECHARGE, tRP.
// Software sees only data rows. Row number g of a bank is placed in
// subarray g / ND at D-group row g % ND (ND = ROWS - 18 data rows per
// subarray), so the data rows of all subarrays form one contiguous range
// and the reserved B/C-group addresses are never visible.
//
// Arbitration: one command per cycle; the ordinary access engine first,
// then the sequencers round robin. A bank is owned by either its sequencer
// or the access engine until the owner has finished, including tRP.
// Commands to different banks are not checked against each other
// (tRRD, tFAW and the data-bus turnaround are not modelled).
//
// Handshakes: a request is taken in a cycle where valid and ready are both
// high. `bb_done[b]`/`bb_err[b]` pulse when bank b's bbop ends (err: an
// operand step crossed subarrays or left the bank). `mem_done` pulses once
// per access, with `mem_rdata` for a read; `mem_err` with it if the row does
// not exist.
// The split of work (per-bank sequencers, closed-page ordinary accesses,
// priority to ordinary accesses) is this design's choice; the paper asks
// only that the controller store the address groups, the ACTIVATE timings
// and the command sequences, and track ongoing bitwise operations.
module ambit_controller
  import ambit_pkg::*;
#(
  parameter int unsigned NBANK         = 8,
  parameter int unsigned NSUB          = 32,
  parameter int unsigned ROWS          = 1024,
  parameter bit          SPLIT_DECODER = 1'b1,
  parameter int unsigned T_RAS         = 28,
  parameter int unsigned T_RP          = 8,
  parameter int unsigned T_RCD         = 8,
  parameter int unsigned T_WR          = 12,
  parameter int unsigned T_ACT_ACT     = 8,
  parameter int unsigned T_AAP_OVL     = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  // bbop requests
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
  // ordinary accesses
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
  // DRAM command/address and data buses
  output dram_cmd_t          dram_cmd,
  output logic [IO_W-1:0]    dram_wdata,
  input  logic [IO_W-1:0]    dram_rdata,
  input  logic               dram_rvalid,
  // events, for observation
  output logic [NBANK-1:0]   aap_fast,
  output logic [NBANK-1:0]   aap_slow
);

  localparam int unsigned ND    = ROWS - N_RESV;
  localparam int unsigned NDATA = NSUB * ND;
  localparam int unsigned BW    = (NBANK > 1) ? $clog2(NBANK) : 1;
  localparam int unsigned CNT_W = 8;

  // ---------------------------------------------------------------- sequencers
  logic [NBANK-1:0]  seq_valid, seq_grant;
  cmd_e              seq_kind [NBANK];
  logic [ROW_AW-1:0] seq_row  [NBANK];

  // Ordinary access engine state (declared here: it gates bbop starts).
  typedef enum logic [2:0] {R_IDLE, R_WAIT, R_ACT, R_COL, R_PRE, R_RP} rstate_e;
  rstate_e            r_state_q;
  logic [BANK_AW-1:0] r_bank_q;

  logic bank_held;
  assign bank_held = (r_state_q != R_IDLE) && (r_bank_q == bb_bank);
  assign bb_ready  = (32'(bb_bank) < NBANK) && !bb_busy[BW'(bb_bank)] && !bank_held;

  for (genvar b = 0; b < NBANK; b++) begin : g_seq
    bbop_sequencer #(
      .ROWS(ROWS), .NSUB(NSUB), .SPLIT_DECODER(SPLIT_DECODER),
      .T_RAS(T_RAS), .T_RP(T_RP), .T_ACT_ACT(T_ACT_ACT), .T_AAP_OVL(T_AAP_OVL)
    ) u_seq (
      .clk       (clk),
      .rst_n     (rst_n),
      .start     (bb_valid && bb_ready && bb_bank == BANK_AW'(b)),
      .op        (bb_op),
      .dst       (bb_dst),
      .src1      (bb_src1),
      .src2      (bb_src2),
      .nrows     (bb_nrows),
      .busy      (bb_busy[b]),
      .done      (bb_done[b]),
      .err       (bb_err[b]),
      .cmd_valid (seq_valid[b]),
      .cmd_kind  (seq_kind[b]),
      .cmd_row   (seq_row[b]),
      .cmd_grant (seq_grant[b]),
      .aap_fast  (aap_fast[b]),
      .aap_slow  (aap_slow[b])
    );
  end

  // ------------------------------------------------------ ordinary accesses
  logic               r_we_q;
  logic [ROW_AW-1:0]  r_row_q;
  logic [COL_AW-1:0]  r_col_q;
  logic [IO_W-1:0]    r_wdata_q;
  logic [CNT_W-1:0]   r_cnt_q, r_need_q;
  logic               r_valid, r_grant;
  dram_cmd_t          r_cmd;

  logic [ROW_AW-1:0]  m_sub;
  logic [ROW_AW-1:0]  m_row;
  logic               m_bad;
  always_comb begin
    m_sub = mem_row / ROW_AW'(ND);
    m_row = ROW_AW'(32'(m_sub) * ROWS + 32'(mem_row) - 32'(m_sub) * ND);
    m_bad = (32'(mem_row) >= NDATA) || (32'(mem_bank) >= NBANK);
  end

  assign mem_ready = (r_state_q == R_IDLE);

  always_comb begin
    r_valid = 1'b0;
    r_cmd   = '0;
    r_cmd.bank = r_bank_q;
    r_cmd.row  = r_row_q;
    r_cmd.col  = r_col_q;
    unique case (r_state_q)
      R_ACT: begin r_valid = r_cnt_q >= r_need_q; r_cmd.cmd = CMD_ACT; end
      R_COL: begin r_valid = r_cnt_q >= r_need_q; r_cmd.cmd = r_we_q ? CMD_WR : CMD_RD; end
      R_PRE: begin r_valid = r_cnt_q >= r_need_q; r_cmd.cmd = CMD_PRE; end
      default: ;
    endcase
  end

  localparam int unsigned T_RD_PRE = (T_RAS > T_RCD) ? T_RAS - T_RCD : 1;
  localparam int unsigned T_WR_PRE = (T_WR > T_RD_PRE) ? T_WR : T_RD_PRE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_state_q <= R_IDLE;
      r_bank_q  <= '0;
      r_we_q    <= 1'b0;
      r_row_q   <= '0;
      r_col_q   <= '0;
      r_wdata_q <= '0;
      r_cnt_q   <= '0;
      r_need_q  <= '0;
      mem_done  <= 1'b0;
      mem_err   <= 1'b0;
      mem_rdata <= '0;
    end else begin
      mem_done <= 1'b0;
      mem_err  <= 1'b0;
      if (r_grant)               r_cnt_q <= CNT_W'(1);
      else if (r_cnt_q != '1)    r_cnt_q <= r_cnt_q + 1'b1;
      if (dram_rvalid)           mem_rdata <= dram_rdata;
      unique case (r_state_q)
        R_IDLE: if (mem_valid) begin
          if (m_bad) begin
            mem_done <= 1'b1;
            mem_err  <= 1'b1;
          end else begin
            r_bank_q  <= mem_bank;
            r_we_q    <= mem_we;
            r_row_q   <= m_row;
            r_col_q   <= mem_col;
            r_wdata_q <= mem_wdata;
            r_state_q <= R_WAIT;
          end
        end
        R_WAIT: if (!bb_busy[BW'(r_bank_q)]) begin
          r_need_q  <= '0;
          r_state_q <= R_ACT;
        end
        R_ACT: if (r_grant) begin
          r_need_q  <= CNT_W'(T_RCD);
          r_state_q <= R_COL;
        end
        R_COL: if (r_grant) begin
          r_need_q  <= CNT_W'(r_we_q ? T_WR_PRE : T_RD_PRE);
          r_state_q <= R_PRE;
        end
        R_PRE: if (r_grant) begin
          r_need_q  <= CNT_W'(T_RP);
          r_state_q <= R_RP;
        end
        R_RP: if (r_cnt_q >= r_need_q) begin
          mem_done  <= 1'b1;
          r_state_q <= R_IDLE;
        end
        default: r_state_q <= R_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- arbiter
  logic [BW-1:0] rr_q;
  logic [BW-1:0] pick;
  logic          pick_ok;

  always_comb begin
    pick    = '0;
    pick_ok = 1'b0;
    for (int unsigned k = 0; k < NBANK; k++) begin
      int unsigned idx;
      idx = (32'(rr_q) + k) % NBANK;
      if (!pick_ok && seq_valid[idx]) begin
        pick    = BW'(idx);
        pick_ok = 1'b1;
      end
    end
    r_grant   = r_valid;
    seq_grant = '0;
    if (!r_valid && pick_ok) seq_grant[pick] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      rr_q <= '0;
    else if (!r_valid && pick_ok)    rr_q <= BW'((32'(pick) + 1) % NBANK);
  end

  always_comb begin
    dram_cmd   = '0;
    dram_wdata = r_wdata_q;
    if (r_valid) begin
      dram_cmd = r_cmd;
    end else if (pick_ok) begin
      dram_cmd.cmd  = seq_kind[pick];
      dram_cmd.bank = BANK_AW'(pick);
      dram_cmd.row  = seq_row[pick];
    end
  end

  // One owner per bank at a time.
  a_one_owner: assert property (@(posedge clk) disable iff (!rst_n)
    (r_state_q inside {R_ACT, R_COL, R_PRE, R_RP}) |-> !bb_busy[BW'(r_bank_q)]);

endmodule
