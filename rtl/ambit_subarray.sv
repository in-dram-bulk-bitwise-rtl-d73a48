// ambit_subarray: logical model of one Ambit DRAM subarray.
//
// A subarray is a set of rows sharing one row of sense amplifiers. Each
// bitline position (column of cells) holds:
//   * ROWS-18 data cells (D-group), stored as a memory array `dmem`,
//   * two control cells C0/C1, preset to 0 and 1 at reset,
//   * four designated cells T0-T3 for triple-row activation,
//   * two dual-contact cells DCC0/DCC1, each reachable through a
//     d-wordline (cell to bitline) and an n-wordline (cell to bitline-bar).
//
// Command semantics (one command per cycle, `cmd`):
//   ACTIVATE from the precharged state: the raised cells share charge with
//     the bitline and the sense amplifier settles to the sign of the
//     deviation, (2k - n) > 0 for k charged cells out of n raised. With one
//     cell this copies the cell; with three it is the bitwise majority,
//     MAJ(A,B,C) = C(A+B) + !C(AB), so C0/C1 in the third row selects
//     AND/OR. A cell on an n-wordline reaches the bitline-bar, so it counts
//     as its complement. Every raised cell is then restored to the settled
//     value (cells on an n-wordline receive the complement), so a
//     triple-row activation overwrites all three sources.
//   ACTIVATE while activated: the sense amplifier already holds a stable
//     value and overwrites the newly raised cells with it. This is the
//     second ACTIVATE of an AAP (RowClone-FPM copy) and, through an
//     n-wordline, the Ambit NOT.
//   WRITE: replaces one IO_W-bit column of the sense amplifiers; the raised
//     cells follow. READ: `rdata` shows the selected column (combinational).
//   PRECHARGE: lowers all wordlines; the subarray returns to precharged.
// The charge-sharing rule, majority, DCC behaviour and reserved addresses
// follow the paper. The paper does not say what two raised cells of opposite
// value settle to from the precharged state (zero deviation); this model
// settles to 0, and the controller never issues such an ACTIVATE.
// Timing (tRAS, tRP) is the controller's job; this model is functional and
// the sense amplifier settles within the cycle of the ACTIVATE.
module ambit_subarray
  import ambit_pkg::*;
#(
  parameter int unsigned ROWS = 1024,
  parameter int unsigned COLS = 8192,
  localparam int unsigned RAW = $clog2(ROWS),
  localparam int unsigned CAW = (COLS / IO_W > 1) ? $clog2(COLS / IO_W) : 1,
  localparam int unsigned ND  = ROWS - N_RESV
) (
  input  logic            clk,
  input  logic            rst_n,
  input  cmd_e            cmd,
  input  logic [RAW-1:0]  row,
  input  logic [CAW-1:0]  col,
  input  logic [IO_W-1:0] wdata,
  output logic [IO_W-1:0] rdata,
  output logic            activated
);

  typedef logic [COLS-1:0] row_t;

  // Cells.
  row_t dmem [ND];
  row_t crow [N_CROWS];
  row_t trow [4];
  row_t dcc  [2];

  // Sense amplifiers and raised-wordline state.
  row_t sa_q;
  logic act_q;
  logic d_up_q;                // a D row is raised
  logic [RAW-1:0] d_idx_q;
  logic [N_CROWS-1:0] c_up_q;  // C rows raised
  bwl_t b_up_q;                // B-group wordlines raised

  // Decode of the command's row address.
  logic is_d, is_c, is_b, c_row;
  logic [RAW-1:0] d_row;
  bwl_t bwl;

  split_row_decoder #(.ROWS(ROWS)) u_dec (
    .addr  (row),
    .is_d  (is_d),
    .is_c  (is_c),
    .is_b  (is_b),
    .d_row (d_row),
    .c_row (c_row),
    .bwl   (bwl)
  );

  // Charge sharing from the precharged state.
  row_t sense_val;
  row_t bcell [8];
  row_t v [3];
  int unsigned n_up;

  always_comb begin
    // What each B-group wordline puts on the bitline.
    bcell[WL_T0]    = trow[0];
    bcell[WL_T1]    = trow[1];
    bcell[WL_T2]    = trow[2];
    bcell[WL_T3]    = trow[3];
    bcell[WL_DCC0]  = dcc[0];
    bcell[WL_DCC0N] = ~dcc[0];
    bcell[WL_DCC1]  = dcc[1];
    bcell[WL_DCC1N] = ~dcc[1];
    v[0] = '0; v[1] = '0; v[2] = '0;
    n_up = 0;
    for (int w = 0; w < 8; w++) begin
      if (bwl[w] && n_up < 3) begin
        v[n_up] = bcell[w];
        n_up = n_up + 1;
      end
    end
    if (is_d)       sense_val = dmem[d_row];
    else if (is_c)  sense_val = crow[c_row];
    else begin
      unique case (n_up)
        1:       sense_val = v[0];
        2:       sense_val = v[0] & v[1];   // (2k-2)>0 only for k=2
        3:       sense_val = (v[0] & v[1]) | (v[1] & v[2]) | (v[2] & v[0]);
        default: sense_val = '0;
      endcase
    end
  end

  // Value the sense amplifiers hold after this cycle's command.
  row_t sa_next;
  always_comb begin
    sa_next = sa_q;
    unique case (cmd)
      CMD_ACT: if (!act_q) sa_next = sense_val;
      CMD_WR:  if (act_q)  sa_next[col*IO_W +: IO_W] = wdata;
      default: ;
    endcase
  end

  assign rdata     = sa_q[col*IO_W +: IO_W];
  assign activated = act_q;

  // Wordlines connected during this cycle (old ones plus the new ACTIVATE).
  logic               d_con;
  logic [RAW-1:0]     d_con_idx;
  logic [N_CROWS-1:0] c_con;
  bwl_t               b_con;
  logic               cells_follow;

  always_comb begin
    d_con     = d_up_q;
    d_con_idx = d_idx_q;
    c_con     = c_up_q;
    b_con     = b_up_q;
    if (cmd == CMD_ACT) begin
      if (is_d) begin d_con = 1'b1; d_con_idx = d_row; end
      if (is_c) c_con[c_row] = 1'b1;
      b_con = b_con | bwl;
    end
    cells_follow = (cmd == CMD_ACT) || (cmd == CMD_WR && act_q);
  end

  // Control state.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_q   <= 1'b0;
      d_up_q  <= 1'b0;
      d_idx_q <= '0;
      c_up_q  <= '0;
      b_up_q  <= '0;
      sa_q    <= '0;
    end else begin
      sa_q <= sa_next;
      unique case (cmd)
        CMD_ACT: begin
          act_q   <= 1'b1;
          d_up_q  <= d_con;
          d_idx_q <= d_con_idx;
          c_up_q  <= c_con;
          b_up_q  <= b_con;
        end
        CMD_PRE: begin
          act_q  <= 1'b0;
          d_up_q <= 1'b0;
          c_up_q <= '0;
          b_up_q <= '0;
        end
        default: ;
      endcase
    end
  end

  // Data rows: one write port, the raised D row follows the sense amplifiers.
  always_ff @(posedge clk) begin
    if (cells_follow && d_con)
      dmem[d_con_idx] <= sa_next;
  end

  // Control rows: preset at reset, and real cells otherwise.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      crow[0] <= '0;
      crow[1] <= '1;
    end else if (cells_follow) begin
      for (int c = 0; c < N_CROWS; c++)
        if (c_con[c]) crow[c] <= sa_next;
    end
  end

  // B-group rows.
  always_ff @(posedge clk) begin
    if (cells_follow) begin
      for (int t = 0; t < 4; t++)
        if (b_con[t]) trow[t] <= sa_next;
      if (b_con[WL_DCC0])  dcc[0] <= sa_next;
      if (b_con[WL_DCC0N]) dcc[0] <= ~sa_next;
      if (b_con[WL_DCC1])  dcc[1] <= sa_next;
      if (b_con[WL_DCC1N]) dcc[1] <= ~sa_next;
    end
  end

  // Reading or writing a column needs an activated row.
  a_col_needs_act: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd == CMD_RD || cmd == CMD_WR) |-> act_q)
    else $error("column command to a precharged subarray");
  // Two cells of opposite value with nothing to break the tie: the
  // controller never raises exactly two wordlines from the precharged state.
  a_no_double_first_act: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd == CMD_ACT && !act_q && is_b) |-> (n_up != 2))
    else $error("two-wordline ACTIVATE from the precharged state");

endmodule
