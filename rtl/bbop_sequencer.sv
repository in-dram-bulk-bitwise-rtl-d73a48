// bbop_sequencer: per-bank engine of the Ambit controller.
//
// It executes one bulk bitwise operation Dk = op(Di, Dj) over `nrows`
// consecutive data rows of one bank. For every row it plays the op's
// command sequence, a short list of AAP and AP primitives:
//   AAP(a1, a2) = ACTIVATE a1; ACTIVATE a2; PRECHARGE
//                 (copies the result of activating a1 into the row(s) of a2)
//   AP(a)       = ACTIVATE a; PRECHARGE
// The sequences for and, nand and xor are the paper's; or, nor and xnor
// use the other control row where and, nand and xor use C0 or C1, which is
// how the paper says they are derived; not is the paper's two-AAP sequence;
// copy/zero/one are single RowClone-FPM AAPs from Di, C0 or C1.
//
// Row numbers: the operands are data-row numbers of the bank (the D-group
// rows of all subarrays, numbered contiguously: row g lives in subarray
// g / ND at D-row g % ND, ND = ROWS - 18). The three operands of each row
// step must fall in one subarray; otherwise the op stops with `err`.
// Reserved rows are addressed in the operands' subarray.
//
// Timing (cycles of the command clock, parameters): every command waits
// for the previous one. With the split row decoder (SPLIT_DECODER = 1) an
// AAP whose two addresses are one B-group and one C/D-group address
// overlaps its two ACTIVATEs: ACTIVATE-to-ACTIVATE T_ACT_ACT, ACTIVATE to
// PRECHARGE T_RAS + T_AAP_OVL in all, then T_RP. Any other AAP, or every AAP
// with SPLIT_DECODER = 0, runs serially: T_RAS, T_RAS, T_RP. AP takes T_RAS
// then T_RP. At the defaults (1.25 ns clock, DDR3-1600 8-8-8) an overlapped
// AAP takes 40 cycles (50 ns; the paper estimates 49 ns) and a serial one
// 64 cycles (80 ns, as in the paper). T_ACT_ACT is not in the paper.
//
// Interface: `start` with the operands when `busy` is low; `done` pulses
// once the last PRECHARGE has also met T_RP. Commands are offered on
// `cmd_valid/cmd_kind/cmd_row` and taken in a cycle with `cmd_grant`.
// `aap_fast`/`aap_slow` pulse when an AAP's second ACTIVATE is issued
// overlapped or serial.
module bbop_sequencer
  import ambit_pkg::*;
#(
  parameter int unsigned ROWS          = 1024,
  parameter int unsigned NSUB          = 32,
  parameter bit          SPLIT_DECODER = 1'b1,
  parameter int unsigned T_RAS         = 28,
  parameter int unsigned T_RP          = 8,
  parameter int unsigned T_ACT_ACT     = 8,
  parameter int unsigned T_AAP_OVL     = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  bbop_e             op,
  input  logic [ROW_AW-1:0] dst,
  input  logic [ROW_AW-1:0] src1,
  input  logic [ROW_AW-1:0] src2,
  input  logic [ROW_AW:0]   nrows,
  output logic              busy,
  output logic              done,
  output logic              err,
  output logic              cmd_valid,
  output cmd_e              cmd_kind,
  output logic [ROW_AW-1:0] cmd_row,
  input  logic              cmd_grant,
  output logic              aap_fast,
  output logic              aap_slow
);

  localparam int unsigned ND     = ROWS - N_RESV;
  localparam int unsigned NDATA  = NSUB * ND;
  localparam int unsigned CNT_W  = 8;

  // Command sequence of each operation.
  function automatic step_t ucode(bbop_e o, int unsigned i);
    step_t s;
    s = '{valid: 1'b0, is_ap: 1'b0, a1: SEL_B0, a2: SEL_B0};
    unique case (o)
      OP_AND, OP_OR, OP_NAND, OP_NOR: begin
        unique case (i)
          0: s = '{1'b1, 1'b0, SEL_DI, SEL_B0};
          1: s = '{1'b1, 1'b0, SEL_DJ, SEL_B1};
          2: s = '{1'b1, 1'b0, (o == OP_AND || o == OP_NAND) ? SEL_C0 : SEL_C1, SEL_B2};
          3: s = '{1'b1, 1'b0, SEL_B12, (o == OP_AND || o == OP_OR) ? SEL_DK : SEL_B5};
          4: if (o == OP_NAND || o == OP_NOR) s = '{1'b1, 1'b0, SEL_B4, SEL_DK};
          default: ;
        endcase
      end
      OP_XOR, OP_XNOR: begin
        unique case (i)
          0: s = '{1'b1, 1'b0, SEL_DI, SEL_B8};
          1: s = '{1'b1, 1'b0, SEL_DJ, SEL_B9};
          2: s = '{1'b1, 1'b0, (o == OP_XOR) ? SEL_C0 : SEL_C1, SEL_B10};
          3: s = '{1'b1, 1'b1, SEL_B14, SEL_B0};
          4: s = '{1'b1, 1'b1, SEL_B15, SEL_B0};
          5: s = '{1'b1, 1'b0, (o == OP_XOR) ? SEL_C1 : SEL_C0, SEL_B2};
          6: s = '{1'b1, 1'b0, SEL_B12, SEL_DK};
          default: ;
        endcase
      end
      OP_NOT: begin
        unique case (i)
          0: s = '{1'b1, 1'b0, SEL_DI, SEL_B5};
          1: s = '{1'b1, 1'b0, SEL_B4, SEL_DK};
          default: ;
        endcase
      end
      OP_COPY: if (i == 0) s = '{1'b1, 1'b0, SEL_DI, SEL_DK};
      OP_ZERO: if (i == 0) s = '{1'b1, 1'b0, SEL_C0, SEL_DK};
      OP_ONE:  if (i == 0) s = '{1'b1, 1'b0, SEL_C1, SEL_DK};
      default: ;
    endcase
    return s;
  endfunction

  function automatic logic sel_is_b(rsel_e s);
    return s <= SEL_B15;
  endfunction

  typedef enum logic [2:0] {S_IDLE, S_ADDR, S_ACT1, S_ACT2, S_PRE, S_FINISH} state_e;

  state_e              state_q;
  bbop_e               op_q;
  logic [ROW_AW-1:0]   dst_q, src1_q, src2_q;
  logic [ROW_AW:0]     left_q;        // rows still to do, including current
  logic [ROW_AW-1:0]   di_q, dj_q, dk_q, base_q;
  logic [2:0]          step_q;
  logic [CNT_W-1:0]    cnt_q;         // cycles since the last issued command
  logic [CNT_W-1:0]    need_q;        // cycles the next command must wait

  step_t cur;
  assign cur = ucode(op_q, int'(step_q));

  logic overlap;
  assign overlap = SPLIT_DECODER && (sel_is_b(cur.a1) != sel_is_b(cur.a2));

  function automatic logic [ROW_AW-1:0] row_of(rsel_e s, logic [ROW_AW-1:0] base,
      logic [ROW_AW-1:0] di, logic [ROW_AW-1:0] dj, logic [ROW_AW-1:0] dk);
    unique case (s)
      SEL_DI:  return di;
      SEL_DJ:  return dj;
      SEL_DK:  return dk;
      SEL_C0:  return base + ROW_AW'(ND);
      SEL_C1:  return base + ROW_AW'(ND + 1);
      default: return base + ROW_AW'(ND + N_CROWS) + ROW_AW'(s);
    endcase
  endfunction

  // Operand placement for the current row step.
  logic [ROW_AW:0]   total_q;
  logic [ROW_AW-1:0] done_rows;
  assign done_rows = ROW_AW'(total_q - left_q);

  logic [ROW_AW-1:0] gi, gj, gk;
  logic [ROW_AW-1:0] si, sj, sk;
  logic              uses_i, uses_j, addr_bad;
  always_comb begin
    gi = src1_q + done_rows;
    gj = src2_q + done_rows;
    gk = dst_q  + done_rows;
    si = gi / ROW_AW'(ND);
    sj = gj / ROW_AW'(ND);
    sk = gk / ROW_AW'(ND);
    uses_i = !(op_q == OP_ZERO || op_q == OP_ONE);
    uses_j = (op_q <= OP_XNOR);
    addr_bad = (32'(gk) >= NDATA)
            || (uses_i && (32'(gi) >= NDATA || si != sk))
            || (uses_j && (32'(gj) >= NDATA || sj != sk));
  end

  logic wait_ok;
  assign wait_ok = cnt_q >= need_q;

  always_comb begin
    cmd_valid = 1'b0;
    cmd_kind  = CMD_NOP;
    cmd_row   = '0;
    unique case (state_q)
      S_ACT1: begin
        cmd_valid = wait_ok;
        cmd_kind  = CMD_ACT;
        cmd_row   = row_of(cur.a1, base_q, di_q, dj_q, dk_q);
      end
      S_ACT2: begin
        cmd_valid = wait_ok;
        cmd_kind  = CMD_ACT;
        cmd_row   = row_of(cur.a2, base_q, di_q, dj_q, dk_q);
      end
      S_PRE: begin
        cmd_valid = wait_ok;
        cmd_kind  = CMD_PRE;
      end
      default: ;
    endcase
  end

  logic issued;
  assign issued = cmd_valid && cmd_grant;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_IDLE;
      op_q     <= OP_AND;
      dst_q    <= '0;
      src1_q   <= '0;
      src2_q   <= '0;
      left_q   <= '0;
      total_q  <= '0;
      di_q     <= '0;
      dj_q     <= '0;
      dk_q     <= '0;
      base_q   <= '0;
      step_q   <= '0;
      cnt_q    <= '1;
      need_q   <= '0;
      done     <= 1'b0;
      err      <= 1'b0;
      aap_fast <= 1'b0;
      aap_slow <= 1'b0;
    end else begin
      done     <= 1'b0;
      aap_fast <= 1'b0;
      aap_slow <= 1'b0;
      if (issued)              cnt_q <= CNT_W'(1);
      else if (cnt_q != '1)    cnt_q <= cnt_q + 1'b1;
      unique case (state_q)
        S_IDLE: if (start) begin
          op_q    <= op;
          dst_q   <= dst;
          src1_q  <= src1;
          src2_q  <= src2;
          left_q  <= nrows;
          total_q <= nrows;
          err     <= 1'b0;
          state_q <= (nrows == '0) ? S_FINISH : S_ADDR;
        end
        S_ADDR: begin
          if (addr_bad) begin
            err     <= 1'b1;
            state_q <= S_FINISH;
          end else begin
            di_q    <= ROW_AW'(32'(si) * ROWS + 32'(gi) - 32'(si) * ND);
            dj_q    <= ROW_AW'(32'(sj) * ROWS + 32'(gj) - 32'(sj) * ND);
            dk_q    <= ROW_AW'(32'(sk) * ROWS + 32'(gk) - 32'(sk) * ND);
            base_q  <= ROW_AW'(32'(sk) * ROWS);
            step_q  <= '0;
            state_q <= S_ACT1;
          end
        end
        S_ACT1: if (issued) begin
          if (cur.is_ap) begin
            need_q  <= CNT_W'(T_RAS);
            state_q <= S_PRE;
          end else begin
            need_q  <= CNT_W'(overlap ? T_ACT_ACT : T_RAS);
            state_q <= S_ACT2;
          end
        end
        S_ACT2: if (issued) begin
          need_q   <= CNT_W'(overlap ? (T_RAS + T_AAP_OVL - T_ACT_ACT) : T_RAS);
          aap_fast <= overlap;
          aap_slow <= !overlap;
          state_q  <= S_PRE;
        end
        S_PRE: if (issued) begin
          need_q <= CNT_W'(T_RP);
          if (step_q != 3'(MAX_STEPS - 1) && ucode(op_q, int'(step_q) + 1).valid) begin
            step_q  <= step_q + 1'b1;
            state_q <= S_ACT1;
          end else if (left_q > 1) begin
            left_q  <= left_q - 1'b1;
            state_q <= S_ADDR;
          end else begin
            left_q  <= '0;
            state_q <= S_FINISH;
          end
        end
        S_FINISH: if (wait_ok) begin
          done    <= 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy = (state_q != S_IDLE);

  // A command is never offered before its wait has passed.
  a_wait: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid |-> cnt_q >= need_q);

endmodule
