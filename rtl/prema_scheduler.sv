// prema_scheduler: the PREMA token-based scheduling policy.
//
// Each resident task holds tokens (fixed point, TOKEN_FRAC fractional bits),
// initialised by the context table to its priority level's token value
// (TOK_LOW / TOK_MED / TOK_HIGH = 1 / 3 / 9 by default).
//
// wake with period = 1 (a scheduling period has elapsed): for every valid
// entry, in index order,
//     Token += Priority * Slowdown,   Slowdown = Waited / Estimated,
// where Waited is the time the task has spent in the ready queue and
// Estimated its predicted isolated execution time. One sequential divider is
// shared by all entries (about W+2 cycles per entry).
// Then, and on every wake: the threshold is the largest priority token value
// (9, 3 or 1) not above the largest token any task holds; tasks holding at
// least the threshold are the candidates, and the candidate with the
// shortest Estimated time is chosen (lowest index on a tie). result pulses
// with cand_valid / cand_idx.
//
// The token rule, the rounded-down threshold and the shortest-estimated-job
// choice follow the design description. Its text says candidates hold tokens
// "above" the threshold, but its own example (largest token 9 gives
// threshold 9, which must admit that task) needs "at least", which is used
// here. Using the cumulative Waited field for the slowdown is this design's
// reading.
//
// Lint note: the assertion at the end is disabled during reset with
// `disable iff (!rst_n)`, which makes lint report rst_n as used both
// synchronously and asynchronously (SYNCASYNCNET). The assertion is not
// logic; every flop in this module resets asynchronously only.
module prema_scheduler
  import npu_pkg::*;
#(
  parameter int unsigned NUM_TASKS = 16,
  parameter int unsigned TOK_LOW   = 1,
  parameter int unsigned TOK_MED   = 3,
  parameter int unsigned TOK_HIGH  = 9,
  localparam int unsigned IW       = $clog2(NUM_TASKS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  ctx_entry_t        entries[NUM_TASKS],
  input  logic              wake,
  input  logic              period,
  output logic              busy,
  output logic              result,
  output logic              cand_valid,
  output logic [IW-1:0]     cand_idx,
  output logic              tok_we,
  output logic [IW-1:0]     tok_idx,
  output logic [TIME_W-1:0] tok_val
);
  typedef enum logic [1:0] {S_IDLE, S_UPD, S_DIV, S_SEL} sstate_e;

  sstate_e           st;
  logic [IW:0]       idx;
  logic              div_start, div_busy, div_done;
  logic [TIME_W-1:0] quot;

  seq_divider #(.W(TIME_W)) u_div (
    .clk, .rst_n, .start(div_start),
    .dividend(entries[idx[IW-1:0]].waited << TOKEN_FRAC),
    .divisor(entries[idx[IW-1:0]].estimated),
    .busy(div_busy), .done(div_done), .quotient(quot));

  assign busy = (st != S_IDLE);

  // ---- selection (combinational over the table) ----
  logic [TIME_W-1:0] max_tok, threshold, best_est;
  logic              any;
  logic [IW-1:0]     best;

  always_comb begin
    max_tok = '0;
    any     = 1'b0;
    for (int i = 0; i < NUM_TASKS; i++)
      if (entries[i].state.valid && entries[i].token > max_tok) max_tok = entries[i].token;
    if (max_tok >= (TIME_W'(TOK_HIGH) << TOKEN_FRAC))     threshold = TIME_W'(TOK_HIGH) << TOKEN_FRAC;
    else if (max_tok >= (TIME_W'(TOK_MED) << TOKEN_FRAC)) threshold = TIME_W'(TOK_MED) << TOKEN_FRAC;
    else                                                  threshold = TIME_W'(TOK_LOW) << TOKEN_FRAC;
    best     = '0;
    best_est = '1;
    for (int i = 0; i < NUM_TASKS; i++) begin
      if (entries[i].state.valid && entries[i].token >= threshold &&
          (!any || entries[i].estimated < best_est)) begin
        any      = 1'b1;
        best     = IW'(i);
        best_est = entries[i].estimated;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_IDLE;
      idx        <= '0;
      div_start  <= 1'b0;
      result     <= 1'b0;
      cand_valid <= 1'b0;
      cand_idx   <= '0;
      tok_we     <= 1'b0;
      tok_idx    <= '0;
      tok_val    <= '0;
    end else begin
      div_start <= 1'b0;
      result    <= 1'b0;
      tok_we    <= 1'b0;
      unique case (st)
        S_IDLE: if (wake) begin
          idx <= '0;
          st  <= period ? S_UPD : S_SEL;
        end
        S_UPD: begin
          if (idx == (IW+1)'(NUM_TASKS)) begin
            st <= S_SEL;
          end else if (entries[idx[IW-1:0]].state.valid) begin
            div_start <= 1'b1;
            st        <= S_DIV;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        S_DIV: if (div_done) begin
          tok_we  <= 1'b1;
          tok_idx <= idx[IW-1:0];
          tok_val <= entries[idx[IW-1:0]].token + entries[idx[IW-1:0]].prio_tokens * quot;
          idx     <= idx + 1'b1;
          st      <= S_UPD;
        end
        S_SEL: if (!tok_we) begin   // last token write has landed
          result     <= 1'b1;
          cand_valid <= any;
          cand_idx   <= best;
          st         <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
  // A division is only started when the divider is free.
  a_div_free: assert property (@(posedge clk) disable iff (!rst_n) div_start |-> !div_busy);
endmodule
