// eact_timer -- open-row timer that turns the time a row was kept open into
// an equivalent number of activations (EACT), for the Row-Press extension.
//
// A row that is held open leaks charge from its neighbours as if it were
// activated more than once. The fix is to charge every activation with
// EACT = (tON + tPRE) / tRC instead of 1, where tON is the time from ACT to
// PRE. This block keeps the bank's open row and a tick counter: ACT stores
// the row and starts the count, every later cycle adds one tick, and the
// cycle that brings PRE reports the closing row on `ev`/`ev_row` together
// with its weight `eact`.
//
// `eact` is fixed point with FRAC_BITS fractional bits. With one tick per
// clock and tRC = 2**TRC_LOG2 ticks the division by tRC is a shift:
//   eact = ((tON + TPRE_TICKS) << FRAC_BITS) >> TRC_LOG2.
// It is clamped to at least 1.0 (an activation never counts for less than
// one) and at most M (one whole tracker window); the tick counter saturates
// where that upper clamp is reached anyway. PRE to a closed bank is ignored.
// An ACT to a bank whose row is still open breaks the DRAM protocol and is
// flagged by an assertion.
//
// The formula, the shift and the 7 fractional bits follow the paper; the tick
// size, the tPRE value and both clamps are this design's choices.
module eact_timer #(
  parameter int unsigned M          = mint_pkg::MAX_ACT,
  parameter int unsigned CNT_BITS   = mint_pkg::CNT_BITS,
  parameter int unsigned FRAC_BITS  = mint_pkg::EACT_FRAC_BITS,
  parameter int unsigned TRC_LOG2   = mint_pkg::TRC_LOG2,
  parameter int unsigned TPRE_TICKS = mint_pkg::TPRE_TICKS,
  localparam int unsigned EW        = CNT_BITS + FRAC_BITS
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           act,
  input  mint_pkg::row_t act_row,
  input  logic           pre,
  output logic           row_open,
  output logic           ev,
  output mint_pkg::row_t ev_row,
  output logic [EW-1:0]  eact
);
  import mint_pkg::*;

  localparam int unsigned TON_MAX = M << TRC_LOG2;
  localparam int unsigned TW      = $clog2(TON_MAX + 1);
  localparam logic [63:0] E_MIN = 64'(1) << FRAC_BITS;
  localparam logic [63:0] E_MAX = 64'(M) << FRAC_BITS;

  logic [TW-1:0]   ton;
  row_t            open_row;
  logic [63:0]     e_raw;

  always_comb begin
    e_raw  = ((64'(ton) + 64'(TPRE_TICKS)) << FRAC_BITS) >> TRC_LOG2;
    ev     = pre && row_open;
    ev_row = open_row;
    if (e_raw < E_MIN)      eact = EW'(E_MIN);
    else if (e_raw > E_MAX) eact = EW'(E_MAX);
    else                    eact = EW'(e_raw);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      row_open <= 1'b0;
      open_row <= '0;
      ton      <= '0;
    end else if (act) begin
      row_open <= 1'b1;
      open_row <= act_row;
      ton      <= TW'(1);
    end else if (pre) begin
      row_open <= 1'b0;
      ton      <= '0;
    end else if (row_open && 32'(ton) < TON_MAX) begin
      ton      <= ton + 1'b1;
    end
  end

  a_act_closed: assert property (@(posedge clk) disable iff (!rst_n) act |-> !row_open)
    else $error("eact_timer: ACT to a bank with an open row");
  a_act_pre_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(act && pre))
    else $error("eact_timer: ACT and PRE in the same cycle");

endmodule
