// mint_tracker -- the Minimalist In-DRAM Tracker: one bank's single entry.
//
// MINT decides at each refresh which of the next M activations will be
// mitigated, before it knows which rows those activations will open. Three
// registers do it:
//   SAN  Selected Activation Number, drawn uniformly at random at each REF;
//   CAN  Current Activation Number, 0 after REF, +1 on every ACT;
//   SAR  Selected Address Register (row + valid), loaded with the row of the
//        ACT for which CAN == SAN.
// At the next REF the bank mitigates SAR (if valid) and the tracker re-arms:
// SAN <- new random value, CAN <- 0, SAR invalid.
//
// Transitive mitigation (TRANSITIVE = 1): the draw covers 0..M instead of
// 1..M. SAN = 0 can never match an ACT, and it means "keep SAR": the row
// just mitigated stays in SAR with its level raised by one, so the next REF
// refreshes the victims of its victims. The level saturates at its maximum
// (one bit, as in the 19-bit DMQ entry, so repeated SAN = 0 stays at the
// transitive distance).
//
// Refresh postponement: if an ACT would be number M+1 since the last REF, the
// window is closed without a REF (a pseudo-mitigation). `pseudo` is raised in
// that cycle while `sar` still shows the closing window's selection, which the
// bank pushes into the Delayed Mitigation Queue; the tracker re-arms from the
// random value exactly as at REF, and the overflowing ACT is ACT number 1 of
// the new window (it is captured if the new SAN is 1).
//
// Row-Press extension (FRAC_BITS > 0): CAN becomes a fixed-point register
// with FRAC_BITS fractional bits and each activation adds its weight
// `act_eact` (EACT, from eact_timer) instead of 1. SAR is loaded by the
// activation whose addition takes CAN across SAN (old CAN < SAN <= new CAN),
// and the window closes when an addition would take CAN beyond M. With
// FRAC_BITS = 0 and `act_eact` = 1 this is exactly the plain rule above.
//
// Interface and timing: `act`/`act_row` and `rearm` are single-cycle strobes
// and never high together. `sar` is registered and is the value to use in
// the cycle of `rearm` or `pseudo`; the new state is visible the cycle after.
// `san_take` tells the random-number block that its value was consumed.
// After reset SAN is 0 and SAR invalid, so nothing is selected until the
// first REF or pseudo-mitigation (the paper does not say what happens at
// power-up).
//
// The register set, the widths (CAN 7, SAN 7, SAR 17+1 bits) and the
// SAN = 0 rule come from the paper, as do the 7+7-bit fixed-point CAN and
// the crossing rule of the Row-Press extension; the pseudo-mitigation re-arm,
// the saturating level and the weight of the overflowing activation opening
// the new window are this design's reading of it.
module mint_tracker #(
  parameter int unsigned CNT_BITS   = mint_pkg::CNT_BITS,
  parameter int unsigned M          = mint_pkg::MAX_ACT,
  parameter int unsigned FRAC_BITS  = 0,
  localparam int unsigned CW        = CNT_BITS + FRAC_BITS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      act,
  input  mint_pkg::row_t            act_row,
  input  logic [CW-1:0]             act_eact,
  input  logic                      rearm,
  input  logic [CNT_BITS-1:0]       san_in,
  output logic                      san_take,
  output logic                      pseudo,
  output mint_pkg::mit_req_t        sar,
  output logic [CNT_BITS-1:0]       san,
  output logic [CW-1:0]             can
);
  import mint_pkg::*;

  localparam lvl_t LVL_MAX = '1;

  localparam logic [CW:0] LIM = (CW+1)'(M) << FRAC_BITS;

  logic [CW:0] can_sum, san_fp, san_in_fp;
  logic        hit, hit_new, reload;

  always_comb begin
    can_sum   = {1'b0, can} + {1'b0, act_eact};
    san_fp    = (CW+1)'(san) << FRAC_BITS;
    san_in_fp = (CW+1)'(san_in) << FRAC_BITS;
    hit       = ({1'b0, can} < san_fp) && (san_fp <= can_sum);
    hit_new   = (san_in != '0) && (san_in_fp <= {1'b0, act_eact});
    pseudo    = act && (can_sum > LIM);
    reload    = rearm || pseudo;
    san_take  = reload;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      san <= '0;
      can <= '0;
      sar <= '0;
    end else if (reload) begin
      san <= san_in;
      can <= pseudo ? act_eact : '0;
      if (pseudo && hit_new) begin
        sar <= '{valid: 1'b1, lvl: '0, row: act_row};
      end else if (san_in == '0 && sar.valid) begin
        sar.lvl <= (sar.lvl == LVL_MAX) ? sar.lvl : sar.lvl + 1'b1;
      end else begin
        sar.valid <= 1'b0;
      end
    end else if (act) begin
      can <= CW'(can_sum);
      if (hit) begin
        sar <= '{valid: 1'b1, lvl: '0, row: act_row};
      end
    end
  end

  a_act_rearm_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(act && rearm))
    else $error("mint_tracker: ACT and REF in the same cycle");
  a_can_bounded: assert property (@(posedge clk) disable iff (!rst_n) {1'b0, can} <= LIM)
    else $error("mint_tracker: CAN beyond the window");
  a_weight: assert property (@(posedge clk) disable iff (!rst_n)
      act |-> (act_eact >= (CW'(1) << FRAC_BITS)) && ({1'b0, act_eact} <= LIM))
    else $error("mint_tracker: activation weight outside 1..M");

endmodule
