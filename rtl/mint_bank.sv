// mint_bank -- MINT with a Delayed Mitigation Queue for one DRAM bank.
//
// Ties together the random SAN source (urand_sel), the single-entry tracker
// (mint_tracker), the Delayed Mitigation Queue (dmq) and the victim address
// generator (victim_gen), and makes the decision taken at each mitigation
// command:
//   * ACT: the tracker counts it. If it overflows the window of M ACTs
//     (REFs postponed), the tracker's current selection, if valid, is pushed
//     into the DMQ.
//   * REF or RFM (`mit_cmd`): if the DMQ holds an entry, its oldest entry is
//     mitigated and the tracker is left untouched; otherwise the tracker's SAR
//     is mitigated (if valid) and the tracker re-arms with a new SAN.
//
// M is the number of ACTs per mitigation opportunity: 73 for one mitigation
// per tREFI. When the controller also sends RFM every RFM_TH ACTs the window
// becomes RFM_TH (32 or 16 in the paper) and RFM is simply another
// `mit_cmd`.
//
// IMPRESS = 1 adds the paper's Row-Press extension: an eact_timer keeps the
// open row and its open time, and the tracker counts each activation when
// its row is closed by `pre`, weighted by EACT, in a 7+7-bit fixed-point
// CAN. With IMPRESS = 0 (the main configuration) the tracker counts at ACT
// with weight 1, and `pre` and the timer are not used.
//
// Timing: the mitigation decided in the cycle of `mit_cmd` appears registered
// one cycle later on `mit_valid`/`mit` (aggressor row and level), with
// `mit_from_dmq` telling where it came from and `vict_valid`/`vict_row`
// giving the rows for the refresh circuitry to refresh during tRFC. A command
// with nothing to mitigate gives `mit_valid` low. `act` and `mit_cmd` must not
// be high together (one command per bank per cycle). `pseudo` and
// `dmq_overflow` are one-cycle event flags, `stale_rng` flags a SAN that was
// used twice because two re-arms came too close for the random source.
//
// The REF policy (DMQ oldest first, else the tracker) is the paper's; the
// one-cycle registered output stage is this design's choice.
module mint_bank #(
  parameter int unsigned M            = mint_pkg::MAX_ACT,
  parameter bit          TRANSITIVE   = 1'b1,
  parameter int unsigned DMQ_DEPTH    = mint_pkg::DMQ_DEPTH,
  parameter int unsigned BLAST_RADIUS = mint_pkg::BLAST_RADIUS,
  parameter int unsigned NUM_ROWS     = mint_pkg::NUM_ROWS,
  parameter int unsigned RNG_BITS     = mint_pkg::RNG_BITS,
  parameter int unsigned CNT_BITS     = mint_pkg::CNT_BITS,
  parameter bit          IMPRESS      = 1'b0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                act,
  input  mint_pkg::row_t      act_row,
  input  logic                mit_cmd,
  input  logic                pre,
  input  logic [RNG_BITS-1:0] rng_bits,
  output logic                mit_valid,
  output mint_pkg::mit_req_t  mit,
  output logic                mit_from_dmq,
  output logic                vict_valid [2*BLAST_RADIUS],
  output mint_pkg::row_t      vict_row   [2*BLAST_RADIUS],
  output logic                pseudo,
  output logic                dmq_overflow,
  output logic [$clog2(DMQ_DEPTH+1)-1:0] dmq_count,
  output logic                stale_rng
);
  import mint_pkg::*;

  localparam int unsigned FRAC = IMPRESS ? EACT_FRAC_BITS : 0;
  localparam int unsigned EW   = CNT_BITS + EACT_FRAC_BITS;

  logic [CNT_BITS-1:0]      san_next, san;
  logic [CNT_BITS+FRAC-1:0] can, trk_w;
  logic                     trk_act, row_open, pre_ev;
  row_t                     trk_row, pre_row;
  logic [EW-1:0]            eact;
  logic                fresh, san_take;
  mit_req_t            sar, dmq_head, mit_next;
  logic                dmq_empty, dmq_full, dmq_pop, rearm;

  urand_sel #(
    .RNG_BITS(RNG_BITS), .CNT_BITS(CNT_BITS), .M(M), .TRANSITIVE(TRANSITIVE)
  ) u_urand (
    .clk, .rst_n, .rng_bits, .take(san_take), .san_next, .fresh
  );

  eact_timer #(
    .M(M), .CNT_BITS(CNT_BITS), .FRAC_BITS(EACT_FRAC_BITS)
  ) u_eact (
    .clk, .rst_n, .act(IMPRESS && act), .act_row, .pre(IMPRESS && pre), .row_open, .ev(pre_ev), .ev_row(pre_row), .eact
  );

  if (IMPRESS) begin : g_impress
    always_comb begin
      trk_act = pre_ev;
      trk_row = pre_row;
      trk_w   = eact;
    end
    a_ref_closed: assert property (@(posedge clk) disable iff (!rst_n) mit_cmd |-> !row_open)
      else $error("mint_bank: REF/RFM while a row is open");
  end else begin : g_plain
    always_comb begin
      trk_act = act;
      trk_row = act_row;
      trk_w   = (CNT_BITS+FRAC)'(1);
    end
  end

  mint_tracker #(
    .CNT_BITS(CNT_BITS), .M(M), .FRAC_BITS(FRAC)
  ) u_tracker (
    .clk, .rst_n, .act(trk_act), .act_row(trk_row), .act_eact(trk_w), .rearm, .san_in(san_next), .san_take,
    .pseudo, .sar, .san, .can
  );

  dmq #(
    .DEPTH(DMQ_DEPTH)
  ) u_dmq (
    .clk, .rst_n,
    .push(pseudo && sar.valid), .push_data(sar),
    .pop(dmq_pop), .head(dmq_head), .count(dmq_count),
    .empty(dmq_empty), .full(dmq_full), .overflow(dmq_overflow)
  );

  always_comb begin
    dmq_pop   = mit_cmd && !dmq_empty;
    rearm     = mit_cmd && dmq_empty;
    mit_next  = dmq_pop ? dmq_head : sar;
    stale_rng = san_take && !fresh;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mit_valid    <= 1'b0;
      mit          <= '0;
      mit_from_dmq <= 1'b0;
    end else begin
      mit_valid    <= mit_cmd && mit_next.valid;
      mit          <= mit_cmd ? mit_next : '0;
      mit_from_dmq <= dmq_pop;
    end
  end

  victim_gen #(
    .BLAST_RADIUS(BLAST_RADIUS), .NUM_ROWS(NUM_ROWS)
  ) u_victims (
    .req(mit), .vict_valid, .vict_row
  );

  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n) $onehot0({act, mit_cmd, IMPRESS && pre}))
    else $error("mint_bank: more than one of ACT, PRE and REF/RFM in a cycle");

endmodule
