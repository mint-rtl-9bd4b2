// mint_rank -- MINT+DMQ for every bank of a DDR5 rank (top level).
//
// Rowhammer trackers are per bank: each of the NUM_BANKS banks has its own
// mint_bank. This top decodes the command stream the DRAM receives:
// `cmd_act` opens row `cmd_row` in bank `cmd_bank`; `cmd_rfm` is a
// same-bank RFM for bank `cmd_bank`; `cmd_ref` is an all-bank REF, a
// mitigation opportunity for every bank at once. At most one of the three is
// high per cycle. `cmd_pre` closes the open row of bank `cmd_bank`; only the
// Row-Press extension (IMPRESS = 1) uses it, and it may then not come in the
// same cycle as another command either.
//
// RFM_TH = 0 and REFS_PER_MIT = 1 is the paper's main configuration: one
// mitigation per REF and a tracker window of MAX_ACT = 73 ACTs. RFM_TH = 32
// or 16 models MINT+RFM: the controller sends RFM to a bank after RFM_TH ACTs
// and the tracker window shrinks to RFM_TH (URAND over 0..RFM_TH).
// REFS_PER_MIT = 2 models one mitigation per two tREFI: the window grows to
// 146 ACTs, CAN/SAN to 8 bits, and RNG_BITS must then be set to 8.
//
// Ports and timing: `rng_bits[b]` is bank b's TRNG word for this cycle (the
// TRNG itself is outside the digital design). For every bank the outputs of
// mint_bank appear one cycle after the command: `mit_valid[b]`, the
// mitigated aggressor `mit[b]` (row, level, valid), `mit_from_dmq[b]`, and
// the victim rows `vict_valid[b][i]`/`vict_row[b][i]` for the bank's refresh
// circuitry. `pseudo`, `dmq_overflow` and `stale_rng` are per-bank event
// flags, `dmq_count` the per-bank queue occupancy.
//
// The per-bank organisation and the 32 banks follow the paper; the command
// decoding is this design's.
module mint_rank #(
  parameter int unsigned NUM_BANKS    = mint_pkg::NUM_BANKS,
  parameter int unsigned RFM_TH       = 0,
  parameter int unsigned REFS_PER_MIT = 1,
  parameter bit          TRANSITIVE   = 1'b1,
  parameter int unsigned DMQ_DEPTH    = mint_pkg::DMQ_DEPTH,
  parameter int unsigned BLAST_RADIUS = mint_pkg::BLAST_RADIUS,
  parameter int unsigned NUM_ROWS     = mint_pkg::NUM_ROWS,
  parameter int unsigned RNG_BITS     = mint_pkg::RNG_BITS,
  parameter bit          IMPRESS      = 1'b0,
  localparam int unsigned BANK_BITS   = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1,
  localparam int unsigned QW          = $clog2(DMQ_DEPTH+1),
  localparam int unsigned WINDOW      = (RFM_TH == 0) ? mint_pkg::MAX_ACT * REFS_PER_MIT : RFM_TH,
  localparam int unsigned CNT_BITS    = $clog2(WINDOW + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cmd_act,
  input  logic                 cmd_ref,
  input  logic                 cmd_rfm,
  input  logic                 cmd_pre,
  input  logic [BANK_BITS-1:0] cmd_bank,
  input  mint_pkg::row_t       cmd_row,
  input  logic [RNG_BITS-1:0]  rng_bits     [NUM_BANKS],
  output logic                 mit_valid    [NUM_BANKS],
  output mint_pkg::mit_req_t   mit          [NUM_BANKS],
  output logic                 mit_from_dmq [NUM_BANKS],
  output logic                 vict_valid   [NUM_BANKS][2*BLAST_RADIUS],
  output mint_pkg::row_t       vict_row     [NUM_BANKS][2*BLAST_RADIUS],
  output logic                 pseudo       [NUM_BANKS],
  output logic                 dmq_overflow [NUM_BANKS],
  output logic [QW-1:0]        dmq_count    [NUM_BANKS],
  output logic                 stale_rng    [NUM_BANKS]
);
  import mint_pkg::*;

  // REFS_PER_MIT = 2 is the paper's half-rate variant: only every second REF
  // carries a mitigation. The REF counter is shared by all banks.
  localparam int unsigned RW = (REFS_PER_MIT > 1) ? $clog2(REFS_PER_MIT) : 1;
  logic [RW-1:0] ref_phase;
  logic          ref_mit;

  always_comb begin
    ref_mit = cmd_ref && (32'(ref_phase) == REFS_PER_MIT - 1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n)       ref_phase <= '0;
    else if (cmd_ref) ref_phase <= ref_mit ? '0 : ref_phase + 1'b1;
  end

  for (genvar b = 0; b < int'(NUM_BANKS); b++) begin : g_bank
    logic sel, act_b, mit_b, pre_b;
    always_comb begin
      sel   = (32'(cmd_bank) == b);
      act_b = cmd_act && sel;
      pre_b = cmd_pre && sel;
      mit_b = ref_mit || (cmd_rfm && sel);
    end

    mint_bank #(
      .M(WINDOW), .CNT_BITS(CNT_BITS), .TRANSITIVE(TRANSITIVE), .DMQ_DEPTH(DMQ_DEPTH),
      .BLAST_RADIUS(BLAST_RADIUS), .NUM_ROWS(NUM_ROWS), .RNG_BITS(RNG_BITS),
      .IMPRESS(IMPRESS)
    ) u_bank (
      .clk, .rst_n,
      .act(act_b), .act_row(cmd_row), .mit_cmd(mit_b), .pre(pre_b), .rng_bits(rng_bits[b]),
      .mit_valid(mit_valid[b]), .mit(mit[b]), .mit_from_dmq(mit_from_dmq[b]),
      .vict_valid(vict_valid[b]), .vict_row(vict_row[b]),
      .pseudo(pseudo[b]), .dmq_overflow(dmq_overflow[b]),
      .dmq_count(dmq_count[b]), .stale_rng(stale_rng[b])
    );
  end

  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n)
      $onehot0({cmd_act, cmd_ref, cmd_rfm, IMPRESS && cmd_pre}))
    else $error("mint_rank: more than one command in a cycle");

endmodule
