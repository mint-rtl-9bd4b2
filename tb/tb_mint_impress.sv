// tb_mint_impress -- self-checking testbench for the Row-Press extension of
// MINT: mint_bank with IMPRESS = 1 (7+7-bit fixed-point CAN, activations
// weighted by EACT = (tON + tPRE) / tRC and counted when their row closes).
//
// Time is counted in ticks of tRC/32; the testbench works each activation's
// weight out itself from the number of cycles between its ACT and PRE,
// w = clamp(((tON + 11) * 128) / 32, 1.0, 73.0), and feeds it to
// mint_model_pkg's reference model, which is compared with the bank in
// every cycle. Phases, each also checked against what the scheme promises:
//   1 73 activations of one row per REF, each open for exactly tRAS
//     (weight 1.0): the row is mitigated at every REF, as in plain MINT;
//   2 each window has 63 short activations of distinct rows and one row
//     held open for 10 tRC (weight 10.0): that row must be selected about
//     10/73 of the time, ten times as often as a short row;
//   3 one row held open longer than a whole window (weight clamped to 73):
//     it is selected with certainty;
//   4 random open times and numbers of activations, with REFs left out long
//     enough to force pseudo-mitigations, DMQ service and DMQ overflow.
// A two-bank mint_rank with IMPRESS = 1 gets the same stream addressed to its
// bank 1 (PRE through `cmd_pre`): its bank 1 must match the single bank in
// every cycle and its idle bank 0 must never mitigate.
module tb_mint_impress;
  import mint_pkg::*;
  import mint_model_pkg::*;

  localparam int FR = EACT_FRAC_BITS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic act = 0, pre = 0, cmd = 0;
  row_t act_row = '0;
  logic [RNG_BITS-1:0] rng = '0;

  logic mv, fd, ps, ov, st;
  mit_req_t mit;
  logic vv [2]; row_t vr [2];
  logic [2:0] dc;

  mint_bank #(.IMPRESS(1'b1)) dut (.clk, .rst_n, .act, .act_row, .mit_cmd(cmd), .pre, .rng_bits(rng),
    .mit_valid(mv), .mit(mit), .mit_from_dmq(fd), .vict_valid(vv), .vict_row(vr),
    .pseudo(ps), .dmq_overflow(ov), .dmq_count(dc), .stale_rng(st));

  logic [RNG_BITS-1:0] rng2 [2];
  logic rk_mv [2], rk_fd [2], rk_ps [2], rk_ov [2], rk_st [2];
  mit_req_t rk_mit [2];
  logic rk_vv [2][2]; row_t rk_vr [2][2];
  logic [2:0] rk_dc [2];
  assign rng2[0] = rng;
  assign rng2[1] = rng;

  mint_rank #(.NUM_BANKS(2), .IMPRESS(1'b1)) rank (.clk, .rst_n, .cmd_act(act), .cmd_ref(cmd),
    .cmd_rfm(1'b0), .cmd_pre(pre), .cmd_bank(1'b1), .cmd_row(act_row), .rng_bits(rng2),
    .mit_valid(rk_mv), .mit(rk_mit), .mit_from_dmq(rk_fd), .vict_valid(rk_vv), .vict_row(rk_vr),
    .pseudo(rk_ps), .dmq_overflow(rk_ov), .dmq_count(rk_dc), .stale_rng(rk_st));

  mint_bank_model mdl;
  mit_t last;
  int cyc = 0, act_cyc = 0, open_row = 0;
  bit is_open = 0;
  int n_mit = 0, n_trans = 0, n_dmq = 0, n_pseudo = 0, n_ovf = 0, n_clamp = 0, n_frac = 0;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    #400000000;
    $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int weight(int ton);
    int w;
    w = ((ton + 11) << FR) >> 5;
    if (w < (1 << FR)) w = 1 << FR;
    if (w > (73 << FR)) w = 73 << FR;
    return w;
  endfunction

  // One clock: drive, predict, compare.
  task automatic cycle(bit a, int row, bit p, bit c);
    mit_t e;
    bit ep, eo, ev;
    int w, erow;
    @(negedge clk);
    act = a; act_row = row_t'(row); pre = p; cmd = c;
    rng = RNG_BITS'($urandom);
    ev = p && is_open;
    w = weight(cyc - act_cyc);
    erow = open_row;
    if (ev && w == (73 << FR)) n_clamp++;
    if (ev && (w % (1 << FR)) != 0) n_frac++;
    #1;
    e = mdl.step(int'(rng), ev, erow, c, ep, eo, w);
    check(ps == ep, "pseudo flag");
    check(rk_ps[1] == ps && rk_ov[1] == ov && !rk_ps[0] && !rk_ov[0], "rank: event flags of bank 1 match");
    check(ov == eo, "overflow flag");
    n_pseudo += ep; n_ovf += eo;
    if (a) begin is_open = 1; act_cyc = cyc; open_row = row; end
    if (p) is_open = 0;
    cyc++;
    @(posedge clk); #1;
    check(mv == e.valid, $sformatf("mit_valid %0d vs %0d", mv, e.valid));
    check(rk_mv[1] == mv && rk_mit[1] == mit && rk_fd[1] == fd && rk_dc[1] == dc &&
          rk_vv[1] == vv && rk_vr[1] == vr, "rank: bank 1 matches the single bank");
    check(!rk_mv[0] && rk_dc[0] == 0, "rank: idle bank 0 never mitigates");
    if (e.valid) begin
      int d;
      check(32'(mit.row) == e.row && 32'(mit.lvl) == e.lvl && fd == e.from_dmq,
            $sformatf("mitigation row %0d lvl %0d dmq %0d, expected %0d/%0d/%0d",
                      mit.row, mit.lvl, fd, e.row, e.lvl, e.from_dmq));
      d = e.lvl + 1;
      check(vv[0] == (e.row >= d) && vv[1] == (e.row + d < int'(NUM_ROWS)), "victim valid");
      check(!vv[0] || 32'(vr[0]) == e.row - d, "low victim row");
      check(!vv[1] || 32'(vr[1]) == e.row + d, "high victim row");
      n_mit++; n_trans += (e.lvl != 0); n_dmq += e.from_dmq;
    end
    if (c) last = e;
    act = 0; pre = 0; cmd = 0;
  endtask

  // ACT, keep the row open for ton cycles, PRE.
  task automatic activate(int row, int ton);
    cycle(1, row, 0, 0);
    repeat (ton - 1) cycle(0, 0, 0, 0);
    cycle(0, 0, 1, 0);
  endtask

  task automatic ref_cmd();
    cycle(0, 0, 0, 1);
    repeat (3) cycle(0, 0, 0, 0);
  endtask

  initial begin
    int press_hits, short_hits, short_row;
    mdl = new(73, 1, 4, 1);
    mdl.frac = FR;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    ref_cmd();

    // 1: weight 1.0 per activation, single-sided hammer
    for (int win = 0; win < 200; win++) begin
      for (int s = 0; s < 73; s++) activate(7000, 21);
      ref_cmd();
      check(last.valid && last.row == 7000, "hammered row mitigated at every REF");
    end

    // 2: one pressed row per window
    press_hits = 0; short_hits = 0;
    for (int win = 0; win < 1200; win++) begin
      short_row = 30000 + 100 * (win % 2) + 5;
      for (int s = 0; s < 63; s++) begin
        activate(30000 + 100 * (win % 2) + s, 21);
        if (s == 31) activate(60000 + win % 2, 309);   // 309 + 11 = 10 tRC
      end
      ref_cmd();
      if (last.valid && last.lvl == 0 && last.row == 60000 + win % 2) press_hits++;
      if (last.valid && last.lvl == 0 && last.row == short_row) short_hits++;
    end
    // expected 1200 * 10/74 = 162 (one slot in 74 is the transitive slot 0)
    check(press_hits > 110 && press_hits < 220,
          $sformatf("pressed row selected %0d times of 1200 (expect ~162)", press_hits));
    check(short_hits < 45, $sformatf("one short row selected %0d times (expect ~16)", short_hits));
    $display("pressed row selected %0d of 1200 windows, one short row %0d", press_hits, short_hits);

    // 3: a row kept open for longer than a window
    for (int win = 0; win < 150; win++) begin
      activate(90000 + win, 2400);
      ref_cmd();
      check(last.valid && (last.row == 90000 + win || last.lvl != 0),
            "a row open for a whole window is always selected");
    end

    // 4: random open times, postponed REFs
    for (int win = 0; win < 1500; win++) begin
      int n, ton;
      n = ($urandom_range(9) == 0) ? $urandom_range(500, 150) : $urandom_range(80);
      for (int s = 0; s < n; s++) begin
        ton = ($urandom_range(7) == 0) ? $urandom_range(400, 40) : $urandom_range(40, 21);
        activate($urandom_range(120000), ton);
      end
      repeat ($urandom_range(5, 1)) ref_cmd();
    end

    $display("mitigations %0d transitive %0d from DMQ %0d pseudo %0d overflow %0d clamped %0d fractional %0d",
             n_mit, n_trans, n_dmq, n_pseudo, n_ovf, n_clamp, n_frac);
    check(n_trans > 0, "transitive mitigation seen");
    check(n_dmq > 0, "DMQ service seen");
    check(n_pseudo > 0, "pseudo-mitigation seen");
    check(n_ovf > 0, "DMQ overflow seen");
    check(n_clamp > 0, "clamped weight seen");
    check(n_frac > 0, "fractional weight seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
