// tb_mint_workloads -- the access patterns and configurations the MINT
// analysis is built on, run on the RTL and measured.
//
// One-bank rank instances in four configurations: the default (one
// mitigation per REF, 73-ACT window), MINT+RFM32, MINT+RFM16 (the controller
// model below sends RFM after every RFM_TH ACTs to the bank), and the
// half-rate variant (one mitigation per two REFs, 146-ACT window). On each it
// runs attack patterns and checks what the selection rule implies:
//   pattern-1  one ACT on row A per tREFI: A is picked with probability 1/(W+1);
//   pattern-2  W distinct rows once each: every row with probability 1/(W+1),
//              so W/(W+1) of the windows mitigate a row of that window;
//   pattern-3  18 rows x 4 copies: each row with probability 4/74;
//   single-sided hammer: the row is mitigated at every window (guarantee);
//   double-sided: the shared victim is refreshed at every non-transitive
//              mitigation;
//   postponement: 365 ACTs between REF batches; a row waits in the DMQ for at
//              most 4 x 73 = 292 ACTs;
//   adaptive attack on the DMQ: pattern-2 windows, then at the morphing point
//              365 ACTs on one row with four REFs postponed; the row is
//              mitigated within the following batch of 5 REFs.
// Counts are checked against mean +- 5 sigma of the binomial they follow.
module tb_mint_workloads;
  import mint_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NC = 4;
  localparam int WIN [NC] = '{73, 32, 16, 146};

  logic act = 0, ref_c = 0;
  logic rfm [NC];
  row_t row = '0;
  logic [7:0] rng8;
  logic [RNG_BITS-1:0] rng7 [1];
  logic [7:0] rng8a [1];
  logic mv [NC][1]; mit_req_t mit [NC][1]; logic fd [NC][1];
  logic vv [NC][1][2]; row_t vr [NC][1][2];
  logic ps [NC][1], ov [NC][1], st [NC][1];
  logic [2:0] dc [NC][1];

  always_comb begin rng7[0] = rng8[6:0]; rng8a[0] = rng8; end

  mint_rank #(.NUM_BANKS(1)) c73 (.clk, .rst_n, .cmd_act(act), .cmd_ref(ref_c), .cmd_rfm(rfm[0]), .cmd_pre(1'b0),
    .cmd_bank(1'b0), .cmd_row(row), .rng_bits(rng7), .mit_valid(mv[0]), .mit(mit[0]), .mit_from_dmq(fd[0]),
    .vict_valid(vv[0]), .vict_row(vr[0]), .pseudo(ps[0]), .dmq_overflow(ov[0]), .dmq_count(dc[0]), .stale_rng(st[0]));
  mint_rank #(.NUM_BANKS(1), .RFM_TH(32)) c32 (.clk, .rst_n, .cmd_act(act), .cmd_ref(ref_c), .cmd_rfm(rfm[1]), .cmd_pre(1'b0),
    .cmd_bank(1'b0), .cmd_row(row), .rng_bits(rng7), .mit_valid(mv[1]), .mit(mit[1]), .mit_from_dmq(fd[1]),
    .vict_valid(vv[1]), .vict_row(vr[1]), .pseudo(ps[1]), .dmq_overflow(ov[1]), .dmq_count(dc[1]), .stale_rng(st[1]));
  mint_rank #(.NUM_BANKS(1), .RFM_TH(16)) c16 (.clk, .rst_n, .cmd_act(act), .cmd_ref(ref_c), .cmd_rfm(rfm[2]), .cmd_pre(1'b0),
    .cmd_bank(1'b0), .cmd_row(row), .rng_bits(rng7), .mit_valid(mv[2]), .mit(mit[2]), .mit_from_dmq(fd[2]),
    .vict_valid(vv[2]), .vict_row(vr[2]), .pseudo(ps[2]), .dmq_overflow(ov[2]), .dmq_count(dc[2]), .stale_rng(st[2]));
  mint_rank #(.NUM_BANKS(1), .REFS_PER_MIT(2), .RNG_BITS(8)) chalf (.clk, .rst_n, .cmd_act(act), .cmd_ref(ref_c),
    .cmd_rfm(rfm[3]), .cmd_pre(1'b0), .cmd_bank(1'b0), .cmd_row(row), .rng_bits(rng8a), .mit_valid(mv[3]), .mit(mit[3]),
    .mit_from_dmq(fd[3]), .vict_valid(vv[3]), .vict_row(vr[3]), .pseudo(ps[3]), .dmq_overflow(ov[3]),
    .dmq_count(dc[3]), .stale_rng(st[3]));

  // Memory-controller model: rolling count of ACTs per configuration; an RFM
  // goes out when it reaches RFM_TH. A REF resets it (the REF mitigates too).
  int raa [NC];

  // Per-configuration record of the last mitigation.
  mit_req_t got [NC];
  bit       got_v [NC];
  int       n_act_total = 0;
  int       push_at [NC][$];
  int       max_wait = 0, n_pseudo73 = 0;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  task automatic binom(string what, int n, real p, int got_n);
    real mu, sd;
    mu = n * p; sd = $sqrt(n * p * (1.0 - p));
    $display("  %-44s %6d  (expected %8.1f +- %6.1f)", what, got_n, mu, 5 * sd);
    check(got_n >= mu - 5 * sd - 1 && got_n <= mu + 5 * sd + 1, what);
  endtask

  initial begin
    #2000000000;
    $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Mitigation outputs appear the cycle after a command: sample them then.
  task automatic sample();
    for (int c = 0; c < NC; c++) if (mv[c][0]) begin
      got_v[c] = 1; got[c] = mit[c][0];
      if (c == 0 && fd[c][0] && push_at[0].size() > 0) begin
        int w;
        w = n_act_total - push_at[c].pop_front();
        if (w > max_wait) max_wait = w;
      end
    end
  endtask

  task automatic clear();
    for (int c = 0; c < NC; c++) got_v[c] = 0;
  endtask

  task automatic idle(int n = 1);
    repeat (n) begin
      @(negedge clk); rng8 = 8'($urandom);
      @(posedge clk); #1;
    end
  endtask

  task automatic do_act(int r, bit use_rfm = 1);
    @(negedge clk);
    act = 1; row = row_t'(r); rng8 = 8'($urandom);
    @(posedge clk); #1;
    n_act_total++;
    act = 0;
    for (int c = 1; c < 3; c++) begin
      raa[c]++;
    end
    // pseudo flags are combinational in the ACT cycle; record pushes there
    if (use_rfm) for (int c = 1; c < 3; c++) if (raa[c] == WIN[c]) begin
      raa[c] = 0;
      @(negedge clk); rfm[c] = 1; rng8 = 8'($urandom);
      @(posedge clk); #1; rfm[c] = 0; sample();
      idle(3);
    end
  endtask

  // record DMQ pushes of the default configuration
  always @(posedge clk) if (rst_n && ps[0][0]) begin
    n_pseudo73++;
    if (c73.g_bank[0].u_bank.sar.valid && !ov[0][0]) push_at[0].push_back(n_act_total + 1);
  end

  task automatic do_ref();
    clear();
    @(negedge clk); ref_c = 1; rng8 = 8'($urandom);
    @(posedge clk); #1; ref_c = 0;
    for (int c = 1; c < 3; c++) raa[c] = 0;
    sample();
    idle(3);
  endtask

  // Was the last mitigation of configuration c (sampled after the REF) of row r at level 0?
  function automatic bit hit(int c, int r);
    return got_v[c] && got[c].lvl == 0 && 32'(got[c].row) == r;
  endfunction

  initial begin
    int n, cnt [NC], cnt2;
    foreach (rfm[c]) rfm[c] = 0;
    foreach (raa[c]) raa[c] = 0;
    rng8 = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    do_ref(); do_ref();

    $display("pattern-1: one ACT on row A per tREFI, default configuration");
    n = 7400; cnt[0] = 0;
    for (int t = 0; t < n; t++) begin
      do_act(777, 0);
      do_ref();
      cnt[0] += hit(0, 777);
    end
    binom("row A mitigated (p = 1/74)", n, 1.0 / 74, cnt[0]);

    $display("pattern-2: W distinct rows once per window, every configuration");
    for (int c = 0; c < 3; c++) begin
      int k;
      n = (c == 0) ? 1500 : 3000;
      k = WIN[c];
      cnt[c] = 0; cnt2 = 0;
      for (int t = 0; t < n; t++) begin
        int base;
        base = 10000 + (t % 2) * 1000;
        // default: REF after 73 ACTs; RFM configurations: exactly one RFM window
        for (int s = 1; s <= k; s++) do_act(base + s, 0);
        if (c == 0) do_ref();
        else begin
          clear();
          @(negedge clk); rfm[c] = 1; rng8 = 8'($urandom);
          @(posedge clk); #1; rfm[c] = 0; sample();
          // only configuration c is judged in this loop
          idle(2);
        end
        if (got_v[c] && got[c].lvl == 0 && 32'(got[c].row) > base && 32'(got[c].row) <= base + k) cnt[c]++;
        if (got_v[c] && got[c].lvl == 0 && 32'(got[c].row) == base + 1) cnt2++;
      end
      binom($sformatf("W=%0d: window mitigates one of its rows", k), n, real'(k) / (k + 1), cnt[c]);
      binom($sformatf("W=%0d: first row of the window mitigated", k), n, 1.0 / (k + 1), cnt2);
      do_ref(); do_ref(); do_ref(); do_ref(); do_ref();
    end

    $display("pattern-3: 18 rows x 4 copies per tREFI, default configuration");
    n = 3000; cnt[0] = 0;
    for (int t = 0; t < n; t++) begin
      for (int cpy = 0; cpy < 4; cpy++)
        for (int r = 0; r < 18; r++) do_act(20000 + r, 0);
      do_ref();
      cnt[0] += hit(0, 20000);
    end
    binom("row 0 of 18 mitigated (p = 4/74)", n, 4.0 / 74, cnt[0]);

    $display("single-sided hammer: every configuration, RFM from the controller model");
    for (int c = 0; c < NC; c++) cnt[c] = 0;
    n = 400; cnt2 = 0;
    for (int t = 0; t < n; t++) begin
      for (int s = 0; s < 73; s++) do_act(30000);
      do_ref();
      // default and half-rate configurations: judged at the REF that mitigates
      if (got_v[0] && got[0].row == 30000) cnt[0]++;
      if (t >= 8 && got_v[3]) begin cnt2++; if (got[3].row == 30000) cnt[3]++; end
    end
    check(cnt[0] >= n - n / 74 * 3, $sformatf("default: hammered row mitigated at %0d of %0d REFs", cnt[0], n));
    check(cnt2 >= (n - 8) / 2 - 3 && cnt2 <= (n - 8) / 2 + 1 && cnt[3] == cnt2,
          $sformatf("half rate: %0d of %0d REFs mitigate, %0d of them the hammered row", cnt2, n - 8, cnt[3]));
    $display("  default %0d of %0d REFs, half-rate %0d of %0d mitigating REFs", cnt[0], n, cnt[3], cnt2);
    do_ref(); do_ref();

    $display("single-sided hammer with RFM: each RFM mitigates the row");
    for (int c = 1; c < 3; c++) begin
      int ok, tot;
      ok = 0; tot = 0;
      raa[c] = 0;
      for (int t = 0; t < 200 * WIN[c]; t++) begin
        @(negedge clk); act = 1; row = row_t'(31000); rng8 = 8'($urandom);
        @(posedge clk); #1; act = 0;
        raa[c]++;
        if (raa[c] == WIN[c]) begin
          raa[c] = 0;
          clear();
          @(negedge clk); rfm[c] = 1; rng8 = 8'($urandom);
          @(posedge clk); #1; rfm[c] = 0; sample();
          tot++;
          if (got_v[c] && got[c].row == 31000) ok++;
          idle(2);
        end
      end
      check(ok >= tot - tot / (WIN[c] + 1) * 3 - 2, $sformatf("RFM%0d: row mitigated at %0d of %0d RFMs", WIN[c], ok, tot));
      $display("  RFM%0d: %0d of %0d RFMs", WIN[c], ok, tot);
    end
    repeat (6) do_ref();   // the other configurations saw no REF: drain their DMQs

    $display("double-sided: rows V-1 and V+1 alternate, default configuration");
    n = 500; cnt[0] = 0; cnt2 = 0;
    for (int t = 0; t < n; t++) begin
      for (int s = 0; s < 73; s++) do_act((s % 2 != 0) ? 40001 : 39999, 0);
      do_ref();
      if (got_v[0] && got[0].lvl == 0) begin
        cnt2++;
        if (32'(got[0].row) == 39999 || 32'(got[0].row) == 40001) cnt[0]++;
      end
    end
    check(cnt[0] == cnt2 && cnt2 > n * 9 / 10, $sformatf("victim refreshed at %0d of %0d normal mitigations", cnt[0], cnt2));

    $display("postponement: 365 ACTs (pattern-2 rows) then 5 REFs, default configuration");
    max_wait = 0;
    for (int r = 0; r < 100; r++) begin
      for (int s = 0; s < 365; s++) do_act(50000 + s, 0);
      repeat (5) do_ref();
    end
    $display("  longest DMQ wait %0d ACTs, %0d pseudo-mitigations", max_wait, n_pseudo73);
    check(max_wait > 0 && max_wait <= 292, $sformatf("DMQ delay %0d ACTs within 4 x 73", max_wait));
    check(n_pseudo73 >= 400, "four pseudo-mitigations per postponed batch");

    $display("adaptive attack: pattern-2, then 365 ACTs on one row and 5 REFs, default configuration");
    cnt[0] = 0; n = 200;
    for (int t = 0; t < n; t++) begin
      bit seen;
      for (int w = 0; w < 3 + t % 5; w++) begin
        for (int s = 0; s < 73; s++) do_act(60000 + 100 * (w % 2) + s, 0);
        do_ref();
      end
      seen = 0;
      for (int s = 0; s < 365; s++) do_act(70000 + t, 0);
      for (int k = 0; k < 5; k++) begin
        do_ref();
        if (hit(0, 70000 + t)) seen = 1;
      end
      cnt[0] += seen;
    end
    check(cnt[0] == n, $sformatf("morphed row mitigated within the REF batch in %0d of %0d attacks", cnt[0], n));
    $display("  morphed row mitigated within the batch in %0d of %0d attacks", cnt[0], n);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
