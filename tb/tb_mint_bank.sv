// tb_mint_bank -- self-checking testbench for mint_bank (MINT + DMQ, one bank).
//
// Two banks see the same command stream: one with the 73-ACT window of one
// mitigation per tREFI, one with the 16-ACT window of MINT+RFM16. Every cycle
// both are compared with mint_model_pkg's reference model (pseudo-mitigation
// and overflow flags in the cycle, the mitigation and its victim rows one
// cycle later). Phases, each also checked against what the paper promises:
//   1 single-sided hammer, 73 ACTs per REF on one row: that row is mitigated
//     at every REF (guaranteed selection), sometimes as a transitive repeat;
//   2 73 distinct rows per window: the mitigated row always comes from the
//     window just closed (or repeats the last one transitively) and every
//     slot 1..73 is picked;
//   3 REF postponement, 365 ACTs then 5 REFs: the first 4 REFs serve the DMQ;
//   4 postponement beyond DDR5's limit (438 ACTs): a DMQ overflow;
//   5 short windows of 10 ACTs: some REFs have nothing to mitigate;
//   6 RFM every 16 ACTs (every fourth replaced by REF) on the RFM16 bank with
//     a single-sided hammer: each RFM mitigates the hammered row.
// Each mechanism must be seen at least once.
module tb_mint_bank;
  import mint_pkg::*;
  import mint_model_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic act = 0, cmd = 0, cmd16 = 0;
  row_t act_row = '0;
  logic [RNG_BITS-1:0] rng = '0;

  logic mv [2]; mit_req_t mit [2]; logic fd [2];
  logic vv [2][2]; row_t vr [2][2];
  logic ps [2], ov [2], st [2];
  logic [2:0] dc [2];

  mint_bank dut73 (.clk, .rst_n, .act, .act_row, .mit_cmd(cmd), .pre(1'b0), .rng_bits(rng),
    .mit_valid(mv[0]), .mit(mit[0]), .mit_from_dmq(fd[0]), .vict_valid(vv[0]), .vict_row(vr[0]),
    .pseudo(ps[0]), .dmq_overflow(ov[0]), .dmq_count(dc[0]), .stale_rng(st[0]));
  mint_bank #(.M(16)) dut16 (.clk, .rst_n, .act, .act_row, .mit_cmd(cmd || cmd16), .pre(1'b0), .rng_bits(rng),
    .mit_valid(mv[1]), .mit(mit[1]), .mit_from_dmq(fd[1]), .vict_valid(vv[1]), .vict_row(vr[1]),
    .pseudo(ps[1]), .dmq_overflow(ov[1]), .dmq_count(dc[1]), .stale_rng(st[1]));

  mint_bank_model mdl [2];
  mit_t last [2];
  int n_mit [2], n_trans [2], n_dmq [2], n_pseudo [2], n_ovf [2], n_empty [2];
  int slot_hist [74];

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    #100000000;
    $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One clock: drive, predict, compare.
  task automatic cycle(bit a, int row, bit c, bit c16 = 0);
    mit_t e [2];
    bit p, o;
    @(negedge clk);
    act = a; act_row = row_t'(row); cmd = c; cmd16 = c16;
    rng = RNG_BITS'($urandom);
    #1;
    for (int i = 0; i < 2; i++) begin
      e[i] = mdl[i].step(int'(rng), a, row, (i == 0) ? c : (c || c16), p, o);
      check(ps[i] == p, $sformatf("bank%0d pseudo flag", i));
      check(ov[i] == o, $sformatf("bank%0d overflow flag", i));
      n_pseudo[i] += p; n_ovf[i] += o;
    end
    @(posedge clk); #1;
    for (int i = 0; i < 2; i++) begin
      check(mv[i] == e[i].valid, $sformatf("bank%0d mit_valid %0d vs %0d", i, mv[i], e[i].valid));
      if (e[i].valid) begin
        int d;
        check(32'(mit[i].row) == e[i].row && 32'(mit[i].lvl) == e[i].lvl && fd[i] == e[i].from_dmq,
              $sformatf("bank%0d mitigation row %0d lvl %0d dmq %0d, expected %0d/%0d/%0d", i,
                        mit[i].row, mit[i].lvl, fd[i], e[i].row, e[i].lvl, e[i].from_dmq));
        d = e[i].lvl + 1;
        check(vv[i][0] == (e[i].row >= d) && vv[i][1] == (e[i].row + d < int'(NUM_ROWS)), "victim valid");
        check(!vv[i][0] || 32'(vr[i][0]) == e[i].row - d, "low victim row");
        check(!vv[i][1] || 32'(vr[i][1]) == e[i].row + d, "high victim row");
        n_mit[i]++; n_trans[i] += (e[i].lvl != 0); n_dmq[i] += e[i].from_dmq;
      end else begin
        check(!vv[i][0] && !vv[i][1], "no victims without a mitigation");
      end
      if ((i == 0 && c) || (i == 1 && (c || c16))) begin
        if (!e[i].valid) n_empty[i]++;
        last[i] = e[i];
      end
    end
    act = 0; cmd = 0; cmd16 = 0;
  endtask

  task automatic ref_cmd();
    cycle(0, 0, 1);
    repeat (3) cycle(0, 0, 0);   // REF occupies the bank for tRFC
  endtask

  initial begin
    for (int i = 0; i < 2; i++) begin
      mdl[i] = new((i == 0) ? 73 : 16, 1, 4, 1);
      n_mit[i] = 0; n_trans[i] = 0; n_dmq[i] = 0; n_pseudo[i] = 0; n_ovf[i] = 0; n_empty[i] = 0;
    end
    foreach (slot_hist[s]) slot_hist[s] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    ref_cmd();

    // 1: single-sided hammer
    for (int w = 0; w < 300; w++) begin
      for (int s = 0; s < 73; s++) cycle(1, 5000, 0);
      ref_cmd();
      check(last[0].valid && last[0].row == 5000, "hammered row mitigated at every REF");
    end

    // 2: 73 distinct rows per window
    for (int w = 0; w < 2000; w++) begin
      int base;
      base = 20000 + (w % 2) * 200;
      for (int s = 1; s <= 73; s++) cycle(1, base + s, 0);
      ref_cmd();
      check(last[0].valid, "a full window always yields a mitigation");
      if (last[0].lvl == 0) begin
        check(last[0].row > base && last[0].row <= base + 73, "selection from the window just closed");
        if (last[0].row > base && last[0].row <= base + 73) slot_hist[last[0].row - base]++;
      end
    end
    for (int s = 1; s <= 73; s++) begin
      check(slot_hist[s] > 0 && slot_hist[s] < 70, $sformatf("slot %0d picked %0d times", s, slot_hist[s]));
    end

    // 3: postponement of four REFs
    for (int r = 0; r < 20; r++) begin
      for (int s = 0; s < 365; s++) cycle(1, 40000 + r * 400 + s, 0);
      for (int k = 0; k < 5; k++) begin
        ref_cmd();
        if (k < 4) check(!last[0].valid || last[0].from_dmq, "first four REFs serve the DMQ");
        else check(!last[0].from_dmq, "fifth REF serves the tracker");
      end
    end

    // 4: more postponement than DDR5 allows
    for (int s = 0; s < 6 * 73; s++) cycle(1, 60000 + s, 0);
    repeat (6) ref_cmd();

    // 5: short windows
    for (int w = 0; w < 100; w++) begin
      for (int s = 0; s < 10; s++) cycle(1, 70000 + s, 0);
      ref_cmd();
    end

    // 6: RFM every 16 ACTs on the RFM16 bank; every fourth one is a REF
    repeat (5) ref_cmd();   // drain both DMQs
    for (int s = 1; s <= 64 * 100; s++) begin
      cycle(1, 90000, 0);
      if (s % 64 == 0) ref_cmd();
      else if (s % 16 == 0) begin
        cycle(0, 0, 0, 1);
        check(last[1].valid && last[1].row == 90000, "RFM16 bank mitigates the hammered row at each RFM");
        repeat (2) cycle(0, 0, 0);
      end
    end

    for (int i = 0; i < 2; i++) begin
      check(n_mit[i] > 0,    $sformatf("bank%0d: mitigations %0d", i, n_mit[i]));
      check(n_trans[i] > 0,  $sformatf("bank%0d: transitive mitigations %0d", i, n_trans[i]));
      check(n_dmq[i] > 0,    $sformatf("bank%0d: DMQ mitigations %0d", i, n_dmq[i]));
      check(n_pseudo[i] > 0, $sformatf("bank%0d: pseudo-mitigations %0d", i, n_pseudo[i]));
      check(n_ovf[i] > 0,    $sformatf("bank%0d: DMQ overflows %0d", i, n_ovf[i]));
      check(n_empty[i] > 0,  $sformatf("bank%0d: empty REFs %0d", i, n_empty[i]));
      $display("bank%0d (M=%0d): mitigations %0d transitive %0d from DMQ %0d pseudo %0d overflow %0d empty %0d",
               i, mdl[i].M, n_mit[i], n_trans[i], n_dmq[i], n_pseudo[i], n_ovf[i], n_empty[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
