// tb_mint_rank -- end-to-end testbench of the 32-bank rank at its default
// parameters (one mitigation per REF, 73-ACT window, transitive mitigation,
// 4-entry DMQ, 128K rows per bank).
//
// A command stream of ACTs spread over all banks, all-bank REFs and
// same-bank RFMs drives the rank. Every bank is followed by its own
// mint_model_pkg reference model, and every cycle all banks' flags,
// mitigations and victim rows are compared with it. The stream goes through:
//   A  regular tREFIs, each bank getting 0..73 ACTs (hammered rows, random
//      rows, rows 0 and 131071 at the bank edges);
//   B  four REFs postponed (365 ACTs per bank), then five REFs;
//   C  one bank postponed beyond the DDR5 limit (DMQ overflow);
//   D  RFM to a bank after every 16 of its ACTs.
// It counts how often each mechanism happened (mitigation at REF, transitive
// mitigation, pseudo-mitigation, mitigation from the DMQ, DMQ overflow, REF
// with nothing to mitigate, mitigation at RFM, victim dropped at a bank edge)
// and counts a failure for any that never did. The guarantee of the paper
// is checked directly as well: a bank that gets all 73 ACTs of a tREFI on one
// row mitigates that row at the next REF, unless the draw was slot 0 (the
// transitive repeat of the previous mitigation, or no mitigation if there was
// none to repeat).
module tb_mint_rank;
  import mint_pkg::*;
  import mint_model_pkg::*;

  localparam int NB = NUM_BANKS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_act = 0, cmd_ref = 0, cmd_rfm = 0;
  logic [4:0] cmd_bank = '0;
  row_t cmd_row = '0;
  logic [RNG_BITS-1:0] rng_bits [NB];
  logic mit_valid [NB]; mit_req_t mit [NB]; logic mit_from_dmq [NB];
  logic vict_valid [NB][2]; row_t vict_row [NB][2];
  logic pseudo [NB], dmq_overflow [NB], stale_rng [NB];
  logic [2:0] dmq_count [NB];

  mint_rank dut (.clk, .rst_n, .cmd_act, .cmd_ref, .cmd_rfm, .cmd_pre(1'b0), .cmd_bank, .cmd_row, .rng_bits,
                 .mit_valid, .mit, .mit_from_dmq, .vict_valid, .vict_row, .pseudo,
                 .dmq_overflow, .dmq_count, .stale_rng);

  mint_bank_model mdl [NB];
  mit_t last [NB];
  int n_ref_mit = 0, n_trans = 0, n_pseudo = 0, n_dmq = 0, n_ovf = 0, n_empty = 0,
      n_rfm_mit = 0, n_edge = 0, n_guar = 0;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    #500000000;
    $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // kind: 0 idle, 1 ACT, 2 REF, 3 RFM
  task automatic cycle(int kind, int bank = 0, int row = 0);
    mit_t e [NB];
    bit p, o;
    @(negedge clk);
    cmd_act = (kind == 1); cmd_ref = (kind == 2); cmd_rfm = (kind == 3);
    cmd_bank = 5'(bank); cmd_row = row_t'(row);
    foreach (rng_bits[b]) rng_bits[b] = RNG_BITS'($urandom);
    #1;
    for (int b = 0; b < NB; b++) begin
      bit a, c;
      a = (kind == 1) && (b == bank);
      c = (kind == 2) || ((kind == 3) && (b == bank));
      e[b] = mdl[b].step(int'(rng_bits[b]), a, row, c, p, o);
      if (pseudo[b] != p || dmq_overflow[b] != o) check(0, $sformatf("bank %0d flags", b));
      n_pseudo += p; n_ovf += o;
    end
    checks++;
    @(posedge clk); #1;
    for (int b = 0; b < NB; b++) begin
      bit ok;
      ok = (mit_valid[b] == e[b].valid);
      if (e[b].valid) begin
        int d;
        d = e[b].lvl + 1;
        ok &= 32'(mit[b].row) == e[b].row && 32'(mit[b].lvl) == e[b].lvl && mit_from_dmq[b] == e[b].from_dmq;
        ok &= vict_valid[b][0] == (e[b].row >= d) && vict_valid[b][1] == (e[b].row + d < int'(NUM_ROWS));
        ok &= !vict_valid[b][0] || 32'(vict_row[b][0]) == e[b].row - d;
        ok &= !vict_valid[b][1] || 32'(vict_row[b][1]) == e[b].row + d;
        if (kind == 2 && !e[b].from_dmq) n_ref_mit++;
        if (kind == 3) n_rfm_mit++;
        n_trans += (e[b].lvl != 0); n_dmq += e[b].from_dmq;
        n_edge += (!vict_valid[b][0] || !vict_valid[b][1]);
      end
      if ((kind == 2) || (kind == 3 && b == bank)) begin
        if (!e[b].valid) n_empty++;
        last[b] = e[b];
      end
      if (!ok) check(0, $sformatf("bank %0d mitigation: dut %0d row %0d lvl %0d dmq %0d, model %0d row %0d lvl %0d dmq %0d",
                                  b, mit_valid[b], mit[b].row, mit[b].lvl, mit_from_dmq[b],
                                  e[b].valid, e[b].row, e[b].lvl, e[b].from_dmq));
    end
    cmd_act = 0; cmd_ref = 0; cmd_rfm = 0;
  endtask

  task automatic do_ref();
    cycle(2);
    repeat (3) cycle(0);
  endtask

  // One tREFI worth of ACTs: bank b gets quota[b] ACTs, interleaved at random.
  task automatic interval(int quota [NB], int mode [NB], int salt);
    int left [NB];
    int total, pick, b, row;
    total = 0;
    foreach (left[i]) begin left[i] = quota[i]; total += quota[i]; end
    while (total > 0) begin
      pick = $urandom_range(total - 1);
      b = 0;
      while (pick >= left[b]) begin pick -= left[b]; b++; end
      case (mode[b])
        0: row = 1000 + b;                                // single-sided hammer
        1: row = 2000 + salt * 100 + left[b];             // distinct rows
        2: row = (left[b] % 2 != 0) ? 0 : int'(NUM_ROWS) - 1;  // bank edges
        default: row = $urandom_range(NUM_ROWS - 1);
      endcase
      cycle(1, b, row);
      left[b]--; total--;
    end
  endtask

  initial begin
    int quota [NB], mode [NB];
    for (int b = 0; b < NB; b++) mdl[b] = new(MAX_ACT, 1, DMQ_DEPTH, 1);
    foreach (rng_bits[b]) rng_bits[b] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    do_ref();

    // A: regular refresh
    for (int t = 0; t < 60; t++) begin
      mit_t prev [NB];
      prev = last;
      for (int b = 0; b < NB; b++) begin
        mode[b] = (b + t) % 4;
        quota[b] = (mode[b] == 0 || $urandom_range(1) != 0) ? 73 : $urandom_range(73);
      end
      interval(quota, mode, t % 8);
      do_ref();
      for (int b = 0; b < NB; b++)
        if (mode[b] == 0 && quota[b] == 73) begin
          // SAN = 0 (probability 1/74) repeats the previous row transitively instead
          // (or, if that REF had mitigated nothing, leaves this window unselected)
          check((last[b].valid && last[b].lvl == 0 && last[b].row == 1000 + b) ||
                (last[b].valid && last[b].lvl == 1 && prev[b].valid && last[b].row == prev[b].row) ||
                (!last[b].valid && !prev[b].valid),
                $sformatf("bank %0d hammered row: got %0d/%0d/%0d prev %0d/%0d", b, last[b].valid,
                          last[b].row, last[b].lvl, prev[b].valid, prev[b].row));
          n_guar++;
        end
    end

    // B: four REFs postponed
    for (int r = 0; r < 3; r++) begin
      for (int b = 0; b < NB; b++) begin mode[b] = 3; quota[b] = 365; end
      interval(quota, mode, 0);
      for (int k = 0; k < 5; k++) do_ref();
    end

    // C: bank 7 postponed beyond the limit
    for (int b = 0; b < NB; b++) begin mode[b] = 3; quota[b] = (b == 7) ? 6 * 73 : 0; end
    interval(quota, mode, 0);
    repeat (6) do_ref();

    // D: RFM after every 16 ACTs to a bank
    for (int t = 0; t < 8; t++) begin
      int cnt [NB];
      foreach (cnt[i]) cnt[i] = 0;
      for (int i = 0; i < 600; i++) begin
        int b;
        b = $urandom_range(NB - 1);
        cycle(1, b, 3000 + b);
        cnt[b]++;
        if (cnt[b] == 16) begin
          cnt[b] = 0;
          cycle(3, b);
          repeat (2) cycle(0);
        end
      end
      do_ref();
    end

    check(n_ref_mit > 0, "mitigation at REF happened");
    check(n_trans > 0,   "transitive mitigation happened");
    check(n_pseudo > 0,  "pseudo-mitigation happened");
    check(n_dmq > 0,     "mitigation from the DMQ happened");
    check(n_ovf > 0,     "DMQ overflow happened");
    check(n_empty > 0,   "REF with nothing to mitigate happened");
    check(n_rfm_mit > 0, "mitigation at RFM happened");
    check(n_edge > 0,    "victim dropped at a bank edge happened");
    check(n_guar > 0,    "guaranteed-selection case happened");
    $display("mechanisms: REF mitigations %0d, transitive %0d, pseudo %0d, from DMQ %0d, overflow %0d, empty REF %0d, RFM mitigations %0d, edge %0d, guaranteed %0d",
             n_ref_mit, n_trans, n_pseudo, n_dmq, n_ovf, n_empty, n_rfm_mit, n_edge, n_guar);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
