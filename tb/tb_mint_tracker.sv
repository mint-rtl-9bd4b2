// tb_mint_tracker -- self-checking testbench for mint_tracker.
//
// The SAN value offered to the tracker is driven directly by the testbench.
// Directed cases: the worked example of a window with ACTs to rows A..E and
// SAN = 3 (row C is selected); selection of the last slot (SAN = 73); the
// SAN = 0 rule (SAR kept, level raised, saturating at 1); a window with too
// few ACTs (nothing selected); a pseudo-mitigation at ACT 74, including the
// capture of that ACT when the new SAN is 1. Then 20000 random cycles against
// an independent model of the three registers.
// A second tracker with a 7+7-bit fixed-point CAN (the Row-Press extension)
// gets weighted activations: a directed case where the activation that
// carries CAN across SAN is selected, then 40000 random cycles with weights
// from 1.0 to 73.0 against a model of the crossing and window rules.
module tb_mint_tracker;
  import mint_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic act = 0, rearm = 0;
  row_t act_row = '0;
  logic [CNT_BITS-1:0] san_in = '0, san, can;
  logic san_take, pseudo;
  mit_req_t sar;

  mint_tracker dut (.clk, .rst_n, .act, .act_row, .act_eact(CNT_BITS'(1)), .rearm, .san_in, .san_take,
                    .pseudo, .sar, .san, .can);

  localparam int FB = 7;
  logic actf = 0, rearmf = 0;
  row_t rowf = '0;
  logic [CNT_BITS-1:0] sanf_in = '0, sanf;
  logic [CNT_BITS+FB-1:0] wf = '0, canf;
  logic sanf_take, pseudof;
  mit_req_t sarf;

  mint_tracker #(.FRAC_BITS(FB)) dutf (.clk, .rst_n, .act(actf), .act_row(rowf), .act_eact(wf),
                    .rearm(rearmf), .san_in(sanf_in), .san_take(sanf_take), .pseudo(pseudof),
                    .sar(sarf), .san(sanf), .can(canf));

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #10000000;
    $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_ref(int s);
    @(negedge clk); rearm = 1; san_in = CNT_BITS'(s);
    @(negedge clk); rearm = 0;
  endtask

  task automatic do_act(int r, int s = 0);
    @(negedge clk); act = 1; act_row = row_t'(r); san_in = CNT_BITS'(s);
    @(negedge clk); act = 0;
  endtask

  // reference model state
  int m_san, m_can, m_row, m_lvl; bit m_v;

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(negedge clk);
    check(!sar.valid && can == 0 && san == 0, "reset state");

    // Worked example: SAN = 3, ACTs to A..E, C is selected.
    do_ref(3);
    check(san == 3 && can == 0 && !sar.valid, "REF loads SAN, clears CAN and SAR");
    for (int i = 0; i < 5; i++) do_act(10 + i);  // rows A..E
    check(can == 5, $sformatf("CAN counts ACTs (%0d)", can));
    check(sar.valid && sar.row == 12 && sar.lvl == 0, "row C (third ACT) selected");
    // Last slot.
    do_ref(73);
    for (int i = 1; i <= 73; i++) begin
      do_act(1000 + i);
      if (i == 72) check(!sar.valid, "nothing selected before slot 73");
    end
    check(sar.valid && sar.row == 1073, "slot 73 selected");
    // SAN = 0 keeps SAR as a transitive mitigation, saturating at level 1.
    do_ref(0);
    check(sar.valid && sar.row == 1073 && sar.lvl == 1, "SAN=0 keeps SAR at level 1");
    do_act(5); do_act(6);
    check(sar.row == 1073, "SAN=0 never matches an ACT");
    do_ref(0);
    check(sar.valid && sar.lvl == 1, "level saturates at 1");
    do_ref(40);
    check(!sar.valid, "non-zero SAN clears SAR");
    // Short window: SAN = 40, only 10 ACTs.
    for (int i = 0; i < 10; i++) do_act(200 + i);
    check(!sar.valid, "short window selects nothing");
    do_ref(0);
    check(!sar.valid, "SAN=0 with empty SAR stays empty");
    // Pseudo-mitigation at ACT 74.
    do_ref(10);
    for (int i = 1; i <= 73; i++) do_act(300 + i);
    @(negedge clk); act = 1; act_row = row_t'(999); san_in = 1;
    #1 check(pseudo && san_take, "ACT 74 raises pseudo");
    check(sar.valid && sar.row == 310, "pseudo hands over slot-10 row");
    @(negedge clk); act = 0;
    check(can == 1 && san == 1 && sar.valid && sar.row == 999, "ACT 74 is slot 1 of the new window");
    do_act(5);
    check(can == 2 && !pseudo, "window continues");

    // Random comparison with a model.
    do_ref(0); do_ref(5); // put the model in a known state
    m_san = 5; m_can = 0; m_v = 0; m_row = 0; m_lvl = 0;
    for (int c = 0; c < 20000; c++) begin
      int kind, s, r;
      bit exp_pseudo;
      kind = $urandom_range(99);
      s = $urandom_range(73);
      r = $urandom_range(NUM_ROWS - 1);
      @(negedge clk);
      act = (kind < 90); rearm = (kind >= 97); act_row = row_t'(r); san_in = CNT_BITS'(s);
      exp_pseudo = act && (m_can >= 73);
      #1;
      check(pseudo == exp_pseudo, "pseudo vs model");
      if (rearm || exp_pseudo)
        check(sar.valid == m_v && (!m_v || (sar.row == row_t'(m_row) && sar.lvl == lvl_t'(m_lvl))),
              $sformatf("SAR at window end vs model (dut %0d/%0d/%0d model %0d/%0d/%0d)",
                        sar.valid, sar.row, sar.lvl, m_v, m_row, m_lvl));
      // model update
      if (rearm || exp_pseudo) begin
        m_san = s;
        m_can = exp_pseudo ? 1 : 0;
        if (exp_pseudo && s == 1) begin m_v = 1; m_row = r; m_lvl = 0; end
        else if (s == 0 && m_v) m_lvl = 1;
        else m_v = 0;
      end else if (act) begin
        m_can++;
        if (m_can == m_san) begin m_v = 1; m_row = r; m_lvl = 0; end
      end
      @(posedge clk); #1;
      check(32'(can) == m_can && 32'(san) == m_san, "CAN/SAN vs model");
    end
    act = 0; rearm = 0;

    // Fixed-point CAN: SAN = 3, weights 1.25, 1.25, 1.0 -> the third ACT
    // takes CAN from 2.5 to 3.5 and is selected.
    @(negedge clk); rearmf = 1; sanf_in = 3;
    @(negedge clk); rearmf = 0;
    for (int k = 0; k < 3; k++) begin
      actf = 1; rowf = row_t'(100 + k); wf = (k < 2) ? 160 : 128;
      @(negedge clk);
    end
    actf = 0;
    check(32'(canf) == 448 && sarf.valid && sarf.row == 102, "fixed point: the ACT crossing SAN is selected");
    begin
      int ms, mc, mr, ml, mx;
      bit mv;
      ms = 3; mc = 448; mv = 1; mr = 102; ml = 0;
      mx = 73 << FB;
      for (int c = 0; c < 40000; c++) begin
        int kind, sn, r, w;
        bit ep, hit;
        kind = $urandom_range(99);
        sn = $urandom_range(73);
        r = $urandom_range(NUM_ROWS - 1);
        w = ($urandom_range(9) == 0) ? $urandom_range(mx, 128) : $urandom_range(400, 128);
        @(negedge clk);
        actf = (kind < 90); rearmf = (kind >= 98); rowf = row_t'(r); sanf_in = CNT_BITS'(sn);
        wf = (CNT_BITS+FB)'(w);
        ep = actf && (mc + w > mx);
        #1;
        check(pseudof == ep, "fixed point: pseudo vs model");
        if (rearmf || ep)
          check(sarf.valid == mv && (!mv || (32'(sarf.row) == mr && 32'(sarf.lvl) == ml)),
                "fixed point: SAR at window end vs model");
        if (rearmf || ep) begin
          ms = sn;
          mc = ep ? w : 0;
          if (ep && sn != 0 && (sn << FB) <= w) begin mv = 1; mr = r; ml = 0; end
          else if (sn == 0 && mv) ml = 1;
          else mv = 0;
        end else if (actf) begin
          hit = (mc < (ms << FB)) && ((ms << FB) <= mc + w);
          mc += w;
          if (hit) begin mv = 1; mr = r; ml = 0; end
        end
        @(posedge clk); #1;
        check(32'(canf) == mc && 32'(sanf) == ms, "fixed point: CAN/SAN vs model");
        check(sarf.valid == mv && (!mv || 32'(sarf.row) == mr), "fixed point: SAR vs model");
      end
    end
    actf = 0; rearmf = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
