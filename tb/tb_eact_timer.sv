// tb_eact_timer -- self-checking testbench for eact_timer.
//
// Two timers see the same ACT/PRE stream: one at the defaults (7 fractional
// bits, tRC = 32 ticks, so EACT = (tON + 11) * 4 in units of 1/128) and one
// with 3 fractional bits and tRC = 64 ticks, where the shift goes the other
// way (EACT = (tON + 11) / 8 in units of 1/8). For every PRE the testbench
// computes tON from its own cycle count and checks the event, the row and
// the weight, including the clamps at 1.0 and at the window size of 73.
// It also checks that PRE to a closed bank gives no event and that the
// open-row flag follows ACT and PRE.
module tb_eact_timer;
  import mint_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic act = 0, pre = 0;
  row_t act_row = '0;
  logic open_a, ev_a, open_b, ev_b;
  row_t row_a, row_b;
  logic [13:0] eact_a;
  logic [9:0]  eact_b;

  eact_timer dut_a (.clk, .rst_n, .act, .act_row, .pre, .row_open(open_a), .ev(ev_a),
                    .ev_row(row_a), .eact(eact_a));
  eact_timer #(.FRAC_BITS(3), .TRC_LOG2(6)) dut_b (.clk, .rst_n, .act, .act_row, .pre,
                    .row_open(open_b), .ev(ev_b), .ev_row(row_b), .eact(eact_b));

  int n_lo = 0, n_hi = 0, n_mid = 0;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    #200000000;
    $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expect_w(int ton, int fr, int lg);
    int w;
    w = ((ton + 11) << fr) >> lg;
    if (w < (1 << fr)) w = 1 << fr;
    if (w > (73 << fr)) w = 73 << fr;
    return w;
  endfunction

  // ACT a row, wait, then PRE it; check everything at PRE.
  task automatic open_close(int row, int ton);
    int wa, wb;
    @(negedge clk); act = 1; act_row = row_t'(row);
    @(negedge clk); act = 0;
    check(open_a && open_b, "row open after ACT");
    check(!ev_a && !ev_b, "no event while the row is open");
    repeat (ton - 1) @(negedge clk);
    pre = 1; #1;
    wa = expect_w(ton, 7, 5); wb = expect_w(ton, 3, 6);
    check(ev_a && ev_b, "event at PRE");
    check(32'(row_a) == row && 32'(row_b) == row, "event carries the open row");
    check(32'(eact_a) == wa, $sformatf("tON %0d: EACT %0d, expected %0d/128", ton, eact_a, wa));
    check(32'(eact_b) == wb, $sformatf("tON %0d: EACT %0d, expected %0d/8", ton, eact_b, wb));
    if (wa == 128) n_lo++; else if (wa == 73 * 128) n_hi++; else n_mid++;
    @(negedge clk); pre = 0;
    check(!open_a && !open_b, "row closed after PRE");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    check(!open_a && !open_b, "closed after reset");
    // PRE to a closed bank
    @(negedge clk); pre = 1; #1;
    check(!ev_a && !ev_b, "PRE to a closed bank gives no event");
    @(negedge clk); pre = 0;
    // every tON from 1 to 200, then a sweep up to beyond saturation
    for (int t = 1; t <= 200; t++) open_close(t * 37 % 131072, t);
    for (int t = 200; t < 2600; t += 13) open_close(t, t);
    open_close(131071, 5000);
    for (int k = 0; k < 300; k++) open_close($urandom_range(131071), $urandom_range(700, 1));
    check(n_lo > 0 && n_hi > 0 && n_mid > 0, "low clamp, high clamp and plain weights all seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
