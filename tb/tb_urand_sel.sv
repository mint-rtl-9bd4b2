// tb_urand_sel -- self-checking testbench for urand_sel.
//
// Feeds a random 7-bit word every cycle and consumes the held value at random
// intervals. Checks: every consumed value lies in the legal range (0..73 with
// transitive mitigation, 1..73 without, 0..16 for an RFM16 window); a value is
// fresh again within a few cycles of being consumed; and the values are
// uniform, every bin of a 74-bin histogram of 29600 draws within +-25% of
// its mean of 400 (a 5-sigma band).
module tb_urand_sel;
  import mint_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic [RNG_BITS-1:0] rng;
  logic take_t, take_n, take_r;
  logic [CNT_BITS-1:0] v_t, v_n, v_r;
  logic f_t, f_n, f_r;

  urand_sel dut_t (.clk, .rst_n, .rng_bits(rng), .take(take_t), .san_next(v_t), .fresh(f_t));
  urand_sel #(.TRANSITIVE(1'b0)) dut_n (.clk, .rst_n, .rng_bits(rng), .take(take_n), .san_next(v_n), .fresh(f_n));
  urand_sel #(.M(16)) dut_r (.clk, .rst_n, .rng_bits(rng), .take(take_r), .san_next(v_r), .fresh(f_r));

  int hist_t [74];
  int hist_n [74];
  int hist_r [17];
  int n_t = 0, n_n = 0, n_r = 0;
  int wait_t = 0, max_wait_t = 0;
  localparam int DRAWS = 74 * 400;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    #200000000;
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    rng    <= RNG_BITS'($urandom);
    take_t <= f_t && ($urandom_range(3) == 0);
    take_n <= f_n && ($urandom_range(3) == 0);
    take_r <= f_r && ($urandom_range(1) == 0);
  end

  initial begin
    take_t = 0; take_n = 0; take_r = 0; rng = '0;
    foreach (hist_t[i]) begin hist_t[i] = 0; hist_n[i] = 0; end
    foreach (hist_r[i]) hist_r[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    while (n_t < DRAWS || n_n < DRAWS || n_r < 17 * 400) begin
      @(posedge clk);
      if (take_t) begin
        check(v_t <= 73, $sformatf("transitive value %0d out of 0..73", v_t));
        if (v_t <= 73) hist_t[v_t]++;
        n_t++;
      end
      if (take_n) begin
        check(v_n >= 1 && v_n <= 73, $sformatf("plain value %0d out of 1..73", v_n));
        if (v_n <= 73) hist_n[v_n]++;
        n_n++;
      end
      if (take_r) begin
        check(v_r <= 16, $sformatf("RFM16 value %0d out of 0..16", v_r));
        if (v_r <= 16) hist_r[v_r[4:0]]++;
        n_r++;
      end
      if (!f_t) wait_t++; else wait_t = 0;
      if (wait_t > max_wait_t) max_wait_t = wait_t;
    end
    for (int i = 0; i < 74; i++) begin
      check(hist_t[i] > 300 && hist_t[i] < 500,
            $sformatf("transitive bin %0d has %0d draws (expect ~400)", i, hist_t[i]));
      if (i > 0)
        check(hist_n[i] > n_n / 73 * 3 / 4 && hist_n[i] < n_n / 73 * 5 / 4,
              $sformatf("plain bin %0d has %0d of %0d draws", i, hist_n[i], n_n));
    end
    check(hist_n[0] == 0, "plain selector produced slot 0");
    for (int i = 0; i < 17; i++)
      check(hist_r[i] > n_r / 17 * 3 / 4 && hist_r[i] < n_r / 17 * 5 / 4,
            $sformatf("RFM16 bin %0d has %0d of %0d draws", i, hist_r[i], n_r));
    // 74 of 128 words are accepted; a wait of 40 cycles has probability ~1e-15.
    check(max_wait_t < 40, $sformatf("longest wait for a fresh value %0d cycles", max_wait_t));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
