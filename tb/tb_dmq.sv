// tb_dmq -- self-checking testbench for dmq.
//
// Directed: fill four entries, check FIFO order, full flag, the dropped fifth
// push and its overflow flag, push and pop in the same cycle when full. Then
// 20000 random push/pop cycles against a queue model, checking head, count,
// empty and overflow every cycle.
module tb_dmq;
  import mint_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic push = 0, pop = 0;
  mit_req_t push_data = '0, head;
  logic [2:0] count;
  logic empty, full, overflow;

  dmq dut (.clk, .rst_n, .push, .push_data, .pop, .head, .count, .empty, .full, .overflow);

  mit_req_t q[$];

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

  function automatic mit_req_t mk(int r, int l);
    return '{valid: 1'b1, lvl: lvl_t'(l), row: row_t'(r)};
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(negedge clk);
    check(empty && count == 0 && !head.valid, "empty after reset");
    for (int i = 0; i < 5; i++) begin
      push = 1; push_data = mk(100 + i, i & 1);
      #1 check(overflow == (i == 4), $sformatf("overflow flag on push %0d", i));
      @(negedge clk);
    end
    push = 0;
    check(full && count == 4, "full after 4 pushes");
    // push + pop when full: allowed
    push = 1; pop = 1; push_data = mk(200, 0);
    #1 check(!overflow && head.row == 100, "push+pop when full accepted");
    @(negedge clk); push = 0; pop = 0;
    for (int i = 0; i < 4; i++) begin
      int exp_row;
      exp_row = (i < 3) ? 101 + i : 200;
      check(head.valid && head.row == row_t'(exp_row), $sformatf("FIFO order entry %0d: %0d", i, head.row));
      check(head.lvl == lvl_t'((i < 3) ? ((i + 1) & 1) : 0), "level bit kept");
      pop = 1; @(negedge clk); pop = 0;
    end
    check(empty && !head.valid, "empty after draining");
    pop = 1; @(negedge clk); pop = 0;
    check(empty && count == 0, "pop of empty queue ignored");

    for (int c = 0; c < 20000; c++) begin
      bit exp_ovf;
      @(negedge clk);
      push = ($urandom_range(1) != 0); pop = ($urandom_range(2) == 0);
      push_data = mk($urandom_range(NUM_ROWS - 1), $urandom_range(1));
      exp_ovf = push && q.size() == 4 && !(pop);
      #1;
      check(overflow == exp_ovf, "overflow vs model");
      check(32'(count) == q.size() && empty == (q.size() == 0) && full == (q.size() == 4), "count vs model");
      check(q.size() == 0 ? !head.valid : head == q[0], "head vs model");
      if (pop && q.size() > 0) void'(q.pop_front());
      if (push && q.size() < 4) q.push_back(push_data);
    end
    push = 0; pop = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
