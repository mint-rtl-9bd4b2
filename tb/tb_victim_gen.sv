// tb_victim_gen -- self-checking testbench for victim_gen.
//
// Blast radius 1 (default) and 2, normal and transitive level, rows at both
// edges of the bank and random rows; expected victims computed here as
// row -/+ (level*BR + k).
module tb_victim_gen;
  import mint_pkg::*;

  int checks = 0, failures = 0;
  mit_req_t req1, req2;
  logic v1 [2];  row_t r1 [2];
  logic v2 [4];  row_t r2 [4];

  victim_gen dut1 (.req(req1), .vict_valid(v1), .vict_row(r1));
  victim_gen #(.BLAST_RADIUS(2), .NUM_ROWS(1000)) dut2 (.req(req2), .vict_valid(v2), .vict_row(r2));

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  task automatic try(int row, int lvl, bit valid);
    req1 = '{valid: valid, lvl: lvl_t'(lvl), row: row_t'(row)};
    req2 = '{valid: valid, lvl: lvl_t'(lvl), row: row_t'(row % 1000)};
    #1;
    begin
      int d = lvl + 1;
      check(v1[0] == (valid && row - d >= 0), $sformatf("BR1 low valid row %0d lvl %0d", row, lvl));
      check(v1[1] == (valid && row + d < NUM_ROWS), $sformatf("BR1 high valid row %0d lvl %0d", row, lvl));
      if (v1[0]) check(r1[0] == row_t'(row - d), "BR1 low row");
      if (v1[1]) check(r1[1] == row_t'(row + d), "BR1 high row");
    end
    for (int k = 0; k < 2; k++) begin
      int rr = row % 1000;
      int d = lvl * 2 + k + 1;
      check(v2[2*k] == (valid && rr - d >= 0), $sformatf("BR2 low valid row %0d d %0d", rr, d));
      check(v2[2*k+1] == (valid && rr + d < 1000), $sformatf("BR2 high valid row %0d d %0d", rr, d));
      if (v2[2*k]) check(r2[2*k] == row_t'(rr - d), "BR2 low row");
      if (v2[2*k+1]) check(r2[2*k+1] == row_t'(rr + d), "BR2 high row");
    end
  endtask

  initial begin
    try(100, 0, 1);
    check(r1[0] == 99 && r1[1] == 101, "row 100 refreshes 99 and 101");
    try(100, 1, 1);
    check(r1[0] == 98 && r1[1] == 102, "transitive row 100 refreshes 98 and 102");
    try(0, 0, 1); try(1, 1, 1); try(NUM_ROWS - 1, 0, 1); try(NUM_ROWS - 2, 1, 1);
    try(999, 0, 1); try(2, 1, 1); try(500, 0, 0);
    for (int i = 0; i < 2000; i++) try($urandom_range(NUM_ROWS - 1), $urandom_range(1), $urandom_range(3) != 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
