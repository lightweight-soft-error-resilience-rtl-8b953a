// tb_fast_release_ctrl: drives random overflow, boundary, verification and
// flush strobes and compares state and outputs with a reference written as a
// transition table of the selective fast-release control. Also requires each
// transition to have been taken at least once.
module tb_fast_release_ctrl;
  import turnpike_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic overflow, boundary, verify, flush, fast_en, insert_en, clear_clq;
  fr_state_e state;

  fast_release_ctrl dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL t=%0t %s", $time, what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // 0 SEARCH, 1 DISALLOW, 2 ALLOW
  int m = 0;
  int taken [3][3];

  initial begin
    overflow = 0; boundary = 0; verify = 0; flush = 0;
    repeat (3) @(posedge clk);
    #1 check(state == FR_SEARCH, "reset state");
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      int nm;
      @(negedge clk);
      overflow = ($urandom_range(0, 6) == 0);
      boundary = !overflow && ($urandom_range(0, 4) == 0);
      verify   = ($urandom_range(0, 4) == 0);
      flush    = ($urandom_range(0, 60) == 0);
      #1;
      check(int'(state) == m, "state");
      check(fast_en == (m == 0), "fast_en only while searching");
      check(insert_en == (m != 1), "insert_en");
      check(clear_clq == (m == 1), "clear_clq");
      nm = m;
      if (m == 0 && overflow) nm = 1;
      if (m == 1 && boundary) nm = 2;
      if (m == 2 && overflow) nm = 1;
      if (m == 2 && !overflow && verify) nm = 0;
      if (flush) nm = 0;
      else taken[m][nm]++;
      m = nm;
      @(posedge clk);
    end
    check(taken[0][1] > 0 && taken[1][1] > 0 && taken[1][2] > 0 &&
          taken[2][1] > 0 && taken[2][0] > 0, "all transitions taken");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
