// tb_verify_timer: checks that a region is verified exactly WCDL cycles
// after its boundary is stamped, never earlier, and not in a cycle that
// reports an error. The 10-cycle default WCDL is used.
module tb_verify_timer;
  import turnpike_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic head_valid, error, verify;
  logic [TIME_W-1:0] head_time, now;

  verify_timer dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL t=%0t %s", $time, what);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int wait_cyc;
    head_valid = 0; error = 0; head_time = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // free-running counter
    @(negedge clk);
    begin
      logic [TIME_W-1:0] t0;
      t0 = now;
      repeat (7) @(negedge clk);
      check(now == t0 + 7, "counter advances once per cycle");
    end
    for (int k = 0; k < 40; k++) begin
      @(negedge clk);
      head_time  = now;        // boundary stamped at this edge
      @(negedge clk);
      head_valid = 1;
      wait_cyc = 1;
      // an error during the window, when chosen, must hide verify
      while (!verify && wait_cyc < 40) begin
        error = (k % 4 == 1) && (now - head_time == TIME_W'(WCDL));
        #1;
        if (error) begin
          check(!verify, "no verify with an error");
          error = 0;
          #1;
        end
        if (verify) break;
        @(negedge clk);
        wait_cyc++;
      end
      check(verify, "region verified");
      check(now - head_time == TIME_W'(WCDL), "verified exactly WCDL cycles after the boundary");
      head_valid = 0;
      repeat ($urandom_range(0, 5)) @(negedge clk);
    end
    // a stamp older than WCDL verifies at once
    @(negedge clk);
    head_time = now - TIME_W'(WCDL + 5); head_valid = 1; #1;
    check(verify, "old region verifies at once");
    head_time = now - TIME_W'(WCDL - 1); #1;
    check(!verify, "young region waits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
