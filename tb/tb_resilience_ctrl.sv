// tb_resilience_ctrl: checks the recovery PC update on verification, and the
// error sequence: one-cycle flush, squash for the whole sequence, waiting
// for the store buffer to drain for a random number of cycles, then one
// recover_valid pulse carrying the last verified boundary PC. Sensor and
// parity errors are both used.
module tb_resilience_ctrl;
  import turnpike_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic sensor_err, parity_err, verify, gsb_empty, flush, squash, recover_valid;
  logic [PC_W-1:0] verify_pc, recover_pc;

  resilience_ctrl #(.RESET_PC(32'h0000_0100)) dut (.*);

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

  logic [PC_W-1:0] last_pc;

  initial begin
    sensor_err = 0; parity_err = 0; verify = 0; gsb_empty = 1; verify_pc = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    last_pc = 32'h100;
    for (int k = 0; k < 200; k++) begin
      int drain;
      // some verifications
      repeat ($urandom_range(0, 4)) begin
        @(negedge clk);
        verify = 1; verify_pc = $urandom;
        @(posedge clk);
        last_pc = verify_pc;
        @(negedge clk);
        verify = 0;
      end
      @(negedge clk);
      #1 check(!squash && !flush && !recover_valid, "idle");
      check(recover_pc == last_pc, "recovery PC holds the last verified boundary");
      drain = $urandom_range(0, 6);
      gsb_empty = (drain == 0);
      if (k % 2 != 0) sensor_err = 1; else parity_err = 1;
      #1 check(flush && squash, "flush and squash in the error cycle");
      @(negedge clk);
      sensor_err = 0; parity_err = 0;
      // the drain state lasts at least one cycle
      for (int d = 0; d < ((drain == 0) ? 1 : drain); d++) begin
        #1 check(squash && !flush && !recover_valid, "squash while draining");
        if (d == drain - 1 || drain == 0) gsb_empty = 1;
        @(negedge clk);
      end
      #1 check(recover_valid && squash, "recover pulse after drain");
      check(recover_pc == last_pc, "redirect to the recovery PC");
      @(negedge clk);
      #1 check(!recover_valid && !squash, "single pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
