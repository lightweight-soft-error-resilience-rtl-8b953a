// tb_turnpike_configs: the end-to-end test of the Turnpike resilience unit
// at the sizes of the published sensitivity studies, all in one simulation.
//
// Ten copies of turnpike_cfg_bench run side by side, each with its own
// clock, program and error injection:
//   WCDL 20, 30, 40, 50 cycles  with the default 4-entry store buffer and
//                               2-entry CLQ (run-time overhead study);
//   store buffer 8, 10, 20, 30, 40 entries with WCDL 10 (store buffer
//                               size study);
//   CLQ of 4 entries            with WCDL 10 (CLQ size study).
// Every copy checks the full set of correctness rules and exact WCDL
// verification timing. A mechanism that depends on size (a full store
// buffer never happens with 40 entries, for instance) need not occur in
// every copy, but each mechanism must occur in at least one, and fast
// release of both kinds, verification and both kinds of recovery must
// occur in every copy.
// The sizes are the ones the studies list; the program generator and the
// error rates are this test's own.
module tb_turnpike_configs;
  import turnpike_pkg::*;

  localparam int N = 10;
  localparam int unsigned SBV   [N] = '{4, 4, 4, 4, 8, 10, 20, 30, 40, 4};
  localparam int unsigned CLQV  [N] = '{2, 2, 2, 2, 2, 2, 2, 2, 2, 4};
  localparam int unsigned WCDLV [N] = '{20, 30, 40, 50, 10, 10, 10, 10, 10, 10};

  // seen bits, most significant first
  localparam string MECH [14] = '{"sb_full_stall", "rbb_full_stall", "quarantine",
    "fast_regular", "fast_ckpt", "ckpt_fallback", "war_hit", "clq_overflow",
    "disallow_allow", "verify_release", "forwarding", "dc_stall",
    "recover_sensor", "recover_parity"};
  // mechanisms every size must show: fast_regular, fast_ckpt, quarantine,
  // verify_release, recover_sensor, recover_parity
  localparam logic [13:0] MUST_EACH = 14'b00_1110_0001_0011;

  logic        done     [N];
  int          checks_i [N];
  int          fails_i  [N];
  logic [13:0] seen_i   [N];

  for (genvar g = 0; g < N; g++) begin : g_cfg
    turnpike_cfg_bench #(.SB_N(SBV[g]), .CLQ_N(CLQV[g]), .WCDL_CYC(WCDLV[g])) u_bench (
      .done     (done[g]),
      .checks   (checks_i[g]),
      .failures (fails_i[g]),
      .seen     (seen_i[g])
    );
  end

  function automatic bit all_done();
    foreach (done[g]) if (!done[g]) return 1'b0;
    return 1'b1;
  endfunction

  int checks = 0, failures = 0;
  logic [13:0] seen_any;

  // a clock of the same period as the benches' own, for the watchdog and
  // for polling
  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin
    repeat (450000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    do @(posedge clk); while (!all_done());
    @(posedge clk);
    seen_any = '0;
    foreach (done[g]) begin
      checks   += checks_i[g];
      failures += fails_i[g];
      seen_any |= seen_i[g];
      for (int b = 0; b < 14; b++) if (MUST_EACH[b]) begin
        checks++;
        if (!seen_i[g][b]) begin
          failures++;
          $display("FAIL [SB %0d CLQ %0d WCDL %0d] %s never happened",
                   SBV[g], CLQV[g], WCDLV[g], MECH[13 - b]);
        end
      end
    end
    for (int b = 0; b < 14; b++) begin
      checks++;
      if (!seen_any[b]) begin
        failures++;
        $display("FAIL %s never happened in any configuration", MECH[13 - b]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
