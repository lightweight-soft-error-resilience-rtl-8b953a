// verify_timer: timing logic for region verification.
//
// A region is verified, i.e. known to be free of soft errors, once WCDL
// cycles (the sensors' worst-case detection latency) have passed after its
// end with no error detected. The timer keeps a free-running cycle counter;
// the region boundary buffer stamps each ended region with it, and the timer
// compares the oldest entry's stamp with the counter. verify is high for one
// cycle per region, in order, and the entry is popped in that cycle. An error
// detected in the same cycle wins: the region is then not verified.
//
// Interface and timing: now is the counter value (stamped at the clock edge
// that commits a boundary); verify is combinational from the head entry and
// the counter, so the earliest verify is WCDL cycles after the boundary
// commit edge. The comparison uses modular subtraction, correct while
// WCDL < 2**(TW-1).
//
// From the paper: verification WCDL cycles after the region end, 10-cycle
// default WCDL. Own choice: a time stamp per region instead of the
// "To Wait"/"Has Waited" counters of the original Turnstile description.
module verify_timer
  import turnpike_pkg::*;
#(
  parameter int unsigned WCDL_CYC = WCDL,
  parameter int unsigned TW       = TIME_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          head_valid,
  input  logic [TW-1:0] head_time,
  input  logic          error,
  output logic [TW-1:0] now,
  output logic          verify
);

  logic [TW-1:0] cnt;
  logic [TW-1:0] age;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt <= '0;
    else        cnt <= cnt + 1'b1;
  end

  assign now    = cnt;
  assign age    = cnt - head_time;
  assign verify = head_valid && !error && (age >= TW'(WCDL_CYC));

  initial assert (WCDL_CYC < (1 << (TW - 1)));

endmodule
