// resilience_ctrl: control logic and recovery PC.
//
// Holds the recovery PC, the boundary at which the most recently verified
// region ended; execution restarts there (through the region's recovery
// code) after an error. Each region verification loads the verified region's
// boundary PC into it.
//
// When an error is reported (an acoustic sensor detection or a register
// parity mismatch) the unit squashes the core's commit stream and pulses
// flush for one cycle, which discards the unverified stores, the region
// boundary buffer, the open and in-flight used colors and the committed load
// queue. It then waits until the store buffer has written out the stores of
// already verified regions, so that the recovery code reads the verified
// checkpoints from the cache, and pulses recover_valid with recover_pc.
//
// States: RUN -> (error) DRAIN -> (store buffer empty) RECOVER -> RUN.
// squash is high during DRAIN and RECOVER and, combinationally, in the cycle
// an error arrives in RUN; the core must neither commit nor hold a commit
// across it. Errors during DRAIN or RECOVER are absorbed: no unverified state
// exists then.
//
// From the paper: the recovery PC, discarding the store buffer on an error,
// restart from the recovery PC, parity errors handled like sensor detections.
// Own choices: the wait for the verified stores to drain, the state encoding,
// a parameterised reset value of the recovery PC.
module resilience_ctrl
  import turnpike_pkg::*;
#(
  parameter int unsigned          PW       = PC_W,
  parameter logic [PC_W-1:0]      RESET_PC = '0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          sensor_err,
  input  logic          parity_err,
  input  logic          verify,
  input  logic [PW-1:0] verify_pc,
  input  logic          gsb_empty,
  output logic          flush,
  output logic          squash,
  output logic          recover_valid,
  output logic [PW-1:0] recover_pc
);

  typedef enum logic [1:0] {S_RUN, S_DRAIN, S_RECOVER} state_e;

  state_e        st;
  logic [PW-1:0] rpc;
  logic          err;

  assign err           = sensor_err || parity_err;
  assign flush         = (st == S_RUN) && err;
  assign squash        = (st != S_RUN) || err;
  assign recover_valid = (st == S_RECOVER);
  assign recover_pc    = rpc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st  <= S_RUN;
      rpc <= PW'(RESET_PC);
    end else begin
      unique case (st)
        S_RUN:     if (err) st <= S_DRAIN;
        S_DRAIN:   if (gsb_empty) st <= S_RECOVER;
        S_RECOVER: st <= S_RUN;
        default:   st <= S_RUN;
      endcase
      if (verify && !err) rpc <= verify_pc;
    end
  end

  // verification is suppressed by the timer in an error cycle
  assert property (@(posedge clk) disable iff (!rst_n) !(verify && err));

endmodule
