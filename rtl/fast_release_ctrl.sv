// fast_release_ctrl: selective control of the fast release of WAR-free
// regular stores.
//
// The committed load queue has few entries, so it can overflow when several
// regions are in flight. A region whose loads were not all recorded cannot
// prove a store WAR-free, so on overflow the fast release is switched off
// and the queue is wiped. Recording resumes at the next region boundary, and
// fast release resumes only after a region is then verified. Three states:
//   SEARCH    fast release on, loads inserted (start state)
//   DISALLOW  fast release off, no insertion, queue cleared
//   ALLOW     fast release off, loads inserted
// Transitions: SEARCH -overflow-> DISALLOW; DISALLOW -verification->
// DISALLOW; DISALLOW -boundary-> ALLOW; ALLOW -overflow-> DISALLOW;
// ALLOW -verification-> SEARCH. An error (flush) returns to SEARCH, since
// recovery leaves no region in flight and the queue empty.
//
// Interface and timing: events are single-cycle strobes sampled at the clock
// edge; the outputs decode the current state. If an overflow and a
// verification arrive together in ALLOW, the overflow wins.
//
// From the paper: the three states and the transitions printed in its
// Fig. 13. Own choices: the flush transition and the same-cycle priority.
// Stores still reach the cache in order because the top also requires that
// no store of an earlier region is left in the store buffer.
module fast_release_ctrl
  import turnpike_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      overflow,
  input  logic      boundary,
  input  logic      verify,
  input  logic      flush,
  output fr_state_e state,
  output logic      fast_en,
  output logic      insert_en,
  output logic      clear_clq
);

  fr_state_e st, nx;

  always_comb begin
    nx = st;
    unique case (st)
      FR_SEARCH:   if (overflow) nx = FR_DISALLOW;
      FR_DISALLOW: if (boundary) nx = FR_ALLOW;
      FR_ALLOW:    if (overflow) nx = FR_DISALLOW;
                   else if (verify) nx = FR_SEARCH;
      default:     nx = FR_SEARCH;
    endcase
    if (flush) nx = FR_SEARCH;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) st <= FR_SEARCH;
    else        st <= nx;
  end

  assign state     = st;
  assign fast_en   = (st == FR_SEARCH);
  assign insert_en = (st != FR_DISALLOW);
  assign clear_clq = (st == FR_DISALLOW);

endmodule
