// gsb: gated store buffer.
//
// Every store that may not bypass verification waits here after commit. The
// buffer is a circular FIFO whose pointers count modulo twice the depth, so
// that a full and an empty buffer differ and any depth works. Four pointers
// split it into three parts:
//   head      .. rel_ptr   stores of verified regions, drained to the cache
//   rel_ptr   .. cur_start stores of ended regions still waiting for WCDL
//   cur_start .. tail      stores of the region now executing
// When the oldest region is verified the control logic moves rel_ptr to the
// tail pointer recorded at that region's boundary (the "GSB ptr" field of the
// region boundary buffer), which releases exactly that region's stores. On a
// detected error every unverified store is discarded by pulling the tail back
// to rel_ptr; verified stores still drain. Loads look the buffer up for
// store-to-load forwarding, youngest matching entry first.
//
// Interface and timing: push, release, mark_cur and discard act at the clock
// edge. The drain port is valid/ready: out_valid while the head store is
// verified, and the head advances on out_valid && out_ready. Forwarding is
// combinational. older_empty is high when no store of an earlier region is
// left, which gates the fast release of WAR-free stores so that stores reach
// the cache in program order. chk_hit tells whether any buffered store
// writes the word at chk_addr: a store of the current region quarantined
// while fast release was off must not be overtaken by a later fast store to
// the same word. Each entry also carries a flag for checkpoint
// stores that found no free color (fallback checkpoints); rel_fb_pending
// tells the color maps that such a store is verified but not yet written.
//
// From the paper: the gating, the 4-entry size, release on verification,
// discard on error, forwarding. Own choices: the pointer scheme, word
// (8-byte) granularity of forwarding and of chk_hit, one push and one
// drain per cycle.
module gsb
  import turnpike_pkg::*;
#(
  parameter int unsigned DEPTH  = SB_DEPTH,
  parameter int unsigned AW     = ADDR_W,
  parameter int unsigned DW     = DATA_W,
  parameter int unsigned GRAN   = GRAN_BITS,
  localparam int unsigned PTR_W = $clog2(DEPTH) + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // store entering the quarantine
  input  logic             push_valid,
  input  logic [AW-1:0]    push_addr,
  input  logic [DW-1:0]    push_data,
  input  logic             push_fb,
  output logic             full,
  output logic             empty,
  output logic [PTR_W-1:0] tail_ptr,
  // region boundary: the current region's stores start at the tail
  input  logic             mark_cur,
  // region verified: stores up to release_ptr may leave
  input  logic             release_valid,
  input  logic [PTR_W-1:0] release_ptr,
  // error: drop all unverified stores
  input  logic             discard,
  output logic             older_empty,
  // a verified fallback checkpoint store is still waiting to drain
  output logic             rel_fb_pending,
  // drain to the L1 data cache
  output logic             out_valid,
  output logic [AW-1:0]    out_addr,
  output logic [DW-1:0]    out_data,
  input  logic             out_ready,
  // store-to-load forwarding
  input  logic [AW-1:0]    fwd_addr,
  output logic             fwd_hit,
  output logic [DW-1:0]    fwd_data,
  // does any buffered store write this word (checked for fast release)
  input  logic [AW-1:0]    chk_addr,
  output logic             chk_hit
);

  localparam int unsigned IDX_W = $clog2(DEPTH);

  logic [AW-1:0] addr_q [DEPTH];
  logic [DW-1:0] data_q [DEPTH];
  logic          fb_q   [DEPTH];
  logic [PTR_W-1:0] head, tail, rel_ptr, cur_start;
  logic [PTR_W-1:0] count;

  // Pointers count modulo 2*DEPTH, so that any depth works (not only powers
  // of two); the slot is the pointer modulo DEPTH.
  function automatic logic [PTR_W-1:0] inc(input logic [PTR_W-1:0] p,
                                           input int unsigned k);
    int unsigned q = int'(p) + k;
    return PTR_W'((q >= 2 * DEPTH) ? q - 2 * DEPTH : q);
  endfunction

  function automatic logic [PTR_W-1:0] ptr_dist(input logic [PTR_W-1:0] a,
                                            input logic [PTR_W-1:0] b);
    return PTR_W'((a >= b) ? int'(a) - int'(b) : int'(a) + 2 * DEPTH - int'(b));
  endfunction

  function automatic logic [IDX_W-1:0] idx(input logic [PTR_W-1:0] p);
    return IDX_W'((int'(p) >= DEPTH) ? int'(p) - DEPTH : int'(p));
  endfunction

  assign count       = ptr_dist(tail, head);
  assign full        = (count == PTR_W'(DEPTH));
  assign empty       = (count == '0);
  assign tail_ptr    = tail;
  assign older_empty = (head == cur_start);
  assign out_valid   = (head != rel_ptr);
  assign out_addr    = addr_q[idx(head)];
  assign out_data    = data_q[idx(head)];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head      <= '0;
      tail      <= '0;
      rel_ptr   <= '0;
      cur_start <= '0;
    end else begin
      if (out_valid && out_ready) head <= inc(head, 1);
      if (discard) begin
        tail      <= rel_ptr;
        cur_start <= rel_ptr;
      end else begin
        if (push_valid && !full) tail <= inc(tail, 1);
        if (mark_cur) cur_start <= tail;
        if (release_valid) rel_ptr <= release_ptr;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (push_valid && !full && !discard) begin
      addr_q[idx(tail)] <= push_addr;
      data_q[idx(tail)] <= push_data;
      fb_q[idx(tail)]   <= push_fb;
    end
  end

  always_comb begin
    logic [PTR_W-1:0] p;
    rel_fb_pending = 1'b0;
    for (int unsigned i = 0; i < DEPTH; i++) begin
      p = inc(head, i);
      if (PTR_W'(i) < ptr_dist(rel_ptr, head) && fb_q[idx(p)]) rel_fb_pending = 1'b1;
    end
  end

  always_comb begin
    logic [PTR_W-1:0] p;
    chk_hit = 1'b0;
    for (int unsigned i = 0; i < DEPTH; i++) begin
      p = inc(head, i);
      if (PTR_W'(i) < count && addr_q[idx(p)][AW-1:GRAN] == chk_addr[AW-1:GRAN]) chk_hit = 1'b1;
    end
  end

  // Youngest matching store wins.
  always_comb begin
    logic [PTR_W-1:0] p;
    fwd_hit  = 1'b0;
    fwd_data = '0;
    for (int unsigned i = 0; i < DEPTH; i++) begin
      p = inc(head, i);
      if (PTR_W'(i) < count && addr_q[idx(p)][AW-1:GRAN] == fwd_addr[AW-1:GRAN]) begin
        fwd_hit  = 1'b1;
        fwd_data = data_q[idx(p)];
      end
    end
  end

  // A push into a full buffer is a stall the control logic must honour, and
  // a verified region cannot release beyond the tail.
  assert property (@(posedge clk) disable iff (!rst_n) push_valid |-> !full);
  assert property (@(posedge clk) disable iff (!rst_n)
                   release_valid |-> (ptr_dist(release_ptr, head) <= count));
  assert property (@(posedge clk) disable iff (!rst_n) discard |-> !push_valid);

endmodule
