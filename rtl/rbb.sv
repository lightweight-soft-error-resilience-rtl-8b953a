// rbb: region boundary buffer.
//
// A FIFO with one entry per region that has ended but is not yet verified.
// The entry is written when the core commits a region boundary instruction
// and holds: the boundary PC (where the next region starts, which becomes the
// recovery PC once the ended region is verified), the store buffer tail
// pointer at the boundary (the last store of the ended region), the region
// time (cycle stamp of the boundary, read by the verification timer) and the
// region id (used to clear the region's committed load queue entry). The
// head is always the oldest unverified region; regions are verified in order.
// The Used Colors column that the paper also draws in this buffer is kept in
// color_maps, indexed by this buffer's slot numbers (head_idx, tail_idx).
//
// Interface and timing: push and pop act at the clock edge; the head entry is
// visible combinationally. flush empties the buffer (error recovery). Push on
// a full buffer is not allowed; the control logic stalls the boundary.
//
// From the paper: the PC, GSB ptr, Region Time and Used Colors fields
// (Fig. 2), allocation at each boundary, release at the head. Own choices:
// the depth (4), the region id field, the stamp form of Region Time.
module rbb
  import turnpike_pkg::*;
#(
  parameter int unsigned DEPTH  = RBB_DEPTH,
  parameter int unsigned PW     = PC_W,
  parameter int unsigned GPTR_W = $clog2(SB_DEPTH) + 1,
  parameter int unsigned TW     = TIME_W,
  parameter int unsigned RW     = RID_W,
  localparam int unsigned IDX_W = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              push,
  input  logic [PW-1:0]     push_pc,
  input  logic [GPTR_W-1:0] push_gsb_ptr,
  input  logic [TW-1:0]     push_time,
  input  logic [RW-1:0]     push_rid,
  input  logic              pop,
  input  logic              flush,
  output logic              full,
  output logic              head_valid,
  output logic [PW-1:0]     head_pc,
  output logic [GPTR_W-1:0] head_gsb_ptr,
  output logic [TW-1:0]     head_time,
  output logic [RW-1:0]     head_rid,
  output logic [IDX_W-1:0]  head_idx,
  output logic [IDX_W-1:0]  tail_idx
);

  typedef struct packed {
    logic [PW-1:0]     pc;
    logic [GPTR_W-1:0] gsb_ptr;
    logic [TW-1:0]     rtime;
    logic [RW-1:0]     rid;
  } entry_t;

  entry_t ent [DEPTH];
  logic [IDX_W-1:0] hd, tl;
  logic [$clog2(DEPTH+1)-1:0] cnt;

  function automatic logic [IDX_W-1:0] inc(input logic [IDX_W-1:0] i);
    return (i == IDX_W'(DEPTH - 1)) ? '0 : i + 1'b1;
  endfunction

  assign full         = (cnt == ($clog2(DEPTH+1))'(DEPTH));
  assign head_valid   = (cnt != '0);
  assign head_pc      = ent[hd].pc;
  assign head_gsb_ptr = ent[hd].gsb_ptr;
  assign head_time    = ent[hd].rtime;
  assign head_rid     = ent[hd].rid;
  assign head_idx     = hd;
  assign tail_idx     = tl;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hd  <= '0;
      tl  <= '0;
      cnt <= '0;
    end else if (flush) begin
      hd  <= '0;
      tl  <= '0;
      cnt <= '0;
    end else begin
      if (push && !full) tl <= inc(tl);
      if (pop && head_valid) hd <= inc(hd);
      cnt <= cnt + ($clog2(DEPTH+1))'(push && !full)
                 - ($clog2(DEPTH+1))'(pop && head_valid);
    end
  end

  always_ff @(posedge clk) begin
    if (push && !full && !flush) ent[tl] <= '{pc: push_pc, gsb_ptr: push_gsb_ptr,
                                              rtime: push_time, rid: push_rid};
  end

  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> head_valid);

endmodule
