// color_maps: hardware coloring of checkpoint stores.
//
// A checkpoint store saves a live-out register so that a later region can be
// restarted. Releasing it to the cache before verification is unsafe if it
// overwrites the only verified copy of that register. Coloring gives every
// register NC checkpoint locations (colors); a checkpoint is written to a
// color that no recovery can still need, so it may bypass the store buffer.
//
// Three maps per register:
//   UC (used colors)      the color given to the register's checkpoint in
//                         each unverified region: one column for the open
//                         region and one per region boundary buffer slot;
//   VC (verified colors)  the color holding the register's latest verified
//                         checkpoint, read by the recovery code;
//   AC (available color)  the next free color: one neither in VC nor in any
//                         live UC entry, lowest index first (derived
//                         combinationally, not stored).
// A checkpoint of register r in the open region takes UC[r] if the region
// already colored r, else AC[r]. If no color is free it falls back: it keeps
// the VC color (or color 0 when nothing is verified yet), is marked q and
// goes through the store buffer, which writes it only after verification.
// When the region boundary is committed the open UC column moves into the
// buffer slot. When the oldest region is verified, VC takes every color its
// UC column holds; the colors VC held before become free again (reclaimed
// into AC). On an error all UC columns are dropped; VC stays.
//
// While a verified fallback checkpoint still waits in the store buffer, no
// checkpoint is fast-released (hold_fast): its color may have just been freed
// and must not be written ahead of the pending store.
//
// Interface and timing: req_reg is looked up combinationally (color, fast).
// commit, boundary, verify and flush act at the clock edge. vc_rd_* is a
// combinational read port for the recovery code.
//
// From the paper: 4 colors per register, the AC/UC/VC maps, fallback to the
// store buffer when no color is available, VC update on verification.
// Own choices: AC derived from UC and VC, UC held per buffer slot with
// valid and fallback bits (the paper counts 6 bits per register for the three
// maps, which cannot hold one UC per in-flight region as its Fig. 17 shows;
// this design follows Fig. 17), hold_fast, the color choice on fallback.
module color_maps
  import turnpike_pkg::*;
#(
  parameter int unsigned NR    = NREG,
  parameter int unsigned NC    = NCOLORS,
  parameter int unsigned SLOTS = RBB_DEPTH,
  localparam int unsigned RW   = $clog2(NR),
  localparam int unsigned CW   = $clog2(NC),
  localparam int unsigned SW   = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // lookup for the checkpoint now at commit
  input  logic [RW-1:0] req_reg,
  input  logic          hold_fast,
  output logic [CW-1:0] color,
  output logic          fast,
  // the checkpoint commits this cycle
  input  logic          commit,
  // region boundary: open column -> slot
  input  logic          boundary,
  input  logic [SW-1:0] boundary_slot,
  // oldest region verified
  input  logic          verify,
  input  logic [SW-1:0] verify_slot,
  input  logic          flush,
  // recovery read port
  input  logic [RW-1:0] vc_rd_reg,
  output logic          vc_rd_valid,
  output logic [CW-1:0] vc_rd_color
);

  typedef struct packed {
    logic          valid;
    logic          q;
    logic [CW-1:0] color;
  } uc_t;

  uc_t           uc_open [NR];
  uc_t           uc_slot [SLOTS][NR];
  logic          vc_valid [NR];
  logic [CW-1:0] vc [NR];

  logic [NC-1:0] busy;
  logic          free_any;
  logic [CW-1:0] free_color;

  always_comb begin
    busy = '0;
    if (vc_valid[req_reg]) busy[vc[req_reg]] = 1'b1;
    if (uc_open[req_reg].valid) busy[uc_open[req_reg].color] = 1'b1;
    for (int unsigned s = 0; s < SLOTS; s++)
      if (uc_slot[s][req_reg].valid) busy[uc_slot[s][req_reg].color] = 1'b1;
    free_any   = 1'b0;
    free_color = '0;
    for (int i = NC - 1; i >= 0; i--)
      if (!busy[i]) begin
        free_any   = 1'b1;
        free_color = CW'(i);
      end
  end

  always_comb begin
    if (uc_open[req_reg].valid) begin
      color = uc_open[req_reg].color;
      fast  = !uc_open[req_reg].q && !hold_fast;
    end else if (free_any && !hold_fast) begin
      color = free_color;
      fast  = 1'b1;
    end else begin
      color = vc_valid[req_reg] ? vc[req_reg] : '0;
      fast  = 1'b0;
    end
  end

  assign vc_rd_valid = vc_valid[vc_rd_reg];
  assign vc_rd_color = vc[vc_rd_reg];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned r = 0; r < NR; r++) begin
        uc_open[r]  <= '0;
        vc_valid[r] <= 1'b0;
        vc[r]       <= '0;
        for (int unsigned s = 0; s < SLOTS; s++) uc_slot[s][r] <= '0;
      end
    end else if (flush) begin
      for (int unsigned r = 0; r < NR; r++) begin
        uc_open[r] <= '0;
        for (int unsigned s = 0; s < SLOTS; s++) uc_slot[s][r] <= '0;
      end
    end else begin
      if (verify) begin
        for (int unsigned r = 0; r < NR; r++) begin
          if (uc_slot[verify_slot][r].valid) begin
            vc_valid[r] <= 1'b1;
            vc[r]       <= uc_slot[verify_slot][r].color;
          end
          uc_slot[verify_slot][r] <= '0;
        end
      end
      if (boundary) begin
        for (int unsigned r = 0; r < NR; r++) begin
          uc_slot[boundary_slot][r] <= uc_open[r];
          uc_open[r] <= '0;
        end
      end else if (commit) begin
        // once one checkpoint of r in this region was quarantined, later
        // ones must queue behind it
        if (!uc_open[req_reg].valid)
          uc_open[req_reg] <= '{valid: 1'b1, q: !fast, color: color};
        else if (!fast)
          uc_open[req_reg].q <= 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (boundary && verify) |-> (boundary_slot != verify_slot));
  assert property (@(posedge clk) disable iff (!rst_n) !(boundary && commit));

endmodule
