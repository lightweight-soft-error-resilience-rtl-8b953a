// clq: compact committed load queue with range checking.
//
// A regular store may skip verification when its region has not loaded from
// the address it writes (it is WAR-free): restarting the region after an
// error then never reads the possibly corrupted value. To check this the
// queue keeps, for each region in flight, one entry holding the lowest and
// highest address loaded by the region's committed loads. A store of the
// current region is WAR-free unless its address falls inside the current
// region's range. The range over-approximates the set of loaded addresses, so
// the check can only err on the safe side.
//
// An entry is allocated at the first committed load of a region and freed
// when that region is verified. A load that finds no entry for its region and
// no free entry raises overflow and is not recorded; the fast-release control
// then stops insertion and clears the queue (clear). Addresses are compared
// at word granularity (GRAN low bits dropped).
//
// Interface and timing: ld_valid/ld_addr insert at the clock edge when
// insert_en; overflow is combinational in the load's cycle. war_hit is
// combinational from st_addr and cur_rid. verify_valid/verify_rid free the
// verified region's entry at the edge; clear frees all. occupancy counts the
// valid entries.
//
// From the paper: per-region min/max range entries, 2 entries, clearing on
// verification, overflow handling. Own choices: allocation at a region's
// first load, tagging entries with a region id, word granularity.
module clq
  import turnpike_pkg::*;
#(
  parameter int unsigned ENTRIES = CLQ_ENTRIES,
  parameter int unsigned AW      = ADDR_W,
  parameter int unsigned RW      = RID_W,
  parameter int unsigned GRAN    = GRAN_BITS
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [RW-1:0] cur_rid,
  input  logic          insert_en,
  input  logic          ld_valid,
  input  logic [AW-1:0] ld_addr,
  output logic          overflow,
  input  logic [AW-1:0] st_addr,
  output logic          war_hit,
  input  logic          verify_valid,
  input  logic [RW-1:0] verify_rid,
  input  logic          clear,
  output logic [$clog2(ENTRIES+1)-1:0] occupancy
);

  localparam int unsigned WW = AW - GRAN;
  localparam int unsigned IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  typedef struct packed {
    logic          valid;
    logic [RW-1:0] rid;
    logic [WW-1:0] lo;
    logic [WW-1:0] hi;
  } entry_t;

  entry_t ent [ENTRIES];

  logic [WW-1:0] ld_w, st_w;
  logic          own_hit, free_any;
  logic [IW-1:0] own_idx, free_idx;

  assign ld_w = ld_addr[AW-1:GRAN];
  assign st_w = st_addr[AW-1:GRAN];

  always_comb begin
    own_hit  = 1'b0;
    own_idx  = '0;
    free_any = 1'b0;
    free_idx = '0;
    war_hit  = 1'b0;
    occupancy = '0;
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      if (ent[i].valid) occupancy = occupancy + 1'b1;
      if (ent[i].valid && ent[i].rid == cur_rid) begin
        own_hit = 1'b1;
        own_idx = IW'(i);
        if (st_w >= ent[i].lo && st_w <= ent[i].hi) war_hit = 1'b1;
      end
      if (!ent[i].valid && !free_any) begin
        free_any = 1'b1;
        free_idx = IW'(i);
      end
    end
  end

  assign overflow = ld_valid && insert_en && !own_hit && !free_any;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < ENTRIES; i++) ent[i] <= '0;
    end else if (clear) begin
      for (int unsigned i = 0; i < ENTRIES; i++) ent[i].valid <= 1'b0;
    end else begin
      if (verify_valid) begin
        for (int unsigned i = 0; i < ENTRIES; i++)
          if (ent[i].valid && ent[i].rid == verify_rid) ent[i].valid <= 1'b0;
      end
      if (ld_valid && insert_en) begin
        if (own_hit) begin
          if (ld_w < ent[own_idx].lo) ent[own_idx].lo <= ld_w;
          if (ld_w > ent[own_idx].hi) ent[own_idx].hi <= ld_w;
        end else if (free_any) begin
          ent[free_idx] <= '{valid: 1'b1, rid: cur_rid, lo: ld_w, hi: ld_w};
        end
      end
    end
  end

endmodule
