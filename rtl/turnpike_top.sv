// turnpike_top: the Turnpike soft-error resilience unit of an in-order core.
//
// Acoustic sensors report every particle strike within WCDL cycles, so a
// region of code whose end lies WCDL cycles in the past with no detection is
// known to be error-free (verified). The compiler cuts the program into short
// regions and saves each region's live-out registers with checkpoint stores.
// Stores are normally held in the gated store buffer until their region is
// verified, which keeps corrupted data out of the cache; on an error the
// unverified stores are dropped and the core restarts the oldest unverified
// region from its recovery PC, reloading its inputs from the checkpoints.
// With only 4 store buffer entries this quarantine stalls an in-order core
// often. This unit lets two kinds of stores skip it safely:
//   * regular stores with no write-after-read dependence on a load of their
//     own region (checked with the range-based committed load queue, clq,
//     under the selective control fast_release_ctrl);
//   * checkpoint stores that can be given a checkpoint location (color) that
//     no recovery still needs (color_maps).
//
// Commit interface: the core offers one committed operation per cycle in
// commit_i (op, pc, addr, data, ckpt_reg); it is taken when commit_ready is
// high, otherwise the core holds it (a stall). Per operation:
//   LOAD      recorded in the CLQ; never stalls.
//   STORE     fast-released straight to the cache port if fast release is on,
//             every earlier region is verified and its stores have left the
//             buffer, the
//             address misses the region's CLQ range and no buffered store
//             writes the same word; else pushed into the store buffer (stall
//             while it is full).
//   CKPT      its address is moved to the assigned color
//             (addr + color * COLOR_STRIDE); released at once if the color
//             allows it, else pushed into the store buffer.
//   BOUNDARY  ends the open region: a region boundary buffer entry records
//             pc (the recovery PC once verified), the store buffer tail and
//             the cycle; stalls while that buffer is full.
// A fast store needs the cache write port in its own cycle (stall if
// dc_wr_ready is low); the store buffer drains when no fast store uses it.
// The oldest ended region is verified WCDL cycles after its boundary; its
// stores are then released, its colors become the verified ones and its
// CLQ entry is freed.
//
// Errors: sensor_err_i or a register parity mismatch squashes commit, flushes
// the unverified state, waits for the verified stores to drain and pulses
// recover_valid_o with recover_pc_o. The recovery code reads the verified
// color of each register through the vc_rd_* port.
//
// From the paper: the blocks and their connections (its Fig. 2), the sizes,
// both fast-release schemes, the recovery flow. Own choices are listed in
// each block; at this level: the single-operation commit port, the checkpoint
// address layout and the arbitration of the cache write port.
module turnpike_top
  import turnpike_pkg::*;
#(
  parameter int unsigned     SB_N     = SB_DEPTH,
  parameter int unsigned     CLQ_N    = CLQ_ENTRIES,
  parameter int unsigned     RBB_N    = RBB_DEPTH,
  parameter int unsigned     WCDL_CYC = WCDL,
  parameter logic [PC_W-1:0] RESET_PC = '0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // commit stage of the core
  input  commit_t              commit_i,
  output logic                 commit_ready,
  // acoustic sensor detection
  input  logic                 sensor_err_i,
  // register file accesses, for parity
  input  logic                 rf_wr_en,
  input  logic [REG_W-1:0]     rf_wr_idx,
  input  logic [DATA_W-1:0]    rf_wr_data,
  input  logic                 rf_rd_en   [2],
  input  logic [REG_W-1:0]     rf_rd_idx  [2],
  input  logic [DATA_W-1:0]    rf_rd_data [2],
  // L1 data cache write port
  output logic                 dc_wr_valid,
  output logic [ADDR_W-1:0]    dc_wr_addr,
  output logic [DATA_W-1:0]    dc_wr_data,
  input  logic                 dc_wr_ready,
  // store-to-load forwarding for the core's loads
  input  logic [ADDR_W-1:0]    fwd_addr,
  output logic                 fwd_hit,
  output logic [DATA_W-1:0]    fwd_data,
  // recovery
  output logic                 squash_o,
  output logic                 recover_valid_o,
  output logic [PC_W-1:0]      recover_pc_o,
  input  logic [REG_W-1:0]     vc_rd_reg,
  output logic                 vc_rd_valid,
  output logic [COLOR_W-1:0]   vc_rd_color,
  // status
  output events_t              events_o,
  output fr_state_e            fr_state_o,
  output logic [$clog2(CLQ_N+1)-1:0] clq_occupancy_o
);

  localparam int unsigned GPTR_W = $clog2(SB_N) + 1;
  localparam int unsigned SLOT_W = (RBB_N > 1) ? $clog2(RBB_N) : 1;

  // ---------------------------------------------------------------- signals
  logic              flush, squash, err_any, parity_err;
  logic              verify;
  logic [TIME_W-1:0] now;
  logic [RID_W-1:0]  cur_rid;

  logic              gsb_full, gsb_empty, gsb_older_empty, gsb_fb_pending;
  logic [GPTR_W-1:0] gsb_tail;
  logic              gsb_push, gsb_out_valid, gsb_out_ready, gsb_chk_hit;
  logic [ADDR_W-1:0] gsb_push_addr, gsb_out_addr;
  logic [DATA_W-1:0] gsb_out_data;

  logic              rbb_full, rbb_head_valid;
  logic [PC_W-1:0]   rbb_head_pc;
  logic [GPTR_W-1:0] rbb_head_gsb_ptr;
  logic [TIME_W-1:0] rbb_head_time;
  logic [RID_W-1:0]  rbb_head_rid;
  logic [SLOT_W-1:0] rbb_head_idx, rbb_tail_idx;

  logic              fr_fast_en, fr_insert_en, fr_clear;
  logic              clq_overflow, clq_war_hit;

  logic [COLOR_W-1:0] ck_color;
  logic               ck_fast;
  logic [ADDR_W-1:0]  ck_addr;

  logic is_ld, is_st, is_ck, is_rb;
  logic st_fast, ck_fast_go, fast_go, need_push;
  logic accept;

  // ------------------------------------------------------- commit decisions
  assign is_ld = (commit_i.op == OP_LOAD);
  assign is_st = (commit_i.op == OP_STORE);
  assign is_ck = (commit_i.op == OP_CKPT);
  assign is_rb = (commit_i.op == OP_BOUNDARY);

  assign ck_addr = commit_i.addr + ADDR_W'(ck_color) * COLOR_STRIDE;

  assign st_fast    = is_st && fr_fast_en && !rbb_head_valid && gsb_older_empty
                   && !clq_war_hit && !gsb_chk_hit;
  assign ck_fast_go = is_ck && ck_fast;
  assign fast_go    = st_fast || ck_fast_go;
  assign need_push  = (is_st && !st_fast) || (is_ck && !ck_fast);

  always_comb begin
    accept = 1'b0;
    if (!squash) begin
      unique case (1'b1)
        is_ld:     accept = 1'b1;
        fast_go:   accept = dc_wr_ready;
        need_push: accept = !gsb_full;
        is_rb:     accept = !rbb_full;
        default:   accept = 1'b0;
      endcase
    end
  end
  assign commit_ready = accept || (commit_i.op == OP_NONE && !squash);

  // ---------------------------------------------------- cache write port
  assign dc_wr_valid   = (fast_go && !squash) || gsb_out_valid;
  assign dc_wr_addr    = (fast_go && !squash) ? (is_ck ? ck_addr : commit_i.addr) : gsb_out_addr;
  assign dc_wr_data    = (fast_go && !squash) ? commit_i.data : gsb_out_data;
  assign gsb_out_ready = dc_wr_ready && !(fast_go && !squash);

  // ------------------------------------------------------------ region id
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                cur_rid <= '0;
    else if (is_rb && accept)  cur_rid <= cur_rid + 1'b1;
  end

  // --------------------------------------------------------------- blocks
  assign gsb_push      = need_push && accept;
  assign gsb_push_addr = is_ck ? ck_addr : commit_i.addr;

  gsb #(.DEPTH(SB_N)) u_gsb (
    .clk, .rst_n,
    .push_valid    (gsb_push),
    .push_addr     (gsb_push_addr),
    .push_data     (commit_i.data),
    .push_fb       (is_ck),
    .full          (gsb_full),
    .empty         (gsb_empty),
    .tail_ptr      (gsb_tail),
    .mark_cur      (is_rb && accept),
    .release_valid (verify),
    .release_ptr   (rbb_head_gsb_ptr),
    .discard       (flush),
    .older_empty   (gsb_older_empty),
    .rel_fb_pending(gsb_fb_pending),
    .out_valid     (gsb_out_valid),
    .out_addr      (gsb_out_addr),
    .out_data      (gsb_out_data),
    .out_ready     (gsb_out_ready),
    .fwd_addr, .fwd_hit, .fwd_data,
    .chk_addr      (commit_i.addr),
    .chk_hit       (gsb_chk_hit)
  );

  rbb #(.DEPTH(RBB_N), .GPTR_W(GPTR_W)) u_rbb (
    .clk, .rst_n,
    .push         (is_rb && accept),
    .push_pc      (commit_i.pc),
    .push_gsb_ptr (gsb_tail),
    .push_time    (now),
    .push_rid     (cur_rid),
    .pop          (verify),
    .flush        (flush),
    .full         (rbb_full),
    .head_valid   (rbb_head_valid),
    .head_pc      (rbb_head_pc),
    .head_gsb_ptr (rbb_head_gsb_ptr),
    .head_time    (rbb_head_time),
    .head_rid     (rbb_head_rid),
    .head_idx     (rbb_head_idx),
    .tail_idx     (rbb_tail_idx)
  );

  verify_timer #(.WCDL_CYC(WCDL_CYC)) u_timer (
    .clk, .rst_n,
    .head_valid (rbb_head_valid),
    .head_time  (rbb_head_time),
    .error      (err_any),
    .now        (now),
    .verify     (verify)
  );

  fast_release_ctrl u_frc (
    .clk, .rst_n,
    .overflow  (clq_overflow),
    .boundary  (is_rb && accept),
    .verify    (verify),
    .flush     (flush),
    .state     (fr_state_o),
    .fast_en   (fr_fast_en),
    .insert_en (fr_insert_en),
    .clear_clq (fr_clear)
  );

  clq #(.ENTRIES(CLQ_N)) u_clq (
    .clk, .rst_n,
    .cur_rid      (cur_rid),
    .insert_en    (fr_insert_en),
    .ld_valid     (is_ld && accept),
    .ld_addr      (commit_i.addr),
    .overflow     (clq_overflow),
    .st_addr      (commit_i.addr),
    .war_hit      (clq_war_hit),
    .verify_valid (verify),
    .verify_rid   (rbb_head_rid),
    .clear        (fr_clear || flush),
    .occupancy    (clq_occupancy_o)
  );

  color_maps #(.SLOTS(RBB_N)) u_colors (
    .clk, .rst_n,
    .req_reg       (commit_i.ckpt_reg),
    .hold_fast     (gsb_fb_pending),
    .color         (ck_color),
    .fast          (ck_fast),
    .commit        (is_ck && accept),
    .boundary      (is_rb && accept),
    .boundary_slot (rbb_tail_idx),
    .verify        (verify),
    .verify_slot   (rbb_head_idx),
    .flush         (flush),
    .vc_rd_reg, .vc_rd_valid, .vc_rd_color
  );

  reg_parity u_parity (
    .clk, .rst_n,
    .wr_en   (rf_wr_en),
    .wr_idx  (rf_wr_idx),
    .wr_data (rf_wr_data),
    .rd_en   (rf_rd_en),
    .rd_idx  (rf_rd_idx),
    .rd_data (rf_rd_data),
    .error   (parity_err)
  );

  resilience_ctrl #(.RESET_PC(RESET_PC)) u_ctrl (
    .clk, .rst_n,
    .sensor_err    (sensor_err_i),
    .parity_err    (parity_err),
    .verify        (verify),
    .verify_pc     (rbb_head_pc),
    .gsb_empty     (gsb_empty),
    .flush         (flush),
    .squash        (squash),
    .recover_valid (recover_valid_o),
    .recover_pc    (recover_pc_o)
  );

  assign err_any  = sensor_err_i || parity_err;
  assign squash_o = squash;

  // ---------------------------------------------------------------- events
  always_comb begin
    events_o                   = '0;
    events_o.store_quarantined = gsb_push;
    events_o.fast_regular      = st_fast && accept;
    events_o.fast_ckpt         = ck_fast_go && accept;
    events_o.ckpt_fallback     = is_ck && !ck_fast && accept;
    events_o.war_hit           = is_st && !squash && fr_fast_en && clq_war_hit;
    events_o.sb_full_stall     = need_push && !squash && gsb_full;
    events_o.rbb_full_stall    = is_rb && !squash && rbb_full;
    events_o.clq_overflow      = clq_overflow && accept;
    events_o.region_verified   = verify;
    events_o.gsb_release       = gsb_out_valid && gsb_out_ready;
    events_o.recovery          = recover_valid_o;
    events_o.parity_error      = parity_err;
  end

  // A committed store leaves through exactly one path.
  assert property (@(posedge clk) disable iff (!rst_n) !(fast_go && need_push));

endmodule
