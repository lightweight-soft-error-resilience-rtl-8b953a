// turnpike_cfg_bench: the end-to-end test of the Turnpike resilience unit as
// a parameterised module, so that one simulation can run it at several sizes
// side by side (store buffer entries, CLQ entries, WCDL).
//
// It is the same test as tb_turnpike_top: a random program of short regions,
// long load-then-store regions and runs of checkpoint-only regions is offered
// one operation per cycle; a memory model with random back-pressure plays
// the cache. Phase 1 runs without errors and checks final memory contents,
// forwarding, per-word write order and that each region is verified exactly
// WCDL_CYC cycles after its boundary. Phase 2 injects sensor and parity
// errors and checks that no discarded or unverified store reaches memory,
// that fast-released regular stores are WAR-free with respect to every
// unverified region, that recovery redirects to the last verified boundary
// and that each register's verified checkpoint is intact.
//
// Interface: done rises when the run ends (or its own watchdog expires);
// checks and failures count the checks; seen has one bit per mechanism
// (see the display at the end for the order) that occurred at least once.
// The caller decides which mechanisms must occur for its set of sizes.
module turnpike_cfg_bench
  import turnpike_pkg::*;
#(
  parameter int unsigned SB_N     = SB_DEPTH,
  parameter int unsigned CLQ_N    = CLQ_ENTRIES,
  parameter int unsigned WCDL_CYC = WCDL
) (
  output logic        done,
  output int          checks,
  output int          failures,
  output logic [13:0] seen
);

  localparam logic [ADDR_W-1:0] DATA_BASE = 32'h0000_8000;
  localparam logic [ADDR_W-1:0] CKPT_BASE = 32'h0001_0000;
  localparam int NWORDS = 12;     // regular data words
  localparam int NCK    = 4;      // registers that get checkpointed

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  commit_t            commit_i;
  logic               commit_ready, sensor_err_i;
  logic               rf_wr_en;
  logic [REG_W-1:0]   rf_wr_idx;
  logic [DATA_W-1:0]  rf_wr_data;
  logic               rf_rd_en [2];
  logic [REG_W-1:0]   rf_rd_idx [2];
  logic [DATA_W-1:0]  rf_rd_data [2];
  logic               dc_wr_valid, dc_wr_ready;
  logic [ADDR_W-1:0]  dc_wr_addr, fwd_addr;
  logic [DATA_W-1:0]  dc_wr_data, fwd_data;
  logic               fwd_hit, squash_o, recover_valid_o, vc_rd_valid;
  logic [PC_W-1:0]    recover_pc_o;
  logic [REG_W-1:0]   vc_rd_reg;
  logic [COLOR_W-1:0] vc_rd_color;
  events_t            events_o;
  fr_state_e          fr_state_o;
  logic [$clog2(CLQ_N+1)-1:0] clq_occupancy_o;

  turnpike_top #(.SB_N(SB_N), .CLQ_N(CLQ_N), .WCDL_CYC(WCDL_CYC)) dut (.*);

  initial begin checks = 0; failures = 0; done = 1'b0; seen = '0; end
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL [SB %0d CLQ %0d WCDL %0d] t=%0t %s", SB_N, CLQ_N, WCDL_CYC, $time, what);
    end
  endtask

  // mechanism counters
  int n_sb_full, n_rbb_full, n_fast_reg, n_fast_ck, n_ck_fb, n_war, n_ovf;
  int n_disallow, n_allow, n_verified, n_release, n_recover_sensor, n_recover_parity;
  int n_fwd, n_dc_stall, n_quar;

  initial begin
    repeat (400000) @(posedge clk);
    if (!done) begin
      failures++;
      $display("[SB %0d CLQ %0d WCDL %0d] watchdog expired", SB_N, CLQ_N, WCDL_CYC);
      done = 1'b1;
    end
  end

  // ------------------------------------------------------------ the model
  typedef struct {
    int  region;
    bit  is_ck;
    int  reg_no;
    logic [ADDR_W-1:0] addr;   // regular: address; checkpoint: color-0 address
    logic [DATA_W-1:0] data;
    bit  fast;
    bit  dead;                 // quarantined in a discarded region
    bit  written;
    logic [ADDR_W-1:0] wr_addr;  // where the cache write went
  } st_rec_t;

  st_rec_t sts [int];          // by sequence number
  logic [DATA_W-1:0] mem [logic [ADDR_W-1:0]];
  int  last_seq_at [logic [ADDR_W-1:0]];   // last written sequence per address
  logic [DATA_W-1:0] prog_val [logic [ADDR_W-1:0]]; // program-order last value
  int  seq = 1;
  int  cycle = 0;

  // regions: r_state 0 open, 1 ended, 2 verified, 3 discarded
  int  r_state [int];
  int  r_bcycle [int];
  logic [PC_W-1:0] r_pc [int];
  bit  r_loads [int][int];     // region -> loaded words
  int  r_ck [int][int];        // region -> reg -> seq of last checkpoint
  int  ended_q [$];
  int  cur_region = 0;
  int  ver_ck [int];           // reg -> seq of latest verified checkpoint
  int  ck_row [int];           // one region's row of r_ck, copied out for foreach
  logic [PC_W-1:0] last_ver_pc = '0;
  bit  phase2 = 0;
  bit  recovering = 0;         // between the flush and the redirect
  bit  flush_now;

  function automatic logic [DATA_W-1:0] mkdata(int s);
    return {32'(s), $urandom};
  endfunction

  // ---------------------------------------------------------- the program
  commit_t prog [$];
  localparam int MAX_ST = (SB_N / 2 > 2) ? SB_N / 2 : 2;
  task automatic gen_region(input int pcbase);
    int n;
    commit_t c;
    bit ck_used [int];
    int n_st = 0;
    bit long_region = ($urandom_range(0, 4) == 0);
    n = $urandom_range(0, 5);
    if ($urandom_range(0, 3) == 0) n = $urandom_range(0, 1);   // bursts of short regions
    if (long_region) n = 0;
    for (int i = 0; i < n; i++) begin
      int k;
      c = '0;
      c.pc = PC_W'(pcbase + 4 * i);
      k = $urandom_range(0, 9);
      // like the region former, keep at most half a store buffer of stores
      // in a region, so that a region can always reach its boundary
      if (n_st >= MAX_ST) k = 0;
      else if (k >= 4) n_st++;
      if (k < 4) begin
        c.op = OP_LOAD;
        c.addr = DATA_BASE + ADDR_W'(8 * $urandom_range(0, NWORDS - 1));
      end else if (k < 7) begin
        c.op = OP_STORE;
        c.addr = DATA_BASE + ADDR_W'(8 * $urandom_range(0, NWORDS - 1));
      end else begin
        c.op = OP_CKPT;
        c.ckpt_reg = REG_W'($urandom_range(0, NCK - 1));
        c.addr = CKPT_BASE + ADDR_W'(8 * c.ckpt_reg);
      end
      prog.push_back(c);
    end
    // now and then a long region: loads to the lower half of the data words,
    // then regular stores. It outlives the WCDL window of the region before
    // it, so its WAR-free stores can be fast-released.
    if (long_region) begin
      int m = $urandom_range(8, 16) + ((WCDL_CYC > 10) ? int'(WCDL_CYC) - 10 : 0);
      for (int i = 0; i < m + 2; i++) begin
        c = '0;
        c.pc = PC_W'(pcbase + 4 * (n + i));
        c.op = (i < m) ? OP_LOAD : OP_STORE;
        c.addr = DATA_BASE + ADDR_W'(8 * ((i < m) ? $urandom_range(0, NWORDS / 2 - 1)
                                                   : $urandom_range(0, NWORDS - 1)));
        prog.push_back(c);
      end
      n += m + 2;
    end
    c = '0;
    c.op = OP_BOUNDARY;
    c.pc = PC_W'(pcbase + 4 * n);
    prog.push_back(c);
    // now and then a run of tiny regions that all checkpoint register 0:
    // with more regions in flight than colors, a checkpoint must fall back
    if ($urandom_range(0, 29) == 0) begin
      for (int j = 1; j <= 5; j++) begin
        c = '0;
        c.op = OP_CKPT;
        c.pc = PC_W'(pcbase + 4 * (n + 2 * j - 1));
        c.addr = CKPT_BASE;
        prog.push_back(c);
        c = '0;
        c.op = OP_BOUNDARY;
        c.pc = PC_W'(pcbase + 4 * (n + 2 * j));
        prog.push_back(c);
      end
    end
  endtask

  // ------------------------------------------------------------- driving
  int regions_done = 0;
  int pcb = 32'h400;
  bit err_pending = 0, err_is_parity = 0;

  task automatic on_flush();
    // every region not verified is discarded
    foreach (r_state[r]) if (r_state[r] < 2) r_state[r] = 3;
    foreach (sts[s]) if (r_state[sts[s].region] == 3 && !sts[s].fast) sts[s].dead = 1;
    ended_q.delete();
    prog.delete();
  endtask

  task automatic check_recovery();
    check(recover_pc_o == last_ver_pc, "redirect to the last verified boundary");
    for (int r = 0; r < NCK; r++) begin
      if (ver_ck.exists(r)) begin
        logic [ADDR_W-1:0] loc;
        vc_rd_reg = REG_W'(r);
        #0.5;
        check(vc_rd_valid, "verified color present");
        loc = CKPT_BASE + ADDR_W'(8 * r) + ADDR_W'(vc_rd_color) * COLOR_STRIDE;
        check(mem.exists(loc) && mem[loc] == sts[ver_ck[r]].data,
              "verified checkpoint intact after recovery");
      end
    end
  endtask

  initial begin
    commit_i = '0; sensor_err_i = 0; rf_wr_en = 0; rf_wr_idx = '0; rf_wr_data = '0;
    foreach (rf_rd_en[p]) begin rf_rd_en[p] = 0; rf_rd_idx[p] = '0; rf_rd_data[p] = '0; end
    dc_wr_ready = 1; fwd_addr = DATA_BASE; vc_rd_reg = '0;
    n_sb_full = 0; n_rbb_full = 0; n_fast_reg = 0; n_fast_ck = 0; n_ck_fb = 0; n_war = 0;
    n_ovf = 0; n_disallow = 0; n_allow = 0; n_verified = 0; n_release = 0;
    n_recover_sensor = 0; n_recover_parity = 0; n_fwd = 0; n_dc_stall = 0; n_quar = 0;
    r_state[0] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    while (regions_done < 1600 || prog.size() > 0 || ended_q.size() > 0) begin
      commit_t c;
      bit      inject;
      @(negedge clk);
      cycle++;
      phase2 = (regions_done >= 500);
      if (prog.size() == 0 && regions_done < 1600 && !squash_o) begin
        gen_region(pcb);
        pcb += 256;
      end
      // offer the next operation, or a bubble
      c = '0;
      if (prog.size() > 0 && !squash_o && $urandom_range(0, 5) != 0) c = prog[0];
      if (c.op == OP_STORE || c.op == OP_CKPT) begin
        c.data = mkdata(seq);
      end
      commit_i = c;
      dc_wr_ready = phase2 ? ($urandom_range(0, 4) != 0) : ($urandom_range(0, 9) != 0);
      fwd_addr = DATA_BASE + ADDR_W'(8 * $urandom_range(0, NWORDS - 1));
      // register file traffic: consistent parity unless an error is injected
      rf_wr_en = 0; rf_rd_en[0] = 0;
      inject = phase2 && !squash_o && ($urandom_range(0, 199) == 0);
      sensor_err_i = 0;
      if (inject && $urandom_range(0, 2) == 0) begin
        rf_rd_en[0] = 1; rf_rd_idx[0] = 5'd3; rf_rd_data[0] = 64'h1;  // parity 1, stored 0
        err_is_parity = 1;
      end else if (inject) begin
        sensor_err_i = 1;
        err_is_parity = 0;
      end else if ($urandom_range(0, 3) == 0) begin
        rf_rd_en[0] = 1; rf_rd_idx[0] = 5'd3; rf_rd_data[0] = 64'h3;   // even parity
      end
      #1;
      // ---------------- observe this cycle (everything below is at the edge)
      if (events_o.sb_full_stall)  n_sb_full++;
      if (events_o.rbb_full_stall) n_rbb_full++;
      if (events_o.war_hit)        n_war++;
      if (events_o.clq_overflow)   n_ovf++;
      if (fr_state_o == FR_DISALLOW) n_disallow++;
      if (fr_state_o == FR_ALLOW)    n_allow++;
      if ((c.op == OP_STORE || c.op == OP_CKPT) && !squash_o && !commit_ready &&
          (events_o.fast_regular || events_o.fast_ckpt || (!events_o.sb_full_stall && !dc_wr_ready)))
        n_dc_stall++;
      // forwarding (checked while no error has ever been injected)
      if (!phase2) begin
        if (fwd_hit) begin
          n_fwd++;
          check(fwd_data == prog_val[fwd_addr], "forwarding returns the youngest store");
        end else if (prog_val.exists(fwd_addr)) begin
          check(mem.exists(fwd_addr) && mem[fwd_addr] == prog_val[fwd_addr],
                "cache holds the youngest store when nothing forwards");
        end
      end
      // recovery redirect
      if (recover_valid_o) begin
        recovering = 0;
        if (err_is_parity) n_recover_parity++; else n_recover_sensor++;
        check_recovery();
      end
      // region verification
      if (events_o.region_verified) begin
        int r;
        n_verified++;
        check(ended_q.size() > 0, "verification of an ended region");
        if (ended_q.size() > 0) begin
          r = ended_q.pop_front();
          check(cycle - r_bcycle[r] == WCDL_CYC, "region verified WCDL cycles after its boundary");
          r_state[r] = 2;
          last_ver_pc = r_pc[r];
          if (r_ck.exists(r)) begin ck_row = r_ck[r]; foreach (ck_row[g]) ver_ck[g] = ck_row[g]; end
        end
      end
      // error: the flush happens at this edge unless a recovery is under way
      flush_now = (sensor_err_i || (rf_rd_en[0] && rf_rd_data[0] == 64'h1)) && !recovering;
      if (flush_now) begin
        check(squash_o && !commit_ready, "an error squashes the commit");
        on_flush();
        recovering = 1;
      end
      // commit
      if (c.op != OP_NONE && commit_ready) begin
        void'(prog.pop_front());
        case (c.op)
          OP_LOAD: r_loads[cur_region][int'(c.addr)] = 1;
          OP_STORE, OP_CKPT: begin
            st_rec_t rec;
            rec.region = cur_region; rec.is_ck = (c.op == OP_CKPT);
            rec.reg_no = int'(c.ckpt_reg); rec.addr = c.addr; rec.data = c.data;
            rec.fast = events_o.fast_regular || events_o.fast_ckpt;
            rec.dead = 0; rec.written = 0; rec.wr_addr = '0;
            sts[seq] = rec;
            if (c.op == OP_STORE) begin
              if (events_o.fast_regular) begin
                n_fast_reg++;
                check(!r_loads[cur_region].exists(int'(c.addr)),
                      "fast-released store is WAR-free in its region");
                foreach (ended_q[i])
                  check(!r_loads[ended_q[i]].exists(int'(c.addr)),
                        "fast-released store is WAR-free in every unverified region");
              end
              prog_val[c.addr] = c.data;
            end else begin
              r_ck[cur_region][int'(c.ckpt_reg)] = seq;
              if (events_o.fast_ckpt) begin
                n_fast_ck++;
                if (ver_ck.exists(int'(c.ckpt_reg)) && sts[ver_ck[int'(c.ckpt_reg)]].written)
                  check(dc_wr_addr != sts[ver_ck[int'(c.ckpt_reg)]].wr_addr,
                        "fast checkpoint avoids the verified checkpoint's location");
              end
              if (events_o.ckpt_fallback) n_ck_fb++;
            end
            if (events_o.store_quarantined) n_quar++;
            seq++;
          end
          OP_BOUNDARY: begin
            r_state[cur_region] = 1;
            r_bcycle[cur_region] = cycle;
            r_pc[cur_region] = c.pc;
            ended_q.push_back(cur_region);
            cur_region++;
            r_state[cur_region] = 0;
            regions_done++;
          end
          default: ;
        endcase
      end
      // cache write
      if (dc_wr_valid && dc_wr_ready) begin
        int s;
        s = int'(dc_wr_data[63:32]);
        if (!sts.exists(s)) check(0, "cache write of an unknown store");
        else begin
          check(!sts[s].dead, "a discarded quarantined store never reaches the cache");
          if (!sts[s].fast)
            check(r_state[sts[s].region] == 2, "buffered store leaves only after verification");
          if (last_seq_at.exists(dc_wr_addr) && !sts[s].is_ck)
            check(last_seq_at[dc_wr_addr] < s, "writes to one address in program order");
          if (!sts[s].fast) n_release++;
          sts[s].written = 1;
          sts[s].wr_addr = dc_wr_addr;
          if (sts[s].is_ck)
            check(((dc_wr_addr - sts[s].addr) % COLOR_STRIDE) == 0 &&
                  (dc_wr_addr - sts[s].addr) / COLOR_STRIDE < NCOLORS,
                  "checkpoint written to one of its register's colors");
        end
        mem[dc_wr_addr] = dc_wr_data;
        last_seq_at[dc_wr_addr] = s;
      end
      if (flush_now) begin
        // the open region restarts as a new one after recovery
        cur_region++;
        r_state[cur_region] = 0;
      end
      // at the end of phase 1: drain and compare the cache with program order
      if (regions_done == 500 && !phase2 && prog.size() == 0) begin
        @(posedge clk);   // the last operation commits here
        repeat (WCDL_CYC + 20) begin
          @(negedge clk);
          commit_i = '0;
          dc_wr_ready = 1;
          sensor_err_i = 0;
          rf_rd_en[0] = 0;
          cycle++;
          #1;
          if (events_o.region_verified) begin
            int r;
            n_verified++;
            r = ended_q.pop_front();
            check(cycle - r_bcycle[r] == WCDL_CYC, "region verified WCDL cycles after its boundary");
            r_state[r] = 2;
            last_ver_pc = r_pc[r];
            if (r_ck.exists(r)) begin ck_row = r_ck[r]; foreach (ck_row[g]) ver_ck[g] = ck_row[g]; end
          end
          if (dc_wr_valid) begin
            mem[dc_wr_addr] = dc_wr_data;
            last_seq_at[dc_wr_addr] = int'(dc_wr_data[63:32]);
            n_release++;
          end
        end
        foreach (prog_val[a]) check(mem.exists(a) && mem[a] == prog_val[a],
                                    "cache matches program order after drain");
        for (int r = 0; r < NCK; r++) if (ver_ck.exists(r)) begin
          vc_rd_reg = REG_W'(r);
          #0.5;
          check(mem[CKPT_BASE + ADDR_W'(8 * r) + ADDR_W'(vc_rd_color) * COLOR_STRIDE]
                == sts[ver_ck[r]].data, "verified checkpoint readable through the color map");
        end
        regions_done++;   // leave phase 1 once
      end
      @(posedge clk);
    end

    $display("[SB %0d CLQ %0d WCDL %0d] sb_full_stall=%0d rbb_full_stall=%0d quarantined=%0d fast_regular=%0d fast_ckpt=%0d ckpt_fallback=%0d war_hit=%0d",
             SB_N, CLQ_N, WCDL_CYC, n_sb_full, n_rbb_full, n_quar, n_fast_reg, n_fast_ck, n_ck_fb, n_war);
    $display("[SB %0d CLQ %0d WCDL %0d] clq_overflow=%0d verified=%0d released=%0d forwarded=%0d dc_stall=%0d recover_sensor=%0d recover_parity=%0d",
             SB_N, CLQ_N, WCDL_CYC, n_ovf, n_verified, n_release, n_fwd, n_dc_stall, n_recover_sensor, n_recover_parity);
    seen = {n_sb_full > 0, n_rbb_full > 0, n_quar > 0, n_fast_reg > 0, n_fast_ck > 0,
            n_ck_fb > 0, n_war > 0, n_ovf > 0, n_disallow > 0 && n_allow > 0,
            n_verified > 0 && n_release > 0, n_fwd > 0, n_dc_stall > 0,
            n_recover_sensor > 0, n_recover_parity > 0};
    done = 1'b1;
  end
endmodule
