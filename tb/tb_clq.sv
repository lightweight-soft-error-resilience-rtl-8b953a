// tb_clq: random self-checking test of the committed load queue.
//
// The reference model keeps, per region id, the set of word addresses its
// loads touched (not just a range) and holds at most two regions. For every
// random store it checks that war_hit is set whenever the store hits a loaded
// word of the current region (no missed WAR dependence, the safety rule), and
// that war_hit equals the model's min/max range test. It also checks overflow
// and occupancy, and frees regions on verification and clears.
module tb_clq;
  import turnpike_pkg::*;

  localparam int ENTRIES = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [RID_W-1:0] cur_rid, verify_rid;
  logic insert_en, ld_valid, overflow, war_hit, verify_valid, clear;
  logic [ADDR_W-1:0] ld_addr, st_addr;
  logic [1:0] occupancy;

  clq #(.ENTRIES(ENTRIES)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL t=%0t %s", $time, what);
    end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model: region id -> loaded word addresses
  bit words [int][int];
  bit row [int];               // one region's word set, copied out for foreach
  int live[$];               // region ids in flight, oldest first (ended ones)
  int rid = 0;
  int n_ovf = 0, n_hit = 0, n_miss = 0, n_true_war = 0;

  initial begin
    insert_en = 1; ld_valid = 0; verify_valid = 0; clear = 0;
    ld_addr = '0; st_addr = '0; cur_rid = '0; verify_rid = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 8000; cyc++) begin
      int r, w, sw;
      bit exp_ovf, exp_hit, true_war;
      int lo, hi;
      @(negedge clk);
      ld_valid = 0; verify_valid = 0; clear = 0;
      r = $urandom_range(0, 99);
      insert_en = ($urandom_range(0, 19) != 0);
      cur_rid = RID_W'(rid);
      w = $urandom_range(0, 63);
      ld_addr = ADDR_W'(32'h8000 + w * 8 + $urandom_range(0, 7));
      if (r < 45) ld_valid = 1;
      if (r >= 45 && r < 48) clear = 1;
      if (live.size() > 0 && $urandom_range(0, 5) == 0) begin
        verify_valid = 1; verify_rid = RID_W'(live[0]);
      end
      sw = $urandom_range(0, 63);
      st_addr = ADDR_W'(32'h8000 + sw * 8 + $urandom_range(0, 7));
      #1;
      exp_ovf = ld_valid && insert_en && !words.exists(rid) && (words.num() == ENTRIES);
      check(overflow == exp_ovf, "overflow");
      check(occupancy == 2'(words.num()), "occupancy");
      true_war = words.exists(rid) && words[rid].exists(sw);
      exp_hit = 0;
      if (words.exists(rid)) begin
        lo = 1 << 30; hi = -1;
        row = words[rid];
        foreach (row[a]) begin
          if (a < lo) lo = a;
          if (a > hi) hi = a;
        end
        exp_hit = (sw >= lo) && (sw <= hi);
      end
      if (true_war) begin
        check(war_hit, "a true WAR dependence is never missed");
        n_true_war++;
      end
      check(war_hit == exp_hit, "range check");
      if (war_hit) n_hit++; else n_miss++;
      if (exp_ovf) n_ovf++;
      // model update
      if (clear) words.delete();
      else begin
        if (verify_valid) begin
          if (words.exists(live[0])) words.delete(live[0]);
          void'(live.pop_front());
        end
        if (ld_valid && insert_en && !exp_ovf) words[rid][w] = 1;
      end
      // region boundary now and then (not in the same cycle as a load)
      @(posedge clk);
      if (!ld_valid && $urandom_range(0, 3) == 0 && live.size() < 4) begin
        live.push_back(rid);
        rid = (rid + 1) % (1 << RID_W);
      end
    end
    check(n_ovf > 50 && n_hit > 200 && n_miss > 200 && n_true_war > 50, "coverage");
    $display("overflows=%0d hits=%0d misses=%0d", n_ovf, n_hit, n_miss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
