// tb_color_maps: random self-checking test of hardware coloring.
//
// The reference model keeps the colors of each in-flight region in a queue
// of associative arrays and the verified colors per register. Every cycle it
// checks the color and fast decision for the requested register: a region
// reuses its own color; otherwise the lowest color held neither by the
// verified map nor by any in-flight region is taken; with none free (or
// hold_fast) the checkpoint falls back to the store buffer. It also checks
// the safety rule directly: a fast-released checkpoint never writes the
// verified color of its register nor a color another in-flight region owns.
// Few registers are used so that the pools run out often.
module tb_color_maps;
  import turnpike_pkg::*;

  localparam int SLOTS = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [REG_W-1:0] req_reg, vc_rd_reg;
  logic hold_fast, fast, commit, boundary, verify, flush, vc_rd_valid;
  logic [COLOR_W-1:0] color, vc_rd_color;
  logic [1:0] boundary_slot, verify_slot;

  color_maps #(.SLOTS(SLOTS)) dut (.*);

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

  typedef struct { int color; bit q; } use_t;
  use_t open_r [int];
  use_t ended [$][int];
  int   vcm [int];           // reg -> verified color
  int   hd = 0, tl = 0;
  int   n_fast = 0, n_fb = 0, n_reuse = 0, n_verify = 0;

  initial begin
    hold_fast = 0; commit = 0; boundary = 0; verify = 0; flush = 0;
    req_reg = '0; vc_rd_reg = '0; boundary_slot = '0; verify_slot = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 10000; cyc++) begin
      int r, rg, ec;
      bit ef;
      bit busy [NCOLORS];
      @(negedge clk);
      commit = 0; boundary = 0; verify = 0; flush = 0;
      rg = $urandom_range(0, 2);
      req_reg = REG_W'(rg);
      vc_rd_reg = REG_W'($urandom_range(0, 2));
      hold_fast = ($urandom_range(0, 29) == 0);
      r = $urandom_range(0, 99);
      if (r < 1) flush = 1;
      else if (r < 50) commit = 1;
      else if (r < 75 && ended.size() < SLOTS) boundary = 1;
      boundary_slot = 2'(tl);
      if (!flush && ended.size() > 0 && $urandom_range(0, 3) == 0) verify = 1;
      verify_slot = 2'(hd);
      #1;
      // expected decision
      foreach (busy[c]) busy[c] = 0;
      if (vcm.exists(rg)) busy[vcm[rg]] = 1;
      if (open_r.exists(rg)) busy[open_r[rg].color] = 1;
      foreach (ended[i]) if (ended[i].exists(rg)) busy[ended[i][rg].color] = 1;
      if (open_r.exists(rg)) begin
        ec = open_r[rg].color; ef = !open_r[rg].q && !hold_fast;
      end else begin
        ec = -1;
        for (int c = NCOLORS - 1; c >= 0; c--) if (!busy[c]) ec = c;
        if (ec >= 0 && !hold_fast) ef = 1;
        else begin ef = 0; ec = vcm.exists(rg) ? vcm[rg] : 0; end
      end
      check(color == COLOR_W'(ec) && fast == ef, "color decision");
      if (fast) begin
        check(!(vcm.exists(rg) && vcm[rg] == int'(color)), "fast never overwrites the verified color");
        foreach (ended[i]) if (ended[i].exists(rg))
          check(ended[i][rg].color != int'(color), "fast never overwrites an in-flight color");
      end
      check(vc_rd_valid == vcm.exists(int'(vc_rd_reg)), "vc valid");
      if (vc_rd_valid) check(int'(vc_rd_color) == vcm[int'(vc_rd_reg)], "vc color");
      // model update
      if (flush) begin
        open_r.delete(); ended.delete(); hd = 0; tl = 0;
      end else begin
        if (verify) begin
          foreach (ended[0][k]) vcm[k] = ended[0][k].color;
          void'(ended.pop_front());
          hd = (hd + 1) % SLOTS; n_verify++;
        end
        if (boundary) begin
          ended.push_back(open_r); open_r.delete(); tl = (tl + 1) % SLOTS;
        end else if (commit) begin
          if (!open_r.exists(rg)) open_r[rg] = '{ec, !ef};
          else begin
            n_reuse++;
            if (!ef) open_r[rg].q = 1;
          end
          if (ef) n_fast++; else n_fb++;
        end
      end
      @(posedge clk);
    end
    check(n_fast > 500 && n_fb > 100 && n_reuse > 200 && n_verify > 500, "coverage");
    $display("fast=%0d fallback=%0d reuse=%0d verify=%0d", n_fast, n_fb, n_reuse, n_verify);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
