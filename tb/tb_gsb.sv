// tb_gsb: random self-checking test of the gated store buffer.
//
// A reference model keeps the buffer as absolute positions (head, release
// point, start of the current region, tail) over an unbounded array and
// replays the same random mix of pushes, region boundaries, region
// verifications (release up to a recorded boundary), error discards and
// cache drains with random back-pressure. Every cycle it compares full,
// empty, older_empty, the drain port, the fallback-pending flag and a
// forwarding lookup (youngest match wins) with the model. It runs a 5-entry
// buffer; the full design's tests cover 4 and 8 to 40 entries.
module tb_gsb;
  import turnpike_pkg::*;

  localparam int DEPTH = 5;   // not a power of two, to exercise pointer wrap
  localparam int PTR_W = $clog2(DEPTH) + 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic push_valid, push_fb, full, empty, mark_cur, release_valid, discard;
  logic older_empty, rel_fb_pending, out_valid, out_ready, fwd_hit;
  logic [ADDR_W-1:0] push_addr, out_addr, fwd_addr, chk_addr;
  logic chk_hit;
  logic [DATA_W-1:0] push_data, out_data, fwd_data;
  logic [PTR_W-1:0]  tail_ptr, release_ptr;

  gsb #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL t=%0t %s", $time, what);
    end
  endtask

  // model
  logic [ADDR_W-1:0] m_addr [int];
  logic [DATA_W-1:0] m_data [int];
  bit                m_fb   [int];
  int m_head = 0, m_tail = 0, m_rel = 0, m_cur = 0;
  int bounds[$];          // tails recorded at boundaries, oldest first
  int n_drain = 0, n_discard = 0, n_release = 0, n_fwd_hit = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push_valid = 0; push_fb = 0; mark_cur = 0; release_valid = 0; discard = 0;
    out_ready = 0; push_addr = '0; push_data = '0; fwd_addr = '0; chk_addr = '0; release_ptr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      int r;
      bit exp_fwd_hit, exp_fb;
      logic [DATA_W-1:0] exp_fwd;
      @(negedge clk);
      push_valid = 0; mark_cur = 0; release_valid = 0; discard = 0;
      r = $urandom_range(0, 99);
      if (r < 4 && (m_tail != m_rel)) discard = 1;
      else if (r < 40 && (m_tail - m_head) < DEPTH) begin
        push_valid = 1;
        push_addr  = ADDR_W'(32'h1000 + 8 * $urandom_range(0, 7));
        push_data  = {$urandom, $urandom};
        push_fb    = $urandom_range(0, 3) == 0;
      end else if (r < 55) mark_cur = 1;
      if (!discard && bounds.size() > 0 && $urandom_range(0, 3) == 0) begin
        release_valid = 1;
        release_ptr   = PTR_W'(bounds[0] % (2 * DEPTH));   // pointer encoding
      end
      out_ready = 1'($urandom_range(0, 1));
      fwd_addr  = ADDR_W'(32'h1000 + 8 * $urandom_range(0, 7) + ($urandom & 7));
      chk_addr  = ADDR_W'(32'h1000 + 8 * $urandom_range(0, 7) + ($urandom & 7));
      #1;
      begin
        bit exp_chk;
        exp_chk = 0;
        for (int i = m_head; i < m_tail; i++)
          if (m_addr[i][ADDR_W-1:3] == chk_addr[ADDR_W-1:3]) exp_chk = 1;
        check(chk_hit == exp_chk, "chk_hit");
      end
      // combinational outputs against the model
      check(full == ((m_tail - m_head) == DEPTH), "full");
      check(empty == (m_tail == m_head), "empty");
      check(older_empty == (m_head == m_cur), "older_empty");
      check(out_valid == (m_head != m_rel), "out_valid");
      if (m_head != m_rel) begin
        check(out_addr == m_addr[m_head], "out_addr");
        check(out_data == m_data[m_head], "out_data");
      end
      exp_fb = 0;
      for (int i = m_head; i < m_rel; i++) if (m_fb[i]) exp_fb = 1;
      check(rel_fb_pending == exp_fb, "rel_fb_pending");
      exp_fwd_hit = 0; exp_fwd = '0;
      for (int i = m_head; i < m_tail; i++)
        if (m_addr[i][ADDR_W-1:3] == fwd_addr[ADDR_W-1:3]) begin
          exp_fwd_hit = 1; exp_fwd = m_data[i];
        end
      check(fwd_hit == exp_fwd_hit, "fwd_hit");
      if (exp_fwd_hit) begin
        check(fwd_data == exp_fwd, "fwd_data");
        n_fwd_hit++;
      end
      // model update at the edge
      if (out_valid && out_ready) begin m_head++; n_drain++; end
      if (discard) begin
        m_tail = m_rel; m_cur = m_rel; n_discard++;
        bounds.delete();
      end else begin
        if (push_valid) begin
          m_addr[m_tail] = push_addr; m_data[m_tail] = push_data; m_fb[m_tail] = push_fb;
          m_tail++;
        end
        if (mark_cur) begin
          m_cur = m_tail - (push_valid ? 1 : 0);
          bounds.push_back(m_cur);
        end
        if (release_valid) begin m_rel = bounds.pop_front(); n_release++; end
      end
      @(posedge clk);
    end
    check(n_drain > 100 && n_discard > 20 && n_release > 100 && n_fwd_hit > 100,
          "every operation exercised");
    $display("drains=%0d discards=%0d releases=%0d forwards=%0d",
             n_drain, n_discard, n_release, n_fwd_hit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
