// tb_rbb: random self-checking test of the region boundary buffer.
//
// A queue model receives the same random pushes, pops and flushes; every
// cycle the test compares full, head_valid, the head entry's fields and the
// head/tail slot numbers with the model.
module tb_rbb;
  import turnpike_pkg::*;

  localparam int DEPTH = 4;
  localparam int GPW = $clog2(SB_DEPTH) + 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic push, pop, flush, full, head_valid;
  logic [PC_W-1:0]   push_pc, head_pc;
  logic [GPW-1:0]    push_gsb_ptr, head_gsb_ptr;
  logic [TIME_W-1:0] push_time, head_time;
  logic [RID_W-1:0]  push_rid, head_rid;
  logic [1:0]        head_idx, tail_idx;

  rbb #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL t=%0t %s", $time, what);
    end
  endtask

  typedef struct {
    logic [PC_W-1:0] pc; logic [GPW-1:0] gp; logic [TIME_W-1:0] t; logic [RID_W-1:0] rid;
  } ent_t;
  ent_t q[$];
  int hd = 0, tl = 0, n_full = 0, n_flush = 0, n_pop = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; flush = 0;
    push_pc = '0; push_gsb_ptr = '0; push_time = '0; push_rid = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      int r;
      @(negedge clk);
      r = $urandom_range(0, 99);
      flush = (r < 3);
      push  = !flush && (r < 60) && (q.size() < DEPTH);
      pop   = !flush && ($urandom_range(0, 2) == 0) && (q.size() > 0);
      push_pc = $urandom; push_gsb_ptr = GPW'($urandom); push_time = TIME_W'($urandom);
      push_rid = RID_W'($urandom);
      #1;
      check(full == (q.size() == DEPTH), "full");
      check(head_valid == (q.size() > 0), "head_valid");
      check(head_idx == 2'(hd) && tail_idx == 2'(tl), "slot numbers");
      if (q.size() > 0) begin
        check(head_pc == q[0].pc && head_gsb_ptr == q[0].gp &&
              head_time == q[0].t && head_rid == q[0].rid, "head entry");
      end
      if (full) n_full++;
      if (flush) begin q.delete(); hd = 0; tl = 0; n_flush++; end
      else begin
        if (pop) begin void'(q.pop_front()); hd = (hd + 1) % DEPTH; n_pop++; end
        if (push) begin
          q.push_back('{push_pc, push_gsb_ptr, push_time, push_rid});
          tl = (tl + 1) % DEPTH;
        end
      end
      @(posedge clk);
    end
    check(n_full > 50 && n_flush > 20 && n_pop > 200, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
