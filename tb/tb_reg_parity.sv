// tb_reg_parity: writes random values to random registers, reads them back
// on both ports and expects no error; reads with one bit flipped and expects
// an error; reads of a register with a stale value of different parity also
// report an error.
module tb_reg_parity;
  import turnpike_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic wr_en, error;
  logic [REG_W-1:0] wr_idx;
  logic [DATA_W-1:0] wr_data;
  logic rd_en [2];
  logic [REG_W-1:0] rd_idx [2];
  logic [DATA_W-1:0] rd_data [2];

  reg_parity dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL t=%0t %s", $time, what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [DATA_W-1:0] rf [NREG];

  initial begin
    wr_en = 0; wr_idx = '0; wr_data = '0;
    foreach (rd_en[p]) begin rd_en[p] = 0; rd_idx[p] = '0; rd_data[p] = '0; end
    foreach (rf[i]) rf[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      int p, b;
      @(negedge clk);
      wr_en = 1; wr_idx = REG_W'($urandom); wr_data = {$urandom, $urandom};
      @(posedge clk);
      rf[wr_idx] = wr_data;
      @(negedge clk);
      wr_en = 0;
      p = $urandom_range(0, 1);
      rd_en[p] = 1; rd_idx[p] = REG_W'($urandom); rd_data[p] = rf[rd_idx[p]];
      #1 check(!error, "clean read");
      b = $urandom_range(0, DATA_W - 1);
      rd_data[p][b] = ~rd_data[p][b];
      #1 check(error, "single bit flip detected");
      rd_data[p] = rf[rd_idx[p]];
      rd_en[1-p] = 1; rd_idx[1-p] = REG_W'($urandom); rd_data[1-p] = rf[rd_idx[1-p]];
      #1 check(!error, "two clean reads");
      b = $urandom_range(0, DATA_W - 1);
      rd_data[1-p][b] = ~rd_data[1-p][b];
      #1 check(error, "flip on the other port");
      rd_en[0] = 0; rd_en[1] = 0;
      #1 check(!error, "no read, no error");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
