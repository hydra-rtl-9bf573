// tb_current_sum: self-checking test of the row-wise current sum.
// Random per-bank counts and random active-bank masks; the held sums are
// compared with sums formed in the testbench, and must not change while
// capture is low.
module tb_current_sum;
  localparam int BANKS = 16, ROWS = 128;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, capture;
  logic [BANKS-1:0] bank_en;
  logic [7:0]  ml_count [BANKS][ROWS];
  logic [11:0] row_sum [ROWS];
  current_sum #(.BANKS(BANKS), .ROWS(ROWS), .CNT_W(8), .SUM_W(12)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int want [ROWS];
  initial begin
    rst_n = 0; capture = 0; bank_en = '1;
    for (int b = 0; b < BANKS; b++) for (int r = 0; r < ROWS; r++) ml_count[b][r] = '0;
    @(negedge clk); #1 check(row_sum[5] == 0, "reset clears");
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      @(negedge clk);
      bank_en = (t == 0) ? '1 : (t == 1) ? 16'h00FF : 16'($urandom);
      for (int b = 0; b < BANKS; b++) for (int r = 0; r < ROWS; r++)
        ml_count[b][r] = 8'((t == 0) ? 128 : $urandom_range(0, 128));
      for (int r = 0; r < ROWS; r++) begin
        want[r] = 0;
        for (int b = 0; b < BANKS; b++) if (bank_en[b]) want[r] += ml_count[b][r];
      end
      capture = 1;
      @(negedge clk); capture = 0;
      for (int r = 0; r < ROWS; r++) check(int'(row_sum[r]) == want[r], $sformatf("t=%0d row %0d", t, r));
      ml_count[0][0] = 8'd1; ml_count[1][0] = 8'd1;
      @(negedge clk);
      check(int'(row_sum[0]) == want[0], "held while capture is low");
    end
    check(1'b1, "done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
