// tb_lta: self-checking test of the 8-input loser-takes-all.
// Random distances and valid masks, including ties and an all-invalid case,
// are compared with a minimum search written independently in the testbench.
module tb_lta;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [11:0] hd [8];
  logic [7:0]  valid;
  logic [2:0]  win_idx;
  logic [11:0] win_hd;
  logic        any_valid;
  lta #(.N(8), .SUM_W(12)) dut (.*);
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
  initial begin
    for (int t = 0; t < 2000; t++) begin
      int best, bi;
      @(negedge clk);
      for (int i = 0; i < 8; i++) hd[i] = 12'((t % 3 == 0) ? $urandom_range(0, 3) : $urandom_range(0, 2048));
      valid = (t % 50 == 7) ? 8'h00 : 8'($urandom);
      best = 1 << 30; bi = 0;
      for (int i = 7; i >= 0; i--) if (valid[i] && int'(hd[i]) <= best) begin best = hd[i]; bi = i; end
      #1;
      if (valid == 0) check(!any_valid, "no valid input");
      else check(any_valid && win_idx == 3'(bi) && int'(win_hd) == best,
                 $sformatf("t=%0d got %0d/%0d want %0d/%0d", t, win_idx, win_hd, bi, best));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
