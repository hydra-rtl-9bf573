// tb_lta_buffer: self-checking test of the LTA winner buffer: reset value,
// load, hold while load is low, and clear.
module tb_lta_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, clear, load;
  logic [6:0]  in_row, row;
  logic [11:0] in_hd, hd;
  lta_buffer #(.ROW_W(7), .SUM_W(12)) dut (.*);
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
    logic [6:0] er; logic [11:0] eh;
    rst_n = 0; clear = 0; load = 0; in_row = '0; in_hd = '0;
    @(negedge clk); #1 check(row == 0 && hd == 12'hFFF, "reset value");
    rst_n = 1; er = 0; eh = 12'hFFF;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      load = $urandom_range(0, 1); clear = ($urandom_range(0, 9) == 0);
      in_row = 7'($urandom); in_hd = 12'($urandom);
      if (clear) begin er = 0; eh = 12'hFFF; end
      else if (load) begin er = in_row; eh = in_hd; end
      @(posedge clk); #1 check(row == er && hd == eh, $sformatf("t=%0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
