// tb_sign_unit: self-checking test of the binarizer: random int16 elements
// (negative, zero, equal to the threshold, large) against random thresholds,
// checked with a signed comparison written in the testbench.
module tb_sign_unit;
  localparam int DIM = 2048;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [15:0] a [DIM];
  logic signed [15:0] thr;
  logic [DIM-1:0] hv;
  sign_unit #(.DIM(DIM), .ELEM_W(16)) dut (.*);
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
    for (int t = 0; t < 30; t++) begin
      @(negedge clk);
      thr = (t == 0) ? 16'sd5 : 16'($urandom_range(0, 40)) - 16'sd10;
      for (int k = 0; k < DIM; k++)
        case ($urandom_range(0, 3))
          0: a[k] = thr;
          1: a[k] = 16'($urandom);
          default: a[k] = 16'($urandom_range(0, 60)) - 16'd20;
        endcase
      #1 for (int k = 0; k < DIM; k++) begin
        int av, tv;
        av = int'($signed(a[k])); tv = int'(thr);
        check(hv[k] == (av > tv), $sformatf("t=%0d k=%0d a=%0d thr=%0d", t, k, av, tv));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
