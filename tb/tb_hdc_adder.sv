// tb_hdc_adder: self-checking test of the bundling adder at full width
// (2048 int16 elements). Element values include 0, -1 and the 16-bit wrap
// point; each result is checked against a[k] + b[k] formed in the testbench.
// Also repeats the 7-element example of the published adder figure.
module tb_hdc_adder;
  localparam int DIM = 2048;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [15:0] a [DIM];
  logic [DIM-1:0] b;
  logic [15:0] s [DIM];
  hdc_adder #(.DIM(DIM), .ELEM_W(16)) dut (.*);
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
    int ex_a [7] = '{57, 11, 49, 88, 173, 63, 24};
    int ex_b [7] = '{1, 0, 0, 1, 0, 1, 1};
    int ex_s [7] = '{58, 11, 49, 89, 173, 64, 25};
    @(negedge clk);
    for (int k = 0; k < DIM; k++) begin a[k] = (k < 7) ? 16'(ex_a[k]) : '0; b[k] = (k < 7) ? 1'(ex_b[k]) : 1'b0; end
    #1 for (int k = 0; k < 7; k++) check(int'(s[k]) == ex_s[k], $sformatf("figure example %0d", k));
    for (int t = 0; t < 20; t++) begin
      @(negedge clk);
      for (int k = 0; k < DIM; k++) begin
        case ($urandom_range(0, 5))
          0: a[k] = 16'hFFFF;
          1: a[k] = 16'h7FFF;
          2: a[k] = 16'h0000;
          default: a[k] = 16'($urandom);
        endcase
        b[k] = 1'($urandom);
      end
      #1 for (int k = 0; k < DIM; k++)
        check(s[k] == 16'(32'(a[k]) + (b[k] ? 1 : 0)), $sformatf("t=%0d k=%0d", t, k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
