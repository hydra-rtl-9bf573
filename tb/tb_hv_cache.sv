// tb_hv_cache: self-checking test of the int16 HV cache: random writes and
// clears of all 32 entries at full width, checked through the read port
// against a reference copy.
module tb_hv_cache;
  localparam int E = 32, DIM = 2048;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [4:0] rd_entry, wr_entry;
  logic [15:0] rd_data [DIM];
  logic wr_en, clr;
  logic [15:0] wr_data [DIM];
  hv_cache #(.ENTRIES(E), .DIM(DIM), .ELEM_W(16)) dut (.*);
  logic [15:0] refm [E][DIM];
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
    wr_en = 0; clr = 0; rd_entry = '0; wr_entry = '0;
    for (int e = 0; e < E; e++) begin
      @(negedge clk); wr_en = 1; clr = 1; wr_entry = 5'(e);
      for (int k = 0; k < DIM; k++) refm[e][k] = '0;
    end
    for (int t = 0; t < 200; t++) begin
      int e;
      @(negedge clk);
      e = $urandom_range(0, E - 1);
      wr_en = $urandom_range(0, 3) != 0; clr = ($urandom_range(0, 7) == 0); wr_entry = 5'(e);
      for (int k = 0; k < DIM; k++) wr_data[k] = 16'($urandom);
      rd_entry = 5'($urandom_range(0, E - 1));
      // the read shows the contents before this cycle's write
      #1 for (int k = 0; k < DIM; k += 97) check(rd_data[k] == refm[rd_entry][k], $sformatf("t=%0d e=%0d k=%0d", t, rd_entry, k));
      if (wr_en) for (int k = 0; k < DIM; k++) refm[e][k] = clr ? '0 : wr_data[k];
    end
    @(negedge clk); wr_en = 0;
    for (int e = 0; e < E; e++) begin
      rd_entry = 5'(e);
      #1 for (int k = 0; k < DIM; k++) check(rd_data[k] == refm[e][k], $sformatf("final e=%0d k=%0d", e, k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
