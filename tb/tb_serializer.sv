// tb_serializer: self-checking test of the serializer together with the
// batch scheme: for random candidate ranges, runs the batches against a
// reference LTA loop (slot 0 = previous winner from batch 1 on) and checks the
// slot rows, validity, the last flag and the batch count 1 + ceil((C-8)/7).
module tb_serializer;
  localparam int ROWS = 128;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [11:0] row_sum [ROWS];
  logic [6:0]  base, buf_row;
  logic [7:0]  count;
  logic [5:0]  batch;
  logic [11:0] buf_hd;
  logic [11:0] lta_hd  [8];
  logic [6:0]  lta_row [8];
  logic [7:0]  lta_valid;
  logic        last;
  serializer #(.ROWS(ROWS), .N(8), .SUM_W(12)) dut (.*);
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
    for (int t = 0; t < 300; t++) begin
      int c, b0, nb, want_nb, k, seen;
      c  = (t < 10) ? t + 1 : $urandom_range(1, 128);
      b0 = $urandom_range(0, 128 - c);
      want_nb = (c <= 8) ? 1 : 1 + (c - 8 + 6) / 7;
      for (int r = 0; r < ROWS; r++) row_sum[r] = 12'($urandom_range(0, 2048));
      base = 7'(b0); count = 8'(c); buf_row = 7'($urandom); buf_hd = 12'($urandom);
      seen = 0; nb = 0; k = 0;
      do begin
        @(negedge clk); batch = 6'(k); #1;
        for (int i = 0; i < 8; i++) begin
          int off;
          if (k > 0 && i == 0) begin
            check(lta_valid[0] && lta_row[0] == buf_row && lta_hd[0] == buf_hd, "slot 0 carries buffer");
            continue;
          end
          off = (k == 0) ? i : 8 + 7 * (k - 1) + i - 1;
          check(lta_valid[i] == (off < c), $sformatf("valid c=%0d k=%0d i=%0d", c, k, i));
          if (off < c) begin
            check(int'(lta_row[i]) == b0 + off && lta_hd[i] == row_sum[b0 + off], "slot row/value");
            seen++;
          end
        end
        nb++; k++;
      end while (!last && k < 40);
      check(nb == want_nb, $sformatf("c=%0d batches %0d want %0d", c, nb, want_nb));
      check(seen == c, $sformatf("c=%0d every candidate once (%0d)", c, seen));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
