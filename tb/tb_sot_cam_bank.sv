// tb_sot_cam_bank: self-checking test of one 128 x 128 CAM bank.
//
// Fills the bank with random rows, then checks against a reference copy kept
// in the testbench: plain reads (search lines 0), XOR reads, the 16-to-1 batch
// mux, an in-array XOR-write to another row, masked batch writes, and the
// per-row mismatch counts of a search (counted bit by bit here).
module tb_sot_cam_bank;
  localparam int ROWS = 128, COLS = 128, BATCH_W = 8, NBATCH = COLS / BATCH_W;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [COLS-1:0] sl, wrx, wr_data;
  logic            search_en, wr_en, wr_from_wrx;
  logic [7:0]      ml_count [ROWS];
  logic [6:0]      rd_row, wr_row;
  logic [3:0]      rd_batch;
  logic [7:0]      batch_out;
  logic [NBATCH-1:0] wr_bmask;

  sot_cam_bank #(.ROWS(ROWS), .COLS(COLS), .BATCH_W(BATCH_W)) dut (.*);

  logic [COLS-1:0] ref_mem [ROWS];
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  function automatic logic [COLS-1:0] rnd();
    for (int i = 0; i < COLS / 32; i++) rnd[i*32 +: 32] = $urandom;
  endfunction

  function automatic int mism(logic [COLS-1:0] a, logic [COLS-1:0] b);
    int n = 0;
    for (int i = 0; i < COLS; i++) if (a[i] != b[i]) n++;
    return n;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sl = '0; search_en = 0; wr_en = 0; wr_from_wrx = 0; wr_data = '0;
    rd_row = '0; wr_row = '0; rd_batch = '0; wr_bmask = '1;
    // fill every row
    for (int r = 0; r < ROWS; r++) begin
      ref_mem[r] = rnd();
      @(negedge clk);
      wr_en = 1; wr_row = 7'(r); wr_data = ref_mem[r]; wr_bmask = '1; wr_from_wrx = 0;
    end
    @(negedge clk); wr_en = 0;
    // plain reads and XOR reads, with the batch mux
    for (int r = 0; r < ROWS; r += 5) begin
      @(negedge clk); rd_row = 7'(r); sl = '0; rd_batch = 4'($urandom_range(0, 15));
      #1 check(wrx == ref_mem[r], $sformatf("plain read row %0d", r));
      check(batch_out == ref_mem[r][rd_batch*8 +: 8], $sformatf("batch %0d row %0d", rd_batch, r));
      sl = rnd();
      #1 check(wrx == (ref_mem[r] ^ sl), $sformatf("xor read row %0d", r));
    end
    // XOR-write (binding): row src ^ sl -> row dst
    for (int t = 0; t < 20; t++) begin
      int s, d;
      s = $urandom_range(0, ROWS - 1); d = $urandom_range(0, ROWS - 1);
      @(negedge clk);
      sl = rnd(); rd_row = 7'(s); wr_row = 7'(d); wr_en = 1; wr_from_wrx = 1; wr_bmask = '1;
      ref_mem[d] = ref_mem[s] ^ sl;
      @(negedge clk); wr_en = 0; wr_from_wrx = 0; sl = '0; rd_row = 7'(d);
      #1 check(wrx == ref_mem[d], $sformatf("xor-write %0d->%0d", s, d));
    end
    // masked batch writes
    for (int t = 0; t < 20; t++) begin
      int d;
      logic [COLS-1:0] data;
      d = $urandom_range(0, ROWS - 1); data = rnd();
      @(negedge clk);
      wr_row = 7'(d); wr_data = data; wr_bmask = NBATCH'($urandom); wr_en = 1;
      for (int b = 0; b < NBATCH; b++)
        if (wr_bmask[b]) ref_mem[d][b*8 +: 8] = data[b*8 +: 8];
      @(negedge clk); wr_en = 0; sl = '0; rd_row = 7'(d);
      #1 check(wrx == ref_mem[d], $sformatf("batch write row %0d", d));
    end
    // search: mismatch count per row
    for (int t = 0; t < 4; t++) begin
      @(negedge clk); sl = (t == 0) ? ref_mem[3] : rnd(); search_en = 1;
      #1 for (int r = 0; r < ROWS; r++)
        check(int'(ml_count[r]) == mism(ref_mem[r], sl), $sformatf("ml_count row %0d", r));
      if (t == 0) check(ml_count[3] == 0, "exact match gives zero current");
    end
    @(negedge clk); search_en = 0;
    #1 check(ml_count[0] == 0 && ml_count[77] == 0, "no current without search");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
