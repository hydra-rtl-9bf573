// tb_control_unit: self-checking test of the command sequencer on its own.
// Issues each command and, cycle by cycle, checks the controls it drives
// (rows, write enables and masks, search-line values, bus source, batch and
// shift numbers, cache and LTA-buffer controls) and the latency from
// acceptance to rsp_valid: 2 cycles for one-cycle commands, 17 for a
// permutation, 2 + batches for a search. The serializer's last flag and the
// data bus are modelled in the testbench.
module tb_control_unit;
  import hydra_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, cmd_valid, cmd_ready, rsp_valid;
  cmd_t cmd;
  rsp_t rsp;
  logic [BANKS-1:0] bank_en;
  logic [3:0] last_bank, rd_batch, perm_j, perm_s;
  logic [DIM-1:0] sl, host_hv, bus;
  logic search_en, wr_en, wr_from_wrx, perm_en, cs_capture, ser_last, lta_any, buf_clear, buf_load;
  logic [6:0] rd_row, wr_row, ser_base, buf_row;
  logic [15:0] wr_bmask;
  bus_sel_e bus_sel;
  logic [7:0] fill;
  logic [7:0] ser_count;
  logic [5:0] ser_batch;
  logic [11:0] buf_hd;
  logic [4:0] c_rd_entry, c_wr_entry;
  logic c_wr_en, c_clr;
  logic signed [15:0] thr;
  control_unit dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // serializer's last flag, written from the batch rule
  always_comb begin
    int c, k;
    c = int'(ser_count); k = int'(ser_batch);
    ser_last = (k == 0) ? (c <= 8) : (8 + 7 * k >= c);
  end
  assign lta_any = 1'b1;
  assign buf_row = 7'd42;
  assign buf_hd  = 12'd321;

  function automatic logic [DIM-1:0] rnd();
    for (int i = 0; i < DIM / 32; i++) rnd[i*32 +: 32] = $urandom;
  endfunction

  logic [DIM-1:0] sl_model;
  int n_ops [16];

  task automatic run(cmd_t c, int want_lat);
    int n;
    @(negedge clk);
    check(cmd_ready, "ready when idle");
    cmd_valid = 1; cmd = c;
    @(negedge clk);
    cmd_valid = 0; cmd = '0;
    n = 1;
    while (!rsp_valid && n < 40) begin
      int j;
      j = n - 1;
      check(!cmd_ready, "busy while executing");
      unique case (c.op)
        OP_WRITE: check(wr_en && bus_sel == BUS_HOST && wr_row == c.dst && wr_bmask == '1 && !wr_from_wrx && host_hv == c.hv, "write controls");
        OP_READ: begin
          check(sl == '0 && rd_row == c.src && bus_sel == BUS_BANKS && !wr_en, "read controls");
          bus = rnd();
        end
        OP_SL_ROW: begin
          check(sl == '0 && rd_row == c.src && !wr_en, "sl-row controls");
          bus = rnd(); sl_model = bus;
        end
        OP_SL_HOST: begin check(!wr_en, "sl-host controls"); sl_model = c.hv; end
        OP_BIND: check(wr_en && wr_from_wrx && sl == sl_model && rd_row == c.src && wr_row == c.dst && wr_bmask == '1, "bind controls");
        OP_PERMUTE: check(wr_en && !wr_from_wrx && perm_en && sl == '0 && rd_batch == 4'(j) && perm_j == 4'(j)
                          && perm_s == c.count[3:0] && wr_bmask == 16'(1) << ((j - int'(c.count) + 16) % 16)
                          && rd_row == c.src && wr_row == c.dst, $sformatf("permute controls cycle %0d", j));
        OP_SEARCH:
          if (j == 0) check(search_en && cs_capture && buf_clear && sl == sl_model && !wr_en, "search capture controls");
          else check(!search_en && buf_load && ser_batch == 6'(j - 1) && ser_base == c.src && ser_count == c.count, "search LTA controls");
        OP_CLEAR: check(c_wr_en && c_clr && c_wr_entry == c.entry && !wr_en, "clear controls");
        OP_ADD: check(c_wr_en && !c_clr && c_rd_entry == c.entry && c_wr_entry == c.entry && sl == '0 && rd_row == c.src && bus_sel == BUS_BANKS && !wr_en, "add controls");
        OP_BINARIZE: check(wr_en && bus_sel == BUS_SIGN && c_rd_entry == c.entry && thr == c.thr && wr_row == c.dst && !c_wr_en, "binarize controls");
        default: ;
      endcase
      @(negedge clk);
      n++;
    end
    check(rsp_valid && rsp.op == c.op, "response");
    check(n == want_lat, $sformatf("%s latency %0d want %0d", c.op.name(), n, want_lat));
    if (c.op == OP_READ) check(rsp.hv == bus, "read data returned");
    if (c.op == OP_SEARCH) check(rsp.row == 7'd42 && rsp.hd == 12'd321, "search result from buffer");
    n_ops[c.op]++;
    @(negedge clk);
    check(!rsp_valid, "single-cycle response");
  endtask

  function automatic cmd_t mk(op_e op, int src, int dst, int count, int entry = 0, int thr_v = 0);
    mk = '0; mk.op = op; mk.src = 7'(src); mk.dst = 7'(dst); mk.count = 8'(count);
    mk.entry = 5'(entry); mk.thr = 16'(thr_v); mk.hv = rnd();
  endfunction

  initial begin
    rst_n = 0; cmd_valid = 0; cmd = '0; bus = '0; sl_model = '0;
    repeat (2) @(negedge clk);
    check(cmd_ready && bank_en == '1 && last_bank == 4'd15, "reset state");
    rst_n = 1;
    run(mk(OP_CONFIG, 0, 0, 8), 2);
    check(bank_en == 16'h00FF && last_bank == 4'd7, "config 8 banks");
    run(mk(OP_CONFIG, 0, 0, 16), 2);
    check(bank_en == 16'hFFFF && last_bank == 4'd15, "config 16 banks");
    run(mk(OP_WRITE, 0, 5, 0), 2);
    run(mk(OP_READ, 9, 0, 0), 2);
    run(mk(OP_SL_HOST, 0, 0, 0), 2);
    run(mk(OP_BIND, 3, 4, 0), 2);
    run(mk(OP_SL_ROW, 7, 0, 0), 2);
    run(mk(OP_BIND, 4, 4, 0), 2);
    run(mk(OP_PERMUTE, 1, 2, 1), 17);
    run(mk(OP_PERMUTE, 2, 6, 2), 17);
    run(mk(OP_SEARCH, 0, 0, 5), 3);
    run(mk(OP_SEARCH, 10, 0, 20), 5);
    run(mk(OP_SEARCH, 0, 0, 128), 21);
    run(mk(OP_CLEAR, 0, 0, 0, 3), 2);
    run(mk(OP_ADD, 8, 0, 0, 3), 2);
    run(mk(OP_BINARIZE, 0, 11, 0, 3, 2), 2);
    for (int o = 1; o <= 11; o++) check(n_ops[o] > 0, $sformatf("opcode %0d exercised", o));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
