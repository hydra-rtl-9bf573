// tb_hydra_top: end-to-end test of the HyDra macro at its full size
// (16 banks x 128 x 128, 2048-bit HVs, 32 x 2048 int16 cache).
//
// Keeps a reference model of every CAM row and cache entry and checks each
// response against it. The run:
//   1. writes all 128 rows with random HVs and reads some back;
//   2. binds rows with an operand on the search lines (from a row and from
//      the host) and reads the results;
//   3. permutes rows by one and two 8-bit batches (the published 8- and
//      16-bit shifts) and checks every chunk but the random fill;
//   4. trains four class HVs: each training sample is encoded in the banks
//      (bind an item HV with a level HV, permute), added into a cache entry,
//      and the entry is binarized into a class row by majority;
//   5. classifies noisy queries by similarity search over the class rows and
//      over all 128 rows (19 LTA batches), checking winner row and distance;
//   6. reconfigures to 8 banks (1024-bit HVs) and repeats writes, a
//      permutation and searches on the smaller dimension.
// Command latencies are checked against the control unit's cycle counts.
// Every mechanism is counted and one that never happened counts a failure.
module tb_hydra_top;
  import hydra_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, cmd_valid, cmd_ready, rsp_valid;
  cmd_t cmd;
  rsp_t rsp;
  hydra_top dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [DIM-1:0] mrow [ROWS];              // reference CAM rows
  int             mcache [CACHE_ENTRIES][DIM];
  logic [DIM-1:0] msl;                      // reference search lines
  int             nbanks = BANKS;
  int             ev_write, ev_read, ev_bind, ev_perm1, ev_perm2, ev_fill, ev_search,
                  ev_multibatch, ev_carry, ev_add, ev_clear, ev_binarize, ev_reconfig,
                  ev_lat_ok;

  function automatic logic [DIM-1:0] rnd();
    for (int i = 0; i < DIM / 32; i++) rnd[i*32 +: 32] = $urandom;
  endfunction

  function automatic logic [DIM-1:0] act_mask();
    for (int k = 0; k < DIM; k++) act_mask[k] = k < nbanks * COLS;
  endfunction

  function automatic int ham(logic [DIM-1:0] a, logic [DIM-1:0] b);
    int n = 0;
    for (int k = 0; k < nbanks * COLS; k++) if (a[k] != b[k]) n++;
    return n;
  endfunction

  // Issue one command, wait for its response, check the latency.
  task automatic issue(cmd_t c, int want_lat);
    int n;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd = c;
    @(negedge clk);
    cmd_valid = 0;
    n = 1;
    while (!rsp_valid && n < 100) begin @(negedge clk); n++; end
    check(rsp_valid && rsp.op == c.op, $sformatf("%s answered", c.op.name()));
    check(n == want_lat, $sformatf("%s latency %0d want %0d", c.op.name(), n, want_lat));
    if (n == want_lat) ev_lat_ok++;
  endtask

  function automatic cmd_t mk(op_e op, int src = 0, int dst = 0, int count = 0, int entry = 0, int thr_v = 0);
    mk = '0; mk.op = op; mk.src = 7'(src); mk.dst = 7'(dst); mk.count = 8'(count);
    mk.entry = 5'(entry); mk.thr = 16'(thr_v);
  endfunction

  task automatic do_write(int r, logic [DIM-1:0] v);
    cmd_t c;
    c = mk(OP_WRITE, 0, r); c.hv = v;
    issue(c, 2);
    mrow[r] = (mrow[r] & ~act_mask()) | (v & act_mask());
    ev_write++;
  endtask

  task automatic do_read_check(int r, string what);
    issue(mk(OP_READ, r), 2);
    check(rsp.hv == (mrow[r] & act_mask()), $sformatf("read row %0d (%s)", r, what));
    ev_read++;
  endtask

  task automatic sl_from_row(int r);
    issue(mk(OP_SL_ROW, r), 2);
    msl = mrow[r] & act_mask();
  endtask

  task automatic do_bind(int s, int d);
    issue(mk(OP_BIND, s, d), 2);
    mrow[d] = (mrow[d] & ~act_mask()) | ((mrow[s] ^ msl) & act_mask());
    ev_bind++;
  endtask

  // Permute s -> d by sh batches; check every chunk except the fill, then
  // take the fill into the model from a read.
  task automatic do_permute(int s, int d, int sh);
    int nch;
    logic [DIM-1:0] src;
    src = mrow[s]; nch = nbanks * NBATCH;
    issue(mk(OP_PERMUTE, s, d, sh), NBATCH + 1);
    issue(mk(OP_READ, d), 2);
    for (int g = 0; g < BANKS * NBATCH; g++) begin
      logic [7:0] got;
      got = rsp.hv[g*8 +: 8];
      if (g < nch - sh)  check(got == src[(g + sh)*8 +: 8], $sformatf("permute chunk %0d", g));
      else if (g >= nch) check(got == 8'h00, "inactive bank reads 0");
      else begin mrow[d][g*8 +: 8] = got; ev_fill++; end
      if (g < nch - sh) mrow[d][g*8 +: 8] = got;
    end
    if (sh == 1) ev_perm1++;
    if (sh == 2) ev_perm2++;
  endtask

  task automatic do_clear(int e);
    issue(mk(OP_CLEAR, 0, 0, 0, e), 2);
    for (int k = 0; k < DIM; k++) mcache[e][k] = 0;
    ev_clear++;
  endtask

  task automatic do_add(int e, int r);
    issue(mk(OP_ADD, r, 0, 0, e), 2);
    for (int k = 0; k < nbanks * COLS; k++) if (mrow[r][k]) mcache[e][k]++;
    ev_add++;
  endtask

  task automatic do_binarize(int e, int d, int thr_v);
    issue(mk(OP_BINARIZE, 0, d, 0, e, thr_v), 2);
    for (int k = 0; k < nbanks * COLS; k++) mrow[d][k] = mcache[e][k] > thr_v;
    ev_binarize++;
  endtask

  // Search rows [base, base+count) for the HV on the search lines.
  task automatic do_search(int base, int count, output int won);
    int best, bi, nb;
    best = 1 << 30; bi = 0;
    for (int r = base; r < base + count; r++) begin
      int h;
      h = ham(mrow[r], msl);
      if (h < best) begin best = h; bi = r; end
    end
    nb = (count <= LTA_N) ? 1 : 1 + (count - LTA_N + LTA_N - 2) / (LTA_N - 1);
    issue(mk(OP_SEARCH, base, 0, count), 2 + nb);
    check(int'(rsp.row) == bi && int'(rsp.hd) == best,
          $sformatf("search [%0d,+%0d): got row %0d hd %0d, want row %0d hd %0d", base, count, rsp.row, rsp.hd, bi, best));
    ev_search++;
    if (nb > 1) ev_multibatch++;
    if (nb > 1 && bi - base < LTA_N) ev_carry++;   // batch-0 winner carried through all batches
    won = bi;
  endtask

  // Query = row r with nflip random bits flipped, put on the search lines.
  task automatic query_near(int r, int nflip);
    cmd_t c;
    logic [DIM-1:0] q;
    q = mrow[r];
    for (int i = 0; i < nflip; i++) q[$urandom_range(0, nbanks * COLS - 1)] ^= 1'b1;
    c = mk(OP_SL_HOST); c.hv = q;
    issue(c, 2);
    msl = q & act_mask();
  endtask

  initial begin
    int won;
    rst_n = 0; cmd_valid = 0; cmd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. fill the array
    for (int r = 0; r < ROWS; r++) do_write(r, rnd());
    for (int r = 0; r < ROWS; r += 17) do_read_check(r, "after fill");

    // 2. binding, operand from a row and from the host
    sl_from_row(1);
    do_bind(2, 60);
    do_read_check(60, "bind row operand");
    begin cmd_t c; c = mk(OP_SL_HOST); c.hv = rnd(); issue(c, 2); msl = c.hv; end
    do_bind(60, 60);
    do_read_check(60, "bind in place");

    // 3. permutations by 8 and 16 bits
    do_permute(3, 61, 1);
    do_permute(61, 62, 1);
    do_permute(3, 63, 2);
    check(mrow[62][DIM-1-16:0] == mrow[63][DIM-1-16:0], "two 8-bit shifts equal one 16-bit shift");

    // 4. training: class c bundles 5 samples; sample = permute(item xor level)
    //    item rows 0..3 (one per class), level rows 10..14, scratch 64/65
    for (int c = 0; c < 4; c++) begin
      do_clear(c);
      for (int i = 0; i < 5; i++) begin
        sl_from_row(10 + i);
        do_bind(c, 64);
        do_permute(64, 65, 1);
        do_add(c, 65);
      end
      do_binarize(c, 100 + c, 2);   // majority of 5
      do_read_check(100 + c, "class HV");
    end

    // 5. inference: noisy queries against the class rows, then all rows
    for (int t = 0; t < 8; t++) begin
      query_near(100 + t % 4, 300);
      do_search(100, 4, won);
      check(won == 100 + t % 4, "noisy query classified to its class");
    end
    for (int t = 0; t < 6; t++) begin
      query_near((t == 0) ? 2 : $urandom_range(0, ROWS - 1), 100);
      do_search(0, ROWS, won);
    end
    query_near(40, 50);
    do_search(33, 20, won);

    // 6. reconfigure to 8 banks (1024-bit HVs)
    issue(mk(OP_CONFIG, 0, 0, 8), 2);
    nbanks = 8; ev_reconfig++;
    do_write(70, rnd());
    do_read_check(70, "8 banks");
    do_permute(70, 71, 2);
    query_near(71, 40);
    do_search(0, ROWS, won);
    query_near(100, 100);
    do_search(100, 4, won);
    check(won == 100, "8-bank search finds its class");
    issue(mk(OP_CONFIG, 0, 0, 16), 2);
    nbanks = 16; ev_reconfig++;
    do_read_check(70, "upper banks untouched at 8 banks");

    check(ev_write > 0, "mechanism: write");
    check(ev_read > 0, "mechanism: read");
    check(ev_bind > 0, "mechanism: bind");
    check(ev_perm1 > 0, "mechanism: 8-bit permutation");
    check(ev_perm2 > 0, "mechanism: 16-bit permutation");
    check(ev_fill > 0, "mechanism: random fill");
    check(ev_search > 0, "mechanism: search");
    check(ev_multibatch > 0, "mechanism: multi-batch LTA");
    check(ev_carry > 0, "mechanism: buffered winner carried");
    check(ev_add > 0, "mechanism: add");
    check(ev_clear > 0, "mechanism: clear");
    check(ev_binarize > 0, "mechanism: binarize");
    check(ev_reconfig > 0, "mechanism: dimension reconfiguration");
    $display("events: write %0d read %0d bind %0d perm8 %0d perm16 %0d fill %0d search %0d multibatch %0d carry %0d add %0d clear %0d binarize %0d reconfig %0d latency-ok %0d",
             ev_write, ev_read, ev_bind, ev_perm1, ev_perm2, ev_fill, ev_search, ev_multibatch, ev_carry,
             ev_add, ev_clear, ev_binarize, ev_reconfig, ev_lat_ok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
