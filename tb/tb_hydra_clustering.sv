// tb_hydra_clustering: K-means clustering in hyperspace on the full-size
// macro, following the flow the macro was evaluated with:
// data-point HVs are stored once in CAM rows; K cluster centres start as
// random HVs; each epoch every point is put on the search lines and searched
// against the K centre rows, added into its winner's cache entry, and the
// centres are then binarized by majority. The loop stops when a one-row search
// of each old centre against its new centre gives a distance below a
// threshold (here: 0, i.e. unchanged), or after MAX_EPOCH epochs.
// The data are synthetic (K well-separated prototypes, points = prototype with
// 15% of bits flipped; 96 points, so that points and centres fit in the 128
// rows). Every assignment, centre and distance is checked against a software
// model of the same algorithm; epochs and cycles per epoch are printed.
module tb_hydra_clustering;
  import hydra_pkg::*;
  localparam int K = 3, NP = 96, MAX_EPOCH = 8;
  localparam int R_CTR = 100, R_NEW = 110;
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
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [DIM-1:0] mrow [ROWS];
  int             acc [K][DIM];
  int             members [K];
  int             label [NP];
  longint         cyc = 0;
  always @(posedge clk) cyc++;

  function automatic logic [DIM-1:0] rnd();
    for (int i = 0; i < DIM / 32; i++) rnd[i*32 +: 32] = $urandom;
  endfunction

  function automatic int ham(logic [DIM-1:0] a, logic [DIM-1:0] b);
    int n = 0;
    for (int k = 0; k < DIM; k++) if (a[k] != b[k]) n++;
    return n;
  endfunction

  task automatic issue(cmd_t c);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd = c;
    @(negedge clk);
    cmd_valid = 0;
    while (!rsp_valid) @(negedge clk);
  endtask

  function automatic cmd_t mk(op_e op, int src = 0, int dst = 0, int count = 0, int entry = 0, int thr_v = 0);
    mk = '0; mk.op = op; mk.src = 7'(src); mk.dst = 7'(dst); mk.count = 8'(count);
    mk.entry = 5'(entry); mk.thr = 16'(thr_v);
  endfunction

  task automatic write_row(int r, logic [DIM-1:0] v);
    cmd_t c;
    c = mk(OP_WRITE, 0, r); c.hv = v;
    issue(c);
    mrow[r] = v;
  endtask

  initial begin
    logic [DIM-1:0] proto [K];
    int epoch, moved, nsearch;
    longint t0;
    rst_n = 0; cmd_valid = 0; cmd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < K; c++) proto[c] = rnd();
    for (int p = 0; p < NP; p++) begin
      logic [DIM-1:0] v;
      label[p] = p % K;
      v = proto[label[p]];
      for (int k = 0; k < DIM; k++) if ($urandom_range(0, 99) < 15) v[k] = ~v[k];
      write_row(p, v);
    end
    for (int c = 0; c < K; c++) write_row(R_CTR + c, rnd());
    epoch = 0; moved = 1; nsearch = 0;
    t0 = cyc;
    while (moved != 0 && epoch < MAX_EPOCH) begin
      epoch++;
      for (int c = 0; c < K; c++) begin
        issue(mk(OP_CLEAR, 0, 0, 0, c));
        members[c] = 0;
        for (int k = 0; k < DIM; k++) acc[c][k] = 0;
      end
      // assignment: nearest centre for every point, then bundle it
      for (int p = 0; p < NP; p++) begin
        int best, bi;
        issue(mk(OP_SL_ROW, p));
        issue(mk(OP_SEARCH, R_CTR, 0, K));
        nsearch++;
        best = 1 << 30; bi = 0;
        for (int c = 0; c < K; c++)
          if (ham(mrow[R_CTR + c], mrow[p]) < best) begin best = ham(mrow[R_CTR + c], mrow[p]); bi = c; end
        check(int'(rsp.row) == R_CTR + bi && int'(rsp.hd) == best, $sformatf("epoch %0d point %0d assignment", epoch, p));
        issue(mk(OP_ADD, p, 0, 0, bi));
        members[bi]++;
        for (int k = 0; k < DIM; k++) if (mrow[p][k]) acc[bi][k]++;
      end
      // update: binarize new centres, measure how far each moved
      moved = 0;
      for (int c = 0; c < K; c++) begin
        int thr_v;
        thr_v = members[c] / 2;
        issue(mk(OP_BINARIZE, 0, R_NEW + c, 0, c, thr_v));
        for (int k = 0; k < DIM; k++) mrow[R_NEW + c][k] = acc[c][k] > thr_v;
        issue(mk(OP_SL_ROW, R_CTR + c));
        issue(mk(OP_SEARCH, R_NEW + c, 0, 1));
        check(int'(rsp.hd) == ham(mrow[R_CTR + c], mrow[R_NEW + c]), $sformatf("epoch %0d centre %0d distance", epoch, c));
        if (rsp.hd != 0) moved++;
        issue(mk(OP_BINARIZE, 0, R_CTR + c, 0, c, thr_v));
        mrow[R_CTR + c] = mrow[R_NEW + c];
        issue(mk(OP_READ, R_CTR + c));
        check(rsp.hv == mrow[R_CTR + c], $sformatf("epoch %0d centre %0d HV", epoch, c));
      end
      $display("epoch %0d: members %0d/%0d/%0d, centres moved %0d", epoch, members[0], members[1], members[2], moved);
    end
    check(moved == 0, "converged");
    $display("clustering workload: %0d epochs, %0d searches, %0d cycles per epoch",
             epoch, nsearch, (cyc - t0) / epoch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
