// tb_hydra_language: language-recognition workload on the full-size macro.
//
// Mirrors the n-gram classification flow the macro was evaluated with:
// 27 letter item HVs, 21 language classes, texts of 100 letters, trigram
// encoding  g = rho^2(I_a) xor rho(I_b) xor I_c  with rho a one-batch (8-bit)
// permutation done in the banks. The texts are synthetic: each language is a
// random first-order letter-transition table, so that languages differ in
// their trigram statistics. Training bundles all trigrams of one text per
// language into a cache entry and binarizes it by majority into a class row;
// inference encodes a fresh text the same way and searches the 21 class
// rows (3 LTA batches).
// Every class HV and every prediction is checked against a software model
// of the same computation; the accuracy on the synthetic texts and the
// cycles per query are printed.
module tb_hydra_language;
  import hydra_pkg::*;
  localparam int NL = 21, NA = 27, TLEN = 100, NTEST = 2;
  localparam int R_ITEM = 0, R_RHO1 = 27, R_RHO2 = 54, R_CLASS = 100, R_T1 = 122, R_T2 = 123, R_Q = 124;
  localparam int E_Q = 31;
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
  int             acc [DIM];
  int             trans [NL][NA];   // preferred next letter per language and letter
  int             text [TLEN];
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

  // A text of language l: mostly follows the language's transition table.
  task automatic make_text(int l);
    text[0] = $urandom_range(0, NA - 1);
    for (int i = 1; i < TLEN; i++)
      text[i] = ($urandom_range(0, 3) != 0) ? trans[l][text[i-1]] : $urandom_range(0, NA - 1);
  endtask

  // Encode the current text into cache entry e (and into acc in the model).
  task automatic encode(int e);
    issue(mk(OP_CLEAR, 0, 0, 0, e));
    for (int k = 0; k < DIM; k++) acc[k] = 0;
    for (int i = 2; i < TLEN; i++) begin
      cmd_t c;
      logic [DIM-1:0] g;
      issue(mk(OP_SL_ROW, R_RHO2 + text[i-2]));
      issue(mk(OP_BIND, R_RHO1 + text[i-1], R_T1));
      issue(mk(OP_SL_ROW, R_T1));
      issue(mk(OP_BIND, R_ITEM + text[i], R_T2));
      issue(mk(OP_ADD, R_T2, 0, 0, e));
      g = mrow[R_RHO2 + text[i-2]] ^ mrow[R_RHO1 + text[i-1]] ^ mrow[R_ITEM + text[i]];
      for (int k = 0; k < DIM; k++) if (g[k]) acc[k]++;
    end
  endtask

  task automatic binarize_to(int e, int row);
    int thr_v;
    thr_v = (TLEN - 2) / 2;
    issue(mk(OP_BINARIZE, 0, row, 0, e, thr_v));
    for (int k = 0; k < DIM; k++) mrow[row][k] = acc[k] > thr_v;
    issue(mk(OP_READ, row));
    check(rsp.hv == mrow[row], $sformatf("binarized HV in row %0d", row));
  endtask

  initial begin
    int correct = 0;
    longint t0, qcyc;
    rst_n = 0; cmd_valid = 0; cmd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < NL; l++) for (int a = 0; a < NA; a++) trans[l][a] = $urandom_range(0, NA - 1);
    // item memory and its one- and two-batch permutations
    for (int a = 0; a < NA; a++) begin
      cmd_t c;
      c = mk(OP_WRITE, 0, R_ITEM + a); c.hv = rnd(); issue(c); mrow[R_ITEM + a] = c.hv;
      issue(mk(OP_PERMUTE, R_ITEM + a, R_RHO1 + a, 1));
      issue(mk(OP_PERMUTE, R_ITEM + a, R_RHO2 + a, 2));
      issue(mk(OP_READ, R_RHO1 + a)); mrow[R_RHO1 + a] = rsp.hv;
      check(rsp.hv[DIM-9:0] == mrow[R_ITEM + a][DIM-1:8], "rho^1 item");
      issue(mk(OP_READ, R_RHO2 + a)); mrow[R_RHO2 + a] = rsp.hv;
      check(rsp.hv[DIM-17:0] == mrow[R_ITEM + a][DIM-1:16], "rho^2 item");
    end
    // training: one text per language
    for (int l = 0; l < NL; l++) begin
      make_text(l);
      encode(l);
      binarize_to(l, R_CLASS + l);
    end
    // inference
    qcyc = 0;
    for (int t = 0; t < NTEST * NL; t++) begin
      int l, best, bi;
      l = t % NL;
      make_text(l);
      t0 = cyc;
      encode(E_Q);
      binarize_to(E_Q, R_Q);
      issue(mk(OP_SL_ROW, R_Q));
      issue(mk(OP_SEARCH, R_CLASS, 0, NL));
      qcyc += cyc - t0;
      best = 1 << 30; bi = 0;
      for (int r = R_CLASS; r < R_CLASS + NL; r++)
        if (ham(mrow[r], mrow[R_Q]) < best) begin best = ham(mrow[r], mrow[R_Q]); bi = r; end
      check(int'(rsp.row) == bi && int'(rsp.hd) == best, $sformatf("query %0d prediction matches model", t));
      if (int'(rsp.row) == R_CLASS + l) correct++;
    end
    check(correct > NTEST * NL / 2, "most synthetic texts recognised");
    $display("language workload: %0d of %0d texts recognised, %0d cycles per query (encode + binarize + search)",
             correct, NTEST * NL, qcyc / (NTEST * NL));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
