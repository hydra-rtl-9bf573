// current_sum: adds the match-line currents of the active banks, row by row.
//
// Every bank reports, for each of its rows, how many of its cells mismatch the
// query (its match-line current in units of one cell current). A row's total
// over the active banks is the Hamming distance between the query and the HV
// stored in that row, over the configured HV dimension. Banks whose bank_en
// bit is 0 are left out, which is how the HV dimension is set (128 columns per
// bank). The sums are captured on the clock edge when capture is high and held
// for the serializer, which takes them eight at a time; in the analog macro
// the currents persist while the query stays on the search lines.
// Reset clears the held sums. Latency: one cycle from capture to row_sum.
module current_sum #(
  parameter int BANKS = 16,
  parameter int ROWS  = 128,
  parameter int CNT_W = 8,
  parameter int SUM_W = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             capture,
  input  logic [BANKS-1:0] bank_en,
  input  logic [CNT_W-1:0] ml_count [BANKS][ROWS],
  output logic [SUM_W-1:0] row_sum  [ROWS]
);

  logic [SUM_W-1:0] sum_d [ROWS];

  always_comb
    for (int r = 0; r < ROWS; r++) begin
      sum_d[r] = '0;
      for (int b = 0; b < BANKS; b++)
        if (bank_en[b]) sum_d[r] = sum_d[r] + SUM_W'(ml_count[b][r]);
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)       row_sum <= '{default: '0};
    else if (capture) row_sum <= sum_d;

endmodule
