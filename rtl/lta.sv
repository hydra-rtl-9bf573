// lta: loser-takes-all over eight match-line currents.
//
// Returns the index and value of the smallest valid input; the smallest
// current marks the stored HV nearest to the query. Inputs are the integer
// Hamming distances that stand for the currents. A tie goes to the lower
// index, so a winner carried into slot 0 from an earlier batch keeps its
// place. Purely combinational; any_valid is 0 when no input is valid (the
// outputs are then index 0 and the largest value). The 8-input width is the
// published one; the digital comparator tree replaces the analog current
// comparator and is this design's own.
module lta #(
  parameter int N     = 8,
  parameter int SUM_W = 12,
  localparam int IDX_W = $clog2(N)
) (
  input  logic [SUM_W-1:0] hd    [N],
  input  logic [N-1:0]     valid,
  output logic [IDX_W-1:0] win_idx,
  output logic [SUM_W-1:0] win_hd,
  output logic             any_valid
);

  always_comb begin
    win_idx   = '0;
    win_hd    = '1;
    any_valid = 1'b0;
    for (int i = 0; i < N; i++)
      if (valid[i] && (!any_valid || hd[i] < win_hd)) begin
        win_idx   = IDX_W'(i);
        win_hd    = hd[i];
        any_valid = 1'b1;
      end
  end

endmodule
