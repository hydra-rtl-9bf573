// serializer: feeds the row distances to the 8-input LTA one batch at a time.
//
// The candidates are rows [base, base+count). Batch 0 carries the first eight
// candidates. Every later batch k carries the buffered winner so far in slot 0
// and the next seven candidates, rows base+8+7(k-1) .. base+8+7(k-1)+6, in
// slots 1..7, so one small LTA serves any number of classes. Slots past the
// last candidate are marked invalid. last is high on the final batch; a
// search of C candidates takes 1 + ceil((C-8)/7) batches (1 for C <= 8).
// Combinational. The batch scheme is the published one; the contiguous row
// range is this design's choice.
module serializer #(
  parameter int ROWS  = 128,
  parameter int N     = 8,
  parameter int SUM_W = 12,
  localparam int ROW_W = $clog2(ROWS),
  localparam int BAT_W = $clog2(ROWS) - 1
) (
  input  logic [SUM_W-1:0] row_sum [ROWS],
  input  logic [ROW_W-1:0] base,
  input  logic [ROW_W:0]   count,
  input  logic [BAT_W-1:0] batch,
  input  logic [ROW_W-1:0] buf_row,
  input  logic [SUM_W-1:0] buf_hd,
  output logic [SUM_W-1:0] lta_hd    [N],
  output logic [ROW_W-1:0] lta_row   [N],
  output logic [N-1:0]     lta_valid,
  output logic             last
);

  int first;   // candidate offset carried by slot 0 (batch 0) or slot 1

  always_comb begin
    first = (batch == 0) ? 0 : N + (N - 1) * (int'(batch) - 1);
    for (int i = 0; i < N; i++) begin
      int off;
      off = (batch == 0) ? i : first + i - 1;
      if (batch != 0 && i == 0) begin
        lta_hd[i]    = buf_hd;
        lta_row[i]   = buf_row;
        lta_valid[i] = 1'b1;
      end else begin
        lta_row[i]   = ROW_W'(int'(base) + off);
        lta_hd[i]    = row_sum[lta_row[i]];
        lta_valid[i] = off < int'(count);
      end
    end
    last = (batch == 0) ? (int'(count) <= N) : (first + N - 1 >= int'(count));
  end

endmodule
