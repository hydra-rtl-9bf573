// lta_buffer: holds the LTA winner between batches.
//
// When load is high the winner's row and Hamming distance are stored on the
// clock edge. The held winner is fed back to the LTA with the next batch of
// seven rows and, after the last batch, is the search result. clear (or reset)
// sets row 0 and the largest distance, so that any real candidate beats it.
// Storing the distance as a number in place of re-using the current is this
// design's choice.
module lta_buffer #(
  parameter int ROW_W = 7,
  parameter int SUM_W = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             load,
  input  logic [ROW_W-1:0] in_row,
  input  logic [SUM_W-1:0] in_hd,
  output logic [ROW_W-1:0] row,
  output logic [SUM_W-1:0] hd
);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      row <= '0;
      hd  <= '1;
    end else if (clear) begin
      row <= '0;
      hd  <= '1;
    end else if (load) begin
      row <= in_row;
      hd  <= in_hd;
    end

endmodule
