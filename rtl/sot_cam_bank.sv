// sot_cam_bank: one 128 x 128 SOT-CAM bank of the HyDra macro.
//
// Each row holds a 128-bit slice of one hypervector. A cell XORs its stored
// bit with its search-line bit; a per-row enable (E_ML) sends that result
// either onto the row's match line (search) or onto the column's WRX line
// (binding, plain read). The model keeps that behaviour at the level of rows:
//   * wrx       = mem[rd_row] ^ sl. With sl all 0 it is a plain memory read.
//   * batch_out = 8-bit batch rd_batch of wrx, the 16-to-1 column mux used for
//                 batch-wise (permuting) reads.
//   * ml_count  = per-row count of mismatching cells while search_en is high.
//                 This is the match-line current in units of one cell's
//                 current, i.e. the linear current that search-voltage
//                 scaling aims for; IR drop is not modelled.
//   * write     = on the clock edge, row wr_row takes wrx (wr_from_wrx=1, the
//                 in-array XOR-write) or wr_data, only in the batches set in
//                 wr_bmask.
// The XOR phase and the write phase of one XOR-write take one clock cycle
// here. Reads and match-line counts are combinational. The array has no reset,
// as the cells are non-volatile. Bits map bipolar +1 to 0 and -1 to 1, as in
// the published macro; the batch grouping (columns 8b..8b+7) and the one-cycle
// timing are this design's choices.
module sot_cam_bank #(
  parameter int ROWS    = 128,
  parameter int COLS    = 128,
  parameter int BATCH_W = 8,
  localparam int NBATCH = COLS / BATCH_W,
  localparam int ROW_W  = $clog2(ROWS),
  localparam int BSEL_W = $clog2(NBATCH),
  localparam int CNT_W  = $clog2(COLS + 1)
) (
  input  logic                  clk,
  input  logic [COLS-1:0]       sl,
  input  logic                  search_en,
  output logic [CNT_W-1:0]      ml_count [ROWS],
  input  logic [ROW_W-1:0]      rd_row,
  output logic [COLS-1:0]       wrx,
  input  logic [BSEL_W-1:0]     rd_batch,
  output logic [BATCH_W-1:0]    batch_out,
  input  logic                  wr_en,
  input  logic [ROW_W-1:0]      wr_row,
  input  logic                  wr_from_wrx,
  input  logic [COLS-1:0]       wr_data,
  input  logic [NBATCH-1:0]     wr_bmask
);

  logic [COLS-1:0] mem [ROWS];

  assign wrx       = mem[rd_row] ^ sl;
  assign batch_out = wrx[rd_batch*BATCH_W +: BATCH_W];

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      ml_count[r] = '0;
      if (search_en)
        ml_count[r] = CNT_W'($countones(mem[r] ^ sl));
    end
  end

  logic [COLS-1:0] wr_word, wr_bits;
  assign wr_word = wr_from_wrx ? wrx : wr_data;
  always_comb
    for (int b = 0; b < NBATCH; b++)
      wr_bits[b*BATCH_W +: BATCH_W] = {BATCH_W{wr_bmask[b]}};

  always_ff @(posedge clk)
    if (wr_en)
      mem[wr_row] <= (mem[wr_row] & ~wr_bits) | (wr_word & wr_bits);

endmodule
