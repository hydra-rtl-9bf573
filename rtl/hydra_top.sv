// hydra_top: the HyDra hyperdimensional-computing macro.
//
// Sixteen 128 x 128 SOT-CAM banks store binary hypervectors (one 2048-bit HV
// per row across the banks) and compute on them in place:
//   * binding     - a row XOR the search lines is written to another row
//                   through the banks' WRX lines (OP_BIND);
//   * permutation - a row is copied to another row batch by batch through
//                   the banks' 16-to-1 column muxes, shifted by whole 8-bit
//                   batches, with random fill at the end (OP_PERMUTE);
//   * search      - every row's mismatch count (match-line current) goes to
//                   the current-sum block, which adds the active banks; the
//                   serializer hands the sums eight at a time to the LTA, whose
//                   winner is kept in the buffer and re-enters with the next
//                   seven rows (OP_SEARCH).
// Bundling runs outside the banks: a row read over the binary data bus
// selects, element by element, between A and A+1 for an int16 entry of the HV
// cache (OP_ADD); the sign unit binarizes an entry back into a row
// (OP_BINARIZE). The control unit sequences everything from a one-command-at-
// a-time valid/ready interface; see control_unit for the cycle counts.
// The number of active banks (OP_CONFIG) sets the HV dimension, 128 per bank.
// Block structure and sizes follow the published macro; commands, clocking
// and the digital stand-ins for the analog current sum and LTA are this
// design's own.
module hydra_top
  import hydra_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic cmd_valid,
  output logic cmd_ready,
  input  cmd_t cmd,
  output logic rsp_valid,
  output rsp_t rsp
);

  localparam int BSEL_W = $clog2(NBATCH);
  localparam int BANK_W = $clog2(BANKS);
  localparam int BAT_W  = ROW_W - 1;
  localparam int IDX_W  = $clog2(LTA_N);

  // control
  logic [BANKS-1:0]   bank_en;
  logic [BANK_W-1:0]  last_bank;
  logic [DIM-1:0]     sl, host_hv, bus_flat;
  logic               search_en, wr_en, wr_from_wrx, perm_en;
  logic [ROW_W-1:0]   rd_row, wr_row;
  logic [BSEL_W-1:0]  rd_batch, perm_j, perm_s;
  logic [NBATCH-1:0]  wr_bmask;
  bus_sel_e           bus_sel;
  logic [BATCH_W-1:0] fill;
  logic               cs_capture, ser_last, lta_any, buf_clear, buf_load;
  logic [ROW_W-1:0]   ser_base, buf_row;
  logic [ROW_W:0]     ser_count;
  logic [BAT_W-1:0]   ser_batch;
  logic [SUM_W-1:0]   buf_hd;
  logic [ENTRY_W-1:0] c_rd_entry, c_wr_entry;
  logic               c_wr_en, c_clr;
  logic signed [ELEM_W-1:0] thr;

  // banks and bus
  logic [CNT_W-1:0]   ml_count   [BANKS][ROWS];
  logic [COLS-1:0]    wrx        [BANKS];
  logic [COLS-1:0]    bank_rd    [BANKS];
  logic [BATCH_W-1:0] bank_batch [BANKS];
  logic [COLS-1:0]    sign_w     [BANKS];
  logic [COLS-1:0]    host_w     [BANKS];
  logic [COLS-1:0]    bus        [BANKS];

  // search path
  logic [SUM_W-1:0]   row_sum [ROWS];
  logic [SUM_W-1:0]   lta_hd  [LTA_N];
  logic [ROW_W-1:0]   lta_row [LTA_N];
  logic [LTA_N-1:0]   lta_valid;
  logic [IDX_W-1:0]   win_idx;
  logic [SUM_W-1:0]   win_hd;

  // bundling path
  logic [ELEM_W-1:0]  cache_rd [DIM];
  logic [ELEM_W-1:0]  add_out  [DIM];
  logic [DIM-1:0]     sign_hv;

  control_unit #(
    .BANKS(BANKS), .ROWS(ROWS), .COLS(COLS), .BATCH_W(BATCH_W),
    .SUM_W(SUM_W), .ENTRY_W(ENTRY_W)
  ) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .rsp_valid, .rsp,
    .bank_en, .last_bank, .sl, .search_en, .rd_row, .rd_batch, .wr_en, .wr_row,
    .wr_from_wrx, .wr_bmask, .bus_sel, .host_hv, .perm_en, .perm_j, .perm_s,
    .fill, .bus(bus_flat), .cs_capture, .ser_base, .ser_count, .ser_batch,
    .ser_last, .lta_any, .buf_clear, .buf_load, .buf_row, .buf_hd,
    .c_rd_entry, .c_wr_en, .c_clr, .c_wr_entry, .thr
  );

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    sot_cam_bank #(.ROWS(ROWS), .COLS(COLS), .BATCH_W(BATCH_W)) u_bank (
      .clk,
      .sl          (sl[b*COLS +: COLS]),
      .search_en,
      .ml_count    (ml_count[b]),
      .rd_row,
      .wrx         (wrx[b]),
      .rd_batch,
      .batch_out   (bank_batch[b]),
      .wr_en       (wr_en && bank_en[b]),
      .wr_row,
      .wr_from_wrx,
      .wr_data     (bus[b]),
      .wr_bmask
    );
    // Inactive banks drive nothing onto the bus.
    assign bank_rd[b]  = bank_en[b] ? wrx[b] : '0;
    assign sign_w[b]   = sign_hv[b*COLS +: COLS];
    assign host_w[b]   = host_hv[b*COLS +: COLS];
    assign bus_flat[b*COLS +: COLS] = bank_en[b] ? bus[b] : '0;
  end

  binary_data_bus #(.BANKS(BANKS), .COLS(COLS), .BATCH_W(BATCH_W)) u_bus (
    .sel(bus_sel), .bank_rd, .bank_batch, .sign_hv(sign_w), .host_hv(host_w),
    .perm_en, .perm_j, .perm_s, .last_bank, .fill, .bus
  );

  current_sum #(.BANKS(BANKS), .ROWS(ROWS), .CNT_W(CNT_W), .SUM_W(SUM_W)) u_csum (
    .clk, .rst_n, .capture(cs_capture), .bank_en, .ml_count, .row_sum
  );

  serializer #(.ROWS(ROWS), .N(LTA_N), .SUM_W(SUM_W)) u_ser (
    .row_sum, .base(ser_base), .count(ser_count), .batch(ser_batch),
    .buf_row, .buf_hd, .lta_hd, .lta_row, .lta_valid, .last(ser_last)
  );

  lta #(.N(LTA_N), .SUM_W(SUM_W)) u_lta (
    .hd(lta_hd), .valid(lta_valid), .win_idx, .win_hd, .any_valid(lta_any)
  );

  lta_buffer #(.ROW_W(ROW_W), .SUM_W(SUM_W)) u_buf (
    .clk, .rst_n, .clear(buf_clear), .load(buf_load),
    .in_row(lta_row[win_idx]), .in_hd(win_hd), .row(buf_row), .hd(buf_hd)
  );

  hv_cache #(.ENTRIES(CACHE_ENTRIES), .DIM(DIM), .ELEM_W(ELEM_W)) u_cache (
    .clk, .rd_entry(c_rd_entry), .rd_data(cache_rd), .wr_en(c_wr_en),
    .clr(c_clr), .wr_entry(c_wr_entry), .wr_data(add_out)
  );

  hdc_adder #(.DIM(DIM), .ELEM_W(ELEM_W)) u_add (
    .a(cache_rd), .b(bus_flat), .s(add_out)
  );

  sign_unit #(.DIM(DIM), .ELEM_W(ELEM_W)) u_sign (
    .a(cache_rd), .thr, .hv(sign_hv)
  );

endmodule
