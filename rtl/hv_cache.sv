// hv_cache: the int16 hypervector cache of the HyDra macro.
//
// Holds ENTRIES accumulator HVs of DIM int16 elements (class HVs during
// training, cluster centres during clustering) so that bundling never loses
// information to binarization. One entry is read per cycle through an
// asynchronous read port (rd_entry -> rd_data) that feeds the adder and the
// sign unit; one entry is written per cycle on the clock edge, either with
// wr_data (the adder result) or, when clr is high, with zeros. Capacity and
// the clear are this design's choices; the int16 element is the published
// one. The contents have no reset: an entry is cleared before use.
module hv_cache #(
  parameter int ENTRIES = 32,
  parameter int DIM     = 2048,
  parameter int ELEM_W  = 16,
  localparam int ENTRY_W = $clog2(ENTRIES)
) (
  input  logic               clk,
  input  logic [ENTRY_W-1:0] rd_entry,
  output logic [ELEM_W-1:0]  rd_data [DIM],
  input  logic               wr_en,
  input  logic               clr,
  input  logic [ENTRY_W-1:0] wr_entry,
  input  logic [ELEM_W-1:0]  wr_data [DIM]
);

  logic [ELEM_W-1:0] mem [ENTRIES][DIM];

  assign rd_data = mem[rd_entry];

  always_ff @(posedge clk)
    if (wr_en) begin
      if (clr) mem[wr_entry] <= '{default: '0};
      else     mem[wr_entry] <= wr_data;
    end

endmodule
