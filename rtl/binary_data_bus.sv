// binary_data_bus: the binary interconnect between banks, adder, sign unit and
// host.
//
// Outside a permutation the bus carries one whole HV (BANKS x COLS bits) from
// the source chosen by sel: the WRX outputs of the banks (a read row), the
// sign unit (a binarized cache entry) or the host. The same bus word goes to
// the banks' write drivers, to the adder's select inputs and to the host.
//
// During a permutation (perm_en) the banks are read one 8-bit batch at a time
// through their 16-to-1 column muxes, and an HV is shifted towards element 0
// by perm_s batches: HV chunk g+s moves to chunk g. With chunk g = bank*16 +
// batch, the batch j read in this cycle from bank b is written to batch
// (j - s) mod 16 of bank b when j >= s and of bank b-1 when j < s. This module
// therefore gives each bank b, in slot (j - s) mod 16 of its bus word, either
// its own batch (j >= s) or the batch of bank b+1 (j < s); the last active
// bank takes the random fill in place of the missing chunk. The other slots
// are 0 and are masked off by the write mask. Combinational.
// The batch-wise shift with random fill is the published permutation scheme;
// the element order (element b*128 + c in column c of bank b) is this
// design's choice.
module binary_data_bus #(
  parameter int BANKS   = 16,
  parameter int COLS    = 128,
  parameter int BATCH_W = 8,
  localparam int NBATCH = COLS / BATCH_W,
  localparam int BSEL_W = $clog2(NBATCH),
  localparam int BANK_W = $clog2(BANKS)
) (
  input  hydra_pkg::bus_sel_e sel,
  input  logic [COLS-1:0]     bank_rd    [BANKS],
  input  logic [BATCH_W-1:0]  bank_batch [BANKS],
  input  logic [COLS-1:0]     sign_hv    [BANKS],
  input  logic [COLS-1:0]     host_hv    [BANKS],
  input  logic                perm_en,
  input  logic [BSEL_W-1:0]   perm_j,
  input  logic [BSEL_W-1:0]   perm_s,
  input  logic [BANK_W-1:0]   last_bank,
  input  logic [BATCH_W-1:0]  fill,
  output logic [COLS-1:0]     bus        [BANKS]
);

  logic [BSEL_W-1:0] slot;
  assign slot = perm_j - perm_s;   // wraps modulo NBATCH

  always_comb
    for (int b = 0; b < BANKS; b++) begin
      logic [BATCH_W-1:0] chunk;
      if (perm_j >= perm_s)               chunk = bank_batch[b];
      else if (b == int'(last_bank))      chunk = fill;
      else                                chunk = bank_batch[(b + 1) % BANKS];
      bus[b] = '0;
      if (perm_en)
        bus[b][slot*BATCH_W +: BATCH_W] = chunk;
      else
        unique case (sel)
          hydra_pkg::BUS_BANKS: bus[b] = bank_rd[b];
          hydra_pkg::BUS_SIGN:  bus[b] = sign_hv[b];
          hydra_pkg::BUS_HOST:  bus[b] = host_hv[b];
          default:   bus[b] = '0;
        endcase
    end

endmodule
