// control_unit: command sequencer of the HyDra macro.
//
// Takes one command at a time (cmd_valid/cmd_ready handshake) and drives the
// banks, the binary data bus, the current-sum block, the serializer, the LTA
// buffer, the HV cache and the sign unit. A command is registered on the
// accepting clock edge, executed in the following cycles, and answered with a
// one-cycle rsp_valid pulse in the cycle after its last execution cycle:
//   OP_CONFIG, OP_WRITE, OP_READ, OP_SL_HOST, OP_SL_ROW,
//   OP_BIND, OP_CLEAR, OP_ADD, OP_BINARIZE   1 execution cycle
//   OP_PERMUTE                               16 cycles, one per column batch
//   OP_SEARCH                                1 (match lines -> current sum)
//                                            + 1 + ceil((count-8)/7) LTA batches
// so the latency from acceptance to rsp_valid is the execution cycles + 1.
// The search lines are held in a register (sl_reg) loaded from the host or
// from a CAM row; they carry sl_reg during binding and search and are driven
// to 0 for plain and batch reads, which turns the XOR read into a memory read.
// Permutation fill bits come from a 32-bit LFSR. The number of active banks
// (OP_CONFIG, 1..BANKS, from bank 0 up) sets the HV dimension; writes reach
// active banks only. The operations and their in-bank execution are the
// published ones; the command set, this timing and the LFSR are this
// design's own. rsp.row and rsp.hd are the LTA buffer's outputs passed
// straight through: the buffer holds the search result until the next search.
module control_unit
  import hydra_pkg::cmd_t, hydra_pkg::rsp_t, hydra_pkg::op_e, hydra_pkg::bus_sel_e;
#(
  parameter int BANKS   = 16,
  parameter int ROWS    = 128,
  parameter int COLS    = 128,
  parameter int BATCH_W = 8,
  parameter int SUM_W   = 12,
  parameter int ENTRY_W = 5,
  localparam int DIM    = BANKS * COLS,
  localparam int NBATCH = COLS / BATCH_W,
  localparam int BSEL_W = $clog2(NBATCH),
  localparam int BANK_W = $clog2(BANKS),
  localparam int ROW_W  = $clog2(ROWS),
  localparam int BAT_W  = $clog2(ROWS) - 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // command / response
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  cmd_t               cmd,
  output logic               rsp_valid,
  output rsp_t               rsp,
  // configuration
  output logic [BANKS-1:0]   bank_en,
  output logic [BANK_W-1:0]  last_bank,
  // banks
  output logic [DIM-1:0]     sl,
  output logic               search_en,
  output logic [ROW_W-1:0]   rd_row,
  output logic [BSEL_W-1:0]  rd_batch,
  output logic               wr_en,
  output logic [ROW_W-1:0]   wr_row,
  output logic               wr_from_wrx,
  output logic [NBATCH-1:0]  wr_bmask,
  // binary data bus
  output bus_sel_e           bus_sel,
  output logic [DIM-1:0]     host_hv,
  output logic               perm_en,
  output logic [BSEL_W-1:0]  perm_j,
  output logic [BSEL_W-1:0]  perm_s,
  output logic [BATCH_W-1:0] fill,
  input  logic [DIM-1:0]     bus,
  // current sum, serializer, LTA buffer
  output logic               cs_capture,
  output logic [ROW_W-1:0]   ser_base,
  output logic [ROW_W:0]     ser_count,
  output logic [BAT_W-1:0]   ser_batch,
  input  logic               ser_last,
  input  logic               lta_any,
  output logic               buf_clear,
  output logic               buf_load,
  input  logic [ROW_W-1:0]   buf_row,
  input  logic [SUM_W-1:0]   buf_hd,
  // HV cache and sign unit
  output logic [ENTRY_W-1:0] c_rd_entry,
  output logic               c_wr_en,
  output logic               c_clr,
  output logic [ENTRY_W-1:0] c_wr_entry,
  output logic signed [15:0] thr
);

  typedef enum logic [0:0] {S_IDLE, S_EXEC} state_e;

  state_e         state;
  cmd_t           cur;
  logic [4:0]     step;
  logic [DIM-1:0] sl_reg;
  logic [DIM-1:0] rd_hv;
  logic [31:0]    lfsr;
  logic [BANK_W:0] nbanks;
  logic           last_step;

  assign cmd_ready = (state == S_IDLE);

  // Configuration: the first nbanks banks are active.
  always_comb
    for (int b = 0; b < BANKS; b++) bank_en[b] = b < int'(nbanks);
  assign last_bank = BANK_W'(nbanks - 1'b1);

  logic exec;
  assign exec = (state == S_EXEC);

  // Datapath controls of the current execution cycle.
  always_comb begin
    sl          = '0;
    search_en   = 1'b0;
    rd_row      = cur.src;
    rd_batch    = '0;
    wr_en       = 1'b0;
    wr_row      = cur.dst;
    wr_from_wrx = 1'b0;
    wr_bmask    = '1;
    bus_sel     = hydra_pkg::BUS_BANKS;
    perm_en     = 1'b0;
    perm_j      = step[BSEL_W-1:0];
    perm_s      = cur.count[BSEL_W-1:0];
    cs_capture  = 1'b0;
    ser_batch   = BAT_W'(step - 5'd1);
    buf_clear   = 1'b0;
    buf_load    = 1'b0;
    c_wr_en     = 1'b0;
    c_clr       = 1'b0;
    last_step   = 1'b1;
    if (exec)
      unique case (cur.op)
        hydra_pkg::OP_WRITE: begin
          bus_sel = hydra_pkg::BUS_HOST;
          wr_en   = 1'b1;
        end
        hydra_pkg::OP_BIND: begin
          sl          = sl_reg;
          wr_en       = 1'b1;
          wr_from_wrx = 1'b1;
        end
        hydra_pkg::OP_PERMUTE: begin
          rd_batch  = step[BSEL_W-1:0];
          perm_en   = 1'b1;
          wr_en     = 1'b1;
          wr_bmask  = NBATCH'(1) << (step[BSEL_W-1:0] - cur.count[BSEL_W-1:0]);
          last_step = (step == 5'(NBATCH - 1));
        end
        hydra_pkg::OP_SEARCH: begin
          if (step == 0) begin
            sl         = sl_reg;
            search_en  = 1'b1;
            cs_capture = 1'b1;
            buf_clear  = 1'b1;
            last_step  = 1'b0;
          end else begin
            buf_load  = lta_any;
            last_step = ser_last;
          end
        end
        hydra_pkg::OP_CLEAR: begin
          c_wr_en = 1'b1;
          c_clr   = 1'b1;
        end
        hydra_pkg::OP_ADD: c_wr_en = 1'b1;
        hydra_pkg::OP_BINARIZE: begin
          bus_sel = hydra_pkg::BUS_SIGN;
          wr_en   = 1'b1;
        end
        default: ;
      endcase
  end

  assign host_hv    = cur.hv;
  assign fill       = lfsr[BATCH_W-1:0];
  assign ser_base   = cur.src;
  assign ser_count  = cur.count;
  assign c_rd_entry = cur.entry;
  assign c_wr_entry = cur.entry;
  assign thr        = cur.thr;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state     <= S_IDLE;
      cur       <= '0;
      step      <= '0;
      sl_reg    <= '0;
      rd_hv     <= '0;
      lfsr      <= 32'h1D87_2B41;
      nbanks    <= (BANK_W + 1)'(BANKS);
      rsp_valid <= 1'b0;
    end else begin
      lfsr      <= {1'b0, lfsr[31:1]} ^ (lfsr[0] ? 32'h8020_0003 : 32'h0);
      rsp_valid <= 1'b0;
      unique case (state)
        S_IDLE:
          if (cmd_valid) begin
            cur   <= cmd;
            step  <= '0;
            state <= S_EXEC;
          end
        S_EXEC: begin
          step <= step + 5'd1;
          unique case (cur.op)
            hydra_pkg::OP_CONFIG:
              nbanks <= (cur.count == 0 || int'(cur.count) > BANKS) ? (BANK_W + 1)'(BANKS)
                                                                     : (BANK_W + 1)'(cur.count);
            hydra_pkg::OP_READ:    rd_hv  <= bus;
            hydra_pkg::OP_SL_HOST: sl_reg <= cur.hv;
            hydra_pkg::OP_SL_ROW:  sl_reg <= bus;
            default: ;
          endcase
          if (last_step) begin
            state     <= S_IDLE;
            rsp_valid <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end

  assign rsp.op = cur.op;
  assign rsp.hv = rd_hv;
  assign rsp.row = buf_row;
  assign rsp.hd = buf_hd;

  // A permutation reads and writes different rows: writing the source row
  // would overwrite batches that are still to be read.
  a_perm_rows: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && cmd_ready && cmd.op == hydra_pkg::OP_PERMUTE
      |-> cmd.src != cmd.dst && cmd.count < (ROW_W + 1)'(NBATCH));
  // A search names at least one candidate inside the array.
  a_search_rows: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && cmd_ready && cmd.op == hydra_pkg::OP_SEARCH
      |-> cmd.count != 0 && int'(cmd.src) + int'(cmd.count) <= ROWS);
  // Responses are single-cycle pulses.
  a_rsp_pulse: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid |=> !rsp_valid || $past(state) == S_EXEC);

endmodule
