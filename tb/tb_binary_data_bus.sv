// tb_binary_data_bus: self-checking test of the binary data bus.
// Checks the three whole-HV sources, then runs complete 16-batch permutations
// through the bus for shifts of 1, 2 and random 1..15 batches and several
// active-bank counts: the words written into the destination slots must
// form the source HV shifted by s chunks, element chunk g taking chunk g+s,
// with the fill value in the last s chunks of the active dimension.
module tb_binary_data_bus;
  localparam int BANKS = 16, COLS = 128, NB = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  hydra_pkg::bus_sel_e sel;
  logic [COLS-1:0] bank_rd [BANKS], sign_hv [BANKS], host_hv [BANKS], bus [BANKS];
  logic [7:0] bank_batch [BANKS];
  logic perm_en;
  logic [3:0] perm_j, perm_s, last_bank;
  logic [7:0] fill;
  binary_data_bus #(.BANKS(BANKS), .COLS(COLS), .BATCH_W(8)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic [7:0] src [BANKS*NB], dst [BANKS*NB], fills [NB];
  initial begin
    perm_en = 0; perm_j = 0; perm_s = 0; last_bank = 4'd15; fill = 0;
    for (int b = 0; b < BANKS; b++) begin
      for (int w = 0; w < COLS / 32; w++) begin
        bank_rd[b][w*32 +: 32] = $urandom; sign_hv[b][w*32 +: 32] = $urandom; host_hv[b][w*32 +: 32] = $urandom;
      end
      bank_batch[b] = '0;
    end
    @(negedge clk); sel = hydra_pkg::BUS_BANKS;
    #1 for (int b = 0; b < BANKS; b++) check(bus[b] == bank_rd[b], "bus from banks");
    sel = hydra_pkg::BUS_SIGN;
    #1 for (int b = 0; b < BANKS; b++) check(bus[b] == sign_hv[b], "bus from sign unit");
    sel = hydra_pkg::BUS_HOST;
    #1 for (int b = 0; b < BANKS; b++) check(bus[b] == host_hv[b], "bus from host");
    for (int t = 0; t < 40; t++) begin
      int s, nact, nch;
      s = (t < 10) ? 1 : (t < 20) ? 2 : $urandom_range(1, 15);
      nact = (t % 4 == 0) ? 16 : $urandom_range(1, 16);
      nch = nact * NB;
      for (int g = 0; g < BANKS * NB; g++) begin src[g] = 8'($urandom); dst[g] = 8'hxx; end
      perm_en = 1; perm_s = 4'(s); last_bank = 4'(nact - 1);
      for (int j = 0; j < NB; j++) begin
        int slot;
        @(negedge clk);
        perm_j = 4'(j); fill = 8'($urandom); fills[j] = fill;
        for (int b = 0; b < BANKS; b++) bank_batch[b] = src[b * NB + j];
        slot = (j - s + NB) % NB;
        // every active bank writes slot (j - s) mod 16 of its own row
        #1 for (int b = 0; b < nact; b++) dst[b * NB + slot] = bus[b][slot*8 +: 8];
      end
      for (int g = 0; g < nch; g++)
        if (g < nch - s) check(dst[g] == src[g + s], $sformatf("t=%0d s=%0d n=%0d chunk %0d", t, s, nact, g));
        else             check(dst[g] == fills[g - (nch - s) ], $sformatf("t=%0d fill chunk %0d", t, g));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
