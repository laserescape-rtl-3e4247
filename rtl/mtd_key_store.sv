// mtd_key_store: key registers that can be moved and shuffled at run time,
// the moving-target response against register probing.
//
// The key lives in one of N_LOC banks of KEY_W flip-flops. Each bank stands for
// one candidate location (LOC) of the key registers; on the FPGA each bank is
// placed in a different slice region with location constraints, so that moving
// the key between banks moves it physically out of the laser's field of view
// (coarse-grain hiding). Inside the bank the bits are stored in a permuted
// order (fine-grain hiding): physical slot p holds logical key bit perm[p].
// On the FPGA of the described prototype both moves are done by partial
// reconfiguration driven from a processor; this block realises the same
// relocation with redundant registers and multiplexers, the alternative the
// description gives for non-reconfigurable chips.
//
// relocate starts a move: for KEY_W-1 cycles a Fisher-Yates shuffle draws a new
// permutation from the random word (one draw per cycle, rnd_next asks the PRNG
// for the next word), then a new bank different from the current one is drawn,
// the key is written there in the new order and the old bank is cleared, all
// in one cycle. key_out (the logical key seen by the protected circuit) stays
// valid throughout, so the circuit using the key keeps running. load writes
// key_in into the current bank in the current order.
//
// Timing: busy is high for KEY_W cycles after relocate; loc, perm and the banks
// change on the last of them. bank_flat exposes the raw banks (bank b, slot p
// at bit b*KEY_W+p) so that a test can see where the key physically sits.
module mtd_key_store #(
  parameter int unsigned KEY_W = 8,
  parameter int unsigned N_LOC = 8,
  localparam int unsigned PW   = (KEY_W > 1) ? $clog2(KEY_W) : 1,
  localparam int unsigned LW   = (N_LOC > 1) ? $clog2(N_LOC) : 1
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   load,
  input  logic [KEY_W-1:0]       key_in,
  input  logic                   relocate,
  input  logic [31:0]            rnd,
  output logic                   rnd_next,
  output logic                   busy,
  output logic [KEY_W-1:0]       key_out,
  output logic [LW-1:0]          loc,
  output logic [KEY_W-1:0][PW-1:0] perm,
  output logic [N_LOC*KEY_W-1:0] bank_flat
);
  logic [N_LOC-1:0][KEY_W-1:0] bank;
  logic [KEY_W-1:0][PW-1:0]    new_perm;
  int                          step;      // Fisher-Yates index, KEY_W-1 down to 1
  logic                        shuffling;
  logic [LW-1:0]               new_loc;

  // Logical key read back through the current location and permutation.
  always_comb begin
    key_out = '0;
    for (int p = 0; p < KEY_W; p++) key_out[perm[p]] = bank[loc][p];
  end

  // Next location: never the current one.
  always_comb begin
    if (N_LOC > 1) new_loc = LW'((int'(loc) + 1 + int'(32'(rnd[31:16]) % (N_LOC - 1))) % N_LOC);
    else           new_loc = loc;
  end

  assign busy      = shuffling;
  assign rnd_next  = shuffling;
  assign bank_flat = bank;

  always_ff @(posedge clk) begin
    if (rst) begin
      bank      <= '0;
      loc       <= '0;
      shuffling <= 1'b0;
      step      <= 0;
      for (int p = 0; p < KEY_W; p++) begin
        perm[p]     <= PW'(p);
        new_perm[p] <= PW'(p);
      end
    end else if (shuffling) begin
      if (step >= 1) begin
        // swap new_perm[step] with new_perm[j], j uniform-ish in 0..step
        automatic int j = int'(32'(rnd[15:0]) % 32'(step + 1));
        new_perm[step] <= new_perm[j];
        new_perm[j]    <= new_perm[step];
        step           <= step - 1;
      end else begin
        // commit: write key into the new bank in the new order, clear the old
        for (int p = 0; p < KEY_W; p++) bank[new_loc][p] <= key_out[new_perm[p]];
        if (new_loc != loc) bank[loc] <= '0;
        loc       <= new_loc;
        perm      <= new_perm;
        shuffling <= 1'b0;
      end
    end else if (relocate) begin
      shuffling <= 1'b1;
      step      <= KEY_W - 1;
      new_perm  <= perm;
    end else if (load) begin
      for (int p = 0; p < KEY_W; p++) bank[loc][p] <= key_in[perm[p]];
    end
  end
endmodule
