// tb_mtd_key_store: loads a key, then relocates it 30 times with random words
// from the PRNG. After each move the logical key must be unchanged, the
// location must differ from the previous one, exactly one bank may hold
// non-zero bits, that bank must hold the key in the order given by perm, perm
// must be a permutation, and busy must last KEY_W cycles. Over all moves
// several locations and permutations must appear. The key must also stay
// readable during a move, and a reload must land in the current bank.
module tb_mtd_key_store;
  int checks = 0, failures = 0;
  localparam int KW = 8, NL = 8;
  localparam int PW = $clog2(KW), LW = $clog2(NL);
  localparam logic [KW-1:0] KEY0 = KW'(64'hB6), KEY1 = KW'(64'h3C);
  logic                   clk = 1'b0, rst = 1'b1, load = 1'b0, relocate = 1'b0;
  logic [KW-1:0]          key_in = '0, key_out;
  logic [31:0]            rnd;
  logic                   rnd_next, busy;
  logic [LW-1:0]          loc;
  logic [KW-1:0][PW-1:0]  perm;
  logic [NL*KW-1:0]       bank_flat;

  always #5 clk = ~clk;

  prng_lfsr u_prng (.clk, .rst, .seed_load(1'b0), .seed(32'h0), .next(rnd_next), .rnd);
  mtd_key_store #(.KEY_W(KW), .N_LOC(NL)) dut (
    .clk, .rst, .load, .key_in, .relocate, .rnd, .rnd_next, .busy, .key_out, .loc, .perm, .bank_flat
  );

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic check_layout(input logic [KW-1:0] key, input string tag);
    int nz = 0;
    logic [KW-1:0] seen = '0;
    for (int bnk = 0; bnk < NL; bnk++) if (bank_flat[bnk*KW +: KW] != '0) nz++;
    check(nz == ((key == '0) ? 0 : 1), {tag, ": exactly one bank in use"});
    for (int p = 0; p < KW; p++) begin
      seen[perm[p]] = 1'b1;
      check(bank_flat[int'(loc)*KW + p] == key[perm[p]], $sformatf("%s: slot %0d", tag, p));
    end
    check(seen == '1, {tag, ": perm is a permutation"});
    check(key_out == key, {tag, ": logical key"});
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic logic [KW-1:0] key = KEY0;
    logic [LW-1:0] old_loc;
    automatic logic [NL-1:0] locs_seen = '0;
    automatic int  perms_changed = 0, busy_cyc;
    logic [KW-1:0][PW-1:0] old_perm;
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    key_in <= key; load <= 1'b1;
    @(posedge clk); load <= 1'b0;
    @(posedge clk);
    #1 check_layout(key, "after load");
    for (int m = 0; m < 30; m++) begin
      old_loc = loc; old_perm = perm;
      @(posedge clk); relocate <= 1'b1;
      @(posedge clk); relocate <= 1'b0;
      busy_cyc = 0;
      #1;
      while (busy) begin
        check(key_out == key, "key readable during move");
        busy_cyc++;
        @(posedge clk); #1;
      end
      check(busy_cyc == KW, $sformatf("busy %0d cycles", busy_cyc));
      check(loc != old_loc, "location changed");
      check_layout(key, $sformatf("move %0d", m));
      locs_seen[loc] = 1'b1;
      if (perm != old_perm) perms_changed++;
    end
    check($countones(locs_seen) >= 5, $sformatf("locations visited %0d", $countones(locs_seen)));
    check(perms_changed >= 25, $sformatf("permutation changed %0d times", perms_changed));
    key = KEY1;
    @(posedge clk); key_in <= key; load <= 1'b1;
    @(posedge clk); load <= 1'b0;
    @(posedge clk);
    #1 check_layout(key, "reload");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
