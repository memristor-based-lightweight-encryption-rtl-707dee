// tb_gift128_sxor: end-to-end test of the cipher built with the alternative scouting-logic
// XOR sense amplifiers (XOR_STYLE = XOR_SCOUTING) instead of the default DXOR ones.
//
// Same procedure and checks as tb_gift128_1t1r: S-box and off-line round keys written
// through the programming port, the published GIFT-128 test vectors, random blocks compared
// with the bit-level GIFT-128 model, the 40-cycle latency and the reprogrammed S-box.
module tb_gift128_sxor;
  import gift_pkg::*;
  import gift_model_pkg::*;

  logic         clk = 1'b0;
  logic         rst_n = 1'b0;
  prog_req_t    prog;
  logic         start;
  logic [127:0] plaintext;
  logic         busy, done;
  logic [127:0] ciphertext;

  int checks = 0;
  int failures = 0;
  // mechanism counters
  int n_bcast_wr = 0, n_slice_wr = 0, n_load = 0, n_round = 0, n_done_hold = 0;
  int n_sbox_reconfig = 0, n_key_load = 0, n_kat = 0, n_retention = 0;

  always #50 clk = ~clk;   // 100 time units per cycle (10 MHz if the unit is 1 ns)

  gift128_1t1r #(.XOR_STYLE(XOR_SCOUTING)) u_dut (
    .clk       (clk),
    .rst_n     (rst_n),
    .prog      (prog),
    .start     (start),
    .plaintext (plaintext),
    .busy      (busy),
    .done      (done),
    .ciphertext(ciphertext)
  );

  always @(posedge clk) if (rst_n && busy) n_round++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic prog_write(bit bc, int unsigned sl, int unsigned row, logic [3:0] data);
    @(negedge clk);
    prog.en    = 1'b1;
    prog.bcast = bc;
    prog.slice = SLICE_W'(sl);
    prog.row   = ROW_W'(row);
    prog.data  = data;
    @(negedge clk);
    prog.en    = 1'b0;
    if (bc) n_bcast_wr++; else n_slice_wr++;
  endtask

  task automatic program_sbox(sbox_t sb);
    for (int unsigned x = 0; x < 16; x++) prog_write(1'b1, 0, x, sb[x]);
  endtask

  task automatic program_key(logic [127:0] key);
    for (int unsigned n = 0; n < 32; n++)
      for (int unsigned r = 0; r < 40; r++)
        prog_write(1'b0, n, RK_WL_BASE + r, xbar_row(key, n, r));
    n_key_load++;
  endtask

  task automatic encrypt(logic [127:0] pt, output logic [127:0] ct);
    int cyc;
    int busy_cyc;
    @(negedge clk);
    plaintext = pt;
    start     = 1'b1;
    @(posedge clk);           // load edge
    #1;
    start     = 1'b0;
    n_load++;
    cyc = 0;
    busy_cyc = 0;
    do begin
      @(posedge clk);
      #1;                     // sample after the edge
      cyc++;
      if (busy) busy_cyc++;
    end while (!done && cyc < 100);
    check(cyc == ROUNDS, $sformatf("latency %0d cycles, expected %0d", cyc, ROUNDS));
    check(busy_cyc == ROUNDS - 1 && !busy,
          $sformatf("busy seen on %0d sampled cycles", busy_cyc));
    ct = ciphertext;
    // done and the ciphertext hold until the next start
    plaintext = ~pt;
    repeat (3) @(posedge clk);
    check(done && ciphertext == ct, "done / ciphertext did not hold");
    n_done_hold++;
  endtask

  task automatic run_block(logic [127:0] pt, logic [127:0] key, sbox_t sb);
    logic [127:0] ct, exp_ct;
    encrypt(pt, ct);
    exp_ct = gift128_encrypt(pt, key, sb);
    check(ct === exp_ct, $sformatf("pt %032h key %032h: got %032h expected %032h",
                                   pt, key, ct, exp_ct));
  endtask

  // Published GIFT-128 test vectors.
  localparam logic [127:0] KAT_KEY [3] = '{128'h0,
                                           128'hfedcba9876543210fedcba9876543210,
                                           128'hd0f5c59a7700d3e799028fa9f90ad837};
  localparam logic [127:0] KAT_PT  [3] = '{128'h0,
                                           128'hfedcba9876543210fedcba9876543210,
                                           128'he39c141fa57dba43f08a85b6a91f86c1};
  localparam logic [127:0] KAT_CT  [3] = '{128'hcd0bd738388ad3f668b15a36ceb6ff92,
                                           128'h8422241a6dbf5a9346af468409ee0152,
                                           128'h13ede67cbdcc3dbf400a62d6977265ea};

  initial begin
    logic [127:0] key, pt, ct;
    sbox_t        sb2;
    prog      = '0;
    start     = 1'b0;
    plaintext = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);

    program_sbox(GIFT_SBOX);

    // Known-answer tests
    for (int k = 0; k < 3; k++) begin
      program_key(KAT_KEY[k]);
      encrypt(KAT_PT[k], ct);
      check(ct === KAT_CT[k], $sformatf("KAT %0d: got %032h expected %032h", k, ct, KAT_CT[k]));
      check(gift128_encrypt(KAT_PT[k], KAT_KEY[k], GIFT_SBOX) === KAT_CT[k],
            $sformatf("reference model disagrees with KAT %0d", k));
      n_kat++;
    end

    // The crossbars are non-volatile: after a reset of the logic the last key and the
    // S-box are still there and the cipher works without being reprogrammed.
    @(negedge clk);
    rst_n = 1'b0;
    repeat (2) @(negedge clk);
    check(!busy && !done, "reset did not clear the sequencer");
    rst_n = 1'b1;
    encrypt(KAT_PT[2], ct);
    check(ct === KAT_CT[2], $sformatf("after reset: got %032h expected %032h", ct, KAT_CT[2]));
    n_retention++;

    // Random keys and plaintexts
    for (int k = 0; k < 3; k++) begin
      key = {$urandom, $urandom, $urandom, $urandom};
      program_key(key);
      for (int b = 0; b < 3; b++) begin
        pt = {$urandom, $urandom, $urandom, $urandom};
        run_block(pt, key, GIFT_SBOX);
      end
    end

    // Reprogram the S-box with another bijection, keep the last key.
    for (int x = 0; x < 16; x++) sb2[x] = GIFT_SBOX[x ^ 5] ^ 4'h3;
    program_sbox(sb2);
    n_sbox_reconfig++;
    for (int b = 0; b < 2; b++) begin
      pt = {$urandom, $urandom, $urandom, $urandom};
      run_block(pt, key, sb2);
    end
    // and back
    program_sbox(GIFT_SBOX);
    n_sbox_reconfig++;
    run_block(KAT_PT[1], key, GIFT_SBOX);

    // Every mechanism must have happened.
    check(n_bcast_wr > 0,      "no broadcast S-box write");
    check(n_slice_wr > 0,      "no per-slice RC/RK write");
    check(n_key_load > 1,      "key never changed");
    check(n_load > 0,          "no plaintext load");
    check(n_round >= 40,       "no full 40-round encryption");
    check(n_done_hold > 0,     "done hold never checked");
    check(n_sbox_reconfig > 0, "S-box never reprogrammed");
    check(n_kat == 3,          "known-answer tests not all run");
    check(n_retention > 0,     "retention over reset never checked");
    $display("mechanisms: bcast_wr=%0d slice_wr=%0d key_loads=%0d loads=%0d round_cycles=%0d done_holds=%0d sbox_reconfigs=%0d kats=%0d retention=%0d",
             n_bcast_wr, n_slice_wr, n_key_load, n_load, n_round, n_done_hold, n_sbox_reconfig, n_kat, n_retention);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
