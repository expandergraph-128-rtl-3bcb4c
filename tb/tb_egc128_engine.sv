// tb_egc128_engine -- end-to-end test of the EGC128 engine at its default parameters.
//
// 1. The ten published reference vectors: each key/plaintext is encrypted and the ciphertext
//    compared with the published value; each ciphertext is then decrypted back.
// 2. 100 random key/plaintext pairs: encryption compared with the reference model, and the
//    ciphertext decrypted back to the plaintext (the specification's 100-case recovery test).
// 3. Every block's latency is measured and must be 49 cycles.
// 4. Mechanisms, each counted and required at least once: encryption, decryption, the K_high = 0
//    LFSR seed substitution, a start ignored while busy, a back-to-back start accepted in a
//    block's last cycle (measured period 49 cycles), and a reset in the middle of a block.
module tb_egc128_engine;
  import egc_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, mode = 0;
  logic [127:0] key = '0, din = '0, dout;
  logic busy, done;
  int checks = 0, failures = 0;
  int n_enc = 0, n_dec = 0, n_zero_khigh = 0, n_ignored = 0, n_back2back = 0, n_reset = 0;
  longint cycle = 0;

  egc128_engine dut (.clk(clk), .rst_n(rst_n), .start(start), .mode(mode), .key(key), .din(din),
                     .busy(busy), .done(done), .dout(dout));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;   // read at negedges: edges so far

  task automatic expect_eq(logic [127:0] got, logic [127:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic expect_int(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Run one block; optionally raise start again while busy (must be ignored).
  task automatic run(logic m, logic [127:0] k, logic [127:0] d, output logic [127:0] res,
                     input bit poke = 0);
    longint t0;
    @(negedge clk);
    start = 1; mode = m; key = k; din = d;
    @(negedge clk);
    t0 = cycle;
    start = 0; key = '1 ^ k; din = '1 ^ d;   // inputs must not be needed after acceptance
    if (poke) begin
      repeat (5) @(negedge clk);
      start = 1; mode = ~m;
      @(negedge clk);
      start = 0;
      n_ignored++;
    end
    while (!done) @(negedge clk);
    expect_int(cycle - t0, 49, "block latency");
    res = dout;
    if (m) n_dec++; else n_enc++;
    if (k[127:64] == '0) n_zero_khigh++;
    @(negedge clk);
    if (poke) begin
      checks++;
      if (busy || done) begin
        failures++;
        $display("start while busy was not ignored");
      end
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [127:0] ct, pt, k, p, ct1, ct2;
    longint t1, t2;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. reference vectors
    for (int i = 0; i < NUM_TV; i++) begin
      run(1'b0, TV_KEY[i], TV_PT[i], ct, i == 3);
      expect_eq(ct, TV_CT[i], $sformatf("TV%0d ciphertext", i + 1));
      run(1'b1, TV_KEY[i], TV_CT[i], pt);
      expect_eq(pt, TV_PT[i], $sformatf("TV%0d decryption", i + 1));
    end

    // 2. random blocks
    for (int i = 0; i < 100; i++) begin
      k = {$urandom, $urandom, $urandom, $urandom};
      p = {$urandom, $urandom, $urandom, $urandom};
      if (i % 25 == 0) k[127:64] = '0;
      run(1'b0, k, p, ct);
      expect_eq(ct, encrypt(k, p), "random encryption");
      run(1'b1, k, ct, pt);
      expect_eq(pt, p, "random plaintext recovery");
    end

    // 3. back-to-back: hold start through the end of one block so the next starts at once
    k = {$urandom, $urandom, $urandom, $urandom};
    p = {$urandom, $urandom, $urandom, $urandom};
    @(negedge clk);
    start = 1; mode = 0; key = k; din = p;
    @(negedge clk); t1 = cycle;
    din = ~p;                                  // second block's plaintext, same key
    while (!done) @(negedge clk);
    ct1 = dout;
    t2 = cycle;
    start = 0;
    @(negedge clk);
    while (!done) @(negedge clk);
    ct2 = dout;
    expect_int(t2 - t1, 49, "back-to-back first block");
    expect_int(cycle - t2, 49, "back-to-back period");  // done to done
    expect_eq(ct1, encrypt(k, p), "back-to-back block 1");
    expect_eq(ct2, encrypt(k, ~p), "back-to-back block 2");
    n_back2back++;
    n_enc += 2;

    // 4. reset in the middle of a block, then a normal block
    @(negedge clk);
    start = 1; mode = 0; key = TV_KEY[9]; din = TV_PT[9];
    @(negedge clk); start = 0;
    repeat (20) @(negedge clk);
    rst_n = 0;
    @(negedge clk);
    checks++;
    if (busy || done || dout != '0) begin
      failures++;
      $display("reset did not clear the engine");
    end
    rst_n = 1;
    n_reset++;
    run(1'b0, TV_KEY[9], TV_PT[9], ct);
    expect_eq(ct, TV_CT[9], "after reset");

    $display("mechanisms: encrypt=%0d decrypt=%0d khigh_zero=%0d ignored_start=%0d back_to_back=%0d reset=%0d",
             n_enc, n_dec, n_zero_khigh, n_ignored, n_back2back, n_reset);
    if (n_enc == 0)        begin failures++; $display("no encryption"); end
    if (n_dec == 0)        begin failures++; $display("no decryption"); end
    if (n_zero_khigh == 0) begin failures++; $display("no K_high = 0 block"); end
    if (n_ignored == 0)    begin failures++; $display("no ignored start"); end
    if (n_back2back == 0)  begin failures++; $display("no back-to-back blocks"); end
    if (n_reset == 0)      begin failures++; $display("no mid-block reset"); end
    checks += 6;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
