// tb_egc_key_schedule -- checks the round keys RK_r = K_low ^ S_r ^ RC_r.
// For 20 keys (including K_high = 0, which seeds the LFSR with 1) the testbench loads the key,
// reads the round keys in encryption order while stepping forward, then reloads, advances to
// S_19 and reads them in decryption order while stepping backward. Every key is compared with
// the reference key expansion.
module tb_egc_key_schedule;
  import egc_pkg::*;
  import egc_ref_pkg::*;

  logic clk = 0, rst_n = 0, load = 0, fwd = 0, bwd = 0;
  key_t key = '0;
  round_idx_t round_idx = '0;
  half_t rk;
  h64_t exp_rk [20];
  int checks = 0, failures = 0;

  egc_key_schedule dut (.clk(clk), .rst_n(rst_n), .load(load), .key(key), .fwd(fwd), .bwd(bwd),
                        .round_idx(round_idx), .rk(rk));

  always #5 clk = ~clk;

  task automatic check_rk(int r);
    checks++;
    if (rk !== exp_rk[r]) begin
      failures++;
      if (failures < 10) $display("key %h RK_%0d got %h expected %h", key, r, rk, exp_rk[r]);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      key = {$urandom, $urandom, $urandom, $urandom};
      if (t == 0) key = '0;
      if (t == 1) key[127:64] = '0;
      if (t == 2) key = '1;
      round_keys(key, exp_rk);
      // encryption order
      @(negedge clk); load = 1;
      @(negedge clk); load = 0;
      for (int r = 0; r < 20; r++) begin
        round_idx = round_idx_t'(r);
        #1 check_rk(r);
        fwd = 1;
        @(negedge clk); fwd = 0;
      end
      // decryption order
      @(negedge clk); load = 1;
      @(negedge clk); load = 0; fwd = 1;
      repeat (19) @(negedge clk);
      fwd = 0;
      for (int r = 19; r >= 0; r--) begin
        round_idx = round_idx_t'(r);
        #1 check_rk(r);
        bwd = 1;
        @(negedge clk); bwd = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
