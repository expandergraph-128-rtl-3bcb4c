// tb_egc_controller -- checks the sequencing FSM cycle by cycle.
// For encryption and decryption blocks it checks: one `load` on the accepting edge; `done` on
// exactly the 49th edge after it (the specification's block latency); 20 `round_en` cycles whose
// `round_idx` runs 0..19 (encryption) or 19..0 (decryption); 19 forward LFSR steps before the
// first round for decryption and none for encryption; 20 steps during the rounds in the right
// direction; and that a `start` raised while busy is ignored.
module tb_egc_controller;
  import egc_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  mode_e mode_in = MODE_ENC;
  logic load, ks_fwd, ks_bwd, round_en, finalize, busy, done;
  mode_e mode;
  round_idx_t round_idx;
  int checks = 0, failures = 0;

  egc_controller dut (.clk(clk), .rst_n(rst_n), .start(start), .mode_in(mode_in), .load(load),
                      .mode(mode), .ks_fwd(ks_fwd), .ks_bwd(ks_bwd), .round_en(round_en),
                      .round_idx(round_idx), .finalize(finalize), .busy(busy), .done(done));

  always #5 clk = ~clk;

  task automatic expect_int(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run_block(mode_e m, bit poke_busy);
    int edges = 0, loads = 0, rounds = 0, pre_fwd = 0, rnd_fwd = 0, rnd_bwd = 0, idx_err = 0;
    @(negedge clk);
    start = 1; mode_in = m;
    @(posedge clk);
    loads += load;
    @(negedge clk);
    start = 0;
    while (!done && edges < 200) begin
      if (poke_busy && edges == 10) begin
        start = 1; mode_in = (m == MODE_ENC) ? MODE_DEC : MODE_ENC;
      end else start = 0;
      @(posedge clk);
      loads += load;
      if (round_en) begin
        if (round_idx != round_idx_t'((m == MODE_ENC) ? rounds : 19 - rounds)) idx_err++;
        rounds++;
        rnd_fwd += ks_fwd;
        rnd_bwd += ks_bwd;
      end else begin
        pre_fwd += ks_fwd;
      end
      edges++;
      @(negedge clk);
    end
    expect_int(edges, 49, "block latency in cycles");
    expect_int(loads, 1, "load pulses");
    expect_int(rounds, 20, "round cycles");
    expect_int(idx_err, 0, "round index order errors");
    expect_int(pre_fwd, (m == MODE_DEC) ? 19 : 0, "LFSR pre-advance steps");
    expect_int(rnd_fwd, (m == MODE_ENC) ? 20 : 0, "forward steps in rounds");
    expect_int(rnd_bwd, (m == MODE_DEC) ? 20 : 0, "backward steps in rounds");
    expect_int(int'(mode), int'(m), "latched mode");
    @(negedge clk);
    expect_int(int'(done), 0, "done is one cycle");
    expect_int(int'(busy), 0, "idle after block");
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    expect_int(int'(busy), 0, "idle after reset");
    run_block(MODE_ENC, 0);
    run_block(MODE_DEC, 0);
    run_block(MODE_ENC, 1);
    run_block(MODE_DEC, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
