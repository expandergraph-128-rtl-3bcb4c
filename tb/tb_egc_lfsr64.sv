// tb_egc_lfsr64 -- checks the key-schedule LFSR: seeding (including the all-zero seed, which must
// become 1), 200 forward steps against the reference recurrence, 200 backward steps that must
// retrace the same states in reverse, and holding when neither step is requested.
module tb_egc_lfsr64;
  import egc_ref_pkg::*;

  logic clk = 0, rst_n = 0, load = 0, fwd = 0, bwd = 0;
  logic [63:0] seed = '0, state;
  logic [63:0] trace [0:200];
  int checks = 0, failures = 0;

  egc_lfsr64 dut (.clk(clk), .rst_n(rst_n), .load(load), .seed(seed), .fwd(fwd), .bwd(bwd),
                  .state(state));

  always #5 clk = ~clk;

  task automatic expect_eq(logic [63:0] got, logic [63:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    expect_eq(state, 64'd1, "reset value");
    // zero seed
    @(negedge clk); load = 1; seed = '0;
    @(negedge clk); load = 0;
    expect_eq(state, 64'd1, "zero seed");
    for (int trial = 0; trial < 3; trial++) begin
      @(negedge clk); load = 1; seed = {$urandom, $urandom};
      if (trial == 2) seed = 64'h8000000000000000;
      @(negedge clk); load = 0;
      expect_eq(state, seed, "seed");
      trace[0] = seed;
      for (int i = 1; i <= 200; i++) trace[i] = lfsr_next(trace[i-1]);
      fwd = 1;
      for (int i = 1; i <= 200; i++) begin
        @(negedge clk);
        expect_eq(state, trace[i], $sformatf("forward step %0d", i));
      end
      fwd = 0;
      repeat (3) @(negedge clk);
      expect_eq(state, trace[200], "hold");
      bwd = 1;
      for (int i = 199; i >= 0; i--) begin
        @(negedge clk);
        expect_eq(state, trace[i], $sformatf("backward step to %0d", i));
      end
      bwd = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
