// tb_egc_round_const -- checks the round-constant table against pi computed in the testbench.
// Every entry RC_0..RC_19 is compared with the 64-bit word of pi's hex fraction produced by the
// BBP digit-extraction formula; RC_0..RC_2 are also compared with the literal values printed in
// the specification, and addresses 20..31 must read zero. Combinational.
module tb_egc_round_const;
  import egc_pkg::*;
  import egc_ref_pkg::*;

  round_idx_t idx;
  half_t rc;
  int checks = 0, failures = 0;

  egc_round_const dut (.round_idx(idx), .rc(rc));

  task automatic expect_eq(logic [63:0] got, logic [63:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 32; r++) begin
      idx = round_idx_t'(r);
      #1;
      if (r < 20) expect_eq(rc, round_const(r), $sformatf("RC_%0d", r));
      else        expect_eq(rc, '0, $sformatf("index %0d", r));
      if (r == 0) expect_eq(rc, 64'h243f6a8885a308d3, "printed RC_0");
      if (r == 1) expect_eq(rc, 64'h13198a2e03707344, "printed RC_1");
      if (r == 2) expect_eq(rc, 64'ha4093822299f31d0, "printed RC_2");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
