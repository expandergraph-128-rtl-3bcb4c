// tb_egc_rule_a -- exhaustive check of Rule-A against its algebraic normal form.
// All 16 input combinations are applied; the truth table must equal 0x036F and every output must
// match the ANF evaluated by the reference package. Combinational, no clock.
module tb_egc_rule_a;
  import egc_ref_pkg::*;

  logic x0, x1, x2, x3, y;
  int checks = 0, failures = 0;
  logic [15:0] tt;

  egc_rule_a dut (.x0(x0), .x1(x1), .x2(x2), .x3(x3), .y(y));

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 16; a++) begin
      {x3, x2, x1, x0} = 4'(a);
      #1;
      tt[a] = y;
      checks++;
      if (y !== rule_a(x0, x1, x2, x3)) begin
        failures++;
        $display("mismatch input %b: got %b", 4'(a), y);
      end
    end
    checks++;
    if (tt !== 16'h036F) begin
      failures++;
      $display("truth table %h, expected 036f", tt);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
