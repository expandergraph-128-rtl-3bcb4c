// tb_egc_feistel_round -- checks one combinational Feistel round, (L,R,RK) -> (R, L^F(R)^RK),
// on 500 random inputs plus zero and all-one corner cases.
module tb_egc_feistel_round;
  import egc_ref_pkg::*;

  logic [63:0] l_in, r_in, rk, l_out, r_out;
  int checks = 0, failures = 0;

  egc_feistel_round dut (.l_in(l_in), .r_in(r_in), .rk(rk), .l_out(l_out), .r_out(r_out));

  task automatic apply(logic [63:0] l, logic [63:0] r, logic [63:0] k);
    l_in = l; r_in = r; rk = k;
    #1;
    checks++;
    if (l_out !== r || r_out !== (l ^ fcore(r) ^ k)) begin
      failures++;
      if (failures < 10) $display("L=%h R=%h RK=%h got %h %h", l, r, k, l_out, r_out);
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
    apply('0, '0, '0);
    apply('1, '1, '1);
    apply('0, '1, '0);
    for (int i = 0; i < 500; i++)
      apply({$urandom, $urandom}, {$urandom, $urandom}, {$urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
