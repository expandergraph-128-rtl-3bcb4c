// tb_egc_fcore -- checks the 64-bit expander-graph layer against a loop-based reference.
// Applies all-zero, all-one, every single-bit input (which exercises each graph edge) and 500
// random words, comparing all 64 output bits with the reference model. Combinational.
module tb_egc_fcore;
  import egc_ref_pkg::*;

  logic [63:0] x, y;
  int checks = 0, failures = 0;

  egc_fcore dut (.x(x), .y(y));

  task automatic apply(logic [63:0] v);
    x = v;
    #1;
    checks++;
    if (y !== fcore(v)) begin
      failures++;
      if (failures < 10) $display("x=%h got %h expected %h", v, y, fcore(v));
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
    apply('0);
    apply('1);
    for (int i = 0; i < 64; i++) apply(64'd1 << i);
    for (int i = 0; i < 64; i++) apply(~(64'd1 << i));
    for (int i = 0; i < 500; i++) apply({$urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
