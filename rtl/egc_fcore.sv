// egc_fcore -- F_core, the expander-graph nonlinear layer of EGC128 (64 bits in, 64 bits out).
//
// Every output bit y[i] is Rule-A of four input bits: the bit itself and its three graph
// neighbours, y[i] = RuleA(x[i], x[(i-1) mod W], x[(i+1) mod W], x[(i+FAR) mod W]). The graph is
// the 3-regular circulant of the specification (offsets -1, +1, +16 on 64 vertices). All W
// vertices are evaluated in parallel by W instances of egc_rule_a, so the layer is pure wiring
// plus one 4-input function per bit: purely combinational, one clock cycle in the round engine.
// Bit 0 is the least significant bit of the 64-bit half. W and FAR are parameters so that reduced
// instances can be built; the defaults (64, 16) are the cipher's.
module egc_fcore
  import egc_pkg::*;
#(
  parameter int unsigned W   = HALF_BITS,
  parameter int unsigned FAR = FAR_OFFSET
) (
  input  logic [W-1:0] x,
  output logic [W-1:0] y
);

  for (genvar i = 0; i < W; i++) begin : g_vertex
    localparam int unsigned N1 = (i + W - 1) % W;   // n1(i) = i-1
    localparam int unsigned N2 = (i + 1) % W;       // n2(i) = i+1
    localparam int unsigned N3 = (i + FAR) % W;     // n3(i) = i+16
    egc_rule_a u_rule (
      .x0(x[i]),
      .x1(x[N1]),
      .x2(x[N2]),
      .x3(x[N3]),
      .y (y[i])
    );
  end

endmodule
