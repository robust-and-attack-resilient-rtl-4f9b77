// mul_original: the circuit that is protected, an unsigned OPW x OPW
// multiplier with a 2*OPW-bit product.
//
// The paper locks the multiplier of a 32-bit 80386 processor because it is
// that processor's longest combinational path; it does not describe the
// multiplier's internals or signedness.  This design uses a plain
// combinational unsigned product (the 80386 MUL form, EDX:EAX = EAX * src),
// left to synthesis to map onto an array or tree.
//
// Purely combinational: p follows a and b in the same cycle.
module mul_original #(
  parameter int unsigned OPW = sas_pkg::OPW_DEF
) (
  input  logic [OPW-1:0]   a,
  input  logic [OPW-1:0]   b,
  output logic [2*OPW-1:0] p
);

  always_comb p = (2*OPW)'(a) * (2*OPW)'(b);

endmodule
