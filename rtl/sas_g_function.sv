// sas_g_function: the point function g of a SAS block and its complement.
//
// g has an on-set of exactly one minterm: g(v) = 1 only for v == XG, and
// g_bar(v) = ~g(v) is 0 only there.  In a SAS block one copy is fed with
// X' xor K1 and drives the g input of the output AND gate, a second copy is
// fed with X' xor K2 and drives the g-bar input (Fig. 7 structure of the
// paper).  The on-set point XG is a free design constant; its default here
// is this design's own choice.
//
// Purely combinational; no clock.
module sas_g_function #(
  parameter int unsigned    N  = sas_pkg::N_DEF,
  parameter logic [N-1:0]   XG = sas_pkg::XG_DEF[0]
) (
  input  logic [N-1:0] v,      // input after the XOR/XNOR key layer
  output logic         g,      // 1 only when v == XG
  output logic         g_bar   // 0 only when v == XG
);

  always_comb begin
    g     = (v == XG);
    g_bar = ~g;
  end

endmodule
