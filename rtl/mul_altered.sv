// mul_altered: the "altered original circuit" of an RSAS-locked multiplier
// (Figs. 9 and 10).
//
// For every locking block j the product bit WIRE_BIT[j] (the wire that block
// j's output is XORed into) is inverted whenever the locked input X is one of
// block j's critical minterms.  On its own this circuit therefore gives wrong
// products for every critical minterm; only the RSAS blocks, which invert the
// same wire for the same minterms under the correct key, restore them.
//
// X is the low N bits of operand b.  Block j owns critical minterms
// CRIT[j*M/L .. j*M/L + M/L - 1], so the M critical minterms are split into L
// equal, disjoint groups as the paper requires.  Which operand bits form X
// and which product bits are the wires are this design's own choices.
//
// Purely combinational.
module mul_altered #(
  parameter int unsigned          OPW      = sas_pkg::OPW_DEF,
  parameter int unsigned          N        = sas_pkg::N_DEF,
  parameter int unsigned          M        = sas_pkg::M_DEF,
  parameter int unsigned          L        = sas_pkg::L_DEF,
  parameter logic [M-1:0][N-1:0]  CRIT     = sas_pkg::CRIT_DEF,
  parameter int unsigned          WIRE_BIT [L] = sas_pkg::WIRE_BIT_DEF
) (
  input  logic [OPW-1:0]   a,
  input  logic [OPW-1:0]   b,
  output logic [2*OPW-1:0] p,
  output logic [L-1:0]     inv      // wire of block j inverted this cycle
);

  localparam int unsigned MJ = M / L;

  logic [2*OPW-1:0] p_orig;
  logic [N-1:0]     x;

  mul_original #(.OPW(OPW)) u_mul (.a(a), .b(b), .p(p_orig));

  assign x = b[N-1:0];

  always_comb begin
    p = p_orig;
    for (int unsigned j = 0; j < L; j++) begin
      inv[j] = 1'b0;
      for (int unsigned i = 0; i < MJ; i++)
        if (x == CRIT[j*MJ + i]) inv[j] = 1'b1;
      p[WIRE_BIT[j]] = p[WIRE_BIT[j]] ^ inv[j];
    end
  end

endmodule
