// sas_block: one Strong Anti-SAT (SAS) locking block (Fig. 7 of the paper).
//
// Structure, from input to output:
//   X' = H(X, K1)                      (sas_h_function)
//   a  = X' xor K1,  b = X' xor K2     (per bit XOR, or XNOR where XNOR_MASK=1)
//   y  = g(a) AND g_bar(b)             (two sas_g_function copies)
// A key is correct for this block iff K1 == K2: then a == b and
// g(a) & ~g(a) = 0, so y never fires.  With a wrong key (K1 != K2):
//   * a non-critical minterm X is corrupted only for K1 = X^XG^mask
//     (2^n - 1 wrong keys out of 2^n(2^n - 1): IER = 2^-n);
//   * a critical minterm is corrupted for every K1 in its slice of the K1
//     space (IER = 1/MJ, MJ = critical minterms in this block).
// y is XORed onto one wire of the protected circuit by the parent.
//
// The paper lets the designer pick XOR or XNOR per bit and lets the layers in
// front of g and g_bar differ; this design uses one mask for both (the
// simplification the paper itself adopts in its discussion).
//
// Interface: x, k1, k2 in; y (Y_SAS) and crit (X is one of this block's
// critical minterms) out.  Purely combinational, no clock.
module sas_block #(
  parameter int unsigned           N         = sas_pkg::N_DEF,
  parameter int unsigned           MJ        = sas_pkg::M_DEF / sas_pkg::L_DEF,
  parameter logic [MJ-1:0][N-1:0]  CRIT      = sas_pkg::CRIT_DEF[MJ-1:0],
  parameter logic [N-1:0]          XG        = sas_pkg::XG_DEF[0],
  parameter logic [N-1:0]          XNOR_MASK = '0
) (
  input  logic [N-1:0] x,
  input  logic [N-1:0] k1,
  input  logic [N-1:0] k2,
  output logic         y,     // Y_SAS: 1 injects a fault
  output logic         crit   // X is a critical minterm of this block
);

  logic [N-1:0] x_prime;
  logic         steer_unused;
  logic         g1, g1_bar_unused;
  logic         g2_unused, g2_bar;

  sas_h_function #(
    .N(N), .MJ(MJ), .CRIT(CRIT), .XG(XG), .XNOR_MASK(XNOR_MASK)
  ) u_h (
    .x(x), .k1(k1), .x_prime(x_prime), .crit(crit), .steer(steer_unused)
  );

  // g(X' xor K1)
  sas_g_function #(.N(N), .XG(XG)) u_g (
    .v(x_prime ^ k1 ^ XNOR_MASK), .g(g1), .g_bar(g1_bar_unused)
  );

  // g_bar(X' xor K2)
  sas_g_function #(.N(N), .XG(XG)) u_g_bar (
    .v(x_prime ^ k2 ^ XNOR_MASK), .g(g2_unused), .g_bar(g2_bar)
  );

  assign y = g1 & g2_bar;

  // A correct key (K1 == K2) must never inject a fault.
  always_comb begin
    if (k1 == k2) assert (!y) else $error("sas_block: fault injected with K1 == K2");
  end

endmodule
