// rsas_block: one Robust SAS (RSAS) locking block (Figs. 9 and 10).
//
// An RSAS block is a SAS block whose output is inverted whenever the input X
// is one of the block's critical minterms:
//   Y_RSAS = Y_SAS xor crit(X)
// It is paired with an altered original circuit (mul_altered) in which the
// same wire is already inverted for those minterms, so the two inversions
// cancel and the locked circuit is functionally identical to its SAS
// counterpart.  Removing the block (tying its output to 0) leaves the
// critical minterms wrong, which is what defeats a removal attack.
//
// With a wrong key a critical minterm now sees Y_RSAS = 1 for the
// (MJ-1)/MJ share of K1 values outside its slice (Table 4), and the correct
// key (K1 == K2) gives Y_RSAS = 1 exactly on the critical minterms.
//
// The paper's Fig. 9 draws the RSAS block with the same H/g/g-bar/AND
// structure as the SAS block and describes the change through a modified H,
// while its text states the behaviour as the inversion of Y_SAS for the
// block's critical minterms.  A plain AND of g and g-bar on a shared X'
// cannot output 1 for a correct key, so this design follows the text and
// realises the inversion with an XOR behind the SAS structure.
//
// Purely combinational.
module rsas_block #(
  parameter int unsigned           N         = sas_pkg::N_DEF,
  parameter int unsigned           MJ        = sas_pkg::M_DEF / sas_pkg::L_DEF,
  parameter logic [MJ-1:0][N-1:0]  CRIT      = sas_pkg::CRIT_DEF[MJ-1:0],
  parameter logic [N-1:0]          XG        = sas_pkg::XG_DEF[0],
  parameter logic [N-1:0]          XNOR_MASK = '0
) (
  input  logic [N-1:0] x,
  input  logic [N-1:0] k1,
  input  logic [N-1:0] k2,
  output logic         y      // Y_RSAS
);

  logic y_sas, crit;

  sas_block #(
    .N(N), .MJ(MJ), .CRIT(CRIT), .XG(XG), .XNOR_MASK(XNOR_MASK)
  ) u_sas (
    .x(x), .k1(k1), .k2(k2), .y(y_sas), .crit(crit)
  );

  assign y = y_sas ^ crit;

endmodule
