// sas_h_function: the input-steering function X' = H(X, K1) of a SAS block.
//
// H decides how many wrong keys corrupt each input minterm X.
//  * X is not one of this block's critical minterms: X' = X.  Then only the
//    single K1 value X xor X_g (xor the XNOR mask) makes g fire, which gives
//    a non-critical minterm the low input error rate 2^-n.
//  * X is a critical minterm C of the block and K1 lies in the slice of C:
//    X' = K1 xor XNOR_MASK xor XG, so that the g input X' xor K1 (after the
//    XOR/XNOR layer) equals XG and g fires for every K1 in the slice.  Each
//    slice holds 2^n / MJ values of K1, the slices are disjoint and cover
//    {0,1}^n, so a critical minterm is corrupted by exactly a 1/MJ share of
//    the wrong keys (Eq. 9 and Table 3 of the paper).
//  * X is critical but K1 is outside its slice: X' = X (pass-through).
//
// The paper fixes what H must achieve but not how K1 is partitioned (its
// example splits on the MSB of K1).  This design splits on the top
// log2(MJ) bits of K1 xor XG xor XNOR_MASK: K1 belongs to the slice of the
// critical minterm C whose own top bits equal those bits.  The slice of C
// then always contains the pass-through key K1 = C xor XG xor mask, so no
// K1 outside the slice corrupts C, and the key with that K1 corrupts C and
// nothing else (the property the paper's Lemma 2 relies on).  This needs the
// critical minterms of one block to differ in their top log2(MJ) bits,
// which is checked at elaboration.  When MJ = 1 the single slice is the
// whole K1 space.
//
// Outputs crit (X is one of this block's critical minterms), which an RSAS
// block uses to invert its output.  Purely combinational.
module sas_h_function #(
  parameter int unsigned           N         = sas_pkg::N_DEF,
  parameter int unsigned           MJ        = sas_pkg::M_DEF / sas_pkg::L_DEF,
  parameter logic [MJ-1:0][N-1:0]  CRIT      = sas_pkg::CRIT_DEF[MJ-1:0],
  parameter logic [N-1:0]          XG        = sas_pkg::XG_DEF[0],
  parameter logic [N-1:0]          XNOR_MASK = '0
) (
  input  logic [N-1:0] x,        // locked primary-input bits X
  input  logic [N-1:0] k1,       // first key half K1
  output logic [N-1:0] x_prime,  // X' = H(X, K1)
  output logic         crit,     // X is a critical minterm of this block
  output logic         steer     // X' was steered onto the g on-set
);

  localparam int unsigned SELW = $clog2(MJ);

  if (!sas_pkg::is_pow2(MJ) || SELW > N) begin : g_bad_mj
    $error("sas_h_function: MJ must be a power of two no larger than 2^N");
  end

  for (genvar i = 0; i < MJ; i++) begin : g_chk_i
    for (genvar k = i + 1; k < MJ; k++) begin : g_chk_k
      if ((CRIT[i] >> (N - SELW)) == (CRIT[k] >> (N - SELW))) begin : g_clash
        $error("sas_h_function: critical minterms %0d and %0d share their top bits", i, k);
      end
    end
  end

  logic [N-1:0] slice;           // slice index of K1

  always_comb begin
    slice = (k1 ^ XG ^ XNOR_MASK) >> (N - SELW);
    crit  = 1'b0;
    steer = 1'b0;
    for (int unsigned i = 0; i < MJ; i++) begin
      if (x == CRIT[i]) begin
        crit = 1'b1;
        if (slice == (CRIT[i] >> (N - SELW))) steer = 1'b1;
      end
    end
    x_prime = steer ? (k1 ^ XNOR_MASK ^ XG) : x;
  end

endmodule
