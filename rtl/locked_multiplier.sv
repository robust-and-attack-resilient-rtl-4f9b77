// locked_multiplier: a multiplier locked with l Strong Anti-SAT (SAS) or
// Robust SAS (RSAS) blocks; the top of this design.
//
// The N locked input bits X (low bits of operand b) are shared by all L
// blocks.  Each block j has its own 2N-bit key {K2, K1} = key[j] and owns
// M/L of the M critical minterms; its output is XORed into product bit
// WIRE_BIT[j].  L = 1 is the paper's Configuration 1, L > 1 Configuration 2.
//   ROBUST = 0 (SAS):  p = (a*b) ^ sum_j (Y_SAS,j  << WIRE_BIT[j])
//   ROBUST = 1 (RSAS): p = altered(a*b) ^ sum_j (Y_RSAS,j << WIRE_BIT[j])
// Both forms are functionally identical for every key.  A key is correct
// iff K1 == K2 in every block.  Each wrong key corrupts at least one
// critical minterm; a critical minterm is corrupted by an L/M share of the
// wrong keys and a non-critical one by a vanishing share, which is what
// keeps the SAT attack exponential (expected iterations (L*2^N + M)/(L+1)).
//
// The key comes from a tamper-proof key store outside this module.  The
// defaults (32-bit operands, N = 32, M = 4, L = 2, RSAS) follow the paper's
// main configuration; the values of the critical minterms, X_g and the
// flipped product bits are this design's own choices (see sas_pkg).
//
// Purely combinational: p follows a, b and key in the same cycle.
// y_lock exposes each block's output for test and characterisation.
module locked_multiplier #(
  parameter int unsigned          OPW       = sas_pkg::OPW_DEF,
  parameter int unsigned          N         = sas_pkg::N_DEF,
  parameter int unsigned          M         = sas_pkg::M_DEF,
  parameter int unsigned          L         = sas_pkg::L_DEF,
  parameter bit                   ROBUST    = 1'b1,
  parameter logic [M-1:0][N-1:0]  CRIT      = sas_pkg::CRIT_DEF,
  parameter logic [L-1:0][N-1:0]  XG        = sas_pkg::XG_DEF,
  parameter int unsigned          WIRE_BIT [L] = sas_pkg::WIRE_BIT_DEF,
  parameter logic [N-1:0]         XNOR_MASK = '0
) (
  input  logic [OPW-1:0]          a,
  input  logic [OPW-1:0]          b,
  input  logic [L-1:0][2*N-1:0]   key,     // key[j] = {K2, K1} of block j
  output logic [2*OPW-1:0]        p,
  output logic [L-1:0]            y_lock   // Y_SAS,j or Y_RSAS,j
);

  localparam int unsigned MJ = M / L;

  if (!sas_pkg::is_pow2(M) || !sas_pkg::is_pow2(L) || L > M || N > OPW) begin : g_bad_cfg
    $error("locked_multiplier: M and L must be powers of two, L <= M, N <= OPW");
  end

  logic [N-1:0]     x;
  logic [2*OPW-1:0] p_host;

  assign x = b[N-1:0];

  if (ROBUST) begin : g_host_rsas
    logic [L-1:0] inv_unused;
    mul_altered #(
      .OPW(OPW), .N(N), .M(M), .L(L), .CRIT(CRIT), .WIRE_BIT(WIRE_BIT)
    ) u_host (.a(a), .b(b), .p(p_host), .inv(inv_unused));
  end else begin : g_host_sas
    mul_original #(.OPW(OPW)) u_host (.a(a), .b(b), .p(p_host));
  end

  for (genvar j = 0; j < L; j++) begin : g_lock
    if (ROBUST) begin : g_rsas
      rsas_block #(
        .N(N), .MJ(MJ), .CRIT(CRIT[j*MJ +: MJ]), .XG(XG[j]), .XNOR_MASK(XNOR_MASK)
      ) u_blk (
        .x(x), .k1(key[j][N-1:0]), .k2(key[j][2*N-1:N]), .y(y_lock[j])
      );
    end else begin : g_sas
      logic crit_unused;
      sas_block #(
        .N(N), .MJ(MJ), .CRIT(CRIT[j*MJ +: MJ]), .XG(XG[j]), .XNOR_MASK(XNOR_MASK)
      ) u_blk (
        .x(x), .k1(key[j][N-1:0]), .k2(key[j][2*N-1:N]), .y(y_lock[j]), .crit(crit_unused)
      );
    end
  end

  always_comb begin
    p = p_host;
    for (int unsigned j = 0; j < L; j++)
      p[WIRE_BIT[j]] = p[WIRE_BIT[j]] ^ y_lock[j];
  end

endmodule
