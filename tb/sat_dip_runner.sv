// sat_dip_runner: testbench helper that characterises one small locked
// multiplier configuration (4-bit operands, n = 4 locked bits, M critical
// minterms over L blocks) by exhaustive enumeration.
//
// 1. Applies every key (2^(8L)) and every X (16) and records which product
//    bits differ from the true product.
// 2. Input error rates: the number of wrong keys corrupting each X must equal
//    2^(8L) - prod_j (2^8 - f_j(X)), where a block fires on 15 keys of a
//    non-critical X and on (16/MJ)*15 keys of one of its critical minterms.
// 3. Plays the oracle-guided SAT (distinguishing input) attack TRIALS times,
//    picking each distinguishing input uniformly at random among the inputs
//    that still tell surviving keys apart, pruning every key whose output on
//    it differs from the correct one, until none is left.  Checks that each
//    critical minterm was a distinguishing input in every run, that every
//    surviving key is functionally correct, and that the mean iteration count
//    is within 4.5 standard errors (sample estimate) of the expected
//    (L*2^n + M)/(L+1).
module sat_dip_runner #(
  parameter int unsigned         M      = 4,
  parameter int unsigned         L      = 2,
  parameter logic [M-1:0][3:0]   CRIT   = '0,
  parameter int unsigned         TRIALS = 1000
) (
  output bit  done,
  output int  checks,
  output int  failures
);
  localparam int unsigned KW   = 8 * L;       // key bits
  localparam int unsigned NK   = 1 << KW;     // keys
  localparam int unsigned MJ   = M / L;
  localparam int unsigned SLICE        = 16 / MJ;                 // K1 values per critical minterm
  localparam longint      FIRE_CRIT    = 64'(SLICE) * 64'd15;     // keys per block firing on a critical X
  localparam longint      FIRE_NONCRIT = 64'd15;                   // ... on a non-critical X
  localparam logic [3:0][3:0] XG_ALL = {4'hC, 4'h3, 4'hA, 4'h5};
  localparam int unsigned     WB_ALL [4] = '{7, 6, 5, 4};

  function automatic logic [L-1:0][3:0] xg_sel();
    for (int j = 0; j < L; j++) xg_sel[j] = XG_ALL[j];
  endfunction
  function automatic logic [L-1:0][31:0] wb_packed();
    for (int j = 0; j < L; j++) wb_packed[j] = 32'(WB_ALL[j]);
  endfunction
  localparam logic [L-1:0][3:0]  XG = xg_sel();
  localparam logic [L-1:0][31:0] WBP = wb_packed();
  typedef int unsigned wb_t [L];
  function automatic wb_t wb_arr();
    for (int j = 0; j < L; j++) wb_arr[j] = WBP[j];
  endfunction

  logic [3:0]         a, b;
  logic [L-1:0][7:0]  key;
  logic [7:0]         p;
  logic [L-1:0]       y_unused;

  locked_multiplier #(
    .OPW(4), .N(4), .M(M), .L(L), .CRIT(CRIT), .XG(XG), .WIRE_BIT(wb_arr())
  ) dut (.a(a), .b(b), .key(key), .p(p), .y_lock(y_unused));

  logic [15:0] cmask [NK];   // bit x set: key corrupts minterm x

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL (M=%0d L=%0d): %s", M, L, what); end
  endtask

  function automatic bit is_crit(int x, output int blk);
    for (int i = 0; i < M; i++) if (x == int'(CRIT[i])) begin blk = i / int'(MJ); return 1; end
    blk = -1;
    return 0;
  endfunction

  function automatic bit correct_key(int k);
    for (int j = 0; j < L; j++)
      if (((k >> (8*j)) & 15) != ((k >> (8*j + 4)) & 15)) return 0;
    return 1;
  endfunction

  initial begin
    longint cnt [16];
    longint expct, prod_ok, nwrong;
    longint sum_iter, sum_sq;
    int blk, n_crit_missed, n_bad_survivor;
    bit alive [NK];
    int alive_corrupt [16];
    bit was_di [16];
    done = 0; checks = 0; failures = 0;
    foreach (cnt[x]) cnt[x] = 0;
    a = 4'd5;
    for (int k = 0; k < int'(NK); k++) begin
      key = KW'(k);
      cmask[k] = '0;
      for (int x = 0; x < 16; x++) begin
        b = 4'(x); #1;
        if (p != 8'(5 * x)) begin cmask[k][x] = 1'b1; cnt[x]++; end
      end
      if (correct_key(k)) chk(cmask[k] == 0, "correct key corrupts nothing");
    end
    // input error rates against the closed form
    nwrong = longint'(NK) - (longint'(1) << (4 * L));
    for (int x = 0; x < 16; x++) begin
      automatic bit c = is_crit(x, blk);
      prod_ok = 1;
      for (int j = 0; j < int'(L); j++)
        prod_ok *= 64'd256 - ((c && blk == j) ? FIRE_CRIT : FIRE_NONCRIT);
      expct = longint'(NK) - prod_ok;
      chk(cnt[x] == expct, $sformatf("x=%0d corrupting keys %0d expected %0d", x, cnt[x], expct));
      if (c && blk == 0)
        $display("  M=%0d L=%0d: critical minterm %0d IER = %f (L/M = %f)",
                 M, L, x, real'(cnt[x]) / real'(nwrong), real'(L) / real'(M));
    end
    // every wrong key corrupts at least one critical minterm
    for (int k = 0; k < int'(NK); k++) begin
      automatic logic [15:0] cm = 0;
      for (int i = 0; i < int'(M); i++) cm[CRIT[i]] = 1'b1;
      if (!correct_key(k) && (cmask[k] & cm) == 0) chk(0, $sformatf("wrong key %h misses all critical minterms", k));
    end
    checks++;
    // oracle-guided distinguishing-input attack
    sum_iter = 0; sum_sq = 0; n_crit_missed = 0; n_bad_survivor = 0;
    for (int t = 0; t < int'(TRIALS); t++) begin
      automatic int iter = 0;
      foreach (alive_corrupt[x]) alive_corrupt[x] = 0;
      foreach (was_di[x]) was_di[x] = 0;
      for (int k = 0; k < int'(NK); k++) begin
        alive[k] = 1;
        for (int x = 0; x < 16; x++) if (cmask[k][x]) alive_corrupt[x]++;
      end
      forever begin
        automatic int ncand = 0, pick, di = -1;
        for (int x = 0; x < 16; x++) if (alive_corrupt[x] > 0) ncand++;
        if (ncand == 0) break;
        pick = $urandom_range(ncand - 1);
        for (int x = 0; x < 16; x++)
          if (alive_corrupt[x] > 0) begin
            if (pick == 0) begin di = x; break; end
            pick--;
          end
        iter++;
        was_di[di] = 1;
        for (int k = 0; k < int'(NK); k++)
          if (alive[k] && cmask[k][di]) begin
            alive[k] = 0;
            for (int x = 0; x < 16; x++) if (cmask[k][x]) alive_corrupt[x]--;
          end
      end
      sum_iter += longint'(iter);
      sum_sq += longint'(iter) * longint'(iter);
      for (int i = 0; i < int'(M); i++) if (!was_di[CRIT[i]]) n_crit_missed++;
      for (int k = 0; k < int'(NK); k++) if (alive[k] && cmask[k] != 0) n_bad_survivor++;
    end
    begin
      automatic real mean = real'(sum_iter) / real'(TRIALS);
      automatic real expect_iter = real'(L * 16 + M) / real'(L + 1);
      automatic real var_s = real'(sum_sq) / real'(TRIALS) - mean * mean;
      automatic real tol = 4.5 * $sqrt(var_s / real'(TRIALS)) + 0.05;
      $display("  M=%0d L=%0d: mean SAT iterations %f, expected (L*2^n+M)/(L+1) = %f over %0d runs",
               M, L, mean, expect_iter, TRIALS);
      chk(mean > expect_iter - tol && mean < expect_iter + tol,
          $sformatf("mean iteration count %f outside %f +- %f", mean, expect_iter, tol));
    end
    chk(n_crit_missed == 0, "every critical minterm is a distinguishing input");
    chk(n_bad_survivor == 0, "attack ends with a functionally correct key");
    done = 1;
  end
endmodule
