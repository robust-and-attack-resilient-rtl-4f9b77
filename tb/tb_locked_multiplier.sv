// tb_locked_multiplier: end-to-end test of the locked multiplier at its
// default configuration (32-bit operands, N = 32 locked bits, M = 4 critical
// minterms, L = 2 RSAS blocks).  The reference is written out here
// independently of the RTL: block 0 owns operand values 1 and 32'hFFFF_FFFF,
// block 1 owns 2 and 32'hFFFF_FFFE; X_g is 32'h5A5A_C3C3 / 32'hA5C3_0F96; a
// critical minterm owns the K1 values whose bit 31, xored with bit 31 of X_g,
// equals its own bit 31; blocks flip product bits 31 / 30.
//
// Mechanisms driven and counted (each must occur at least once):
//   correct key, ordinary operands    -> true product
//   correct key, critical operand     -> true product, restored by Y_RSAS = 1
//   wrong key, non-critical minterm with K1 = X ^ X_g -> that block's bit flips
//   wrong key, critical minterm with K1 in its slice  -> that block's bit flips
//   wrong key, ordinary operand       -> usually the true product
//   every random wrong key corrupts at least one critical minterm
//   removal attack: lock outputs tied to 0 leave every critical product wrong
module tb_locked_multiplier;
  int checks = 0, failures = 0;
  int n_ok_plain = 0, n_ok_crit = 0, n_nc_corrupt = 0, n_crit_corrupt = 0;
  int n_wrong_harmless = 0, n_wrong_key_caught = 0, n_removal = 0;
  logic clk = 0;
  int unsigned cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  logic [31:0]        a, b;
  logic [1:0][63:0]   key;
  logic [63:0]        p;
  logic [1:0]         y_lock;

  locked_multiplier dut (.a(a), .b(b), .key(key), .p(p), .y_lock(y_lock));

  // the altered host circuit on its own = the design after a removal attack
  logic [63:0] p_removed;
  logic [1:0]  inv_unused;
  mul_altered u_removed (.a(a), .b(b), .p(p_removed), .inv(inv_unused));

  localparam logic [31:0] XG0 = 32'h5A5A_C3C3, XG1 = 32'hA5C3_0F96;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // index of x within block j's critical minterms, -1 if none
  function automatic int cidx(int j, logic [31:0] x);
    if (j == 0) return (x == 32'd1) ? 0 : (x == 32'hFFFF_FFFF) ? 1 : -1;
    return (x == 32'd2) ? 0 : (x == 32'hFFFF_FFFE) ? 1 : -1;
  endfunction

  function automatic bit sas_ref(int j, logic [31:0] x, logic [63:0] k);
    logic [31:0] k1 = k[31:0], k2 = k[63:32];
    int i = cidx(j, x);
    logic [31:0] xg = (j == 0) ? XG0 : XG1;
    return (k1 != k2) && (((i >= 0) && ((k1[31] ^ xg[31]) == x[31])) || (k1 == (x ^ xg)));
  endfunction

  function automatic logic [63:0] prod_ref(logic [31:0] av, logic [31:0] bv, logic [1:0][63:0] k);
    logic [63:0] e = longint'({32'd0, av}) * longint'({32'd0, bv});
    if (sas_ref(0, bv, k[0])) e[31] = ~e[31];
    if (sas_ref(1, bv, k[1])) e[30] = ~e[30];
    return e;
  endfunction

  task automatic apply(logic [31:0] av, logic [31:0] bv, logic [1:0][63:0] k);
    a = av; b = bv; key = k; #1;
    chk(p == prod_ref(av, bv, k), $sformatf("a=%h b=%h key=%h p=%h", av, bv, k, p));
    for (int j = 0; j < 2; j++)
      chk(y_lock[j] == (sas_ref(j, bv, k[j]) ^ (cidx(j, bv) >= 0)), "Y_RSAS");
  endtask

  function automatic logic [63:0] rand_key_half_pair();
    logic [31:0] h = $urandom;
    return {h, h};
  endfunction

  initial begin
    logic [1:0][63:0] kc, kw;
    logic [31:0] crit [4] = '{32'd1, 32'hFFFF_FFFF, 32'd2, 32'hFFFF_FFFE};
    logic [31:0] x, k1;
    logic [63:0] truth;
    bit any;

    // 1. correct keys (K1 == K2 in both blocks), ordinary and critical operands
    for (int r = 0; r < 2000; r++) begin
      kc = {rand_key_half_pair(), rand_key_half_pair()};
      x = (r % 5 == 0) ? crit[r % 4] : $urandom;
      apply($urandom, x, kc);
      truth = longint'({32'd0, a}) * longint'({32'd0, b});
      chk(p == truth, "correct key gives the true product");
      if (x == 32'd1 || x == 32'd2 || x == 32'hFFFF_FFFE || x == 32'hFFFF_FFFF) begin
        if (y_lock != 2'b00) n_ok_crit++;
      end else n_ok_plain++;
    end

    // 2. wrong key that hits one non-critical minterm (K1 = X ^ X_g)
    for (int r = 0; r < 500; r++) begin
      int j = r % 2;
      x = $urandom;
      if (cidx(0, x) >= 0 || cidx(1, x) >= 0) continue;
      k1 = x ^ ((j == 0) ? XG0 : XG1);
      kc = {rand_key_half_pair(), rand_key_half_pair()};
      kc[j] = {k1 ^ 32'(1 + $urandom_range(1000)), k1};
      apply($urandom, x, kc);
      truth = longint'({32'd0, a}) * longint'({32'd0, b});
      chk(p == (truth ^ (64'd1 << (31 - j))), "non-critical minterm corrupted on its wire");
      if (p != truth) n_nc_corrupt++;
    end

    // 3. wrong key, critical minterm, K1 inside the minterm's slice
    for (int r = 0; r < 500; r++) begin
      int ci = r % 4;
      int j = ci / 2;
      kc = {rand_key_half_pair(), rand_key_half_pair()};
      k1 = $urandom;
      k1[31] = crit[ci][31] ^ ((j == 0) ? XG0[31] : XG1[31]);
      kc[j] = {~k1, k1};
      apply($urandom, crit[ci], kc);
      truth = longint'({32'd0, a}) * longint'({32'd0, b});
      chk(p == (truth ^ (64'd1 << (31 - j))), "critical minterm corrupted on its wire");
      if (p != truth) n_crit_corrupt++;
    end

    // 4. random wrong keys on ordinary operands; and every wrong key must
    //    corrupt at least one critical minterm
    for (int r = 0; r < 1000; r++) begin
      kw = {{32'($urandom), 32'($urandom)}, {32'($urandom), 32'($urandom)}};
      if (kw[0][31:0] == kw[0][63:32] && kw[1][31:0] == kw[1][63:32]) continue;
      x = $urandom;
      apply($urandom | 32'd1, x, kw);
      if (p == longint'({32'd0, a}) * longint'({32'd0, b})) n_wrong_harmless++;
      any = 0;
      foreach (crit[i]) begin
        apply(32'h0000_0001 + 32'($urandom_range(100000)), crit[i], kw);
        if (p != longint'({32'd0, a}) * longint'({32'd0, b})) any = 1;
      end
      chk(any, "wrong key corrupts at least one critical minterm");
      if (any) n_wrong_key_caught++;
    end

    // 5. removal attack on the altered host circuit
    foreach (crit[i]) begin
      a = $urandom; b = crit[i]; #1;
      truth = longint'({32'd0, a}) * longint'({32'd0, b});
      chk(p_removed != truth, "removed lock leaves critical product wrong");
      if (p_removed != truth) n_removal++;
    end

    $display("mechanisms: ok_plain=%0d ok_crit_restored=%0d noncrit_corrupt=%0d crit_corrupt=%0d wrong_harmless=%0d wrong_key_caught=%0d removal=%0d",
             n_ok_plain, n_ok_crit, n_nc_corrupt, n_crit_corrupt, n_wrong_harmless, n_wrong_key_caught, n_removal);
    chk(n_ok_plain > 0, "mechanism: correct key, ordinary operand");
    chk(n_ok_crit > 0, "mechanism: correct key restores critical operand");
    chk(n_nc_corrupt > 0, "mechanism: non-critical corruption");
    chk(n_crit_corrupt > 0, "mechanism: critical corruption");
    chk(n_wrong_harmless > 0, "mechanism: wrong key harmless on ordinary operand");
    chk(n_wrong_key_caught > 0, "mechanism: wrong key caught on critical minterms");
    chk(n_removal == 4, "mechanism: removal attack fails");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cyc == 1000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
