// tb_sas_h_function: checks the input-steering function H exhaustively at
// N = 6 with two and with four critical minterms, and with an XNOR mask.
// Counted, not recomputed: for each X, the number of K1 values for which
// the g input (X' ^ K1 ^ mask) hits X_g must be 1 for a non-critical
// minterm and exactly 2^N/MJ for a critical one; every K1 value must steer exactly one critical minterm
// (the slices partition the K1 space); the pass-through key X ^ X_g ^ mask of
// a critical minterm lies in its own slice; non-steered inputs pass through.
module tb_sas_h_function;
  int checks = 0, failures = 0;
  logic clk = 0;
  int unsigned cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  localparam logic [5:0] XG   = 6'h2D;
  localparam logic [5:0] MASK = 6'b100101;
  localparam logic [1:0][5:0] CRIT2 = {6'd40, 6'd7};
  localparam logic [3:0][5:0] CRIT4 = {6'd63, 6'd20, 6'd45, 6'd1};

  logic [5:0] x, k1;
  logic [5:0] xp2, xp4;
  logic c2, c4, s2, s4;

  sas_h_function #(.N(6), .MJ(2), .CRIT(CRIT2), .XG(XG), .XNOR_MASK(MASK))
    dut2 (.x(x), .k1(k1), .x_prime(xp2), .crit(c2), .steer(s2));
  sas_h_function #(.N(6), .MJ(4), .CRIT(CRIT4), .XG(XG), .XNOR_MASK('0))
    dut4 (.x(x), .k1(k1), .x_prime(xp4), .crit(c4), .steer(s4));

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // index of x among the critical minterms, -1 if none
  function automatic int idx2(logic [5:0] v);
    return (v == 6'd7) ? 0 : (v == 6'd40) ? 1 : -1;
  endfunction
  function automatic int idx4(logic [5:0] v);
    case (v) 6'd1: return 0; 6'd45: return 1; 6'd20: return 2; 6'd63: return 3;
      default: return -1; endcase
  endfunction

  initial begin
    int hits2, hits4, exp2, exp4;
    int steered2 [64];
    int steered4 [64];
    for (int k = 0; k < 64; k++) begin steered2[k] = 0; steered4[k] = 0; end
    for (int xi = 0; xi < 64; xi++) begin
      hits2 = 0; hits4 = 0;
      for (int ki = 0; ki < 64; ki++) begin
        x = 6'(xi); k1 = 6'(ki); #1;
        if ((xp2 ^ k1 ^ MASK) == XG) hits2++;
        if ((xp4 ^ k1) == XG) hits4++;
        if (s2) steered2[ki]++;
        if (s4) steered4[ki]++;
        if (!s2) chk(xp2 == x, "pass-through (MJ=2)");
        if (idx2(x) >= 0 && k1 == (x ^ XG ^ MASK)) chk(s2, "own pass-through key in slice (MJ=2)");
        if (idx4(x) >= 0 && k1 == (x ^ XG)) chk(s4, "own pass-through key in slice (MJ=4)");
        if (!s4) chk(xp4 == x, "pass-through (MJ=4)");
        chk(c2 == (idx2(x) >= 0) && c4 == (idx4(x) >= 0), "crit flag");
      end
      // expected hit counts
      if (idx2(6'(xi)) < 0) exp2 = 1;
      else exp2 = 32;
      if (idx4(6'(xi)) < 0) exp4 = 1;
      else exp4 = 16;
      chk(hits2 == exp2, $sformatf("MJ=2 x=%0d hits=%0d exp=%0d", xi, hits2, exp2));
      chk(hits4 == exp4, $sformatf("MJ=4 x=%0d hits=%0d exp=%0d", xi, hits4, exp4));
    end
    // slices of the critical minterms partition the K1 space
    for (int k = 0; k < 64; k++) begin
      chk(steered2[k] == 1, $sformatf("MJ=2 K1=%0d steers %0d minterms", k, steered2[k]));
      chk(steered4[k] == 1, $sformatf("MJ=4 K1=%0d steers %0d minterms", k, steered4[k]));
    end
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
