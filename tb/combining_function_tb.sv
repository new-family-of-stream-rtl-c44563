// combining_function_tb: exhaustive test of the 16-input combining function.
//
// All 65536 inputs are applied. Each output is compared with the algebraic
// normal form evaluated directly in the testbench. From the resulting truth
// table the testbench then derives, with its own transforms, the
// cryptographic figures published for F: balanced (32768 ones), algebraic
// degree 4 with exactly the 17 listed monomials (Moebius transform),
// nonlinearity 26624 and correlation immunity 8 (fast Walsh-Hadamard
// transform).
module combining_function_tb;

  int checks = 0;
  int failures = 0;

  logic [15:0] x;
  logic        z;

  combining_function dut (.x(x), .z(z));

  bit tt   [65536];
  int w    [65536];
  bit anf  [65536];

  function automatic bit f_ref(logic [15:0] v);
    // v[i-1] is x_i
    bit r;
    r = ^v[7:0];
    r ^= (v[8] & v[10]) ^ (v[9] & v[10]) ^ (v[9] & v[11]);
    r ^= (v[12] & v[14]) ^ (v[13] & v[14]) ^ (v[13] & v[15]);
    r ^= (v[8] & v[9] & v[10]) ^ (v[9] & v[10] & v[11]);
    r ^= v[12] & v[13] & v[14] & v[15];
    return r;
  endfunction

  // Monomials of the published ANF as bit masks over x_1..x_16.
  function automatic bit in_anf(int m);
    int mons [17] = '{16'h0001, 16'h0002, 16'h0004, 16'h0008, 16'h0010, 16'h0020,
                      16'h0040, 16'h0080, 16'h0500, 16'h0600, 16'h0A00, 16'h5000,
                      16'h6000, 16'hA000, 16'h0700, 16'h0E00, 16'hF000};
    foreach (mons[k]) if (mons[k] == m) return 1'b1;
    return 1'b0;
  endfunction

  initial begin : watchdog
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones, mism, maxabs, ci, deg, anf_err;
    ones = 0; mism = 0;
    for (int i = 0; i < 65536; i++) begin
      x = 16'(i);
      #1;
      tt[i] = z;
      if (z != f_ref(16'(i))) mism++;
      ones += int'(z);
    end
    checks++;
    if (mism != 0) begin failures++; $display("FAIL %0d outputs differ from the ANF", mism); end
    checks++;
    if (ones != 32768) begin failures++; $display("FAIL not balanced: %0d ones", ones); end

    // Moebius transform: truth table -> ANF coefficients
    foreach (tt[i]) anf[i] = tt[i];
    for (int h = 1; h < 65536; h <<= 1)
      for (int i = 0; i < 65536; i++)
        if (i & h) anf[i] ^= anf[i ^ h];
    deg = 0; anf_err = 0;
    for (int m = 0; m < 65536; m++) begin
      if (anf[m] && $countones(m) > deg) deg = $countones(m);
      if (anf[m] != in_anf(m)) anf_err++;
    end
    checks++;
    if (deg != 4) begin failures++; $display("FAIL algebraic degree %0d", deg); end
    checks++;
    if (anf_err != 0) begin failures++; $display("FAIL %0d ANF coefficients differ", anf_err); end

    // Walsh-Hadamard transform of (-1)^F
    foreach (tt[i]) w[i] = tt[i] ? -1 : 1;
    for (int h = 1; h < 65536; h <<= 1)
      for (int i = 0; i < 65536; i++)
        if (!(i & h)) begin
          int a, b;
          a = w[i]; b = w[i + h];
          w[i] = a + b; w[i + h] = a - b;
        end
    maxabs = 0;
    foreach (w[i]) if ((w[i] < 0 ? -w[i] : w[i]) > maxabs) maxabs = (w[i] < 0 ? -w[i] : w[i]);
    checks++;
    if ((65536 - maxabs) / 2 != 26624) begin
      failures++; $display("FAIL nonlinearity %0d", (65536 - maxabs) / 2);
    end
    ci = 16;
    for (int m = 1; m < 65536; m++)
      if (w[m] != 0 && $countones(m) - 1 < ci) ci = $countones(m) - 1;
    checks++;
    if (ci != 8) begin failures++; $display("FAIL correlation immunity %0d", ci); end

    $display("F: ones=%0d degree=%0d NL=%0d CI=%0d", ones, deg, (65536 - maxabs) / 2, ci);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
