// suc_top_tb: end-to-end run of the SUC unit at its default parameters
// (K = 128-bit responses, 128-bit challenges, the default feedback functions).
//
// The testbench plays the trusted authority and the outside parts of the
// chip. A stand-in for the standard cipher, E_Y(R) = R xor Y, is used on both
// sides; any block cipher would do, the unit only sees the decrypted value.
// Every response and every keystream bit is compared with the reference
// model in ksg_ref_pkg, and the generator state is compared at each step
// boundary. The run goes through:
//   1. an invalid seed (one NLFSR all zeros): seed_invalid must rise;
//   2. enrolment: T responses Y_0..Y_{T-1} recorded by the authority;
//   3. the unit is put back to its seed, then identification rounds:
//      a forged message is rejected and the unit rolls back, the genuine
//      round with the same Y_i is then accepted on both sides;
//   4. update: T new responses sent encrypted under the last one and
//      decrypted by the authority;
//   5. stream mode: bits encrypted with c = p xor z, including a stretch
//      where stream_en stays high during a response and must be ignored.
// Each of these mechanisms is counted and must occur at least once.
module suc_top_tb;
  import ksg_pkg::*;
  import ksg_ref_pkg::*;

  localparam int K = 128;
  localparam int T = 4;

  logic                  clk = 1'b0, rst_n = 1'b0;
  logic                  seed_load = 1'b0;
  logic [STATE_BITS-1:0] seed = '0;
  logic                  seed_invalid;
  logic                  stream_en = 1'b0, p = 1'b0;
  logic                  c, z;
  logic                  cmd_gen = 1'b0, cmd_check = 1'b0;
  logic [127:0]          r_t = '0, r_t_dec = '0;
  logic [K-1:0]          y;
  logic                  y_valid, busy, accept, reject;
  logic [31:0]           resp_idx;

  int checks = 0, failures = 0;
  int n_invalid = 0, n_enrol = 0, n_accept = 0, n_reject = 0, n_rollback = 0;
  int n_update = 0, n_stream = 0, n_stream_blocked = 0;

  always #5 clk = ~clk;

  suc_top dut (.*);

  ksg_model m;
  logic [K-1:0] uir [T];     // the authority's record of this unit

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic logic [K-1:0] model_response();
    logic [K-1:0] v;
    for (int k = 0; k < K; k++) begin
      v = {v[K-2:0], m.z()};
      m.step();
    end
    return v;
  endfunction

  task automatic load_seed(logic [STATE_BITS-1:0] v);
    @(negedge clk) begin seed_load = 1'b1; seed = v; end
    @(negedge clk) seed_load = 1'b0;
    m.load(v);
  endtask

  // One response from the unit; stream_high keeps stream_en up meanwhile.
  task automatic unit_response(output logic [K-1:0] resp, input bit stream_high);
    int edges;
    @(negedge clk) begin cmd_gen = 1'b1; stream_en = stream_high; end
    @(negedge clk) cmd_gen = 1'b0;
    edges = 1;
    while (!y_valid && edges < 4 * K) begin
      if (stream_high && busy) n_stream_blocked++;
      @(negedge clk);
      edges++;
    end
    stream_en = 1'b0;
    expect_true(edges == K + 1, $sformatf("response latency %0d edges, expected %0d", edges, K + 1));
    resp = y;
  endtask

  task automatic unit_check(logic [127:0] rt, logic [127:0] rt_dec, output bit acc, output bit rej);
    @(negedge clk) begin cmd_check = 1'b1; r_t = rt; r_t_dec = rt_dec; end
    @(negedge clk) cmd_check = 1'b0;
    acc = accept; rej = reject;
  endtask

  function automatic logic [127:0] rnd128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  function automatic logic [STATE_BITS-1:0] good_seed();
    logic [STATE_BITS-1:0] v;
    bit ok;
    do begin
      for (int k = 0; k < STATE_BITS; k += 32) v[k +: 32] = $urandom;
      ok = 1'b1;
      for (int i = 0; i < NUM_NLFSR; i++)
        if (((v >> nlfsr_off(i)) & ((223'd1 << nlfsr_len(i)) - 1)) == 0) ok = 1'b0;
    end while (!ok);
    return v;
  endfunction

  initial begin
    logic [STATE_BITS-1:0] s0, bad;
    logic [K-1:0] yr, y_prev;
    logic [127:0] rt, ra, msg;
    bit a, r;
    m = new();
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // 1. invalid seed
    s0 = good_seed();
    bad = s0;
    bad[nlfsr_off(13) +: 21] = '0;        // A_14 all zeros
    load_seed(bad);
    #1;
    if (seed_invalid) n_invalid++;
    expect_true(seed_invalid, "all-zero NLFSR not reported");
    load_seed(s0);
    #1 expect_true(!seed_invalid, "valid seed reported invalid");
    expect_true(dut.u_ksg.state == m.state(), "state after seed load");

    // 2. enrolment
    for (int i = 0; i < T; i++) begin
      unit_response(yr, 1'b0);
      uir[i] = model_response();
      expect_true(yr == uir[i], $sformatf("enrolment response %0d", i));
      expect_true(resp_idx == 32'(i + 1), "resp_idx during enrolment");
      expect_true(dut.u_ksg.state == m.state(), "state after enrolment response");
      n_enrol++;
    end

    // 3. identification, the unit restarted from its seed
    load_seed(s0);
    for (int i = 0; i < 2; i++) begin
      // forged message: R'_T != R_T, unit rejects and keeps S_{i-1}
      rt = rnd128();
      msg = rnd128();
      unit_response(yr, 1'b0);
      unit_check(rt, msg ^ yr, a, r);
      expect_true(r && !a, "forged challenge not rejected");
      if (r) n_reject++;
      expect_true(dut.u_ksg.state == m.state(), "state not rolled back after reject");
      if (dut.u_ksg.state == m.state()) n_rollback++;
      // genuine round with the authority's Y_i
      rt = rnd128();
      msg = rt ^ uir[i];                    // E_{Y_i}(R_T)
      unit_response(yr, 1'b0);
      void'(model_response());
      expect_true(yr == uir[i], $sformatf("identification response %0d", i));
      unit_check(rt, msg ^ yr, a, r);       // unit decrypts with Y'_i
      expect_true(a && !r, "genuine challenge not accepted");
      if (a) n_accept++;
      // unit answers E_{Y_i}(R_A) || R_A; the authority checks it
      ra = rnd128();
      expect_true(((ra ^ yr) ^ uir[i]) == ra, "authority rejects the unit");
    end

    // 4. update: T new responses under the last one (here Y_1)
    y_prev = uir[1];
    for (int i = 0; i < T; i++) begin
      logic [K-1:0] enc;
      unit_response(yr, 1'b0);
      enc = yr ^ y_prev;                    // E_{Y_{t-1}}(Y_i), per block
      uir[i] = enc ^ y_prev;                // authority decrypts and stores
      expect_true(uir[i] == model_response(), $sformatf("update response %0d", i));
      n_update++;
    end

    // 5. stream mode
    for (int t = 0; t < 300; t++) begin
      @(negedge clk) begin stream_en = 1'b1; p = 1'($urandom); end
      #1;
      expect_true(z == m.z() && c == (p ^ m.z()), "stream bit");
      @(posedge clk) m.step();
      n_stream++;
    end
    @(negedge clk) stream_en = 1'b0;
    // stream_en held high during a response: only the response steps
    unit_response(yr, 1'b1);
    expect_true(yr == model_response(), "response with stream_en high");
    #1 expect_true(dut.u_ksg.state == m.state(), "state after blocked stream");

    expect_true(n_invalid > 0, "no invalid seed seen");
    expect_true(n_enrol > 0, "no enrolment");
    expect_true(n_accept > 0, "no accept");
    expect_true(n_reject > 0, "no reject");
    expect_true(n_rollback > 0, "no rollback");
    expect_true(n_update > 0, "no update");
    expect_true(n_stream > 0, "no stream bits");
    expect_true(n_stream_blocked > 0, "stream never blocked by a response");
    $display("invalid=%0d enrol=%0d accept=%0d reject=%0d rollback=%0d update=%0d stream=%0d blocked=%0d",
             n_invalid, n_enrol, n_accept, n_reject, n_rollback, n_update, n_stream, n_stream_blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
