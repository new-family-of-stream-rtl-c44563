// ksg_tb: the keystream generator against an independent reference model.
//
// A random 223-bit seed is loaded, then for 20000 cycles the enable and the
// plaintext bit are driven at random. Every cycle the state, the sixteen
// NLFSR outputs, Z_t and C_t = P_t xor Z_t are compared with the model in
// ksg_ref_pkg. Halfway through a second random seed is loaded to check the
// load path in the middle of a run. The stuck flag is checked low for a
// valid seed and high after a seed whose A_9 field is all zeros.
// One keystream bit per enabled cycle is the generator's rate: the model
// is stepped exactly once per enabled clock edge.
module ksg_tb;
  import ksg_pkg::*;
  import ksg_ref_pkg::*;

  localparam int CYCLES = 20000;

  logic                  clk = 1'b0;
  logic                  rst_n = 1'b0;
  logic                  en = 1'b0, load = 1'b0, p = 1'b0;
  logic [STATE_BITS-1:0] load_value = '0;
  logic [STATE_BITS-1:0] state;
  logic [NUM_NLFSR-1:0]  x;
  logic                  z, c, stuck;

  int checks = 0;
  int failures = 0;
  int steps = 0;

  always #5 clk = ~clk;

  ksg dut (.clk, .rst_n, .en, .load, .load_value, .state, .x, .z, .p, .c, .stuck);

  ksg_model m;

  initial begin : watchdog
    repeat (CYCLES + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [STATE_BITS-1:0] rand_seed();
    logic [STATE_BITS-1:0] v;
    for (int k = 0; k < STATE_BITS; k += 32) v[k +: 32] = $urandom;
    return v;   // a zero 6..23-bit field has probability below 2^-6 per seed
  endfunction

  task automatic check(string what);
    checks++;
    if (state !== m.state() || x !== m.x() || z !== m.z() || c !== (p ^ m.z())) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s at step %0d: z=%b model=%b x=%h model=%h", what, steps, z, m.z(), x, m.x());
    end
  endtask

  task automatic load_seed(logic [STATE_BITS-1:0] v);
    @(negedge clk);
    load = 1'b1; load_value = v; en = 1'b1;
    @(negedge clk);
    load = 1'b0; en = 1'b0;
    m.load(v);
  endtask

  initial begin
    logic [STATE_BITS-1:0] sd;
    m = new();
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    do sd = rand_seed(); while (!valid(sd));
    load_seed(sd);
    #1 check("after load");
    checks++;
    if (stuck) begin failures++; $display("FAIL stuck high for a valid seed"); end

    for (int t = 0; t < CYCLES; t++) begin
      if (t == CYCLES / 2) begin
        do sd = rand_seed(); while (!valid(sd));
        load_seed(sd);
        #1 check("after reload");
      end
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      p  = 1'($urandom);
      #1 check("comb");
      @(posedge clk);
      if (en) begin m.step(); steps++; end
      #1;
    end
    @(negedge clk) en = 1'b0;
    #1 check("end");

    // stuck: A_9 (bits 75..88) all zeros
    sd = m.state();
    sd[nlfsr_off(8) +: 14] = '0;
    load_seed(sd);
    #1;
    checks++;
    if (!stuck) begin failures++; $display("FAIL stuck low with an all-zero NLFSR"); end

    $display("steps=%0d", steps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit valid(logic [STATE_BITS-1:0] v);
    for (int i = 0; i < NUM_NLFSR; i++) begin
      logic [22:0] f;
      f = 23'(v >> nlfsr_off(i)) & 23'((1 << nlfsr_len(i)) - 1);
      if (f == 0) return 1'b0;
    end
    return 1'b1;
  endfunction

endmodule
