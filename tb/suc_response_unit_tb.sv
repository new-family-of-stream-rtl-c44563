// suc_response_unit_tb: protocol control checked against a stand-in generator.
//
// The generator is replaced by a 223-bit counter that advances when ksg_en
// is high and loads ksg_load_value when ksg_load is high; its keystream bit
// is a hash of the counter. The testbench issues responses and checks:
//   * busy lasts exactly K cycles and y_valid rises K+1 edges after cmd_gen;
//   * y holds the K keystream bits seen while busy, first bit in the MSB;
//   * a matching check gives accept and leaves the state alone;
//   * a mismatching check gives reject, restores the state saved at the
//     start of the response and steps resp_idx back, so the next response
//     repeats the rejected one;
//   * cmd_gen while busy and cmd_check without a response are ignored.
module suc_response_unit_tb;

  localparam int unsigned K  = 128;
  localparam int unsigned RW = 128;
  localparam int unsigned SW = 223;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          cmd_gen = 1'b0, cmd_check = 1'b0;
  logic [RW-1:0] r_t = '0, r_t_dec = '0;
  logic [K-1:0]  y;
  logic          y_valid, busy, accept, reject;
  logic [31:0]   resp_idx;
  logic          ksg_en, ksg_load;
  logic [SW-1:0] ksg_load_value;
  logic [SW-1:0] gen_state = '0;
  logic          z;

  int checks = 0;
  int failures = 0;
  int n_accept = 0, n_reject = 0;

  always #5 clk = ~clk;

  assign z = ^(gen_state * 223'd40503) ^ gen_state[3];

  always_ff @(posedge clk) begin
    if (ksg_load)    gen_state <= ksg_load_value;
    else if (ksg_en) gen_state <= gen_state + 223'd1;
  end

  suc_response_unit #(.K(K), .RW(RW), .SW(SW)) dut (
    .clk, .rst_n, .cmd_gen, .cmd_check, .r_t, .r_t_dec, .y, .y_valid, .busy,
    .accept, .reject, .resp_idx, .ksg_en, .ksg_load, .ksg_load_value,
    .ksg_state(gen_state), .z);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // Issue cmd_gen, collect the expected response, check timing and value.
  task automatic gen(output logic [K-1:0] resp, input bit poke_busy);
    logic [K-1:0] expv;
    int edges, busy_cycles;
    @(negedge clk) cmd_gen = 1'b1;
    @(negedge clk) cmd_gen = 1'b0;
    edges = 1; busy_cycles = 0; expv = '0;
    while (!y_valid) begin
      if (busy) begin
        busy_cycles++;
        expv = {expv[K-2:0], z};
        if (poke_busy && busy_cycles == 10) begin
          cmd_gen = 1'b1;    // must be ignored
        end
      end
      @(negedge clk);
      cmd_gen = 1'b0;
      edges++;
      if (edges > 4 * K) break;
    end
    expect_true(edges == K + 1, $sformatf("y_valid after %0d edges, expected %0d", edges, K + 1));
    expect_true(busy_cycles == K, $sformatf("busy for %0d cycles", busy_cycles));
    expect_true(y == expv, "response differs from collected keystream");
    expect_true(!busy, "still busy after y_valid");
    resp = y;
  endtask

  task automatic check_cmd(bit match, output bit acc, output bit rej);
    @(negedge clk);
    cmd_check = 1'b1;
    r_t = {$urandom, $urandom, $urandom, $urandom};
    r_t_dec = match ? r_t : r_t ^ (128'd1 << $urandom_range(0, 127));
    @(negedge clk);
    cmd_check = 1'b0;
    acc = accept; rej = reject;
    if (acc) n_accept++;
    if (rej) n_reject++;
  endtask

  initial begin
    logic [K-1:0] y0, y1, y1b, y2;
    logic [SW-1:0] s_before;
    bit a, r;
    repeat (2) @(negedge clk);
    gen_state = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    rst_n = 1'b1;

    // check before any response: ignored
    check_cmd(1'b0, a, r);
    expect_true(!a && !r, "check accepted before any response");

    gen(y0, 1'b0);
    expect_true(resp_idx == 1, "resp_idx after first response");
    s_before = gen_state;
    check_cmd(1'b1, a, r);
    expect_true(a && !r, "matching check not accepted");
    expect_true(gen_state == s_before, "state moved on accept");

    // second response, rejected: state must go back to before it
    s_before = gen_state;
    gen(y1, 1'b1);
    expect_true(resp_idx == 2, "resp_idx after second response");
    expect_true(gen_state == s_before + 223'(K), "generator did not advance K steps");
    check_cmd(1'b0, a, r);
    expect_true(!a && r, "mismatching check not rejected");
    expect_true(gen_state == s_before, "state not restored on reject");
    expect_true(resp_idx == 1, "resp_idx not stepped back");
    expect_true(!y_valid, "y_valid still high after reject");

    // the same response again, then accepted
    gen(y1b, 1'b0);
    expect_true(y1b == y1, "response after rollback differs");
    check_cmd(1'b1, a, r);
    expect_true(a, "accept after rollback");
    gen(y2, 1'b0);
    expect_true(y2 != y1 && y2 != y0, "responses repeat");
    expect_true(resp_idx == 3, "resp_idx after third response");

    expect_true(n_accept == 2 && n_reject == 1, "accept/reject counts");
    $display("accepts=%0d rejects=%0d", n_accept, n_reject);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
