// nlfsr_table_tb: every listed feedback function for lengths 6..17, in all
// four forms, and for length 19, must give the NLFSR its maximum period.
//
// The table of basic feedback functions is kept here in its own text
// notation, one string per length: entries end with ';', "a,b,(c,d)" means
// x_a + x_b + x_c x_d. A constant function parses an entry at elaboration
// time into a ksg_pkg::rff_t (the shape follows from the number of indices
// and of product terms), so every entry becomes one nlfsr parameter set:
// 400 basic functions times four forms, 1600 registers in all.
// All registers start from the reset value 0...01, which lies on the long
// cycle in every form, and run together; each one stops when it is back at
// 0...01 or after 2^N steps. One check per register: the number of steps is
// exactly 2^N - 1. One more check per length: the number of parsed entries
// times four equals the set size |A_i| published for that length.
// Lengths 21, 22 and 23 are left out only to keep the run short; their
// first and last entries are covered by nlfsr_tb.
module nlfsr_table_tb;
  import ksg_pkg::*;

  localparam int NUM_LEN = 13;            // A_1..A_13, N = 6..17 and 19
  localparam int WATCHDOG = 700_000;

  // Published set sizes |A_i| (all four forms).
  localparam int CARD [NUM_LEN] = '{84, 160, 168, 160, 188, 200, 144, 144, 100, 96, 60, 60, 36};

  localparam string TAB [NUM_LEN] = '{
    // N = 6
    {"1,2,(1,2);1,2,(2,4);1,3,(1,5);1,4,(1,4);2,3,(1,3);2,3,(1,5);2,3,(2,3);2,3,(2,4);",
     "1,(1,2),(4,5);1,(1,3),(3,5);1,(2,3),(2,5);2,(1,3),(2,4);2,(1,3),(3,4);2,(1,3),(3,5);",
     "2,(1,5),(2,4);2,(1,5),(4,5);2,(2,3),(3,5);2,(3,4),(3,5);3,(1,4),(2,3);3,(1,4),(2,4);",
     "3,(1,4),(3,4);"},
    // N = 7
    {"1,2,(2,6);1,4,(1,3);1,5,(1,5);1,5,(3,5);1,5,(4,6);2,4,(1,2);2,4,(2,5);1,(1,2),(5,6);",
     "1,(1,5),(3,4);1,(1,6),(4,5);1,(2,3),(3,5);1,(2,5),(3,5);1,(2,5),(4,5);1,(3,4),(4,5);",
     "2,(1,2),(4,6);2,(1,4),(3,4);2,(1,5),(2,6);2,(1,6),(2,4);2,(1,6),(3,6);2,(1,6),(5,6);",
     "2,(2,4),(3,5);2,(2,5),(4,6);2,(2,6),(4,6);2,(3,6),(5,6);3,(1,2),(2,3);3,(1,3),(1,6);",
     "3,(1,4),(3,6);3,(1,5),(3,5);3,(1,6),(3,4);3,(2,3),(4,5);3,(2,5),(3,5);1,2,3,4,(1,6);",
     "1,2,3,4,(2,3);1,2,3,4,(2,6);1,2,3,6,(1,3);1,2,3,6,(1,5);1,2,3,6,(2,6);1,2,4,5,(1,2);",
     "1,2,4,5,(1,5);1,2,4,5,(2,6);"},
    // N = 8
    {"1,5,(1,5);1,6,(1,2);1,6,(1,7);1,6,(2,4);1,6,(4,5);1,6,(5,6);2,5,(2,4);2,5,(3,7);",
     "2,5,(4,5);3,4,(2,4);3,4,(2,7);3,4,(3,4);3,4,(4,6);3,4,(4,7);3,4,(6,7);1,(1,4),(2,4);",
     "1,(1,6),(2,5);1,(2,3),(2,4);1,(2,4),(6,7);1,(3,4),(4,7);2,(1,3),(4,6);2,(1,3),(5,7);",
     "2,(1,5),(6,7);2,(1,7),(2,3);2,(3,7),(6,7);3,(1,2),(2,4);3,(1,4),(2,4);3,(1,6),(3,6);",
     "3,(1,6),(4,6);3,(1,6),(4,7);3,(2,3),(5,6);3,(2,4),(6,7);3,(2,6),(3,7);1,2,3,5,(2,6);",
     "1,2,3,6,(3,5);1,2,3,6,(5,7);1,2,4,5,(2,4);1,2,4,7,(1,5);1,2,5,7,(2,4);1,3,4,7,(1,4);",
     "1,3,4,7,(1,6);1,3,4,7,(3,7);"},
    // N = 9
    {"1,6,(4,6);1,6,(4,8);2,4,(4,5);3,4,(3,7);1,(1,5),(2,5);1,(1,6),(6,7);1,(1,8),(2,7);",
     "1,(1,8),(5,6);1,(2,3),(3,8);1,(2,8),(3,7);1,(3,4),(3,5);1,(3,7),(5,8);2,(1,5),(4,6);",
     "2,(1,6),(2,7);2,(1,8),(3,4);2,(2,7),(4,6);2,(4,7),(5,6);3,(1,2),(4,7);3,(1,6),(1,7);",
     "3,(1,7),(4,8);3,(2,3),(4,7);4,(1,3),(2,8);4,(1,6),(3,6);4,(2,3),(5,8);4,(2,5),(2,8);",
     "4,(2,7),(3,8);4,(2,8),(6,7);4,(3,5),(3,7);1,2,3,4,(3,7);1,2,3,7,(4,6);1,2,4,7,(1,6);",
     "1,2,5,6,(1,6);1,2,5,6,(2,6);1,2,5,8,(2,6);1,2,6,7,(3,6);1,3,4,5,(3,7);1,3,5,7,(5,6);",
     "1,3,5,8,(3,5);1,4,6,7,(1,7);2,3,4,7,(2,8);"},
    // N = 10
    {"1,2,(8,9);1,4,(3,7);1,8,(6,7);2,5,(1,5);4,5,(2,6);4,5,(4,8);4,5,(4,9);1,(1,2),(3,4);",
     "1,(2,4),(2,5);1,(2,8),(7,9);1,(3,8),(4,7);1,(4,8),(6,7);2,(1,3),(4,7);2,(1,4),(3,7);",
     "2,(1,5),(3,5);2,(1,5),(4,9);2,(1,6),(1,7);2,(1,7),(4,6);2,(1,9),(5,9);2,(3,5),(3,7);",
     "2,(3,9),(8,9);3,(1,2),(2,8);3,(1,3),(7,9);3,(1,6),(3,8);3,(1,6),(6,9);3,(2,3),(2,6);",
     "3,(2,7),(8,9);3,(2,8),(7,9);3,(6,7),(8,9);4,(1,3),(1,7);4,(1,3),(7,8);4,(1,3),(7,9);",
     "4,(1,5),(1,9);4,(1,5),(7,9);4,(7,8),(7,9);1,2,4,8,(1,5);1,2,4,8,(2,4);1,2,5,8,(5,9);",
     "1,3,4,7,(3,6);1,3,6,7,(1,6);1,4,5,9,(1,9);1,4,5,9,(4,9);1,4,5,9,(5,9);1,5,6,7,(2,8);",
     "2,3,4,6,(3,6);2,4,5,8,(2,4);2,4,6,7,(1,6);"},
    // N = 11
    {"1,9,(1,4);2,5,(1,9);2,8,(6,9);1,(1,7),(2,8);1,(1,9),(2,7);1,(2,3),(4,5);",
     "1,(2,5),(3,4);1,(2,7),(3,10);1,(3,7),(3,8);1,(3,7),(7,8);2,(4,5),(6,10);",
     "2,(4,6),(9,10);2,(7,9),(8,10);3,(1,6),(8,9);3,(1,9),(5,10);3,(2,7),(5,7);",
     "3,(3,5),(6,9);3,(3,6),(5,8);3,(3,7),(7,10);4,(1,2),(9,10);4,(2,3),(2,10);",
     "4,(3,7),(4,8);5,(1,4),(6,9);5,(2,8),(6,8);5,(4,7),(6,7);1,2,3,5,(4,6);1,2,4,5,(4,6);",
     "1,2,4,7,(2,3);1,2,4,7,(4,9);1,2,4,7,(8,9);1,2,4,10,(1,9);1,2,4,10,(3,9);",
     "1,2,7,8,(1,9);1,2,7,8,(9,10);1,3,4,10,(6,10);1,3,6,8,(6,8);1,3,6,10,(7,9);",
     "1,3,7,9,(1,8);1,4,5,8,(5,7);1,4,7,10,(1,9);1,5,6,8,(5,9);1,5,7,9,(2,8);",
     "1,6,8,9,(2,6);2,3,7,8,(4,10);2,3,7,8,(6,10);2,3,7,8,(7,10);2,4,5,9,(5,9);",
     "3,4,5,6,(2,10);3,4,6,7,(2,3);3,5,6,7,(4,8);"},
    // N = 12
    {"3,8,(3,9);4,7,(1,7);4,7,(4,7);1,(2,3),(3,4);1,(2,5),(3,10);1,(2,8),(6,10);",
     "1,(7,8),(8,10);1,(8,11),(9,10);2,(1,3),(3,6);2,(1,7),(2,8);2,(1,10),(1,11);",
     "2,(2,3),(7,9);2,(3,9),(3,11);2,(3,9),(5,9);2,(5,11),(8,11);2,(7,9),(7,11);",
     "3,(1,8),(7,10);3,(5,11),(6,10);1,2,3,5,(5,9);1,2,5,9,(7,11);1,2,6,11,(2,6);",
     "1,3,6,7,(4,10);1,3,6,9,(1,9);1,3,6,9,(4,10);1,3,7,10,(4,5);1,4,8,10,(2,5);",
     "1,5,6,8,(4,6);1,5,6,8,(6,10);1,5,6,11,(7,8);1,5,7,9,(1,11);1,5,9,10,(6,7);",
     "2,3,4,10,(3,8);2,3,6,8,(3,6);2,3,6,10,(2,6);2,3,6,10,(4,10);2,5,6,10,(2,10);"},
    // N = 13
    {"1,11,(5,9);4,8,(9,10);1,(1,7),(3,7);1,(2,3),(6,11);1,(2,5),(5,11);1,(2,6),(6,8);",
     "1,(2,9),(4,5);2,(1,6),(9,12);2,(7,10),(10,12);3,(1,9),(2,11);3,(4,6),(9,11);",
     "3,(8,9),(9,10);4,(1,3),(4,6);4,(1,3),(10,12);4,(2,9),(8,10);5,(1,5),(4,9);",
     "5,(1,12),(7,11);5,(2,9),(4,5);5,(3,6),(4,9);5,(3,12),(9,11);6,(1,5),(2,12);",
     "1,2,4,5,(1,7);1,2,10,11,(6,12);1,3,4,6,(6,10);1,4,5,10,(4,8);1,5,6,7,(5,9);",
     "1,5,7,9,(8,9);1,5,7,11,(8,10);1,7,10,11,(2,6);1,8,9,10,(8,9);2,3,8,11,(1,10);",
     "2,5,6,11,(8,11);2,6,7,10,(8,12);3,4,5,12,(4,5);3,5,6,10,(8,11);3,5,7,10,(2,10);"},
    // N = 14
    {"1,2,(7,12);1,(2,13),(4,12);1,(5,12),(9,12);2,(1,5),(3,11);3,(1,6),(4,12);",
     "3,(2,4),(6,12);3,(2,12),(6,13);3,(5,10),(7,12);5,(2,4),(6,13);6,(1,13),(5,9);",
     "6,(5,9),(12,13);1,2,3,5,(1,3);1,2,4,7,(1,3);1,4,5,8,(2,8);1,4,5,13,(1,6);",
     "1,4,7,11,(1,11);1,6,10,12,(3,7);1,6,10,12,(7,9);1,7,9,12,(3,13);2,3,5,7,(1,5);",
     "2,3,10,12,(9,10);2,5,6,12,(6,10);2,7,9,11,(11,12);4,5,6,8,(1,4);4,6,7,10,(5,13);"},
    // N = 15
    {"5,9,(2,11);2,(6,8),(12,14);4,(2,11),(7,10);4,(5,6),(5,14);4,(6,10),(9,10);",
     "4,(7,8),(12,14);6,(8,11),(12,13);7,(2,11),(10,13);7,(3,12),(3,13);1,3,7,11,(9,10);",
     "1,4,5,12,(3,4);1,4,6,11,(2,14);1,4,9,10,(7,10);1,5,11,13,(5,11);2,3,9,10,(6,10);",
     "2,3,9,13,(3,7);2,4,10,14,(4,10);3,4,5,10,(3,7);3,5,7,8,(3,13);4,5,7,10,(1,14);",
     "4,8,12,14,(5,6);4,9,11,14,(1,13);5,6,11,14,(5,8);5,6,12,13,(5,9);"},
    // N = 16
    {"2,13,(2,3);3,(1,5),(5,7;3,(2,13),(7,14);5,(4,8),(6,12);5,(4,12),(7,8);",
     "7,(2,6),(10,13);7,(8,14),(11,12);1,2,3,9,(6,14);1,5,13,14,(14,15);1,11,12,13,(5,15);",
     "2,5,10,14,(6,14);2,6,11,12,(14,15);2,7,8,10,(3,6);2,7,8,13,(3,15);4,8,9,10,(8,12);"},
    // N = 17
    {"1,(7,10),(9,15);3,(6,9),(13,14);5,(4,7),(6,13);6,(2,9),(7,12);7,(1,8),(9,14);",
     "8,(10,12),(11,16);1,3,9,12,(7,13);1,3,12,14,(2,10);1,5,9,11,(1,13);1,7,11,13,(6,14);",
     "2,4,9,12,(6,16);3,6,7,10,(9,15);3,8,11,12,(3,11);4,6,10,16,(3,11);5,6,9,14,(6,14);"},
    // N = 19
    {"7,10,(6,18);9,12,(1,13);2,(6,8),(8,10);4,(5,16),(7,14);6,(4,8),(17,18);",
     "1,4,5,8,(5,15);1,4,8,17,(1,13);3,7,9,16,(3,17);5,6,12,14,(2,18);"}
  };

  function automatic int count_entries(string s);
    int n = 0;
    for (int c = 0; c < s.len(); c++) if (s[c] == ";") n++;
    return n;
  endfunction

  // first flat register index of length i
  function automatic int base(int i);
    int b = 0;
    for (int j = 0; j < i; j++) b += 4 * count_entries(TAB[j]);
    return b;
  endfunction

  // Entry k of string s as a feedback function in the given form.
  function automatic rff_t parse_entry(string s, int k, rff_form_e form);
    int e = 0, num = 0, n = 0, nprod = 0;
    bit have = 1'b0;
    logic [4:0] v [6];
    rff_kind_e kind;
    for (int j = 0; j < 6; j++) v[j] = '0;
    for (int c = 0; c < s.len(); c++) begin
      byte ch = s[c];
      if (e == k) begin
        if (ch >= "0" && ch <= "9") begin
          num = num * 10 + int'(ch) - int'("0");
          have = 1'b1;
        end else begin
          if (have && n < 6) begin v[n] = 5'(num); n++; end
          num = 0;
          have = 1'b0;
          if (ch == "(") nprod++;
        end
      end
      if (ch == ";") e++;
    end
    kind = (nprod == 2) ? RFF_F2 : ((n == 6) ? RFF_F3 : RFF_F1);
    return mk_rff(kind, form, v[0], v[1], v[2], v[3], v[4], v[5]);
  endfunction

  localparam int TOTAL = base(NUM_LEN);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic run = 1'b0;
  logic [TOTAL-1:0] done, ok;
  int checks = 0;
  int failures = 0;

  always #5 clk = ~clk;

  for (genvar i = 0; i < NUM_LEN; i++) begin : g_len
    localparam int unsigned N = nlfsr_len(i);
    localparam int NE = count_entries(TAB[i]);
    localparam int BASE = base(i);
    for (genvar k = 0; k < NE; k++) begin : g_ent
      for (genvar f = 0; f < 4; f++) begin : g_form
        localparam int IDX = BASE + 4 * k + f;
        localparam rff_t R = parse_entry(TAB[i], k, rff_form_e'(f));
        logic [N-1:0] st;
        logic         x, stuck, en, dn;
        int unsigned  steps;

        assign dn = (steps != 0 && st == N'(1)) || (steps >= (32'd1 << N));
        assign en = run && !dn;

        nlfsr #(.N(N), .RFF(R), .INIT(1)) dut (
          .clk(clk), .rst_n(rst_n), .en(en), .load(1'b0), .load_value('0),
          .state(st), .x(x), .stuck(stuck));

        always_ff @(posedge clk or negedge rst_n) begin
          if (!rst_n)  steps <= 0;
          else if (en) steps <= steps + 1;
        end

        assign done[IDX] = dn;
        assign ok[IDX]   = (steps == (32'd1 << N) - 1);
      end
    end
  end

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nbad;
    for (int i = 0; i < NUM_LEN; i++) begin
      checks++;
      if (4 * count_entries(TAB[i]) != CARD[i]) begin
        failures++;
        $display("FAIL N=%0d: %0d entries parsed, |A| = %0d", nlfsr_len(i), count_entries(TAB[i]), CARD[i]);
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk) run = 1'b1;
    wait (&done);
    @(negedge clk) run = 1'b0;
    nbad = 0;
    for (int i = 0; i < NUM_LEN; i++) begin
      for (int r = base(i); r < base(i + 1); r++) begin
        checks++;
        if (!ok[r]) begin
          failures++;
          nbad++;
          if (nbad < 20)
            $display("FAIL N=%0d entry %0d form %0d: period is not 2^N-1", nlfsr_len(i), (r - base(i)) / 4, (r - base(i)) % 4);
        end
      end
    end
    $display("%0d registers, %0d without maximum period", TOTAL, nbad);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
