// nlfsr_tb: checks the NLFSR against the published feedback-function table.
//
// For each of the sixteen lengths it builds the first listed function in all
// four forms (basic, reverse, complement, reverse complement) and the last
// listed function in basic form: 80 registers. Each runs from a random seed
// until its state comes back to the seed, giving up after 2^N steps; the number of steps must be
// exactly 2^N - 1, the maximum period the table promises. For the first
// 3000 steps every register is also compared with a reference model that
// the testbench builds by parsing the table's own text notation
// ("1,2,(2,4)" means x1 + x2 + x2 x4), independently of the package's
// encoded parameters. Finally the excluded state (all zeros, or all ones for
// the complement forms) is loaded: stuck must rise and the state must stay.
module nlfsr_tb;
  import ksg_pkg::*;

  localparam int unsigned NUM_CFG = 5;   // four forms of the first entry, plus the last entry
  localparam int unsigned REF_STEPS = 3000;
  localparam int WATCHDOG = 9_000_000;

  // Table text, element [i] for length nlfsr_len(i).
  localparam string FIRST_TXT [16] = '{
    "1,2,(1,2)", "1,2,(2,6)", "1,5,(1,5)", "1,6,(4,6)", "1,2,(8,9)", "1,9,(1,4)",
    "3,8,(3,9)", "1,11,(5,9)", "1,2,(7,12)", "5,9,(2,11)", "2,13,(2,3)",
    "1,(7,10),(9,15)", "7,10,(6,18)", "1,15,17,19,(13,15)", "1,(4,10),(11,18)",
    "3,(13,19),(18,19)"};
  localparam string LAST_TXT [16] = '{
    "3,(1,4),(3,4)", "1,2,4,5,(2,6)", "1,3,4,7,(3,7)", "2,3,4,7,(2,8)",
    "2,4,6,7,(1,6)", "3,5,6,7,(4,8)", "2,5,6,10,(2,10)", "3,5,7,10,(2,10)",
    "4,6,7,10,(5,13)", "5,6,12,13,(5,9)", "4,8,9,10,(8,12)", "5,6,9,14,(6,14)",
    "5,6,12,14,(2,18)", "4,8,9,11,(3,11)", "5,6,11,15,(9,21)", "3,11,16,18,(4,19)"};
  localparam rff_t [15:0] LAST_RFF = '{
    mk_rff(RFF_F3, FORM_BASIC, 3, 11, 16, 18, 4, 19),
    mk_rff(RFF_F3, FORM_BASIC, 5, 6, 11, 15, 9, 21),
    mk_rff(RFF_F3, FORM_BASIC, 4, 8, 9, 11, 3, 11),
    mk_rff(RFF_F3, FORM_BASIC, 5, 6, 12, 14, 2, 18),
    mk_rff(RFF_F3, FORM_BASIC, 5, 6, 9, 14, 6, 14),
    mk_rff(RFF_F3, FORM_BASIC, 4, 8, 9, 10, 8, 12),
    mk_rff(RFF_F3, FORM_BASIC, 5, 6, 12, 13, 5, 9),
    mk_rff(RFF_F3, FORM_BASIC, 4, 6, 7, 10, 5, 13),
    mk_rff(RFF_F3, FORM_BASIC, 3, 5, 7, 10, 2, 10),
    mk_rff(RFF_F3, FORM_BASIC, 2, 5, 6, 10, 2, 10),
    mk_rff(RFF_F3, FORM_BASIC, 3, 5, 6, 7, 4, 8),
    mk_rff(RFF_F3, FORM_BASIC, 2, 4, 6, 7, 1, 6),
    mk_rff(RFF_F3, FORM_BASIC, 2, 3, 4, 7, 2, 8),
    mk_rff(RFF_F3, FORM_BASIC, 1, 3, 4, 7, 3, 7),
    mk_rff(RFF_F3, FORM_BASIC, 1, 2, 4, 5, 2, 6),
    mk_rff(RFF_F2, FORM_BASIC, 3, 1, 4, 3, 4)};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic run = 1'b0;
  logic load = 1'b0;
  logic excl = 1'b0;          // load the excluded state instead of the seed
  longint unsigned cycles = 0;
  int checks = 0;
  int failures = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;

  logic [16*NUM_CFG-1:0] done;

  for (genvar i = 0; i < 16; i++) begin : g_len
    for (genvar f = 0; f < NUM_CFG; f++) begin : g_cfg
      localparam int unsigned N = nlfsr_len(i);
      localparam rff_t R = (f < 4) ? '{kind: DEFAULT_RFF[i].kind, form: rff_form_e'(f), idx: DEFAULT_RFF[i].idx}
                                   : LAST_RFF[i];
      localparam bit REV   = (f == 1) || (f == 3);
      localparam bit COMPL = (f == 2) || (f == 3);

      logic [N-1:0] seed, st, ref_s;
      logic         x, stuck, en;
      longint unsigned steps;
      int lin [4];
      int pa [2], pb [2];
      int nlin, nprod;

      logic dn = 1'b0;
      logic back;
      // back at the seed, or gave up after 2^N steps (a wrong period)
      assign back = ((steps > 0) && (st == seed)) || (steps >= (64'd1 << N));
      assign en = run && !dn && !back;

      nlfsr #(.N(N), .RFF(R)) dut (
        .clk(clk), .rst_n(rst_n), .en(en), .load(load),
        .load_value(excl ? (COMPL ? {N{1'b1}} : {N{1'b0}}) : seed),
        .state(st), .x(x), .stuck(stuck));

      // Parse the table text into linear terms and product pairs.
      initial begin
        string s;
        int num, inpar, havenum;
        int pend [2];
        int npend;
        s = (f < 4) ? FIRST_TXT[i] : LAST_TXT[i];
        nlin = 0; nprod = 0; num = 0; inpar = 0; havenum = 0; npend = 0;
        pend[0] = 0; pend[1] = 0;
        for (int c = 0; c <= s.len(); c++) begin
          byte ch;
          ch = (c < s.len()) ? s[c] : ",";
          if (ch >= "0" && ch <= "9") begin
            num = num * 10 + int'(ch - "0");
            havenum = 1;
          end else begin
            if (havenum) begin
              if (inpar) begin pend[npend] = num; npend++; end
              else begin lin[nlin] = num; nlin++; end
            end
            num = 0; havenum = 0;
            if (ch == "(") begin inpar = 1; npend = 0; end
            if (ch == ")") begin
              inpar = 0;
              pa[nprod] = pend[0]; pb[nprod] = pend[1]; nprod++;
            end
          end
        end
        seed = N'($urandom);
        if (seed == {N{1'b0}} || seed == {N{1'b1}}) seed = N'(5);
      end

      function automatic logic rbit(logic [N-1:0] s, int j);
        int c;
        c = REV ? int'(N) - j : j;
        return COMPL ? ~s[c] : s[c];
      endfunction

      function automatic logic [N-1:0] ref_next(logic [N-1:0] s);
        logic g;
        g = 1'b0;
        for (int k = 0; k < nlin; k++) g ^= rbit(s, lin[k]);
        for (int k = 0; k < nprod; k++) g ^= rbit(s, pa[k]) & rbit(s, pb[k]);
        return {s[0] ^ g, s[N-1:1]};
      endfunction

      int mism;
      always @(posedge clk) begin
        if (load) begin
          steps <= 0;
          ref_s <= seed;
          mism  <= 0;
        end else if (en) begin
          if (steps < REF_STEPS) begin
            ref_s <= ref_next(ref_s);
          end
          steps <= steps + 1;
          // compare with the model for the first REF_STEPS states
          if (steps < REF_STEPS && st != ref_s) mism <= mism + 1;
        end
      end

      assign done[i*NUM_CFG+f] = dn;
      always @(posedge clk) begin
        if (load) dn <= 1'b0;
        else if (run && back) dn <= 1'b1;
      end
    end
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk) load = 1'b1;
    @(negedge clk) load = 1'b0;
    run = 1'b1;
    wait (&done);
    @(negedge clk) run = 1'b0;
  end

  // report per register once everything is done
  for (genvar i = 0; i < 16; i++) begin : g_rep
    for (genvar f = 0; f < NUM_CFG; f++) begin : g_rc
      initial begin
        wait (rst_n && run);
        wait (!run);
        checks++;
        if (g_len[i].g_cfg[f].steps != (64'd1 << nlfsr_len(i)) - 1) begin
          failures++;
          $display("FAIL A%0d N=%0d cfg %0d: period %0d, expected %0d", i + 1, nlfsr_len(i), f,
                   g_len[i].g_cfg[f].steps, (64'd1 << nlfsr_len(i)) - 1);
        end
        checks++;
        if (g_len[i].g_cfg[f].mism != 0) begin
          failures++;
          $display("FAIL A%0d cfg %0d: %0d mismatches with table model", i + 1, f, g_len[i].g_cfg[f].mism);
        end
      end
    end
  end

  initial begin
    wait (rst_n && run);
    wait (!run);
    repeat (2) @(posedge clk);
    // excluded state: stuck must rise and one step must not leave it
    @(negedge clk) begin excl = 1'b1; load = 1'b1; end
    @(negedge clk) begin load = 1'b0; end
    #1;
    checks++;
    if (!(&stuck_all)) begin
      failures++;
      $display("FAIL stuck flags after loading excluded state: %h", stuck_all);
    end
    run = 1'b1;
    @(negedge clk) run = 1'b0;
    checks++;
    if (!(&stuck_all)) begin
      failures++;
      $display("FAIL excluded state left after one step: %h", stuck_all);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [16*NUM_CFG-1:0] stuck_all;
  for (genvar i = 0; i < 16; i++) begin : g_sk
    for (genvar f = 0; f < NUM_CFG; f++) begin : g_skf
      assign stuck_all[i*NUM_CFG+f] = g_len[i].g_cfg[f].stuck;
    end
  end

endmodule
