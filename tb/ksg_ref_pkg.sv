// ksg_ref_pkg: testbench reference model of the keystream generator.
//
// The model is written independently of the RTL: it reads the feedback
// functions from the published table's text notation (for example
// "1,(7,10),(9,15)" is x1 + x7 x10 + x9 x15), keeps each NLFSR as a plain
// bit vector that shifts toward cell 0 with the feedback entering the top
// cell, and computes the keystream bit from the algebraic normal form of F.
// Only basic-form feedback functions are modelled. The 223-bit state packing
// (A_1 in the low bits) matches the RTL's.
package ksg_ref_pkg;

  localparam int LEN [16] = '{6, 7, 8, 9, 10, 11, 12, 13, 14, 15, 16, 17, 19, 21, 22, 23};

  localparam string FIRST_TXT [16] = '{
    "1,2,(1,2)", "1,2,(2,6)", "1,5,(1,5)", "1,6,(4,6)", "1,2,(8,9)", "1,9,(1,4)",
    "3,8,(3,9)", "1,11,(5,9)", "1,2,(7,12)", "5,9,(2,11)", "2,13,(2,3)",
    "1,(7,10),(9,15)", "7,10,(6,18)", "1,15,17,19,(13,15)", "1,(4,10),(11,18)",
    "3,(13,19),(18,19)"};

  function automatic bit f_anf(logic [15:0] v);
    bit r;
    r = ^v[7:0];
    r ^= (v[8] & v[10]) ^ (v[9] & v[10]) ^ (v[9] & v[11]);
    r ^= (v[12] & v[14]) ^ (v[13] & v[14]) ^ (v[13] & v[15]);
    r ^= (v[8] & v[9] & v[10]) ^ (v[9] & v[10] & v[11]);
    r ^= v[12] & v[13] & v[14] & v[15];
    return r;
  endfunction

  class ksg_model;
    int          nlin [16];
    int          nprod [16];
    int          lin [16][4];
    int          pa [16][2];
    int          pb [16][2];
    logic [22:0] s [16];

    function new();
      for (int i = 0; i < 16; i++) parse(i, FIRST_TXT[i]);
      for (int i = 0; i < 16; i++) s[i] = 23'd1;
    endfunction

    function void parse(int i, string t);
      int num, inpar, havenum, npend;
      int pend [2];
      nlin[i] = 0; nprod[i] = 0; num = 0; inpar = 0; havenum = 0; npend = 0;
      pend[0] = 0; pend[1] = 0;
      for (int c = 0; c <= t.len(); c++) begin
        byte ch;
        ch = (c < t.len()) ? t[c] : ",";
        if (ch >= "0" && ch <= "9") begin
          num = num * 10 + int'(ch - "0");
          havenum = 1;
        end else begin
          if (havenum) begin
            if (inpar) begin pend[npend] = num; npend++; end
            else begin lin[i][nlin[i]] = num; nlin[i]++; end
          end
          num = 0; havenum = 0;
          if (ch == "(") begin inpar = 1; npend = 0; end
          if (ch == ")") begin
            inpar = 0;
            pa[i][nprod[i]] = pend[0]; pb[i][nprod[i]] = pend[1]; nprod[i]++;
          end
        end
      end
    endfunction

    function void load(logic [222:0] v);
      int off = 0;
      for (int i = 0; i < 16; i++) begin
        s[i] = '0;
        for (int j = 0; j < LEN[i]; j++) s[i][j] = v[off + j];
        off += LEN[i];
      end
    endfunction

    function logic [222:0] state();
      logic [222:0] v;
      int off = 0;
      v = '0;
      for (int i = 0; i < 16; i++) begin
        for (int j = 0; j < LEN[i]; j++) v[off + j] = s[i][j];
        off += LEN[i];
      end
      return v;
    endfunction

    function logic [15:0] x();
      logic [15:0] v;
      for (int i = 0; i < 16; i++) v[i] = s[i][0];
      return v;
    endfunction

    function bit z();
      return f_anf(x());
    endfunction

    function void step();
      for (int i = 0; i < 16; i++) begin
        bit g;
        g = 1'b0;
        for (int k = 0; k < nlin[i]; k++) g ^= s[i][lin[i][k]];
        for (int k = 0; k < nprod[i]; k++) g ^= s[i][pa[i][k]] & s[i][pb[i][k]];
        g ^= s[i][0];
        s[i] = s[i] >> 1;
        s[i][LEN[i] - 1] = g;
      end
    endfunction
  endclass

endpackage
