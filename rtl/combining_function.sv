// combining_function: the 16-input Boolean function F that turns the sixteen
// NLFSR output bits into the keystream bit Z_t.
//
// In algebraic normal form (x_i is the output of NLFSR A_i):
//   F = x1+x2+x3+x4+x5+x6+x7+x8
//     + x9x11 + x10x11 + x10x12 + x13x15 + x14x15 + x14x16
//     + x9x10x11 + x10x11x12 + x13x14x15x16
// F is balanced, of degree 4, correlation immune of order 8, with
// nonlinearity 26624 and algebraic immunity 4.
//
// It is split into five 4-input look-up tables, as an FPGA would map it:
// LUT1 and LUT2 hold the linear part (x1..x4, x5..x8), LUT3 the terms in
// x9..x12, LUT4 the terms in x13..x16, and LUT5 xors the four results.
// The input grouping and the five-LUT split follow the published diagram;
// the contents of each LUT are derived from the ANF. Each LUT is written as a
// 16-entry truth table (bit k = value for inputs k, first input as LSB) so
// that the netlist maps one-to-one onto 4-LUTs.
//
// Interface: x[i-1] carries x_i; z is combinational, there is no register.
module combining_function (
  input  logic [15:0] x,
  output logic        z
);

  // Truth tables, index = {d,c,b,a} for LUT inputs (a,b,c,d).
  localparam logic [15:0] TT_LUT1 = 16'h6996;  // a^b^c^d
  localparam logic [15:0] TT_LUT2 = 16'h6996;  // a^b^c^d
  localparam logic [15:0] TT_LUT3 = 16'hECE0;  // ac^bc^bd^abc^bcd   (a..d = x9..x12)
  localparam logic [15:0] TT_LUT4 = 16'h2C60;  // ac^bc^bd^abcd      (a..d = x13..x16)
  localparam logic [15:0] TT_LUT5 = 16'h6996;  // a^b^c^d

  logic [3:0] l;   // outputs of LUT1..LUT4

  assign l[0] = TT_LUT1[x[3:0]];
  assign l[1] = TT_LUT2[x[7:4]];
  assign l[2] = TT_LUT3[x[11:8]];
  assign l[3] = TT_LUT4[x[15:12]];
  assign z    = TT_LUT5[l];

endmodule
