// ksg: the keystream generator. Sixteen NLFSRs A_1..A_16 of lengths
// 6, 7, ..., 17, 19, 21, 22 and 23 (223 flip-flops) each deliver one bit per
// cycle, x_1..x_16, to the combining function F, whose output is the running
// key Z_t. The plaintext bit P_t is xored with Z_t to give the ciphertext C_t.
//
// The lengths are chosen so that the four registers in F's degree-4 monomial
// (19, 21, 22, 23) are pairwise coprime, which puts the keystream's linear
// complexity above 2^81, and so that the nine shortest registers (correlation
// immunity 8, plus one) hold 90 bits. Only the feedback functions vary from
// chip to chip: RFF_SEL[i] selects the member of S_{N_{i+1}} used by A_{i+1}.
//
// Interface and timing: en steps all sixteen registers together; load writes
// load_value (packing as in ksg_pkg: A_1 in the low bits) in one cycle. z, x
// and c are combinational from the current state, so Z_t belongs to the
// state before the clock edge that advances it. stuck is high when any
// register sits in the state outside its long cycle (for instance a zero
// seed); the seed source must avoid that.
//
// Structure and lengths follow the published block diagram. The packing of
// the state vector and the stuck flag are this design's own choices.
module ksg
  import ksg_pkg::*;
#(
  parameter ksg_pkg::rff_t [ksg_pkg::NUM_NLFSR-1:0] RFF_SEL = ksg_pkg::DEFAULT_RFF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic                  load,
  input  logic [STATE_BITS-1:0] load_value,
  output logic [STATE_BITS-1:0] state,
  output logic [NUM_NLFSR-1:0]  x,
  output logic                  z,
  input  logic                  p,
  output logic                  c,
  output logic                  stuck
);

  logic [NUM_NLFSR-1:0] stuck_i;

  for (genvar i = 0; i < NUM_NLFSR; i++) begin : g_a
    localparam int unsigned N   = nlfsr_len(i);
    localparam int unsigned OFF = nlfsr_off(i);

    nlfsr #(
      .N   (N),
      .RFF (RFF_SEL[i])
    ) u_nlfsr (
      .clk        (clk),
      .rst_n      (rst_n),
      .en         (en),
      .load       (load),
      .load_value (load_value[OFF +: N]),
      .state      (state[OFF +: N]),
      .x          (x[i]),
      .stuck      (stuck_i[i])
    );
  end

  combining_function u_f (
    .x (x),
    .z (z)
  );

  assign c     = p ^ z;
  assign stuck = |stuck_i;

endmodule
