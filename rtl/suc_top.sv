// suc_top: a complete secret-unknown-cipher unit built on the NLFSR
// keystream generator.
//
// The chip holds the 223-bit keystream generator (sixteen NLFSRs with
// per-chip feedback functions and the fixed combining function F) and the
// response unit that runs the identification protocols. It has two uses:
//   * stream mode: while stream_en is high the generator steps every cycle
//     and c = p xor z encrypts (or decrypts) one bit per cycle;
//   * response mode: cmd_gen produces the next K-bit response Y_i, cmd_check
//     compares R_T with the externally decrypted R'_T and on a mismatch
//     rolls the generator back to the state before Y_i.
// A response has priority: stream_en is ignored while busy and in the cycle
// in which cmd_gen is taken, so the saved state is the one the response
// starts from.
//
// What lies outside: the true random number generator provides the initial
// state (seed, loaded with seed_load); the personalisation software fixes
// the feedback functions (parameter RFF_SEL); the standard cipher keyed with
// Y_i computes r_t_dec. seed_invalid reports a seed that puts one of the
// NLFSRs in its excluded state.
//
// Timing: seed_load takes effect at the next edge and has priority over a
// restore. z and c are combinational from the generator state. Response
// timing is that of suc_response_unit (y_valid K+1 edges after cmd_gen).
module suc_top
  import ksg_pkg::*;
#(
  parameter int unsigned K  = 128,
  parameter int unsigned RW = 128,
  parameter ksg_pkg::rff_t [ksg_pkg::NUM_NLFSR-1:0] RFF_SEL = ksg_pkg::DEFAULT_RFF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // seed from the TRNG
  input  logic                  seed_load,
  input  logic [STATE_BITS-1:0] seed,
  output logic                  seed_invalid,
  // stream mode
  input  logic                  stream_en,
  input  logic                  p,
  output logic                  c,
  output logic                  z,
  // protocol commands and results
  input  logic                  cmd_gen,
  input  logic                  cmd_check,
  input  logic [RW-1:0]         r_t,
  input  logic [RW-1:0]         r_t_dec,
  output logic [K-1:0]          y,
  output logic                  y_valid,
  output logic                  busy,
  output logic                  accept,
  output logic                  reject,
  output logic [31:0]           resp_idx
);

  logic                  ru_en, ru_load;
  logic [STATE_BITS-1:0] ru_value, ksg_state;
  logic                  k_en, k_load;
  logic [STATE_BITS-1:0] k_value;

  assign k_en    = ru_en | (stream_en & ~busy & ~cmd_gen);
  assign k_load  = seed_load | ru_load;
  assign k_value = seed_load ? seed : ru_value;

  ksg #(
    .RFF_SEL (RFF_SEL)
  ) u_ksg (
    .clk        (clk),
    .rst_n      (rst_n),
    .en         (k_en),
    .load       (k_load),
    .load_value (k_value),
    .state      (ksg_state),
    .x          (),
    .z          (z),
    .p          (p),
    .c          (c),
    .stuck      (seed_invalid)
  );

  suc_response_unit #(
    .K  (K),
    .RW (RW),
    .SW (STATE_BITS)
  ) u_ru (
    .clk            (clk),
    .rst_n          (rst_n),
    .cmd_gen        (cmd_gen),
    .cmd_check      (cmd_check),
    .r_t            (r_t),
    .r_t_dec        (r_t_dec),
    .y              (y),
    .y_valid        (y_valid),
    .busy           (busy),
    .accept         (accept),
    .reject         (reject),
    .resp_idx       (resp_idx),
    .ksg_en         (ru_en),
    .ksg_load       (ru_load),
    .ksg_load_value (ru_value),
    .ksg_state      (ksg_state),
    .z              (z)
  );

endmodule
