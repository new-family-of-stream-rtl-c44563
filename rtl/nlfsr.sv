// nlfsr: one N-bit Fibonacci NLFSR A_i with a random feedback function.
//
// Cells are numbered N-1 .. 0. Every step each cell takes the value of the
// cell above it, cell 0 is the output x_i, and cell N-1 receives
//     x_0 xor RFF(x_1, ..., x_{N-1}).
// RFF is one member of the set S_N (see ksg_pkg), given by the RFF
// parameter. For the complement forms g reads the inverted cells, so the
// register produces the bitwise complement of the basic sequence; its one
// state outside the long cycle is then all ones instead of all zeros.
// Every member of S_N gives period 2^N - 1.
//
// Interface and timing: one step per rising clk edge while en is high; load
// (priority over en) writes load_value in one cycle; rst_n (asynchronous,
// active low) sets INIT. x and state come straight from the flip-flops.
// stuck is high when the register sits in its excluded state, from which it
// would never leave.
//
// The structure (cell numbering, where the feedback enters, the output
// taken from cell 0, RFF reading cells 1..N-1) follows the published NLFSR
// diagram and table. The load port, the reset value and the stuck flag are
// this design's own additions so that a seed can be loaded and checked.
module nlfsr
  import ksg_pkg::*;
#(
  parameter int unsigned      N    = 6,
  parameter ksg_pkg::rff_t    RFF  = ksg_pkg::mk_rff(ksg_pkg::RFF_F1, ksg_pkg::FORM_BASIC, 1, 2, 1, 2),
  parameter logic [N-1:0]     INIT = N'(1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic         load,
  input  logic [N-1:0] load_value,
  output logic [N-1:0] state,
  output logic         x,
  output logic         stuck
);

  localparam bit REV   = (RFF.form == FORM_REVERSE)    || (RFF.form == FORM_REV_COMPL);
  localparam bit COMPL = (RFF.form == FORM_COMPLEMENT) || (RFF.form == FORM_REV_COMPL);
  localparam int unsigned NLIN  = rff_nlin(RFF.kind);
  localparam int unsigned NPROD = rff_nprod(RFF.kind);

  // Indices of the table must name one of the cells 1..N-1.
  for (genvar k = 0; k < 6; k++) begin : g_idx_check
    if (k < rff_nidx(RFF.kind) && (32'(RFF.idx[k]) < 1 || 32'(RFF.idx[k]) > N - 1)) begin : g_bad
      $error("nlfsr: RFF index %0d out of range 1..%0d", RFF.idx[k], N - 1);
    end
  end

  // Cell that variable x_j of the table refers to, after the reverse mapping.
  function automatic int unsigned cidx(logic [4:0] j);
    return REV ? N - 32'(j) : 32'(j);
  endfunction

  logic [N-1:0] v;      // cells as seen by g (inverted for complement forms)
  logic         g;      // RFF output
  logic         fb;     // new value of cell N-1

  assign v = COMPL ? ~state : state;

  always_comb begin
    g = 1'b0;
    for (int unsigned k = 0; k < NLIN; k++)
      g ^= v[cidx(RFF.idx[k])];
    for (int unsigned p = 0; p < NPROD; p++)
      g ^= v[cidx(RFF.idx[NLIN + 2*p])] & v[cidx(RFF.idx[NLIN + 2*p + 1])];
  end

  assign fb = state[0] ^ g;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     state <= INIT;
    else if (load)  state <= load_value;
    else if (en)    state <= {fb, state[N-1:1]};
  end

  assign x     = state[0];
  assign stuck = COMPL ? (&state) : ~(|state);

endmodule
