// lfsr: the LFSR unit of a stochastic number generator.
//
// An NB-bit Fibonacci shift register. Every enabled cycle the register
// shifts one cell towards its least significant end and the XOR of the tap
// cells enters at the most significant end. Read as the fraction
// state/2^NB it walks through all 2^NB-1 nonzero values once per period
// (S_i in (0,1) as the architecture requires); seed 3'b001 at NB=3 gives
// 0.125, 0.5, 0.25, 0.625, 0.75, 0.875, 0.375, the sequence of the
// architecture's 3-bit example, whose taps (cells 2 and 3) are used here.
// Taps for other lengths are standard maximal-length polynomials, a choice
// of this design (see snn_pkg).
//
// Interface: load (priority over en) copies seed into the register on the
// next clock edge; en advances it one step. state is the registered value,
// so the value a cycle uses is the one present before its clock edge.
// Reset loads the seed. A zero seed would lock the register and is flagged
// by an assertion.
module lfsr
  import snn_pkg::*;
#(
  parameter int unsigned NB = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic          en,
  input  logic [NB-1:0] seed,
  output logic [NB-1:0] state
);

  localparam logic [NB-1:0] TAPS = NB'(lfsr_taps(NB));

  logic fb;
  assign fb = ^(state & TAPS);

  always_ff @(posedge clk) begin
    if (!rst_n)     state <= seed;
    else if (load)  state <= seed;
    else if (en)    state <= {fb, state[NB-1:1]};
  end

  initial assert (NB >= 2 && NB <= MAX_NB) else $error("lfsr: NB out of range");

  a_nonzero_seed : assert property (@(posedge clk) disable iff (!rst_n)
                                    load |-> seed != '0)
    else $error("lfsr: zero seed locks the register");

endmodule
