// sng: stochastic number generator that rebuilds one column of the
// connection mask M.
//
// It pairs an LFSR (module lfsr) with the comparator "in >= p": the output
// bit is 1 when the LFSR value S = state/2^NB is at least the threshold p,
// and 0 otherwise. A 1 means the connection to the current input exists and
// its weight is the next one in the neuron's compressed memory; a 0 means the
// connection was removed. p is given as the NB-bit code P = p*2^NB, so the
// comparison is an unsigned integer one. P = 0 makes every bit 1 (a fully
// connected neuron).
//
// Interface and timing: load restarts the sequence at seed; en advances it.
// bit_o and value_o are combinational from the current LFSR state, so bit_o
// belongs to the input presented in the same cycle, before the step.
module sng
  import snn_pkg::*;
#(
  parameter int unsigned NB = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic          en,
  input  logic [NB-1:0] seed,
  input  logic [NB-1:0] p_code,
  output logic [NB-1:0] value_o,
  output logic          bit_o
);

  lfsr #(.NB(NB)) u_lfsr (
    .clk  (clk),
    .rst_n(rst_n),
    .load (load),
    .en   (en),
    .seed (seed),
    .state(value_o)
  );

  assign bit_o = (value_o >= p_code);

endmodule
