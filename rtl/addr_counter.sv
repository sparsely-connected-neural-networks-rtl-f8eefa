// addr_counter: read-address counter of a neuron's compressed weight memory.
//
// It counts the connections that have been used so far. clr returns it to 0
// (the first stored weight); en, driven by the SNG bit, advances it by one.
// When the SNG bit is 0 it holds its value, so the next existing connection
// reads the next stored weight. Counting is from 0 to DEPTH-1 here, the
// architecture's "1 ~ (1-p)N" shifted to zero-based addresses; after DEPTH
// counts it wraps to 0 (not reached in normal use, where exactly DEPTH
// connections exist per pass).
module addr_counter #(
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          en,
  output logic [AW-1:0] addr
);

  always_ff @(posedge clk) begin
    if (!rst_n)   addr <= '0;
    else if (clr) addr <= '0;
    else if (en)  addr <= (addr == AW'(DEPTH - 1)) ? '0 : addr + 1'b1;
  end

endmodule
