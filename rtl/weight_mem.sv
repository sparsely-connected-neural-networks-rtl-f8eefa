// weight_mem: a neuron's compressed weight memory (one column of W_c).
//
// It holds only the weights whose connection survives the mask, in the order
// the inputs arrive, so its depth is (1-p)N instead of N. The array is
// written through a synchronous write port (used to load a trained network)
// and read asynchronously at the address from addr_counter, so the weight
// for a connection is available in the same cycle as its input. The
// asynchronous read, a register-file memory, is a choice of this design; the
// architecture gives only the memory's contents and depth.
module weight_mem #(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned W     = 1,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[waddr] <= wdata;
  end

  assign rdata = (32'(raddr) < DEPTH) ? mem[raddr] : '0;

endmodule
