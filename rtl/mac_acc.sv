// mac_acc: multiply-and-accumulate unit of a neuron, with an enabled
// accumulator.
//
// Each enabled cycle it adds the product of the input x and the weight w to
// its internal register; when en is low the register keeps its value, which
// is how removed connections are skipped. For binarized weights the
// multiplier is a multiplexer that picks +x (w = 1) or -x (w = 0); for
// ternarized weights it picks 0, +x or -x (w = 2'b00, 2'b01, 2'b1x); only
// WM_FULL builds a signed multiplier. load, which has priority over en,
// starts a new sum from the bias, a choice of this design for the b term of
// y = act(W_s x + b), which the neuron diagram itself does not show.
//
// Timing: acc is registered, so it shows the sum of every input enabled up to
// and including the previous cycle. Inputs and weights are signed two's
// complement; ACC_W defaults to a width that cannot overflow for N inputs.
module mac_acc
  import snn_pkg::*;
#(
  parameter weight_mode_e MODE  = WM_BINARY,
  parameter int unsigned  X_W   = 8,
  parameter int unsigned  W_W   = 8,
  parameter int unsigned  N     = 1024,
  localparam int unsigned WB    = weight_bits(MODE, W_W),
  localparam int unsigned ACC_W = acc_bits(MODE, X_W, W_W, N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,
  input  logic                    en,
  input  logic signed [X_W-1:0]   x,
  input  logic        [WB-1:0]    w,
  input  logic signed [ACC_W-1:0] bias,
  output logic signed [ACC_W-1:0] acc
);

  logic signed [ACC_W-1:0] x_ext, prod;

  assign x_ext = ACC_W'(x);

  always_comb begin
    unique case (MODE)
      WM_BINARY:  prod = w[0] ? x_ext : -x_ext;
      WM_TERNARY: prod = w[WB-1] ? -x_ext : (w[0] ? x_ext : '0);
      default:    prod = ACC_W'(x * $signed(w));
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n)     acc <= '0;
    else if (load)  acc <= bias;
    else if (en)    acc <= acc + prod;
  end

endmodule
