// sparse_layer: a semi-parallel sparsely-connected layer, the top of the
// design.
//
// M sparse_neuron instances run side by side on one shared serial input
// stream x_1..x_N, so the layer computes all M outputs of
// y = ReLU(W_s x + b) in N cycles. Neuron j rebuilds column j of the mask
// with its own LFSR seed (distinct seeds give distinct columns; see
// snn_pkg::neuron_seed) and stores only its DEPTH_j unmasked weights. The
// arrangement, neurons in parallel each working serially, and the default
// size of 1024 inputs by 1024 outputs follow the architecture's example of a
// hidden layer; the default threshold P = 960 (p = 0.9375, 64 stored
// weights per neuron for most seeds) and binarized weights are the most
// compressed case of its neuron results. The load ports are this design's
// own.
//
// Interface:
//   * w_we/w_neuron/w_addr/w_data write weight w_addr of neuron w_neuron;
//     writes to an address beyond that neuron's depth are dropped;
//   * b_we/b_neuron/b_data write a neuron's bias;
//   * start, x_valid, x: as for sparse_neuron, broadcast to every neuron;
//     x_valid low stalls the whole layer;
//   * busy and y_valid are common to all neurons (they run in lockstep);
//     y[j] is the ReLU output of neuron j, valid while y_valid is high.
module sparse_layer
  import snn_pkg::*;
#(
  parameter int unsigned  N     = 1024,
  parameter int unsigned  M     = 1024,
  parameter int unsigned  NB    = $clog2(N),
  parameter int unsigned  P     = 960,
  parameter weight_mode_e MODE  = WM_BINARY,
  parameter int unsigned  X_W   = 8,
  parameter int unsigned  W_W   = 8,
  localparam int unsigned WB    = weight_bits(MODE, W_W),
  localparam int unsigned ACC_W = acc_bits(MODE, X_W, W_W, N),
  localparam int unsigned WAW   = $clog2(N + 1),
  localparam int unsigned MW    = (M > 1) ? $clog2(M) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    w_we,
  input  logic [MW-1:0]           w_neuron,
  input  logic [WAW-1:0]          w_addr,
  input  logic [WB-1:0]           w_data,
  input  logic                    b_we,
  input  logic [MW-1:0]           b_neuron,
  input  logic signed [ACC_W-1:0] b_data,
  input  logic                    start,
  input  logic                    x_valid,
  input  logic signed [X_W-1:0]   x,
  output logic                    busy,
  output logic                    y_valid,
  output logic        [ACC_W-2:0] y [M]
);

  logic [M-1:0] busy_v, valid_v;

  for (genvar j = 0; j < M; j++) begin : g_neuron
    localparam int unsigned SEED  = neuron_seed(j, NB);
    localparam int unsigned DEPTH = mask_ones(SEED, P, NB, N);
    localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;

    logic sel_w, sel_b;
    logic signed [ACC_W-1:0] acc_unused;
    logic conn_unused;

    assign sel_w = w_we && (w_neuron == MW'(j)) && (32'(w_addr) < DEPTH);
    assign sel_b = b_we && (b_neuron == MW'(j));

    sparse_neuron #(
      .N(N), .NB(NB), .P(P), .SEED(SEED), .MODE(MODE), .X_W(X_W), .W_W(W_W)
    ) u_neuron (
      .clk    (clk),
      .rst_n  (rst_n),
      .w_we   (sel_w),
      .w_addr (AW'(w_addr)),
      .w_data (w_data),
      .b_we   (sel_b),
      .b_data (b_data),
      .start  (start),
      .x_valid(x_valid),
      .x      (x),
      .busy   (busy_v[j]),
      .y_valid(valid_v[j]),
      .acc_o  (acc_unused),
      .y      (y[j]),
      .conn_o (conn_unused)
    );
  end

  assign busy    = |busy_v;
  assign y_valid = &valid_v;

  a_lockstep : assert property (@(posedge clk) disable iff (!rst_n)
                                (busy_v == '0 || busy_v == '1) && (valid_v == '0 || valid_v == '1))
    else $error("sparse_layer: neurons out of step");

endmodule
