// sparse_neuron: one neuron of a sparsely-connected layer.
//
// The neuron computes y = ReLU(b + sum_i M_i * W_i * x_i) over N inputs that
// arrive one per clock. The connection mask column M is not stored: an SNG
// (LFSR plus "in >= p" comparator) regenerates it, one bit per input. The
// same bit enables both the weight-address counter and the accumulator. On a
// 1 the current input is multiplied by the weight at the counter's address
// (binarized weights: a +x/-x multiplexer) and added, and the counter moves
// to the next weight; on a 0 both hold. The weight memory therefore holds
// only the DEPTH = (1-p)N weights of existing connections, in input order,
// and the latency stays N cycles, the same as a fully-connected neuron.
// This structure follows the architecture; the bias, the start/valid
// handshake and the flag logic are this design's own.
//
// Parameters: N inputs, an NB-bit LFSR (log2 N by default), threshold code
// P = p*2^NB, LFSR seed SEED, weight mode MODE (binarized by default, as in
// the synthesized neuron), input width X_W and, for WM_FULL, weight width
// W_W. DEPTH is derived: the number of 1s the SNG gives in N steps from
// SEED. With N = 2^NB and SEED below P it is exactly (1-p)N.
//
// Interface and timing:
//   * weights are written beforehand through w_we/w_addr/w_data (address k
//     holds the weight of the k-th existing connection), the bias through
//     b_we/b_data;
//   * start (one cycle) clears the counter, reloads the LFSR seed, loads the
//     bias into the accumulator and sets busy;
//   * while busy, each cycle with x_valid consumes one input x; a cycle
//     without x_valid stalls the neuron (nothing advances);
//   * the clock edge that consumes the N-th input clears busy and sets
//     y_valid, so with no stall y_valid rises N cycles after the first
//     input. y and acc_o then hold until the next start.
module sparse_neuron
  import snn_pkg::*;
#(
  parameter int unsigned  N     = 1024,
  parameter int unsigned  NB    = $clog2(N),
  parameter int unsigned  P     = 960,
  parameter int unsigned  SEED  = 1,
  parameter weight_mode_e MODE  = WM_BINARY,
  parameter int unsigned  X_W   = 8,
  parameter int unsigned  W_W   = 8,
  localparam int unsigned DEPTH = mask_ones(SEED, P, NB, N),
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned WB    = weight_bits(MODE, W_W),
  localparam int unsigned ACC_W = acc_bits(MODE, X_W, W_W, N),
  localparam int unsigned CW    = $clog2(N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // weight and bias loading
  input  logic                    w_we,
  input  logic [AW-1:0]           w_addr,
  input  logic [WB-1:0]           w_data,
  input  logic                    b_we,
  input  logic signed [ACC_W-1:0] b_data,
  // serial input stream
  input  logic                    start,
  input  logic                    x_valid,
  input  logic signed [X_W-1:0]   x,
  // result
  output logic                    busy,
  output logic                    y_valid,
  output logic signed [ACC_W-1:0] acc_o,
  output logic        [ACC_W-2:0] y,
  // the mask bit of the current input, valid while busy
  output logic                    conn_o
);

  logic                    step;       // an input is consumed this cycle
  logic                    last;       // ... and it is the N-th one
  logic [CW-1:0]           in_cnt;
  logic [AW-1:0]           raddr;
  logic [WB-1:0]           w_rd;
  logic signed [ACC_W-1:0] bias_q;

  assign step = busy && x_valid;
  assign last = step && (in_cnt == CW'(N - 1));

  sng #(.NB(NB)) u_sng (
    .clk    (clk),
    .rst_n  (rst_n),
    .load   (start),
    .en     (step),
    .seed   (NB'(SEED)),
    .p_code (NB'(P)),
    .value_o(),
    .bit_o  (conn_o)
  );

  addr_counter #(.DEPTH(DEPTH)) u_cnt (
    .clk  (clk),
    .rst_n(rst_n),
    .clr  (start),
    .en   (step && conn_o),
    .addr (raddr)
  );

  weight_mem #(.DEPTH(DEPTH), .W(WB)) u_mem (
    .clk  (clk),
    .we   (w_we),
    .waddr(w_addr),
    .wdata(w_data),
    .raddr(raddr),
    .rdata(w_rd)
  );

  mac_acc #(.MODE(MODE), .X_W(X_W), .W_W(W_W), .N(N)) u_mac (
    .clk  (clk),
    .rst_n(rst_n),
    .load (start),
    .en   (step && conn_o),
    .x    (x),
    .w    (w_rd),
    .bias (bias_q),
    .acc  (acc_o)
  );

  relu #(.W(ACC_W)) u_relu (
    .a(acc_o),
    .y(y)
  );

  always_ff @(posedge clk) begin
    if (!rst_n)    bias_q <= '0;
    else if (b_we) bias_q <= b_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      y_valid <= 1'b0;
      in_cnt  <= '0;
    end else if (start) begin
      busy    <= 1'b1;
      y_valid <= 1'b0;
      in_cnt  <= '0;
    end else if (step) begin
      in_cnt <= in_cnt + 1'b1;
      if (last) begin
        busy    <= 1'b0;
        y_valid <= 1'b1;
      end
    end
  end

  // Every stored weight is used exactly once per pass: after the N-th input
  // the counter has gone through all DEPTH addresses and wrapped to 0.
  a_all_weights_used : assert property (@(posedge clk) disable iff (!rst_n)
                                        last && !start |=> raddr == '0)
    else $error("sparse_neuron: mask gave a different number of connections than DEPTH");

  initial assert (N <= (32'd1 << NB) && NB <= MAX_NB && P < (32'd1 << NB))
    else $error("sparse_neuron: need N <= 2^NB and P < 2^NB");

endmodule
