// sparse_layer_tb: end-to-end test of a reduced layer (64 inputs, 8 neurons,
// 6-bit LFSRs, p = 40/64 = 0.625, binarized weights).
//
// It loads every neuron's compressed weights and bias, runs passes of random
// inputs and compares every output with a model that rebuilds each neuron's
// mask column from its seed with its own LFSR. Along the way it makes each
// mechanism of the layer happen and counts it: connections used and skipped
// by the SNG, input stalls, outputs clamped and passed by ReLU, a start that
// restarts a pass in progress, and weight writes beyond a neuron's depth
// (which must be dropped). A mechanism that never happens is a failure. The
// latency of a pass without stalls must be N cycles.
module sparse_layer_tb;
  import snn_pkg::*;
  localparam int unsigned N  = 64;
  localparam int unsigned M  = 8;
  localparam int unsigned NB = 6;
  localparam int unsigned P  = 40;
  localparam int WATCHDOG = 20000;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  // reference LFSR: x^10+x^7+1 or x^6+x^5+1, cell 1 in the MSB
  function automatic int unsigned ref_next(int unsigned s, int unsigned nb);
    if (nb == 10) return {s[0] ^ s[3], s[9:1]};
    return {s[0] ^ s[1], s[5:1]};
  endfunction

  localparam int unsigned ACC_W = acc_bits(WM_BINARY, 8, 8, N);
  localparam int unsigned WAW   = $clog2(N + 1);
  localparam int unsigned MW    = (M > 1) ? $clog2(M) : 1;

  logic rst_n, w_we, b_we, start, x_valid, busy, y_valid;
  logic [MW-1:0] w_neuron, b_neuron;
  logic [WAW-1:0] w_addr;
  logic w_data;
  logic signed [ACC_W-1:0] b_data;
  logic signed [7:0] x;
  logic [ACC_W-2:0] y [M];

  sparse_layer #(.N(N), .M(M), .NB(NB), .P(P)) dut (.*);

  bit wts [M][N];
  int depth [M];
  int bias [M];
  logic signed [7:0] xs [N];
  int n_conn = 0, n_skip = 0, n_stall = 0, n_clamp = 0, n_pos = 0, n_restart = 0, n_drop = 0;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic feed(int count, bit stalls);
    for (int i = 0; i < count; ) begin
      x_valid = stalls ? ($urandom % 4 != 0) : 1'b1;
      x = xs[i];
      @(negedge clk);
      if (x_valid) i++; else n_stall++;
    end
    x_valid = 0;
  endtask

  task automatic run_pass(bit stalls, bit restart);
    int exp_y [M];
    int lat;
    foreach (xs[i]) xs[i] = 8'($urandom);
    for (int j = 0; j < M; j++) begin
      int unsigned s;
      int cnt;
      s = (j % ((1 << NB) - 1)) + 1;
      cnt = 0;
      exp_y[j] = bias[j];
      for (int i = 0; i < N; i++) begin
        if (s >= P) begin
          exp_y[j] += wts[j][cnt] ? int'(xs[i]) : -int'(xs[i]);
          cnt++;
        end
        s = ref_next(s, NB);
      end
    end
    start = 1; @(negedge clk); start = 0;
    if (restart) begin
      feed(N / 3, 0);
      check(busy && !y_valid, "busy in the middle of a pass");
      start = 1; @(negedge clk); start = 0;
      n_restart++;
    end
    lat = 0;
    if (!stalls) begin
      for (int i = 0; i < N; i++) begin
        x_valid = 1; x = xs[i];
        @(negedge clk);
        lat++;
        check(y_valid == (i == N - 1), "y_valid exactly after the N-th input");
      end
      x_valid = 0;
      check(lat == N, "latency N cycles");
    end else begin
      feed(N, 1);
    end
    check(y_valid && !busy, "pass complete");
    for (int j = 0; j < M; j++) begin
      int want;
      want = (exp_y[j] > 0) ? exp_y[j] : 0;
      check(int'(y[j]) == want, $sformatf("neuron %0d: y %0d want %0d", j, y[j], want));
      if (exp_y[j] > 0) n_pos++; else n_clamp++;
    end
  endtask

  initial begin
    rst_n = 0; w_we = 0; b_we = 0; start = 0; x_valid = 0; x = 0;
    w_neuron = 0; b_neuron = 0; w_addr = 0; w_data = 0; b_data = 0;
    @(negedge clk); rst_n = 1;
    // connection counts per neuron (model)
    for (int j = 0; j < M; j++) begin
      int unsigned s;
      s = (j % ((1 << NB) - 1)) + 1;
      depth[j] = 0;
      for (int i = 0; i < N; i++) begin
        if (s >= P) begin depth[j]++; n_conn++; end else n_skip++;
        s = ref_next(s, NB);
      end
    end
    // load weights and biases
    for (int j = 0; j < M; j++) begin
      for (int a = 0; a < depth[j]; a++) begin
        wts[j][a] = 1'($urandom);
        w_we = 1; w_neuron = MW'(j); w_addr = WAW'(a); w_data = wts[j][a];
        @(negedge clk);
      end
      // a write past the end must not disturb the stored weights
      if (depth[j] < (1 << WAW)) begin
        w_we = 1; w_neuron = MW'(j); w_addr = WAW'(depth[j]); w_data = ~wts[j][0];
        @(negedge clk);
        n_drop++;
      end
      w_we = 0;
      bias[j] = int'($urandom % 201) - 100;
      b_we = 1; b_neuron = MW'(j); b_data = ACC_W'(bias[j]);
      @(negedge clk);
      b_we = 0;
    end
    run_pass(0, 0);
    run_pass(1, 0);
    run_pass(0, 1);
    run_pass(1, 1);
    $display("mechanisms: connections used %0d, skipped %0d, stall cycles %0d, relu clamped %0d, passed %0d, restarts %0d, dropped writes %0d",
             n_conn, n_skip, n_stall, n_clamp, n_pos, n_restart, n_drop);
    check(n_conn > 0, "SNG enabled a connection");
    check(n_skip > 0, "SNG skipped a connection");
    check(n_stall > 0, "input stall happened");
    check(n_clamp > 0, "ReLU clamped an output");
    check(n_pos > 0, "ReLU passed an output");
    check(n_restart > 0, "restart happened");
    check(n_drop > 0, "out-of-range write happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
