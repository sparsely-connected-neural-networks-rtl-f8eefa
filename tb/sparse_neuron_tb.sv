// sparse_neuron_tb: five binarized 1024-input neurons, one per threshold of
// the published neuron results (p = 0, 0.5, 0.75, 0.875, 0.9375), share one
// random input stream. It checks that each stores 1024, 512, 256, 128 and 64
// weights, that the ReLU output and the pre-activation sum match a model that
// rebuilds the mask with its own LFSR, and that the latency is 1024 cycles
// from first input to result (2.56 us at 400 MHz). A second pass stalls the
// stream at random and starts from a negative bias so that some outputs are
// clamped by ReLU. A small neuron with full multiplier weights is checked too.
module sparse_neuron_tb;
  import snn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // reference LFSR, polynomials x^10+x^7+1 and x^6+x^5+1
  function automatic int unsigned ref_next(int unsigned s, int unsigned nb);
    if (nb == 10) return {s[0] ^ s[3], s[9:1]};
    return {s[0] ^ s[1], s[5:1]};
  endfunction

  localparam int unsigned N = 1024;
  localparam int unsigned K = 5;
  localparam int unsigned PS   [K] = '{0, 512, 768, 896, 960};
  localparam int unsigned DEXP [K] = '{1024, 512, 256, 128, 64};
  localparam int unsigned ACC_W = acc_bits(WM_BINARY, 8, 8, N);

  logic rst_n, start, x_valid, w_we_all, b_we;
  logic [K-1:0] w_we;
  logic [9:0] w_addr;
  logic w_data;
  logic signed [ACC_W-1:0] b_data;
  logic signed [7:0] x;
  logic [K-1:0] busy, y_valid;
  logic signed [ACC_W-1:0] acc [K];
  logic [ACC_W-2:0] y [K];
  int unsigned depth_hw [K];

  for (genvar k = 0; k < K; k++) begin : g
    localparam int unsigned AWK = $clog2(DEXP[k]);
    sparse_neuron #(.N(N), .P(PS[k]), .SEED(1)) dut (
      .clk, .rst_n, .w_we(w_we[k]), .w_addr(w_addr[AWK-1:0]), .w_data(w_data),
      .b_we, .b_data, .start, .x_valid, .x, .busy(busy[k]), .y_valid(y_valid[k]),
      .acc_o(acc[k]), .y(y[k]), .conn_o());
    assign depth_hw[k] = dut.DEPTH;
  end

  // small neuron with full 8-bit weights
  localparam int unsigned NS = 64;
  localparam int unsigned AS = acc_bits(WM_FULL, 8, 8, NS);
  localparam int unsigned DS = mask_ones(5, 32, 6, NS);
  logic s_we, s_start, s_xv, s_bwe, s_busy, s_yv;
  logic [5:0] s_addr;
  logic [7:0] s_wd;
  logic signed [7:0] s_x;
  logic signed [AS-1:0] s_acc;
  logic [AS-2:0] s_y;
  sparse_neuron #(.N(NS), .NB(6), .P(32), .SEED(5), .MODE(WM_FULL)) dut_s (
    .clk, .rst_n, .w_we(s_we), .w_addr(s_addr[$clog2(DS)-1:0]), .w_data(s_wd),
    .b_we(s_bwe), .b_data(AS'(-100)), .start(s_start), .x_valid(s_xv), .x(s_x),
    .busy(s_busy), .y_valid(s_yv), .acc_o(s_acc), .y(s_y), .conn_o());

  bit wts [K][1024];
  logic signed [7:0] xs [N];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_pass(int bias, bit stalls);
    int lat, cyc;
    int exp_acc [K];
    int unsigned s, cnt;
    foreach (xs[i]) xs[i] = 8'($urandom);
    b_data = ACC_W'(bias); b_we = 1; @(negedge clk); b_we = 0;
    start = 1; @(negedge clk); start = 0;
    check(busy == '1 && y_valid == '0, "busy after start");
    // model
    for (int k = 0; k < K; k++) begin
      s = 1; cnt = 0; exp_acc[k] = bias;
      for (int i = 0; i < N; i++) begin
        if (s >= PS[k]) begin
          exp_acc[k] += wts[k][cnt] ? int'(xs[i]) : -int'(xs[i]);
          cnt++;
        end
        s = ref_next(s, 10);
      end
      check(cnt == DEXP[k], "model connection count");
    end
    cyc = 0; lat = -1;
    for (int i = 0; i < N; ) begin
      x_valid = stalls ? ($urandom % 3 != 0) : 1'b1;
      x = xs[i];
      @(negedge clk);
      cyc++;
      if (x_valid) i++;
      if (y_valid[0] && lat < 0) lat = cyc;
    end
    x_valid = 0;
    if (lat < 0) lat = cyc;
    if (!stalls) check(lat == N, $sformatf("latency %0d cycles, want %0d", lat, N));
    else check(lat > N, "stalls lengthen the pass");
    check(y_valid == '1 && busy == '0, "y_valid after N inputs");
    for (int k = 0; k < K; k++) begin
      check(int'(acc[k]) == exp_acc[k], $sformatf("p code %0d: sum %0d want %0d", PS[k], acc[k], exp_acc[k]));
      check(int'(y[k]) == ((exp_acc[k] > 0) ? exp_acc[k] : 0), $sformatf("p code %0d: relu", PS[k]));
    end
    repeat (3) @(negedge clk);
    check(int'(acc[4]) == exp_acc[4], "result holds after the pass");
  endtask

  initial begin
    int relu_clamped;
    logic [7:0] sw [64];
    logic signed [7:0] sx [NS];
    int exp_s;
    int unsigned s, cnt;
    rst_n = 0; start = 0; x_valid = 0; w_we = '0; b_we = 0; w_addr = 0; w_data = 0; x = 0; b_data = 0;
    s_we = 0; s_start = 0; s_xv = 0; s_bwe = 0; s_addr = 0; s_wd = 0; s_x = 0;
    @(negedge clk); rst_n = 1;
    for (int k = 0; k < K; k++) check(depth_hw[k] == DEXP[k], $sformatf("memory depth %0d want %0d", depth_hw[k], DEXP[k]));
    // load weights
    for (int k = 0; k < K; k++)
      for (int a = 0; a < DEXP[k]; a++) begin
        wts[k][a] = 1'($urandom);
        w_we = '0; w_we[k] = 1; w_addr = 10'(a); w_data = wts[k][a];
        @(negedge clk);
      end
    w_we = '0;
    run_pass(37, 0);
    run_pass(-400, 1);
    relu_clamped = 0;
    for (int k = 0; k < K; k++) if (acc[k] < 0) relu_clamped++;
    check(relu_clamped > 0, "some output clamped by ReLU");
    // small full-weight neuron
    for (int a = 0; a < DS; a++) begin
      sw[a] = 8'($urandom); s_we = 1; s_addr = 6'(a); s_wd = sw[a]; @(negedge clk);
    end
    s_we = 0; s_bwe = 1; @(negedge clk); s_bwe = 0;
    s_start = 1; @(negedge clk); s_start = 0;
    foreach (sx[i]) sx[i] = 8'($urandom);
    s = 5; cnt = 0; exp_s = -100;
    for (int i = 0; i < NS; i++) begin
      if (s >= 32) begin exp_s += int'(sx[i]) * int'($signed(sw[cnt])); cnt++; end
      s = ref_next(s, 6);
      s_xv = 1; s_x = sx[i]; @(negedge clk);
    end
    s_xv = 0;
    check(cnt == DS, "small neuron depth");
    check(s_yv, "small neuron done");
    check(int'(s_acc) == exp_s, $sformatf("full-weight sum %0d want %0d", s_acc, exp_s));
    check(int'(s_y) == ((exp_s > 0) ? exp_s : 0), "full-weight relu");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
