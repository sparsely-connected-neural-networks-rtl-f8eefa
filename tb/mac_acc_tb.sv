// mac_acc_tb: runs the accumulator with binarized (+x/-x multiplexer),
// ternarized (0/+x/-x) and full multiplier weights on random inputs,
// weights and enables, starting from a random bias, and compares the sum with
// an integer model every cycle.
module mac_acc_tb;
  import snn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int unsigned N = 64;
  localparam int unsigned AB = acc_bits(WM_BINARY, 8, 8, N);
  localparam int unsigned AT = acc_bits(WM_TERNARY, 8, 8, N);
  localparam int unsigned AF = acc_bits(WM_FULL, 8, 8, N);

  logic rst_n, load, en;
  logic signed [7:0] x;
  logic [7:0] w;
  int bias;
  logic signed [AB-1:0] acc_b;
  logic signed [AT-1:0] acc_t;
  logic signed [AF-1:0] acc_f;
  int mb, mt, mf;

  mac_acc #(.MODE(WM_BINARY),  .X_W(8), .W_W(8), .N(N)) dut_b
    (.clk, .rst_n, .load, .en, .x, .w(w[0]),   .bias(AB'(bias)), .acc(acc_b));
  mac_acc #(.MODE(WM_TERNARY), .X_W(8), .W_W(8), .N(N)) dut_t
    (.clk, .rst_n, .load, .en, .x, .w(w[1:0]), .bias(AT'(bias)), .acc(acc_t));
  mac_acc #(.MODE(WM_FULL),    .X_W(8), .W_W(8), .N(N)) dut_f
    (.clk, .rst_n, .load, .en, .x, .w(w),      .bias(AF'(bias)), .acc(acc_f));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; load = 0; en = 0; x = 0; w = 0; bias = 0;
    @(negedge clk); rst_n = 1;
    for (int pass = 0; pass < 4; pass++) begin
      bias = int'($urandom % 2001) - 1000;
      load = 1; @(negedge clk); load = 0;
      mb = bias; mt = bias; mf = bias;
      for (int i = 0; i < N; i++) begin
        x = 8'($urandom); w = 8'($urandom); en = $urandom % 4 != 0;
        @(negedge clk);
        if (en) begin
          mb += w[0] ? int'(x) : -int'(x);
          mt += w[1] ? -int'(x) : (w[0] ? int'(x) : 0);
          mf += int'(x) * int'($signed(w));
        end
        checks += 3;
        if (int'(acc_b) != mb) begin failures++; $display("FAIL binary %0d %0d", acc_b, mb); end
        if (int'(acc_t) != mt) begin failures++; $display("FAIL ternary %0d %0d", acc_t, mt); end
        if (int'(acc_f) != mf) begin failures++; $display("FAIL full %0d %0d", acc_f, mf); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
