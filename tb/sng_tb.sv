// sng_tb: checks the stochastic number generator. With the 3-bit example of
// the architecture (seeds 001 and 101, p = 0.57) the rule "1 when S >= p"
// applied to the printed LFSR values gives 0,0,0,1,1,1,0 and 1,1,1,0,0,0,0;
// p = 0.57 is the code P = 5, since S = state/8 >= 0.57 exactly when
// state >= 5. At 10 bits it checks the number of 1s in 1024 steps for the
// thresholds of the neuron results (p = 0, 0.5, 0.75, 0.875, 0.9375 give
// 1024, 512, 256, 128, 64 from seed 1), which is the depth of the weight
// memory.
module sng_tb;
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

  logic rst_n, load, en;
  logic [2:0] seed3, val3;
  logic [9:0] p10, val10;
  logic b3a, b3b, b10;
  logic [2:0] seed3b;

  sng #(.NB(3))  dut_a (.clk, .rst_n, .load, .en, .seed(seed3),  .p_code(3'd5), .value_o(val3), .bit_o(b3a));
  sng #(.NB(3))  dut_b (.clk, .rst_n, .load, .en, .seed(seed3b), .p_code(3'd5), .value_o(),     .bit_o(b3b));
  sng #(.NB(10)) dut_c (.clk, .rst_n, .load, .en, .seed(10'd1),  .p_code(p10),  .value_o(val10), .bit_o(b10));

  bit exp_a [7] = '{0, 0, 0, 1, 1, 1, 0};
  bit exp_b [7] = '{1, 1, 1, 0, 0, 0, 0};
  int unsigned p_codes [5] = '{0, 512, 768, 896, 960};
  int unsigned ones_exp [5] = '{1024, 512, 256, 128, 64};

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones;
    rst_n = 0; load = 0; en = 0; seed3 = 3'b001; seed3b = 3'b101; p10 = 0;
    @(negedge clk); rst_n = 1; en = 1;
    for (int i = 0; i < 7; i++) begin
      check(b3a == exp_a[i], $sformatf("seed 001 bit %0d", i));
      check(b3b == exp_b[i], $sformatf("seed 101 bit %0d", i));
      check(b3a == (val3 >= 3'd5), "bit agrees with its value");
      @(negedge clk);
    end
    for (int k = 0; k < 5; k++) begin
      p10 = 10'(p_codes[k]); load = 1; @(negedge clk); load = 0;
      ones = 0;
      for (int i = 0; i < 1024; i++) begin
        ones += int'(b10);
        @(negedge clk);
      end
      check(ones == ones_exp[k], $sformatf("P=%0d: %0d ones, want %0d", p_codes[k], ones, ones_exp[k]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
