// lfsr_tb: checks the LFSR unit against the 3-bit example sequences of the
// architecture (seed 001 -> 0.125, 0.5, 0.25, 0.625, 0.75, 0.875, 0.375 and
// seed 101 -> 0.625, 0.75, 0.875, 0.375, 0.125, 0.5, 0.25, i.e. the codes
// times 8), then checks a 10-bit register step by step against the
// polynomial x^10 + x^7 + 1 and that its period is 1023 with every nonzero
// state visited once. Also checks that en low holds the state.
module lfsr_tb;
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
  logic [2:0] seed3, st3;
  logic [9:0] seed10, st10;

  lfsr #(.NB(3))  dut3  (.clk, .rst_n, .load, .en, .seed(seed3),  .state(st3));
  lfsr #(.NB(10)) dut10 (.clk, .rst_n, .load, .en, .seed(seed10), .state(st10));

  int unsigned seq_a [7] = '{1, 4, 2, 5, 6, 7, 3};
  int unsigned seq_b [7] = '{5, 6, 7, 3, 1, 4, 2};
  bit seen [1024];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [9:0] ref10;
    int period;
    rst_n = 0; load = 0; en = 0; seed3 = 3'b001; seed10 = 10'd1;
    @(negedge clk); rst_n = 1;
    check(st3 == 3'b001, "reset loads seed");
    // sequence from seed 001
    en = 1;
    for (int i = 0; i < 7; i++) begin
      check(st3 == seq_a[i], $sformatf("seed 001 step %0d: got %0d want %0d", i, st3, seq_a[i]));
      @(negedge clk);
    end
    check(st3 == 3'b001, "3-bit period is 7");
    // seed 101
    seed3 = 3'b101; load = 1; @(negedge clk); load = 0;
    for (int i = 0; i < 7; i++) begin
      check(st3 == seq_b[i], $sformatf("seed 101 step %0d: got %0d want %0d", i, st3, seq_b[i]));
      @(negedge clk);
    end
    // hold
    en = 0;
    begin
      logic [2:0] h;
      h = st3;
      repeat (3) @(negedge clk);
      check(st3 == h, "en low holds the state");
    end
    // 10 bits: step-by-step against x^10 + x^7 + 1 (cells 10 and 7 feed cell 1)
    seed10 = 10'h2A5; load = 1; @(negedge clk); load = 0; en = 1;
    ref10 = 10'h2A5;
    period = 0;
    foreach (seen[i]) seen[i] = 0;
    do begin
      check(st10 == ref10, $sformatf("10-bit step %0d: got %h want %h", period, st10, ref10));
      check(!seen[st10] && st10 != 0, "10-bit state repeats before the period ends");
      seen[st10] = 1;
      ref10 = {ref10[0] ^ ref10[3], ref10[9:1]};
      period++;
      @(negedge clk);
    end while (st10 != 10'h2A5 && period < 2000);
    check(period == 1023, $sformatf("10-bit period %0d, want 1023", period));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
