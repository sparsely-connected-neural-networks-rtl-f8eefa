// addr_counter_tb: drives the weight-address counter with a random enable
// and random clears and compares it every cycle with a reference count
// (hold on enable low, +1 on enable high, back to 0 after DEPTH-1 or on clear).
module addr_counter_tb;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int unsigned DEPTH = 5;

  logic rst_n, clr, en;
  logic [2:0] addr;
  int unsigned model;

  addr_counter #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .clr, .en, .addr);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; clr = 0; en = 0; model = 0;
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      checks++;
      if (addr != 3'(model)) begin
        failures++;
        $display("FAIL: cycle %0d addr %0d want %0d", i, addr, model);
      end
      clr = ($urandom % 50) == 0;
      en  = $urandom % 2;
      @(negedge clk);
      if (clr) model = 0;
      else if (en) model = (model + 1) % DEPTH;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
