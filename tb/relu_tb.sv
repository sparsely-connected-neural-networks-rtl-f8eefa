// relu_tb: exhaustive check of ReLU at 8 bits: max(0, a) for every a.
module relu_tb;
  int checks = 0, failures = 0;
  logic signed [7:0] a;
  logic [6:0] y;

  relu #(.W(8)) dut (.a, .y);

  initial begin
    for (int v = -128; v < 128; v++) begin
      a = 8'(v);
      #1;
      checks++;
      if (int'(y) != ((v > 0) ? v : 0)) begin
        failures++;
        $display("FAIL: relu(%0d) = %0d", v, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
