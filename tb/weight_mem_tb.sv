// weight_mem_tb: fills the compressed weight memory with random words,
// reads every address back (asynchronous read: data in the same cycle as the
// address), overwrites a few entries and checks that an out-of-range write
// changes nothing.
module weight_mem_tb;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int unsigned DEPTH = 40;

  logic we;
  logic [5:0] waddr, raddr;
  logic [7:0] wdata, rdata;
  logic [7:0] model [DEPTH];

  weight_mem #(.DEPTH(DEPTH), .W(8)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_all();
    for (int a = 0; a < DEPTH; a++) begin
      raddr = 6'(a);
      #1;
      checks++;
      if (rdata != model[a]) begin
        failures++;
        $display("FAIL: addr %0d got %h want %h", a, rdata, model[a]);
      end
    end
  endtask

  initial begin
    we = 0; raddr = 0;
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; waddr = 6'(a); wdata = 8'($urandom); model[a] = wdata;
      @(negedge clk);
    end
    we = 0;
    read_all();
    for (int k = 0; k < 10; k++) begin
      int a = $urandom % DEPTH;
      we = 1; waddr = 6'(a); wdata = 8'($urandom); model[a] = wdata;
      @(negedge clk);
    end
    we = 1; waddr = 6'(DEPTH + 3); wdata = 8'hA5;
    @(negedge clk);
    we = 0;
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
