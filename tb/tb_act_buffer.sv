// tb_act_buffer: self-checking test of the activation buffer.
//
// Checks that reset clears all words, that a write lands in the addressed
// word only and is visible the next cycle, and that writes with the write
// enable low or an index past the end change nothing.
module tb_act_buffer;
  localparam int N = 10, W = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  logic we;
  logic [$clog2(N)-1:0] widx;
  logic [W-1:0] wdata;
  logic [N-1:0][W-1:0] q;
  int checks = 0, failures = 0;
  logic [W-1:0] ref_q [N];

  act_buffer #(.N(N), .W(W)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic compare(input string what);
    for (int i = 0; i < N; i++) check(q[i] == ref_q[i], $sformatf("%s: word %0d", what, i));
  endtask

  initial begin
    we = 0; widx = 0; wdata = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < N; i++) ref_q[i] = '0;
    compare("after reset");
    for (int k = 0; k < 300; k++) begin
      int i;
      i = $urandom_range(0, 15);
      we = $urandom_range(0, 3) != 0; widx = 4'(i); wdata = $urandom;
      @(negedge clk);
      if (we && i < N) ref_q[i] = wdata;
      compare("after write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
