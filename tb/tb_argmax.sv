// tb_argmax: self-checking test of the class decision.
//
// Drives the three class scores with random signed values, with values
// near the extremes, and with ties, and checks the index and value of the
// largest score against a reference that scans the scores in order (the
// lowest index wins a tie).  Includes the three score vectors of the
// published hardware runs, whose classes are 0, 1 and 2.
module tb_argmax;
  localparam int N = 3, W = 32;
  logic [N-1:0][W-1:0] scores;
  logic [$clog2(N)-1:0] idx;
  logic [W-1:0] max_val;
  int checks = 0, failures = 0;

  argmax #(.N(N), .W(W)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic try_one(input int a, input int b, input int c, input int want);
    int best, bi;
    scores = {W'(c), W'(b), W'(a)};
    #1;
    best = a; bi = 0;
    if (b > best) begin best = b; bi = 1; end
    if (c > best) begin best = c; bi = 2; end
    if (want >= 0) check(bi == want, "reference disagrees with expected class");
    check(int'(idx) == bi && $signed(max_val) == best,
          $sformatf("scores %0d %0d %0d gave %0d", a, b, c, idx));
  endtask

  initial begin
    // score vectors printed with the published classification runs
    try_one(56009, 56008, -84706, 0);
    try_one(-88099, 95648, 79217, 1);
    try_one(-298193, 124850, 147889, 2);
    // ties
    try_one(5, 5, 5, 0);
    try_one(-1, 7, 7, 1);
    try_one(-3, -9, -3, 0);
    // extremes
    try_one(-2147483648, 2147483647, 0, 1);
    try_one(-2147483648, -2147483648, -2147483647, 2);
    for (int i = 0; i < 500; i++)
      try_one($urandom_range(0, 3) == 0 ? int'($urandom_range(0, 4)) : int'($urandom),
              $urandom_range(0, 3) == 0 ? int'($urandom_range(0, 4)) : int'($urandom),
              $urandom_range(0, 3) == 0 ? int'($urandom_range(0, 4)) : int'($urandom), -1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
