// tb_dense_layer: self-checking test of one fully connected layer.
//
// Two layers of the first hidden layer's shape (10 inputs, 32 neurons) run
// side by side on the same inputs and weights, one with ReLU and one
// without.  The testbench plays the weight and bias memories itself (a
// synchronous read, one row per cycle) and computes every neuron with
// 32-bit wrapping integer arithmetic.  It checks each result and its index,
// that results come one per cycle in neuron order, that done comes exactly
// OUT_N+3 cycles after start, and that ReLU clipped some neurons to zero
// while the linear copy kept them negative.  Random runs use small weights
// and inputs like the fuel-cell samples; one run uses full-range values to
// exercise the wrap-around.
module tb_dense_layer;
  localparam int IN_N = 10, OUT_N = 32, DW = 32, WW = 32;
  localparam int IW = $clog2(OUT_N);
  logic clk = 1'b0, rst_n = 1'b0;
  logic start;
  logic busy_r, done_r, busy_l, done_l;
  logic [IN_N-1:0][DW-1:0] in_vec;
  logic [IW-1:0] row_r, row_l, idx_r, idx_l;
  logic [IN_N-1:0][WW-1:0] wd_r, wd_l;
  logic [0:0][WW-1:0] bd_r, bd_l;
  logic we_r, we_l;
  logic [DW-1:0] res_r, res_l;
  int checks = 0, failures = 0;
  int clipped = 0;

  logic [WW-1:0] wm [OUT_N][IN_N];
  logic [WW-1:0] bm [OUT_N];

  dense_layer #(.IN_N(IN_N), .OUT_N(OUT_N), .DATA_W(DW), .W_W(WW), .RELU(1'b1)) dut_relu (
    .clk, .rst_n, .start, .busy(busy_r), .done(done_r), .in_vec,
    .w_row(row_r), .w_data(wd_r), .b_data(bd_r), .res_we(we_r), .res_idx(idx_r), .res_data(res_r));
  dense_layer #(.IN_N(IN_N), .OUT_N(OUT_N), .DATA_W(DW), .W_W(WW), .RELU(1'b0)) dut_lin (
    .clk, .rst_n, .start, .busy(busy_l), .done(done_l), .in_vec,
    .w_row(row_l), .w_data(wd_l), .b_data(bd_l), .res_we(we_l), .res_idx(idx_l), .res_data(res_l));

  always #5 clk = ~clk;

  // memory models: synchronous read
  always @(posedge clk) begin
    for (int l = 0; l < IN_N; l++) begin
      wd_r[l] <= wm[row_r][l];
      wd_l[l] <= wm[row_l][l];
    end
    bd_r[0] <= bm[row_r];
    bd_l[0] <= bm[row_l];
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int neuron(input int n);
    int s;
    s = int'(bm[n]);
    for (int i = 0; i < IN_N; i++) s = s + int'(in_vec[i]) * int'(wm[n][i]);
    return s;
  endfunction

  task automatic run(input bit full_range);
    int expect_n, t;
    for (int n = 0; n < OUT_N; n++) begin
      bm[n] = full_range ? $urandom : WW'($urandom_range(0, 2000) - 1000);
      for (int i = 0; i < IN_N; i++)
        wm[n][i] = full_range ? $urandom : WW'($urandom_range(0, 254) - 127);
    end
    for (int i = 0; i < IN_N; i++)
      in_vec[i] = full_range ? $urandom : DW'($urandom_range(0, 1023) - 512);
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    expect_n = 0;
    t = 1;
    while (!done_r && t < 200) begin
      if (we_r) begin
        int s;
        s = neuron(expect_n);
        check(int'(idx_r) == expect_n, $sformatf("neuron order: got %0d want %0d", idx_r, expect_n));
        check(we_l && idx_l == idx_r, "linear and ReLU layers out of step");
        check(res_l == DW'(s), $sformatf("linear neuron %0d: %0d want %0d", expect_n, $signed(res_l), s));
        check(res_r == DW'(s < 0 ? 0 : s), $sformatf("relu neuron %0d: %0d want %0d", expect_n, $signed(res_r), s));
        if (s < 0) clipped++;
        expect_n++;
      end
      @(negedge clk);
      t++;
    end
    // the done cycle carries the last neuron
    if (we_r) begin
      int s;
      s = neuron(expect_n);
      check(res_r == DW'(s < 0 ? 0 : s) && res_l == DW'(s), "last neuron wrong");
      if (s < 0) clipped++;
      expect_n++;
    end
    check(done_r && done_l, "done never came");
    check(expect_n == OUT_N, $sformatf("%0d results, want %0d", expect_n, OUT_N));
    check(t == OUT_N + 3, $sformatf("done %0d cycles after start, want %0d", t, OUT_N + 3));
    @(negedge clk);
    check(!busy_r && !busy_l, "still busy after done");
  endtask

  initial begin
    start = 1'b0;
    in_vec = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check(!busy_r && !done_r, "busy after reset");
    for (int k = 0; k < 30; k++) run(1'b0);
    run(1'b1);
    check(clipped > 0, "ReLU never clipped a negative sum");
    $display("relu clipped %0d neurons", clipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
