// dense_layer: one fully connected layer, one neuron per clock.
//
// On a start pulse the layer walks its OUT_N neurons in order.  For neuron n
// it reads row n of the weight memory (all IN_N weights at once) and of the
// bias memory, multiplies every input by its weight in parallel, adds the
// products and the bias, applies ReLU when RELU is set, and writes the result
// to the next layer's buffer through res_we/res_idx/res_data.  A new neuron
// enters the pipeline every cycle (initiation interval 1, trip count OUT_N),
// the scheme the published loop report shows for each layer loop.
//
// Pipeline (cycles after the start pulse):
//   1..OUT_N      issue row n to the memories (w_row, synchronous read)
//   +1            register the IN_N products and the bias
//   +1            add, ReLU, register the result (res_we high)
// The last result appears OUT_N+3 cycles after start, in the same cycle as
// the one-cycle done pulse.  in_vec must stay stable while busy is high.
//
// Arithmetic is two's-complement, DATA_W bits, wrapping like C int: each
// product keeps its low DATA_W bits and the sum wraps.  The published text
// applies ReLU to the output layer as well, but the published hardware
// results show negative output scores, so the output layer is instantiated
// with RELU = 0.  With RELU set, the sign bit of res_data is always zero, and
// synthesis rightly finds it constant.
module dense_layer #(
  parameter int IN_N   = 10,
  parameter int OUT_N  = 32,
  parameter int DATA_W = 32,
  parameter int W_W    = 32,
  parameter bit RELU   = 1'b1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  output logic                              busy,
  output logic                              done,
  // input activations of this layer
  input  logic [IN_N-1:0][DATA_W-1:0]       in_vec,
  // parameter memories (synchronous read, row = neuron)
  output logic [$clog2(OUT_N)-1:0]          w_row,
  input  logic [IN_N-1:0][W_W-1:0]          w_data,
  input  logic [0:0][W_W-1:0]               b_data,
  // results, one neuron per cycle
  output logic                              res_we,
  output logic [$clog2(OUT_N)-1:0]          res_idx,
  output logic [DATA_W-1:0]                 res_data
);

  localparam int IW = $clog2(OUT_N);

  // issue stage
  logic          issuing;
  logic [IW-1:0] n;
  // memory-data stage
  logic          v1;
  logic [IW-1:0] idx1;
  // product stage
  logic                        v2;
  logic [IW-1:0]               idx2;
  logic [IN_N-1:0][DATA_W-1:0] prod2;
  logic [DATA_W-1:0]           bias2;

  assign w_row = n;
  assign busy  = issuing | v1 | v2 | res_we;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      n       <= '0;
    end else if (!issuing) begin
      if (start) begin
        issuing <= 1'b1;
        n       <= '0;
      end
    end else if (32'(n) == OUT_N - 1) begin
      issuing <= 1'b0;
      n       <= '0;
    end else begin
      n <= n + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1     <= 1'b0;
      idx1   <= '0;
      v2     <= 1'b0;
      idx2   <= '0;
      prod2  <= '0;
      bias2  <= '0;
      res_we <= 1'b0;
      res_idx  <= '0;
      res_data <= '0;
    end else begin
      v1   <= issuing;
      idx1 <= n;

      v2   <= v1;
      idx2 <= idx1;
      for (int i = 0; i < IN_N; i++) begin
        prod2[i] <= DATA_W'($signed(in_vec[i]) * $signed(w_data[i]));
      end
      bias2 <= DATA_W'($signed(b_data[0]));

      res_we  <= v2;
      res_idx <= idx2;
      res_data <= relu(sum_of(prod2, bias2));
    end
  end

  assign done = res_we && (32'(res_idx) == OUT_N - 1);

  function automatic logic [DATA_W-1:0] sum_of(input logic [IN_N-1:0][DATA_W-1:0] p,
                                               input logic [DATA_W-1:0] b);
    logic [DATA_W-1:0] s;
    s = b;
    for (int i = 0; i < IN_N; i++) s = s + p[i];
    return s;
  endfunction

  function automatic logic [DATA_W-1:0] relu(input logic [DATA_W-1:0] x);
    return (RELU && x[DATA_W-1]) ? '0 : x;
  endfunction

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !issuing);

endmodule
