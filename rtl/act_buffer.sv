// act_buffer: activation buffer between two layers.
//
// Holds N words written one at a time (we, widx, wdata) and shows all of
// them at once on q, so the next layer can multiply its whole input vector
// in one cycle.  It plays the role of the published core's temporary arrays
// (the input copy and the outputs of the three layers), fully partitioned
// into registers.  Reset (synchronous, active low) clears it to zero.  A
// write becomes visible on q in the next cycle.
module act_buffer #(
  parameter int N = 10,
  parameter int W = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic [$clog2(N)-1:0]     widx,
  input  logic [W-1:0]             wdata,
  output logic [N-1:0][W-1:0]      q
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      q <= '0;
    end else if (we && (32'(widx) < N)) begin
      q[widx] <= wdata;
    end
  end

endmodule
