// weight_mem: parameter memory of one layer, ROWS rows of LANES words.
//
// Row r holds everything neuron r needs in one cycle: its LANES input
// weights (or, with LANES = 1, its bias).  Reading a whole row per cycle is
// what lets a layer finish one neuron per clock.  The read is synchronous:
// rd_data shows row rd_row one cycle after rd_row is applied.  Writes go one
// word at a time (row, lane) from the configuration port; a write and a read
// of the same row in one cycle return the old row.  The memory is not reset.
// The published core keeps the trained weights as constant arrays; their
// values are not published, so here they are loaded at run time instead.
module weight_mem #(
  parameter int ROWS  = 32,
  parameter int LANES = 10,
  parameter int W     = 32
) (
  input  logic                          clk,
  // write port, one word
  input  logic                          we,
  input  logic [$clog2(ROWS)-1:0]       wr_row,
  input  logic [$clog2(LANES+1)-1:0]    wr_lane,
  input  logic [W-1:0]                  wr_data,
  // read port, one row
  input  logic [$clog2(ROWS)-1:0]       rd_row,
  output logic [LANES-1:0][W-1:0]       rd_data
);

  logic [LANES-1:0][W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we && (32'(wr_row) < ROWS) && (32'(wr_lane) < LANES))
      mem[wr_row][wr_lane] <= wr_data;
    rd_data <= mem[rd_row];
  end

endmodule
