// tb_weight_mem: self-checking test of the row-wide parameter memory.
//
// Writes every word of a 32 x 10 memory one at a time, then reads rows in
// random order and checks that each row shows up one cycle after its
// address, with every lane right.  Also checks that a write outside the
// memory changes nothing and that a read in the same cycle as a write to
// that row returns the old contents.
module tb_weight_mem;
  localparam int ROWS = 32, LANES = 10, W = 32;
  logic clk = 1'b0;
  logic we;
  logic [$clog2(ROWS)-1:0]    wr_row, rd_row;
  logic [$clog2(LANES+1)-1:0] wr_lane;
  logic [W-1:0]               wr_data;
  logic [LANES-1:0][W-1:0]    rd_data;
  int checks = 0, failures = 0;

  weight_mem #(.ROWS(ROWS), .LANES(LANES), .W(W)) dut (.*);
  always #5 clk = ~clk;

  logic [W-1:0] ref_m [ROWS][LANES];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bit row_ok(input int r, input logic [LANES-1:0][W-1:0] d);
    for (int l = 0; l < LANES; l++) if (d[l] != ref_m[r][l]) return 1'b0;
    return 1'b1;
  endfunction

  initial begin
    we = 0; wr_row = 0; wr_lane = 0; wr_data = 0; rd_row = 0;
    @(negedge clk);
    for (int r = 0; r < ROWS; r++)
      for (int l = 0; l < LANES; l++) begin
        ref_m[r][l] = $urandom;
        we = 1; wr_row = 5'(r); wr_lane = 4'(l); wr_data = ref_m[r][l];
        @(negedge clk);
      end
    // lane index beyond the row: must be dropped
    we = 1; wr_row = 5'd3; wr_lane = 4'd12; wr_data = 32'hDEAD_BEEF;
    @(negedge clk);
    we = 0;
    for (int i = 0; i < 200; i++) begin
      int r;
      r = $urandom_range(0, ROWS - 1);
      rd_row = 5'(r);
      @(negedge clk);
      check(row_ok(r, rd_data), $sformatf("row %0d read back wrong", r));
    end
    // read and write the same row in one cycle: old data first, new data next
    rd_row = 5'd7; we = 1; wr_row = 5'd7; wr_lane = 4'd2; wr_data = ~ref_m[7][2];
    @(negedge clk);
    check(row_ok(7, rd_data), "read during write did not return the old row");
    we = 0; ref_m[7][2] = ~ref_m[7][2];
    @(negedge clk);
    check(row_ok(7, rd_data), "write not visible on the next read");
    rd_row = 5'd3;
    @(negedge clk);
    check(row_ok(3, rd_data), "out-of-range write changed a row");
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
