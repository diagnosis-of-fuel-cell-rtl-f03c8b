// tb_axis_reg_slice: self-checking test of the stream register slice.
//
// Phase 1 keeps the source valid and the sink ready and checks full
// throughput: a word per cycle with exactly one cycle of latency.  Phase 2
// drives random valid and ready, keeps a queue of the words accepted, and
// checks that every word comes out once, in order, and that a word offered
// and not taken stays unchanged.  A watchdog ends the run if it hangs.
module tb_axis_reg_slice;
  localparam int W = 33;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [W-1:0] s_data, m_data;
  logic s_valid, s_ready, m_valid, m_ready;
  int checks = 0, failures = 0;

  axis_reg_slice #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  logic [W-1:0] q[$];
  int sent = 0, recv = 0;
  logic [W-1:0] held;
  logic         was_stalled = 1'b0;
  bit           took = 1'b0;     // the source's word was taken at the last edge

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // scoreboard on the sink side
  always @(posedge clk) if (rst_n) begin
    if (was_stalled) check(m_valid && m_data == held, "held word changed or dropped");
    was_stalled <= m_valid && !m_ready;
    held        <= m_data;
    took <= s_valid && s_ready;
    if (s_valid && s_ready) begin q.push_back(s_data); sent++; end
    if (m_valid && m_ready) begin
      if (q.size() == 0) check(1'b0, "word out of nothing");
      else check(m_data == q.pop_front(), "order/data mismatch");
      recv++;
    end
  end

  initial begin
    s_valid = 0; m_ready = 0; s_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(s_ready && !m_valid, "not empty and ready after reset");
    // phase 1: streaming at full rate
    m_ready = 1'b1;
    for (int i = 0; i < 20; i++) begin
      s_valid = 1'b1; s_data = W'(i * 7 + 1);
      @(negedge clk);
      check(s_ready, "s_ready dropped with sink ready");
      check(m_valid && m_data == W'(i * 7 + 1), "latency is not one cycle");
    end
    s_valid = 1'b0;
    @(negedge clk);
    // phase 2: random handshakes
    for (int i = 0; i < 3000; i++) begin
      // AXI4-Stream: a word offered stays until it is taken
      if (!s_valid || took) begin
        s_valid = ($urandom_range(0, 3) != 0);
        s_data  = {$urandom, $urandom_range(0, 1)} ;
      end
      m_ready = ($urandom_range(0, 2) != 0);
      @(negedge clk);
    end
    s_valid = 1'b0; m_ready = 1'b1;
    repeat (5) @(negedge clk);
    check(q.size() == 0 && sent == recv && sent > 1000, "words lost");
    $display("sent=%0d received=%0d", sent, recv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
