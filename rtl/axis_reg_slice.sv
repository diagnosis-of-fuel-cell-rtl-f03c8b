// axis_reg_slice: AXI4-Stream register slice with both directions registered.
//
// Every stream port of the core goes through one of these, the "register
// both" option of the stream interfaces.  TDATA/TVALID toward the sink and
// TREADY toward the source each come straight from a flip-flop, so no
// combinational path crosses the slice.  A second (skid) register catches the
// word that arrives in the cycle the sink stops accepting, so the slice keeps
// full throughput: one word per cycle when the sink is always ready, one
// cycle of latency.  W is the width of the bundle carried (TDATA plus TLAST
// in this core).  Reset is active-low and synchronous; after reset the slice
// is empty and s_ready is high.  Structure of the slice is this design's own.
module axis_reg_slice #(
  parameter int W = 33
) (
  input  logic         clk,
  input  logic         rst_n,
  // upstream (slave) side
  input  logic [W-1:0] s_data,
  input  logic         s_valid,
  output logic         s_ready,
  // downstream (master) side
  output logic [W-1:0] m_data,
  output logic         m_valid,
  input  logic         m_ready
);

  logic [W-1:0] skid_data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      m_valid   <= 1'b0;
      m_data    <= '0;
      skid_data <= '0;
      s_ready   <= 1'b1;
    end else if (s_ready) begin
      // skid register empty
      if (!m_valid || m_ready) begin
        m_valid <= s_valid;
        if (s_valid) m_data <= s_data;
      end else if (s_valid) begin
        // output held: park the incoming word, stop accepting
        skid_data <= s_data;
        s_ready   <= 1'b0;
      end
    end else if (m_ready) begin
      // skid register full: drain it into the output register
      m_data  <= skid_data;
      m_valid <= 1'b1;
      s_ready <= 1'b1;
    end
  end

  // AXI4-Stream rule: a word offered and not taken stays, unchanged.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_valid && !m_ready |=> m_valid && $stable(m_data));

endmodule
