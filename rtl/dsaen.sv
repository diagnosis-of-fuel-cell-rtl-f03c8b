// dsaen: DSAE fuel-cell health classifier core (top level).
//
// Reads one sample of IN_N signed 32-bit measurements from the in1 stream,
// runs it through the 10-32-16-3 network (two ReLU hidden layers and a
// linear output layer), then sends the OUT_N class scores on the out1
// stream and the index of the largest score (the predicted class, 0..2) on
// the typei stream.  It then waits for the next sample; there is no start or
// done handshake: the core is driven only by its streams.
//
// Stream ports are AXI4-Stream, each behind a register slice with both
// directions registered.  out1 carries OUT_N words with TLAST on the last;
// typei carries one word with TLAST set.  in1's TLAST is not used: the core
// counts IN_N words.
//
// Operation, one phase after the other (state_e):
//   S_LOAD  take IN_N words from in1 into the input buffer, one per cycle
//   S_L1    layer 1: H1_N neurons, one per cycle, into buffer 1
//   S_L2    layer 2: H2_N neurons into buffer 2
//   S_L3    layer 3: OUT_N scores into buffer 3
//   S_OUT   send the scores and the class; back to S_LOAD once both
//           streams have taken their words
// With no stalls the core takes one sample every
//   IN_N + (H1_N+4) + (H2_N+4) + (OUT_N+4) + OUT_N cycles
// (76 at the default sizes): IN_N input words, each layer's neurons plus
// three pipeline cycles plus one cycle to start the next phase, and OUT_N
// output words.  The published HLS core reports an interval of 330 cycles.
//
// The layer sizes, the stream ports and their register option, and the
// output of both scores and class follow the published core.  The weights
// are not published: instead of constant arrays they sit in six memories
// written through the cfg_* port (cfg_sel picks W1/B1/W2/B2/W3/B3, cfg_row
// the neuron, cfg_lane the input), which should be done while the core is
// idle in S_LOAD.  Widths, reset (synchronous, active low) and the pipeline
// are this design's own.
module dsaen
  import dsaen_pkg::*;
#(
  parameter int P_IN_N  = IN_N,
  parameter int P_H1_N  = H1_N,
  parameter int P_H2_N  = H2_N,
  parameter int P_OUT_N = OUT_N
) (
  input  logic              ap_clk,
  input  logic              ap_rst_n,
  // in1: input sample stream
  input  logic [DATA_W-1:0] in1_tdata,
  input  logic              in1_tvalid,
  output logic              in1_tready,
  input  logic              in1_tlast,
  // out1: class score stream
  output logic [DATA_W-1:0] out1_tdata,
  output logic              out1_tvalid,
  input  logic              out1_tready,
  output logic              out1_tlast,
  // typei: predicted class stream
  output logic [DATA_W-1:0] typei_tdata,
  output logic              typei_tvalid,
  input  logic              typei_tready,
  output logic              typei_tlast,
  // weight and bias loading
  input  logic              cfg_we,
  input  logic [2:0]        cfg_sel,
  input  logic [5:0]        cfg_row,
  input  logic [5:0]        cfg_lane,
  input  logic [W_W-1:0]    cfg_data,
  // status
  output logic [2:0]        state_o
);

  localparam int CW = $clog2(P_IN_N + 1);
  localparam int OW = $clog2(P_OUT_N + 1);

  state_e state;
  assign state_o = state;

  // ---------------------------------------------------------------- in1
  logic [DATA_W-1:0] in_data;
  logic              in_last_unused;
  logic              in_valid, in_ready;

  axis_reg_slice #(.W(DATA_W + 1)) u_in1_slice (
    .clk(ap_clk), .rst_n(ap_rst_n),
    .s_data({in1_tlast, in1_tdata}), .s_valid(in1_tvalid), .s_ready(in1_tready),
    .m_data({in_last_unused, in_data}), .m_valid(in_valid), .m_ready(in_ready)
  );

  assign in_ready = (state == S_LOAD);
  wire in_fire = in_valid && in_ready;

  // ---------------------------------------------------------------- buffers
  logic [CW-1:0] in_cnt;
  logic [P_IN_N-1:0][DATA_W-1:0]  tempi;
  logic [P_H1_N-1:0][DATA_W-1:0]  tempo1;
  logic [P_H2_N-1:0][DATA_W-1:0]  tempo2;
  logic [P_OUT_N-1:0][DATA_W-1:0] tempo3;

  act_buffer #(.N(P_IN_N), .W(DATA_W)) u_tempi (
    .clk(ap_clk), .rst_n(ap_rst_n),
    .we(in_fire), .widx(($clog2(P_IN_N))'(in_cnt)), .wdata(in_data), .q(tempi)
  );

  // ---------------------------------------------------------------- layers
  logic l1_start, l2_start, l3_start;
  logic l1_busy, l2_busy, l3_busy;
  logic l1_done, l2_done, l3_done;

  logic [$clog2(P_H1_N)-1:0]  l1_row, l1_idx;
  logic [$clog2(P_H2_N)-1:0]  l2_row, l2_idx;
  logic [$clog2(P_OUT_N)-1:0] l3_row, l3_idx;
  logic l1_we, l2_we, l3_we;
  logic [DATA_W-1:0] l1_res, l2_res, l3_res;

  logic [P_IN_N-1:0][W_W-1:0] w1_row;
  logic [P_H1_N-1:0][W_W-1:0] w2_row;
  logic [P_H2_N-1:0][W_W-1:0] w3_row;
  logic [0:0][W_W-1:0]        b1_row, b2_row, b3_row;

  // configuration write decode; out-of-range addresses are dropped
  wire w1_we = cfg_we && cfg_sel == MEM_W1 && 32'(cfg_row) < P_H1_N  && 32'(cfg_lane) < P_IN_N;
  wire b1_we = cfg_we && cfg_sel == MEM_B1 && 32'(cfg_row) < P_H1_N  && cfg_lane == '0;
  wire w2_we = cfg_we && cfg_sel == MEM_W2 && 32'(cfg_row) < P_H2_N  && 32'(cfg_lane) < P_H1_N;
  wire b2_we = cfg_we && cfg_sel == MEM_B2 && 32'(cfg_row) < P_H2_N  && cfg_lane == '0;
  wire w3_we = cfg_we && cfg_sel == MEM_W3 && 32'(cfg_row) < P_OUT_N && 32'(cfg_lane) < P_H2_N;
  wire b3_we = cfg_we && cfg_sel == MEM_B3 && 32'(cfg_row) < P_OUT_N && cfg_lane == '0;

  weight_mem #(.ROWS(P_H1_N), .LANES(P_IN_N), .W(W_W)) u_w1 (
    .clk(ap_clk), .we(w1_we), .wr_row(($clog2(P_H1_N))'(cfg_row)),
    .wr_lane(($clog2(P_IN_N+1))'(cfg_lane)), .wr_data(cfg_data),
    .rd_row(l1_row), .rd_data(w1_row));
  weight_mem #(.ROWS(P_H1_N), .LANES(1), .W(W_W)) u_b1 (
    .clk(ap_clk), .we(b1_we), .wr_row(($clog2(P_H1_N))'(cfg_row)),
    .wr_lane(1'b0), .wr_data(cfg_data),
    .rd_row(l1_row), .rd_data(b1_row));
  weight_mem #(.ROWS(P_H2_N), .LANES(P_H1_N), .W(W_W)) u_w2 (
    .clk(ap_clk), .we(w2_we), .wr_row(($clog2(P_H2_N))'(cfg_row)),
    .wr_lane(($clog2(P_H1_N+1))'(cfg_lane)), .wr_data(cfg_data),
    .rd_row(l2_row), .rd_data(w2_row));
  weight_mem #(.ROWS(P_H2_N), .LANES(1), .W(W_W)) u_b2 (
    .clk(ap_clk), .we(b2_we), .wr_row(($clog2(P_H2_N))'(cfg_row)),
    .wr_lane(1'b0), .wr_data(cfg_data),
    .rd_row(l2_row), .rd_data(b2_row));
  weight_mem #(.ROWS(P_OUT_N), .LANES(P_H2_N), .W(W_W)) u_w3 (
    .clk(ap_clk), .we(w3_we), .wr_row(($clog2(P_OUT_N))'(cfg_row)),
    .wr_lane(($clog2(P_H2_N+1))'(cfg_lane)), .wr_data(cfg_data),
    .rd_row(l3_row), .rd_data(w3_row));
  weight_mem #(.ROWS(P_OUT_N), .LANES(1), .W(W_W)) u_b3 (
    .clk(ap_clk), .we(b3_we), .wr_row(($clog2(P_OUT_N))'(cfg_row)),
    .wr_lane(1'b0), .wr_data(cfg_data),
    .rd_row(l3_row), .rd_data(b3_row));

  dense_layer #(.IN_N(P_IN_N), .OUT_N(P_H1_N), .DATA_W(DATA_W), .W_W(W_W), .RELU(1'b1)) u_l1 (
    .clk(ap_clk), .rst_n(ap_rst_n), .start(l1_start), .busy(l1_busy), .done(l1_done),
    .in_vec(tempi), .w_row(l1_row), .w_data(w1_row), .b_data(b1_row),
    .res_we(l1_we), .res_idx(l1_idx), .res_data(l1_res));
  act_buffer #(.N(P_H1_N), .W(DATA_W)) u_tempo1 (
    .clk(ap_clk), .rst_n(ap_rst_n), .we(l1_we), .widx(l1_idx), .wdata(l1_res), .q(tempo1));

  dense_layer #(.IN_N(P_H1_N), .OUT_N(P_H2_N), .DATA_W(DATA_W), .W_W(W_W), .RELU(1'b1)) u_l2 (
    .clk(ap_clk), .rst_n(ap_rst_n), .start(l2_start), .busy(l2_busy), .done(l2_done),
    .in_vec(tempo1), .w_row(l2_row), .w_data(w2_row), .b_data(b2_row),
    .res_we(l2_we), .res_idx(l2_idx), .res_data(l2_res));
  act_buffer #(.N(P_H2_N), .W(DATA_W)) u_tempo2 (
    .clk(ap_clk), .rst_n(ap_rst_n), .we(l2_we), .widx(l2_idx), .wdata(l2_res), .q(tempo2));

  dense_layer #(.IN_N(P_H2_N), .OUT_N(P_OUT_N), .DATA_W(DATA_W), .W_W(W_W), .RELU(1'b0)) u_l3 (
    .clk(ap_clk), .rst_n(ap_rst_n), .start(l3_start), .busy(l3_busy), .done(l3_done),
    .in_vec(tempo2), .w_row(l3_row), .w_data(w3_row), .b_data(b3_row),
    .res_we(l3_we), .res_idx(l3_idx), .res_data(l3_res));
  act_buffer #(.N(P_OUT_N), .W(DATA_W)) u_tempo3 (
    .clk(ap_clk), .rst_n(ap_rst_n), .we(l3_we), .widx(l3_idx), .wdata(l3_res), .q(tempo3));

  // ---------------------------------------------------------------- class
  logic [$clog2(P_OUT_N)-1:0] cls;
  logic [DATA_W-1:0]          cls_score_unused;

  argmax #(.N(P_OUT_N), .W(DATA_W)) u_argmax (
    .scores(tempo3), .idx(cls), .max_val(cls_score_unused));

  // ---------------------------------------------------------------- out1, typei
  logic [OW-1:0] out_cnt;
  logic          type_sent;
  logic          o_valid, o_ready, t_valid, t_ready;

  assign o_valid = (state == S_OUT) && (32'(out_cnt) < P_OUT_N);
  assign t_valid = (state == S_OUT) && !type_sent;
  wire o_fire = o_valid && o_ready;
  wire t_fire = t_valid && t_ready;

  axis_reg_slice #(.W(DATA_W + 1)) u_out1_slice (
    .clk(ap_clk), .rst_n(ap_rst_n),
    .s_data({32'(out_cnt) == P_OUT_N - 1, tempo3[($clog2(P_OUT_N))'(out_cnt)]}),
    .s_valid(o_valid), .s_ready(o_ready),
    .m_data({out1_tlast, out1_tdata}), .m_valid(out1_tvalid), .m_ready(out1_tready)
  );

  axis_reg_slice #(.W(DATA_W + 1)) u_typei_slice (
    .clk(ap_clk), .rst_n(ap_rst_n),
    .s_data({1'b1, DATA_W'(cls)}), .s_valid(t_valid), .s_ready(t_ready),
    .m_data({typei_tlast, typei_tdata}), .m_valid(typei_tvalid), .m_ready(typei_tready)
  );

  // ---------------------------------------------------------------- control
  wire out_done  = (32'(out_cnt) == P_OUT_N) || ((32'(out_cnt) == P_OUT_N - 1) && o_fire);
  wire type_done = type_sent || t_fire;

  always_ff @(posedge ap_clk) begin
    if (!ap_rst_n) begin
      state     <= S_LOAD;
      in_cnt    <= '0;
      out_cnt   <= '0;
      type_sent <= 1'b0;
      l1_start  <= 1'b0;
      l2_start  <= 1'b0;
      l3_start  <= 1'b0;
    end else begin
      l1_start <= 1'b0;
      l2_start <= 1'b0;
      l3_start <= 1'b0;
      unique case (state)
        S_LOAD: if (in_fire) begin
          if (32'(in_cnt) == P_IN_N - 1) begin
            in_cnt   <= '0;
            state    <= S_L1;
            l1_start <= 1'b1;
          end else begin
            in_cnt <= in_cnt + 1'b1;
          end
        end
        S_L1: if (l1_done) begin
          state    <= S_L2;
          l2_start <= 1'b1;
        end
        S_L2: if (l2_done) begin
          state    <= S_L3;
          l3_start <= 1'b1;
        end
        S_L3: if (l3_done) begin
          state     <= S_OUT;
          out_cnt   <= '0;
          type_sent <= 1'b0;
        end
        S_OUT: begin
          if (o_fire)    out_cnt   <= out_cnt + 1'b1;
          if (t_fire)    type_sent <= 1'b1;
          if (out_done && type_done) state <= S_LOAD;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // a layer is only started when the one before it has finished
  a_one_layer: assert property (@(posedge ap_clk) disable iff (!ap_rst_n)
    $onehot0({l1_busy, l2_busy, l3_busy}));

endmodule
