// tb_dataset_run: the core run over a dataset the size of the published one.
//
// The published accuracy run classifies 36363 samples of ten inputs.  The
// samples themselves and the trained weights are not available, so this
// test generates 36363 random samples in the same integer range (-512..511)
// and a random network, streams them back to back through the core at its
// full size with the outputs always ready, and checks every score and
// class against an integer model of the network (32-bit wrapping, ReLU on
// the hidden layers, lowest index wins a tie).  It also checks that the
// class words come exactly 76 cycles apart, so that the whole run takes
// 76 * 36363 cycles (about 27.6 ms at 100 MHz).
module tb_dataset_run;
  import dsaen_pkg::*;

  localparam int SAMPLES  = 36363;
  localparam int INTERVAL = IN_N + H1_N + H2_N + 2 * OUT_N + 12;

  logic ap_clk = 1'b0, ap_rst_n = 1'b0;
  logic [DATA_W-1:0] in1_tdata, out1_tdata, typei_tdata;
  logic in1_tvalid, in1_tready, in1_tlast;
  logic out1_tvalid, out1_tready, out1_tlast;
  logic typei_tvalid, typei_tready, typei_tlast;
  logic cfg_we;
  logic [2:0] cfg_sel;
  logic [5:0] cfg_row, cfg_lane;
  logic [W_W-1:0] cfg_data;
  logic [2:0] state_o;

  dsaen dut (.*);

  always #5 ap_clk = ~ap_clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge ap_clk) cycle <= cycle + 1;

  int w1 [H1_N][IN_N];  int b1 [H1_N];
  int w2 [H2_N][H1_N];  int b2 [H2_N];
  int w3 [OUT_N][H2_N]; int b3 [OUT_N];

  typedef struct { int score [OUT_N]; int cls; } result_t;
  result_t expq[$];
  int n_class [OUT_N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  function automatic result_t reference(input int x [IN_N]);
    int h1 [H1_N]; int h2 [H2_N]; result_t r;
    for (int n = 0; n < H1_N; n++) begin
      h1[n] = b1[n];
      for (int i = 0; i < IN_N; i++) h1[n] += x[i] * w1[n][i];
      if (h1[n] < 0) h1[n] = 0;
    end
    for (int n = 0; n < H2_N; n++) begin
      h2[n] = b2[n];
      for (int i = 0; i < H1_N; i++) h2[n] += h1[i] * w2[n][i];
      if (h2[n] < 0) h2[n] = 0;
    end
    r.cls = 0;
    for (int n = 0; n < OUT_N; n++) begin
      r.score[n] = b3[n];
      for (int i = 0; i < H2_N; i++) r.score[n] += h2[i] * w3[n][i];
      if (r.score[n] > r.score[r.cls]) r.cls = n;
    end
    return r;
  endfunction

  task automatic cfg_write(input mem_sel_e sel, input int row, input int lane, input int val);
    cfg_we = 1'b1; cfg_sel = sel; cfg_row = 6'(row); cfg_lane = 6'(lane); cfg_data = val;
    @(negedge ap_clk);
    cfg_we = 1'b0;
  endtask

  // output side: always ready; check each word as it is taken
  int out_word = 0, out_sample = 0, type_sample = 0;
  longint first_type = -1, last_type = -1;
  always @(negedge ap_clk) if (ap_rst_n) begin
    if (out1_tvalid) begin
      if (out_sample < expq.size())
        check($signed(out1_tdata) == expq[out_sample].score[out_word] &&
              out1_tlast == (out_word == OUT_N - 1),
              $sformatf("sample %0d score %0d", out_sample, out_word));
      if (out_word == OUT_N - 1) begin out_word = 0; out_sample++; end
      else out_word++;
    end
    if (typei_tvalid) begin
      if (type_sample < expq.size())
        check(int'(typei_tdata) == expq[type_sample].cls,
              $sformatf("sample %0d class %0d", type_sample, typei_tdata));
      if (last_type >= 0)
        check(cycle - last_type == INTERVAL,
              $sformatf("class words %0d cycles apart", cycle - last_type));
      if (first_type < 0) first_type = cycle;
      last_type = cycle;
      type_sample++;
    end
  end

  initial begin
    int x [IN_N];
    in1_tvalid = 1'b0; in1_tdata = '0; in1_tlast = 1'b0;
    out1_tready = 1'b1; typei_tready = 1'b1;
    cfg_we = 1'b0; cfg_sel = '0; cfg_row = '0; cfg_lane = '0; cfg_data = '0;
    foreach (n_class[c]) n_class[c] = 0;
    repeat (4) @(negedge ap_clk);
    ap_rst_n = 1'b1;
    @(negedge ap_clk);
    for (int n = 0; n < H1_N; n++) begin
      b1[n] = $urandom_range(0, 4000) - 2000; cfg_write(MEM_B1, n, 0, b1[n]);
      for (int i = 0; i < IN_N; i++) begin
        w1[n][i] = $urandom_range(0, 254) - 127; cfg_write(MEM_W1, n, i, w1[n][i]);
      end
    end
    for (int n = 0; n < H2_N; n++) begin
      b2[n] = $urandom_range(0, 4000) - 2000; cfg_write(MEM_B2, n, 0, b2[n]);
      for (int i = 0; i < H1_N; i++) begin
        w2[n][i] = $urandom_range(0, 16) - 8; cfg_write(MEM_W2, n, i, w2[n][i]);
      end
    end
    for (int n = 0; n < OUT_N; n++) begin
      b3[n] = $urandom_range(0, 4000) - 2000; cfg_write(MEM_B3, n, 0, b3[n]);
      for (int i = 0; i < H2_N; i++) begin
        w3[n][i] = $urandom_range(0, 16) - 8; cfg_write(MEM_W3, n, i, w3[n][i]);
      end
    end
    // stream the samples: the input is always valid, ready decides the pace
    for (int s = 0; s < SAMPLES; s++) begin
      result_t r;
      for (int i = 0; i < IN_N; i++) x[i] = $urandom_range(0, 1023) - 512;
      r = reference(x);
      expq.push_back(r);
      n_class[r.cls]++;
      for (int i = 0; i < IN_N; i++) begin
        in1_tvalid = 1'b1; in1_tdata = x[i]; in1_tlast = (i == IN_N - 1);
        forever begin
          bit rdy;
          rdy = in1_tready;
          @(negedge ap_clk);
          if (rdy) break;
        end
      end
      in1_tvalid = 1'b0;
      // keep the check queue short: drop results already compared
      while (type_sample > 0 && out_sample > 0 && expq.size() > 4) begin
        void'(expq.pop_front());
        type_sample--; out_sample--;
      end
    end
    repeat (200) @(negedge ap_clk);
    check(expq.size() > 0 && type_sample == expq.size() && out_sample == expq.size(),
          "results missing at the end");
    check(last_type - first_type == longint'(INTERVAL) * (SAMPLES - 1),
          $sformatf("run took %0d cycles from first to last class", last_type - first_type));
    for (int c = 0; c < OUT_N; c++) check(n_class[c] > 0, $sformatf("class %0d never occurred", c));
    $display("%0d samples, %0d cycles first to last class, classes %0d/%0d/%0d",
             SAMPLES, last_type - first_type, n_class[0], n_class[1], n_class[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge ap_clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
