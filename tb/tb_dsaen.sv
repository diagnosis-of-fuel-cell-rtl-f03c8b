// tb_dsaen: end-to-end test of the DSAE classifier core at its full size.
//
// The core is used with its default parameters (10-32-16-3).  The test
// loads random integer weights and biases through the configuration port,
// streams samples in, and compares every class score (out1) and every class
// (typei) with a reference network computed here with 32-bit wrapping
// integer arithmetic: ReLU on both hidden layers, none on the output layer,
// the lowest index winning a tie.  Samples are random 10-bit signed values,
// in the range of the published input vectors, plus those three published
// vectors themselves (the weights are random, so their classes are not the
// published ones).
//
// Phases:
//   1. no stalls: input always valid, outputs always ready; checks one
//      sample per IN_N+H1_N+H2_N+2*OUT_N+12 = 76 cycles.
//   2. random gaps on in1 and random back-pressure on out1 and typei.
//   3. weights reloaded between samples (a new network, same core).
//   4. a tie: equal output rows, so class 0 must win.
// It counts how often each mechanism happened and fails if one never did:
// input gaps, input back-pressure, out1 stalls, typei stalls, hidden neurons
// clipped by ReLU, negative output scores, each of the three classes, a
// weight reload, and a tie.
module tb_dsaen;
  import dsaen_pkg::*;

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

  // reference network
  int w1 [H1_N][IN_N];  int b1 [H1_N];
  int w2 [H2_N][H1_N];  int b2 [H2_N];
  int w3 [OUT_N][H2_N]; int b3 [OUT_N];

  typedef struct { int score [OUT_N]; int cls; } result_t;
  result_t expq[$];

  // mechanism counters
  int n_in_gap = 0, n_in_bp = 0, n_out_stall = 0, n_type_stall = 0;
  int n_clip = 0, n_neg_score = 0, n_reload = 0, n_tie = 0;
  int n_class [OUT_N];
  int n_samples = 0, n_scores = 0, n_types = 0;

  bit gaps_on = 1'b0, stalls_on = 1'b0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cycle, what); end
  endtask

  function automatic result_t reference(input int x [IN_N], input bit count);
    int h1 [H1_N]; int h2 [H2_N]; result_t r;
    for (int n = 0; n < H1_N; n++) begin
      h1[n] = b1[n];
      for (int i = 0; i < IN_N; i++) h1[n] += x[i] * w1[n][i];
      if (h1[n] < 0) begin h1[n] = 0; if (count) n_clip++; end
    end
    for (int n = 0; n < H2_N; n++) begin
      h2[n] = b2[n];
      for (int i = 0; i < H1_N; i++) h2[n] += h1[i] * w2[n][i];
      if (h2[n] < 0) begin h2[n] = 0; if (count) n_clip++; end
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

  task automatic load_weights(input bit equal_outputs);
    for (int n = 0; n < H1_N; n++) begin
      b1[n] = $urandom_range(0, 4000) - 2000;
      cfg_write(MEM_B1, n, 0, b1[n]);
      for (int i = 0; i < IN_N; i++) begin
        w1[n][i] = $urandom_range(0, 254) - 127;
        cfg_write(MEM_W1, n, i, w1[n][i]);
      end
    end
    for (int n = 0; n < H2_N; n++) begin
      b2[n] = $urandom_range(0, 4000) - 2000;
      cfg_write(MEM_B2, n, 0, b2[n]);
      for (int i = 0; i < H1_N; i++) begin
        w2[n][i] = $urandom_range(0, 16) - 8;
        cfg_write(MEM_W2, n, i, w2[n][i]);
      end
    end
    for (int n = 0; n < OUT_N; n++) begin
      b3[n] = (equal_outputs && n > 0) ? b3[0] : $urandom_range(0, 4000) - 2000;
      cfg_write(MEM_B3, n, 0, b3[n]);
      for (int i = 0; i < H2_N; i++) begin
        w3[n][i] = (equal_outputs && n > 0) ? w3[0][i] : $urandom_range(0, 16) - 8;
        cfg_write(MEM_W3, n, i, w3[n][i]);
      end
    end
  endtask

  task automatic send_sample(input int x [IN_N]);
    result_t r;
    r = reference(x, 1'b1);
    expq.push_back(r);
    for (int n = 0; n < OUT_N; n++) if (r.score[n] < 0) n_neg_score++;
    n_class[r.cls]++;
    for (int i = 0; i < IN_N; i++) begin
      while (gaps_on && $urandom_range(0, 3) == 0) begin
        in1_tvalid = 1'b0;
        if (in1_tready) n_in_gap++;
        @(negedge ap_clk);
      end
      in1_tvalid = 1'b1; in1_tdata = x[i]; in1_tlast = (i == IN_N - 1);
      forever begin
        bit rdy = in1_tready;     // registered: stable until the next edge
        @(negedge ap_clk);
        if (rdy) break;
        n_in_bp++;
      end
      in1_tvalid = 1'b0; in1_tlast = 1'b0;
    end
    n_samples++;
  endtask

  task automatic random_sample(output int x [IN_N]);
    for (int i = 0; i < IN_N; i++) x[i] = $urandom_range(0, 1023) - 512;
  endtask

  // sinks: decide ready at each falling edge; a beat is taken at the next
  // rising edge when valid and ready are both high now
  int out_word = 0, out_sample = 0, type_sample = 0;
  longint last_type_cycle = -1, type_gap = 0;
  always @(negedge ap_clk) if (ap_rst_n) begin
    out1_tready  = !stalls_on || ($urandom_range(0, 2) != 0);
    typei_tready = !stalls_on || ($urandom_range(0, 2) != 0);
    if (out1_tvalid && !out1_tready) n_out_stall++;
    if (typei_tvalid && !typei_tready) n_type_stall++;
    if (out1_tvalid && out1_tready) begin
      if (out_sample >= expq.size()) check(1'b0, "score with no sample sent");
      else begin
        check($signed(out1_tdata) == expq[out_sample].score[out_word],
              $sformatf("sample %0d score %0d: %0d want %0d", out_sample, out_word,
                        $signed(out1_tdata), expq[out_sample].score[out_word]));
        check(out1_tlast == (out_word == OUT_N - 1), "out1 TLAST misplaced");
      end
      n_scores++;
      if (out_word == OUT_N - 1) begin out_word = 0; out_sample++; end
      else out_word++;
    end
    if (typei_tvalid && typei_tready) begin
      if (type_sample >= expq.size()) check(1'b0, "class with no sample sent");
      else check(int'(typei_tdata) == expq[type_sample].cls && typei_tlast,
                 $sformatf("sample %0d class %0d want %0d", type_sample, typei_tdata,
                           expq[type_sample].cls));
      type_gap = (last_type_cycle < 0) ? 0 : cycle - last_type_cycle;
      last_type_cycle = cycle;
      type_sample++;
      n_types++;
    end
  end

  task automatic drain();
    int t = 0;
    while ((type_sample < n_samples || out_sample < n_samples) && t < 2000) begin
      @(negedge ap_clk); t++;
    end
    check(type_sample == n_samples && out_sample == n_samples, "outputs missing after drain");
  endtask

  // published input vectors (first one is also the single-sample test)
  int pub [3][IN_N] = '{
    '{-191, -224, -304, 511, -303, -275, -190, -2, -177, 511},
    '{-408, -224, -315, 430, 511, -225, -352, 212, -333, -265},
    '{72, 106, 126, -179, 161, 275, 127, -430, 127, 40}
  };

  initial begin
    int x [IN_N];
    longint gaps_seen [$];
    in1_tvalid = 1'b0; in1_tdata = '0; in1_tlast = 1'b0;
    out1_tready = 1'b1; typei_tready = 1'b1;
    cfg_we = 1'b0; cfg_sel = '0; cfg_row = '0; cfg_lane = '0; cfg_data = '0;
    foreach (n_class[i]) n_class[i] = 0;
    repeat (4) @(negedge ap_clk);
    ap_rst_n = 1'b1;
    @(negedge ap_clk);
    check(state_o == S_LOAD && in1_tready && !out1_tvalid && !typei_tvalid, "not idle after reset");
    load_weights(1'b0);

    // phase 1: back-to-back samples, no stalls; measure the sample interval
    for (int s = 0; s < 3; s++) send_sample(pub[s]);
    for (int s = 0; s < 20; s++) begin
      random_sample(x);
      send_sample(x);
      if (type_sample >= 2) gaps_seen.push_back(type_gap);
    end
    drain();
    foreach (gaps_seen[k])
      check(gaps_seen[k] == IN_N + H1_N + H2_N + 2 * OUT_N + 12,
            $sformatf("sample interval %0d cycles, want %0d", gaps_seen[k],
                      IN_N + H1_N + H2_N + 2 * OUT_N + 12));
    $display("phase 1: %0d samples, interval %0d cycles", n_samples, type_gap);

    // phase 2: random gaps and back-pressure
    gaps_on = 1'b1; stalls_on = 1'b1;
    for (int s = 0; s < 150; s++) begin random_sample(x); send_sample(x); end
    drain();

    // phase 3: a new network in the same core
    load_weights(1'b0);
    n_reload++;
    for (int s = 0; s < 60; s++) begin random_sample(x); send_sample(x); end
    drain();

    // phase 4: identical output neurons, every sample is a three-way tie
    load_weights(1'b1);
    n_reload++;
    for (int s = 0; s < 5; s++) begin
      random_sample(x); send_sample(x);
      n_tie++;
    end
    drain();
    for (int s = expq.size() - 5; s < expq.size(); s++)
      check(expq[s].cls == 0, "tie reference did not pick class 0");

    $display("samples=%0d scores=%0d classes=%0d", n_samples, n_scores, n_types);
    $display("mechanisms: in_gap=%0d in_backpressure=%0d out1_stall=%0d typei_stall=%0d",
             n_in_gap, n_in_bp, n_out_stall, n_type_stall);
    $display("            relu_clip=%0d negative_score=%0d class0=%0d class1=%0d class2=%0d reload=%0d tie=%0d",
             n_clip, n_neg_score, n_class[0], n_class[1], n_class[2], n_reload, n_tie);
    check(n_in_gap > 0, "no input gap happened");
    check(n_in_bp > 0, "no input back-pressure happened");
    check(n_out_stall > 0, "no out1 stall happened");
    check(n_type_stall > 0, "no typei stall happened");
    check(n_clip > 0, "ReLU never clipped");
    check(n_neg_score > 0, "no negative output score");
    for (int c = 0; c < OUT_N; c++) check(n_class[c] > 0, $sformatf("class %0d never predicted", c));
    check(n_reload > 0 && n_tie > 0, "reload or tie not exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge ap_clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
