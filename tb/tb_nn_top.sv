// tb_nn_top: end-to-end test of the full network at its default size
// (3 -> 20 -> 20 -> 20 -> 1).
// It writes a random weight and bias set through the weight-load port,
// computes every event's q/pT with the bit-exact reference of tb_ref_pkg,
// and compares each network output in order. Three phases:
//  1. events offered every cycle: the network must take one every 8 cycles
//     (network deadtime) and in_ready must push back in between;
//  2. events offered exactly every 8 cycles: every result must come 39
//     cycles after its event (network latency);
//  3. random spacing, including inputs large enough to saturate.
// In phase 2 the latency of each layer is also checked: 7, 11, 11 and 10
// cycles from start beat to start beat.
// Mechanisms counted, each must occur: input back-pressure, an output block
// of hidden layer 1 holding a stream head for hidden layer 2, a bubble in
// the six-neuron group C stream, a ReLU that clips, a saturation.
module tb_nn_top;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst, in_valid, in_ready, out_valid;
  word_t [2:0] x;
  word_t out_data;
  logic wl_we;
  logic [1:0] wl_layer, wl_lane;
  logic [4:0] wl_neuron, wl_src_id;
  word_t wl_weight;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  nn_top dut (.clk, .rst, .in_valid, .in_ready, .x, .out_valid, .out_data,
              .wl_we, .wl_layer, .wl_neuron, .wl_lane, .wl_src_id, .wl_weight);

  shortint W1[20][3], B1[20], W2[20][20], B2[20], W3[20][20], B3[20], WO[20], BO;
  shortint exp_q[$];
  int      acc_t[$];
  int      t_in_q[$];
  int n_out = 0, lat39 = 0, backpressure = 0, holds = 0, bubbles = 0, relu_clips = 0;
  int accepted = 0, phase = 0, first_acc1 = 0, last_acc1 = 0, acc1 = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic load(input int layer, input int n, input int lane, input int src, input shortint w);
    wl_we = 1; wl_layer = 2'(layer); wl_neuron = 5'(n); wl_lane = 2'(lane);
    wl_src_id = 5'(src); wl_weight = w;
    @(negedge clk);
    wl_we = 0;
  endtask

  function automatic shortint rnd(input int lo, input int hi);
    return shortint'($urandom_range(0, hi - lo) + lo);
  endfunction

  // hidden layer with three PEs per neuron: partial sums over the groups
  function automatic void hidden(input shortint v[20], input shortint W[20][20],
                                 input shortint B[20], output shortint r[20]);
    for (int n = 0; n < 20; n++) begin
      shortint p[3];
      for (int g = 0; g < 3; g++) begin
        shortint xs[], ws[];
        int m;
        m = (g == 2) ? 6 : 7;
        xs = new[m]; ws = new[m];
        for (int k = 0; k < m; k++) begin xs[k] = v[7*g+k]; ws[k] = W[n][7*g+k]; end
        p[g] = partial(xs, ws, (g == 0) ? B[n] : shortint'(0));
      end
      r[n] = add_s(add_s(p[0], p[1]), p[2]);
    end
  endfunction

  function automatic shortint network(input shortint xin[3]);
    shortint h1[20], h2[20], h3[20];
    shortint p[3];
    for (int n = 0; n < 20; n++) begin
      shortint xs[], ws[];
      xs = new[3]; ws = new[3];
      for (int i = 0; i < 3; i++) begin xs[i] = xin[i]; ws[i] = W1[n][i]; end
      h1[n] = partial(xs, ws, B1[n]);
      if (h1[n] < 0) relu_clips++;
      h1[n] = relu_r(h1[n]);
    end
    hidden(h1, W2, B2, h2);
    foreach (h2[n]) begin if (h2[n] < 0) relu_clips++; h2[n] = relu_r(h2[n]); end
    hidden(h2, W3, B3, h3);
    foreach (h3[n]) begin if (h3[n] < 0) relu_clips++; h3[n] = relu_r(h3[n]); end
    for (int g = 0; g < 3; g++) begin
      shortint xs[], ws[];
      int m;
      m = (g == 2) ? 6 : 7;
      xs = new[m]; ws = new[m];
      for (int k = 0; k < m; k++) begin xs[k] = h3[7*g+k]; ws[k] = WO[7*g+k]; end
      p[g] = partial(xs, ws, (g == 0) ? BO : shortint'(0));
    end
    return add_s(add_s(p[0], p[1]), p[2]);   // no ReLU on the output
  endfunction

  // per-layer latency (phase 2): start beats of consecutive layer buses
  int q_b0[$], q_b1[$], q_b2[$], q_b3[$], lay_ok = 0;
  always @(negedge clk) begin
    if (!rst && phase == 2) begin
      if (in_valid && in_ready) q_b0.push_back(cyc);
      if (dut.bus1.valid && dut.bus1.first) q_b1.push_back(cyc);
      if (dut.bus2.valid && dut.bus2.first) q_b2.push_back(cyc);
      if (dut.bus3.valid && dut.bus3.first) q_b3.push_back(cyc);
      if (out_valid && q_b0.size() > 0 && q_b3.size() > 0) begin
        int t0, t1, t2, t3;
        t0 = q_b0.pop_front(); t1 = q_b1.pop_front();
        t2 = q_b2.pop_front(); t3 = q_b3.pop_front();
        chk(t1 - t0 == 7 && t2 - t1 == 11 && t3 - t2 == 11 && cyc - t3 == 10,
            $sformatf("layer latencies %0d %0d %0d %0d", t1 - t0, t2 - t1, t3 - t2, cyc - t3));
        lay_ok++;
      end
    end
  end

  // monitors
  always @(negedge clk) begin
    if (!rst) begin
      if (in_valid && !in_ready) backpressure++;
      if (dut.u_l1.hold) holds++;
      if (dut.bus1.valid && !dut.bus1.group_id[2]) bubbles++;
      if (in_valid && in_ready) begin
        accepted++; t_in_q.push_back(cyc);
        if (phase == 1) begin
          if (acc1 == 0) first_acc1 = cyc;
          last_acc1 = cyc; acc1++; acc_t.push_back(cyc);
        end
      end
      if (out_valid) begin
        shortint e;
        int t0;
        e = exp_q.pop_front();
        t0 = t_in_q.pop_front();
        chk(out_data === e, $sformatf("event %0d got %0d want %0d", n_out, out_data, e));
        if (cyc - t0 == 39) lat39++;
        if (phase == 2) chk(cyc - t0 == 39, $sformatf("latency %0d", cyc - t0));
        n_out++;
      end
    end
  end

  task automatic send(input shortint xin[3]);
    in_valid = 1;
    for (int i = 0; i < 3; i++) x[i] = xin[i];
    exp_q.push_back(network(xin));
    @(negedge clk);
    while (!in_ready) @(negedge clk);   // in_ready is sampled just before the edge
    @(posedge clk); #1;                 // taken at this edge
    in_valid = 0;
    x = '0;
  endtask

  initial begin
    shortint xin[3];
    int n_ev;
    rst = 1; in_valid = 0; x = '0;
    wl_we = 0; wl_layer = 0; wl_neuron = 0; wl_lane = 0; wl_src_id = 0; wl_weight = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    // weights and biases
    for (int n = 0; n < 20; n++) begin
      for (int i = 0; i < 3; i++) begin W1[n][i] = rnd(-700, 700); load(0, n, 0, i, W1[n][i]); end
      B1[n] = rnd(-300, 300); load(0, n, 0, 31, B1[n]);
    end
    for (int n = 0; n < 20; n++) begin
      for (int j = 0; j < 20; j++) begin
        W2[n][j] = rnd(-400, 400); load(1, n, j / 7, j % 7, W2[n][j]);
        W3[n][j] = rnd(-400, 400); load(2, n, j / 7, j % 7, W3[n][j]);
      end
      B2[n] = rnd(-300, 300); B3[n] = rnd(-300, 300);
      for (int g = 0; g < 3; g++) begin
        load(1, n, g, 31, (g == 0) ? B2[n] : shortint'(0));
        load(2, n, g, 31, (g == 0) ? B3[n] : shortint'(0));
      end
    end
    for (int j = 0; j < 20; j++) begin WO[j] = rnd(-600, 600); load(3, 0, j / 7, j % 7, WO[j]); end
    BO = rnd(-300, 300);
    for (int g = 0; g < 3; g++) load(3, 0, g, 31, (g == 0) ? BO : shortint'(0));
    repeat (5) @(negedge clk);

    // phase 1: offer an event on every cycle
    phase = 1;
    n_ev = 0;
    in_valid = 1;
    repeat (400) begin
      for (int i = 0; i < 3; i++) begin xin[i] = rnd(-3000, 3000); x[i] = xin[i]; end
      // the event is taken at the next edge if in_ready is high now
      #1;
      if (in_ready) exp_q.push_back(network(xin));
      @(negedge clk);
    end
    in_valid = 0;
    repeat (80) @(negedge clk);
    // the first events enter faster (hidden layer 1 has deadtime 5) until
    // the 8-cycle deadtime of the later layers sets the pace
    chk(acc1 > 40, "enough events at full rate");
    for (int i = acc1 - 40; i < acc1; i++)
      chk(acc_t[i] - acc_t[i-1] == 8, $sformatf("steady gap %0d", acc_t[i] - acc_t[i-1]));
    $display("phase 1 gaps: %0d %0d %0d %0d", acc_t[1]-acc_t[0], acc_t[2]-acc_t[1], acc_t[3]-acc_t[2], acc_t[4]-acc_t[3]);

    // phase 2: an event every 8 cycles
    phase = 2;
    repeat (60) begin
      in_valid = 1;
      for (int i = 0; i < 3; i++) begin xin[i] = rnd(-3000, 3000); x[i] = xin[i]; end
      #1;
      chk(in_ready, "ready every 8 cycles");
      exp_q.push_back(network(xin));
      @(negedge clk);
      in_valid = 0;
      repeat (7) @(negedge clk);
    end
    repeat (60) @(negedge clk);

    // phase 3: random spacing, some huge inputs
    phase = 3;
    repeat (300) begin
      for (int i = 0; i < 3; i++) xin[i] = ($urandom % 8 == 0) ? shortint'($urandom) : rnd(-3000, 3000);
      in_valid = 1;
      for (int i = 0; i < 3; i++) x[i] = xin[i];
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      exp_q.push_back(network(xin));
      @(negedge clk);
      in_valid = 0;
      repeat ($urandom_range(0, 12)) @(negedge clk);
    end
    repeat (80) @(negedge clk);

    chk(n_out == accepted && exp_q.size() == 0, $sformatf("all results out: %0d of %0d", n_out, accepted));
    $display("events %0d, latency-39 results %0d, back-pressure cycles %0d, L1 holds %0d, group-C bubbles %0d, ReLU clips %0d, saturations %0d",
             n_out, lat39, backpressure, holds, bubbles, relu_clips, sat_count);
    chk(lay_ok > 40, $sformatf("per-layer latencies checked %0d times", lay_ok));
    chk(backpressure > 0, "back-pressure happened");
    chk(holds > 0, "output-block hold happened");
    chk(bubbles > 0, "group C bubble happened");
    chk(relu_clips > 0, "ReLU clipped");
    chk(sat_count > 0, "saturation happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
