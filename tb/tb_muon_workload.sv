// tb_muon_workload: runs a large sample of simulated muon candidates through
// the full-size network and compares every hardware result with the
// bit-exact software model, event by event.
//
// Event generator (a toy version of a three-station barrel RPC trigger):
// muons from the origin with pT uniform in 3..30 GeV, random charge, polar
// angle uniform in 40..85 degrees. They fly straight to r = 6 m and then
// bend in the (r, z) plane in a 0.5 T field, with radius p / (0.3 B),
// p = pT / sin(theta). The z positions at r = 6.8, 7.5 and 9.8 m are
// rounded to the centres of 3 cm strips. The network inputs are
//   x1 = z at 7.5 m (m), x2 = z residual at 6.8 m, x3 = z residual at 9.8 m
//   (residuals to the line from the origin through the 7.5 m point, in
//   strips), all as Q5.10 words.
// Network weights: the trained weights are not available, so a hand-made
// set stands in for them. Hidden neurons 0 and 1 carry relu(x3) and
// relu(-x3) through the three layers with unit weights. The output is
// c * (h0 - h1), with c fitted to q/pT on a calibration sample. The other
// 18 neurons of every layer get random weights; they are computed and
// checked in the hardware but have zero output weight.
// Checks: every result equals the software model; the charge sign of the
// estimate is right for most muons below 10 GeV (a loose sanity check of
// the generator and weights, not of the hardware); the network keeps one
// event per 8 cycles.
// Precision: the same network is also evaluated in floating point (same
// weights, unrounded inputs, no truncation or saturation), as the software
// reference of a trained model would be. Every hardware result must lie
// within 4 LSB (4/1024) of it, and the spread of the relative difference of
// the pT estimates (1/|output|) is printed for 3-10, 10-20 and 20-30 GeV.
module tb_muon_workload;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  localparam int N_EVENTS = 200000;
  localparam real PI = 3.14159265358979;
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
  real     qpt_q[$], flt_q[$];
  real     rd_s[3] = '{0.0, 0.0, 0.0}, rd_ss[3] = '{0.0, 0.0, 0.0};
  int      rd_n[3] = '{0, 0, 0};
  real     max_abs = 0;
  int n_out = 0, mism = 0, low_pt = 0, low_pt_ok = 0, first_t = 0, last_t = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
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

  function automatic real urand();
    return real'($urandom) / 4294967296.0;
  endfunction

  function automatic shortint to_q(input real v);
    real s = v * 1024.0;
    if (s > 32767.0) s = 32767.0;
    if (s < -32768.0) s = -32768.0;
    return shortint'($rtoi(s));
  endfunction

  // z of the track at three radii; q = +1/-1
  function automatic void track(input real pt, input int q, input real theta,
                                output real z1, output real z2, output real z3);
    real radius, r, z, dr, dz, ds, ang, rl[3], zl[3];
    int li;
    radius = (pt / $sin(theta)) / (0.3 * 0.5);
    rl[0] = 6.8; rl[1] = 7.5; rl[2] = 9.8;
    r = 6.0; z = 6.0 / $tan(theta);
    ang = theta;              // direction angle from the z axis
    ds = 0.01;
    li = 0;
    while (li < 3) begin
      dr = ds * $sin(ang); dz = ds * $cos(ang);
      if (r + dr >= rl[li]) begin
        zl[li] = z + dz * (rl[li] - r) / dr;
        li++;
        continue;
      end
      r += dr; z += dz;
      ang += q * ds / radius;
    end
    z1 = zl[0]; z2 = zl[1]; z3 = zl[2];
  endfunction

  function automatic real strip(input real z);
    return ($floor(z / 0.03) + 0.5) * 0.03;
  endfunction

  function automatic void inputs(input real pt, input int q, input real theta,
                                 output real x1, output real x2, output real x3);
    real z1, z2, z3;
    track(pt, q, theta, z1, z2, z3);
    z1 = strip(z1); z2 = strip(z2); z3 = strip(z3);
    x1 = z2;
    x2 = (z1 - z2 * 6.8 / 7.5) / 0.03;
    x3 = (z3 - z2 * 9.8 / 7.5) / 0.03;
  endfunction

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
      r[n] = relu_r(add_s(add_s(p[0], p[1]), p[2]));
    end
  endfunction

  function automatic shortint network(input shortint xin[3]);
    shortint h1[20], h2[20], h3[20], p[3];
    for (int n = 0; n < 20; n++) begin
      shortint xs[], ws[];
      xs = new[3]; ws = new[3];
      for (int i = 0; i < 3; i++) begin xs[i] = xin[i]; ws[i] = W1[n][i]; end
      h1[n] = relu_r(partial(xs, ws, B1[n]));
    end
    hidden(h1, W2, B2, h2);
    hidden(h2, W3, B3, h3);
    for (int g = 0; g < 3; g++) begin
      shortint xs[], ws[];
      int m;
      m = (g == 2) ? 6 : 7;
      xs = new[m]; ws = new[m];
      for (int k = 0; k < m; k++) begin xs[k] = h3[7*g+k]; ws[k] = WO[7*g+k]; end
      p[g] = partial(xs, ws, (g == 0) ? BO : shortint'(0));
    end
    return add_s(add_s(p[0], p[1]), p[2]);
  endfunction

  // floating-point reference of the same network
  function automatic real relu_f(input real v);
    return (v > 0.0) ? v : 0.0;
  endfunction

  function automatic real network_f(input real xin[3]);
    real h1[20], h2[20], h3[20], acc;
    for (int n = 0; n < 20; n++) begin
      acc = B1[n] / 1024.0;
      for (int i = 0; i < 3; i++) acc += W1[n][i] / 1024.0 * xin[i];
      h1[n] = relu_f(acc);
    end
    for (int n = 0; n < 20; n++) begin
      acc = B2[n] / 1024.0;
      for (int j = 0; j < 20; j++) acc += W2[n][j] / 1024.0 * h1[j];
      h2[n] = relu_f(acc);
    end
    for (int n = 0; n < 20; n++) begin
      acc = B3[n] / 1024.0;
      for (int j = 0; j < 20; j++) acc += W3[n][j] / 1024.0 * h2[j];
      h3[n] = relu_f(acc);
    end
    acc = BO / 1024.0;
    for (int j = 0; j < 20; j++) acc += WO[j] / 1024.0 * h3[j];
    return acc;
  endfunction

  always @(negedge clk) begin
    if (!rst && out_valid) begin
      shortint e;
      real qpt, f, d, pt_f, pt_h;
      int bin;
      e = exp_q.pop_front();
      qpt = qpt_q.pop_front();
      f = flt_q.pop_front();
      d = out_data / 1024.0 - f;
      if (d < 0) d = -d;
      if (d > max_abs) max_abs = d;
      if (d > 4.0 / 1024.0)
        chk(0, $sformatf("event %0d: hardware %0d differs from floating point %f", n_out, out_data, f * 1024.0));
      if (out_data != 0 && f != 0.0) begin
        pt_f = 1.0 / ((f < 0) ? -f : f);
        pt_h = 1024.0 / ((out_data < 0) ? -out_data : out_data);
        bin = (pt_f < 10.0) ? 0 : (pt_f < 20.0) ? 1 : 2;
        if (pt_f >= 3.0 && pt_f < 30.0) begin
          rd_n[bin]++;
          rd_s[bin] += (pt_h - pt_f) / pt_f;
          rd_ss[bin] += (pt_h - pt_f) * (pt_h - pt_f) / (pt_f * pt_f);
        end
      end
      if (out_data !== e) begin
        mism++;
        chk(0, $sformatf("event %0d got %0d want %0d", n_out, out_data, e));
      end
      if (1.0 / (qpt < 0 ? -qpt : qpt) < 10.0) begin
        low_pt++;
        if ((qpt > 0) == (out_data > 0)) low_pt_ok++;
      end
      if (n_out == 0) first_t = cyc;
      last_t = cyc;
      n_out++;
    end
  end

  initial begin
    real sxy, sxx, c, pt, theta, r1, r2, r3;
    int q;
    shortint xin[3];
    rst = 1; in_valid = 0; x = '0;
    wl_we = 0; wl_layer = 0; wl_neuron = 0; wl_lane = 0; wl_src_id = 0; wl_weight = 0;
    // calibration: q/pT = c * x3
    sxy = 0; sxx = 0;
    for (int i = 0; i < 2000; i++) begin
      pt = 3.0 + 27.0 * urand(); q = (($urandom % 2) != 0) ? 1 : -1;
      theta = (40.0 + 45.0 * urand()) * PI / 180.0;
      inputs(pt, q, theta, r1, r2, r3);
      sxy += r3 * q / pt; sxx += r3 * r3;
    end
    c = sxy / sxx;
    $display("fitted q/pT per strip of RPC3 residual: %f", c);
    // weights
    for (int n = 0; n < 20; n++) begin
      B1[n] = (n < 2) ? shortint'(0) : rnd(-300, 300);
      B2[n] = (n < 2) ? shortint'(0) : rnd(-300, 300);
      B3[n] = (n < 2) ? shortint'(0) : rnd(-300, 300);
      for (int i = 0; i < 3; i++)
        W1[n][i] = (n == 0) ? ((i == 2) ? shortint'(1024) : shortint'(0)) :
                   (n == 1) ? ((i == 2) ? shortint'(-1024) : shortint'(0)) : rnd(-500, 500);
      for (int j = 0; j < 20; j++) begin
        W2[n][j] = (n < 2) ? ((j == n) ? shortint'(1024) : shortint'(0)) : rnd(-300, 300);
        W3[n][j] = (n < 2) ? ((j == n) ? shortint'(1024) : shortint'(0)) : rnd(-300, 300);
      end
      WO[n] = (n == 0) ? to_q(c) : (n == 1) ? to_q(-c) : shortint'(0);
    end
    BO = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int n = 0; n < 20; n++) begin
      for (int i = 0; i < 3; i++) load(0, n, 0, i, W1[n][i]);
      load(0, n, 0, 31, B1[n]);
      for (int j = 0; j < 20; j++) begin
        load(1, n, j / 7, j % 7, W2[n][j]);
        load(2, n, j / 7, j % 7, W3[n][j]);
      end
      for (int g = 0; g < 3; g++) begin
        load(1, n, g, 31, (g == 0) ? B2[n] : shortint'(0));
        load(2, n, g, 31, (g == 0) ? B3[n] : shortint'(0));
      end
      load(3, 0, n / 7, n % 7, WO[n]);
    end
    for (int g = 0; g < 3; g++) load(3, 0, g, 31, (g == 0) ? BO : shortint'(0));
    repeat (5) @(negedge clk);

    // the event stream, offered at full rate
    in_valid = 1;
    for (int ev = 0; ev < N_EVENTS; ev++) begin
      pt = 3.0 + 27.0 * urand(); q = (($urandom % 2) != 0) ? 1 : -1;
      theta = (40.0 + 45.0 * urand()) * PI / 180.0;
      inputs(pt, q, theta, r1, r2, r3);
      xin[0] = to_q(r1); xin[1] = to_q(r2); xin[2] = to_q(r3);
      for (int i = 0; i < 3; i++) x[i] = xin[i];
      exp_q.push_back(network(xin));
      begin
        real xr[3];
        xr[0] = r1; xr[1] = r2; xr[2] = r3;
        flt_q.push_back(network_f(xr));
      end
      qpt_q.push_back(q / pt);
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    in_valid = 0;
    repeat (100) @(negedge clk);
    chk(n_out == N_EVENTS, $sformatf("all events out: %0d", n_out));
    chk(mism == 0, $sformatf("mismatches: %0d", mism));
    chk(last_t - first_t <= 8 * (N_EVENTS - 1), $sformatf("rate: %0d cycles for %0d events", last_t - first_t, n_out));
    chk(low_pt > 0 && low_pt_ok * 100 >= low_pt * 90,
        $sformatf("charge sign right below 10 GeV: %0d of %0d", low_pt_ok, low_pt));
    chk(max_abs <= 4.0 / 1024.0, $sformatf("largest difference to floating point: %f", max_abs));
    for (int b = 0; b < 3; b++)
      if (rd_n[b] > 0)
        $display("pT %s GeV: %0d events, relative pT difference hardware vs floating point: mean %e, std %e",
                 (b == 0) ? "3-10" : (b == 1) ? "10-20" : "20-30", rd_n[b], rd_s[b] / rd_n[b],
                 $sqrt(rd_ss[b] / rd_n[b] - (rd_s[b] / rd_n[b]) * (rd_s[b] / rd_n[b])));
    $display("largest |hardware - floating point| = %f (%0.2f LSB)", max_abs, max_abs * 1024.0);
    $display("events %0d, hardware/software mismatches %0d, charge sign right below 10 GeV %0d of %0d, cycles %0d",
             n_out, mism, low_pt_ok, low_pt, last_t - first_t);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
