// tb_nn_layer: one hidden layer at its default size (20 neurons, 3 PEs each,
// 7-element streams, ReLU). Loads random weights and biases through the
// weight-load port, sends random three-lane input streams and compares the
// three output streams with a reference computed here. While the next layer
// is ready, the output stream must start 11 cycles after the input stream
// (layer latency) and streams offered back to back must be accepted every 8
// cycles (deadtime). Some streams are sent while the next layer is held not
// ready; the output must then wait and the values must still be right.
module tb_nn_layer;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst, in_ready, out_ready;
  layer_bus_t in_bus, out_bus;
  wload_t wl;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  nn_layer dut (.clk, .rst, .in_bus, .in_ready, .wl, .out_bus, .out_ready);

  shortint W[20][3][7], B[20];
  shortint exp_q[$];   // 20 values per stream
  int start_q[$];
  int n_streams = 0, n_out = 0, n_stall = 0, lat_ok = 0, lat_checked = 0;
  int last_accept = -100, gaps8 = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic void model(input shortint x[21]);
    shortint r[20];
    for (int n = 0; n < 20; n++) begin
      shortint p[3];
      for (int g = 0; g < 3; g++) begin
        shortint xs[], ws[];
        int m = (g == 2) ? 6 : 7;
        xs = new[m]; ws = new[m];
        for (int k = 0; k < m; k++) begin xs[k] = x[7*g+k]; ws[k] = W[n][g][k]; end
        p[g] = partial(xs, ws, (g == 0) ? B[n] : shortint'(0));
      end
      r[n] = relu_r(add_s(add_s(p[0], p[1]), p[2]));
    end
    for (int n = 0; n < 20; n++) exp_q.push_back(r[n]);
  endfunction

  // output monitor
  initial begin
    shortint e[20];
    int st;
    forever begin
      @(negedge clk); #2;   // after the drivers' negedge updates
      if (out_bus.valid && out_bus.first && out_ready) begin
        st = start_q.pop_front();
        for (int n = 0; n < 20; n++) e[n] = exp_q.pop_front();
        if (cyc - st == 11) lat_ok++;
        lat_checked++;
        for (int k = 0; k < 7; k++) begin
          chk(out_bus.valid && out_bus.first == (k == 0) && out_bus.neuron_id == 5'(k), "out flags");
          chk(out_bus.group_id == ((k == 6) ? 3'b011 : 3'b111), "out lanes");
          for (int g = 0; g < 3; g++)
            if (7*g + k < 20)
              chk(out_bus.data[g] === e[7*g+k],
                  $sformatf("neuron %0d got %0d want %0d", 7*g+k, out_bus.data[g], e[7*g+k]));
          if (k < 6) begin @(negedge clk); #2; end
        end
        n_out++;
      end else if (out_bus.valid && out_bus.first && !out_ready) n_stall++;
    end
  end

  initial begin
    shortint x[21];
    rst = 1; in_bus = '0; wl = '0; out_ready = 1;
    repeat (2) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int n = 0; n < 20; n++) begin
      for (int g = 0; g < 3; g++)
        for (int k = 0; k < 7; k++) begin
          W[n][g][k] = (7*g + k < 20) ? shortint'($urandom_range(0, 1023)) - shortint'(512) : shortint'(0);
          wl.we = 1; wl.neuron = 5'(n); wl.lane = 2'(g); wl.src_id = 5'(k); wl.weight = W[n][g][k];
          @(negedge clk);
        end
      B[n] = shortint'($urandom_range(0, 2047)) - shortint'(1024);
      for (int g = 0; g < 3; g++) begin
        wl.we = 1; wl.neuron = 5'(n); wl.lane = 2'(g); wl.src_id = BIAS_NID;
        wl.weight = (g == 0) ? B[n] : 16'sd0;
        @(negedge clk);
      end
    end
    wl = '0;
    for (int s = 0; s < 40; s++) begin
      // streams 20..29 run with the next layer stalling now and then
      out_ready = !(s >= 20 && s < 30 && ($urandom % 2));
      for (int i = 0; i < 21; i++)
        x[i] = (i < 20) ? shortint'($urandom_range(0, 4095)) : shortint'(0);
      while (!in_ready) begin @(negedge clk); out_ready = out_ready | ($urandom % 4 == 0); end
      if (cyc - last_accept == 8) gaps8++;
      last_accept = cyc;
      model(x);
      start_q.push_back(cyc);
      for (int k = 0; k < 7; k++) begin
        in_bus.valid = 1; in_bus.first = (k == 0); in_bus.neuron_id = 5'(k);
        in_bus.group_id = (k == 6) ? 3'b011 : 3'b111;
        for (int g = 0; g < 3; g++) in_bus.data[g] = (7*g + k < 20) ? x[7*g+k] : 16'($urandom);
        @(negedge clk);
        if (k == 0) out_ready = out_ready | (s < 20 || s >= 30);
      end
      in_bus = '0;
      if (s >= 20 && s < 30) fork begin repeat (3 + $urandom % 6) @(negedge clk); out_ready = 1; end join_none
    end
    out_ready = 1;
    repeat (60) @(negedge clk);
    chk(n_out == 40, $sformatf("all 40 streams out (%0d)", n_out));
    chk(lat_ok >= 20, $sformatf("latency 11 when not stalled (%0d of %0d)", lat_ok, lat_checked));
    chk(gaps8 >= 15, $sformatf("back-to-back streams every 8 cycles (%0d)", gaps8));
    chk(n_stall > 0, $sformatf("stall exercised (%0d)", n_stall));
    $display("latency-11 streams %0d, 8-cycle gaps %0d, stall cycles %0d", lat_ok, gaps8, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
