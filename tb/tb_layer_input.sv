// tb_layer_input: checks the input handshake and distributor.
// Hidden-layer instance (3 lanes, 7-element streams, deadtime 8): after a
// stream starts, in_ready must stay low for exactly 8 cycles, snap must come
// 8 cycles after the start, every beat must reach the lanes with the one-hot
// Group ID (zero for an absent lane element), and when the output blocks are
// busy snap and in_ready must wait for them. Layer-1 instance (serial input,
// deadtime 5): X1..X3 of the start beat must appear on the single lane on
// three consecutive cycles with Neuron IDs 0, 1, 2, snap after 4 cycles and
// in_ready back after 5. Weight-load requests must raise exactly one PE's
// Write/Read and drive its address lines.
module tb_layer_input;
  import nn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst;
  layer_bus_t bus_h, bus_s;
  wload_t wl_h, wl_s;
  logic rdy_h, rdy_s, obi_h, obi_s, snap_h, snap_s;
  word_t [2:0] d_h; word_t [0:0] d_s;
  logic [2:0][4:0] nid_h; logic [0:0][4:0] nid_s;
  logic [2:0][2:0] gid_h; logic [0:0][2:0] gid_s;
  logic val_h, fst_h, val_s, fst_s;
  logic [19:0][2:0] wr_h; logic [19:0][0:0] wr_s;
  int checks = 0, failures = 0;

  layer_input #(.N_NEURONS(20), .N_LANES_L(3), .N_ELEM(7), .DEADTIME(8), .SERIAL_IN(1'b0)) dut_h (
    .clk, .rst, .in_bus(bus_h), .in_ready(rdy_h), .wl(wl_h), .ob_idle(obi_h), .snap(snap_h),
    .pe_data(d_h), .pe_nid(nid_h), .pe_gid(gid_h), .pe_valid(val_h), .pe_first(fst_h), .pe_wr(wr_h));
  layer_input #(.N_NEURONS(20), .N_LANES_L(1), .N_ELEM(3), .DEADTIME(5), .SERIAL_IN(1'b1)) dut_s (
    .clk, .rst, .in_bus(bus_s), .in_ready(rdy_s), .wl(wl_s), .ob_idle(obi_s), .snap(snap_s),
    .pe_data(d_s), .pe_nid(nid_s), .pe_gid(gid_s), .pe_valid(val_s), .pe_first(fst_s), .pe_wr(wr_s));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    word_t [2:0] xs;
    int wait_ob;
    rst = 1; bus_h = '0; bus_s = '0; wl_h = '0; wl_s = '0; obi_h = 1; obi_s = 1;
    repeat (2) @(posedge clk);
    @(negedge clk); rst = 0;
    // weight-load decode
    for (int i = 0; i < 30; i++) begin
      wl_h.we = 1; wl_h.neuron = 5'($urandom_range(0, 19)); wl_h.lane = 2'($urandom_range(0, 2));
      wl_h.src_id = 5'($urandom); wl_h.weight = 16'($urandom);
      #1;
      chk(wr_h == ({60'b0, 1'b1} << (wl_h.neuron * 3 + wl_h.lane)), "one PE written");
      chk(nid_h[wl_h.lane] == wl_h.src_id && gid_h[wl_h.lane] == (3'b001 << wl_h.lane), "load address");
      chk(!rdy_h, "not ready while loading");
      @(negedge clk);
    end
    wl_h = '0; #1;
    // hidden-layer streams
    for (int s = 0; s < 12; s++) begin
      wait_ob = (s % 3 == 2) ? 1 + s % 5 : 0;
      chk(rdy_h, $sformatf("ready before stream %0d", s));
      for (int k = 0; k < 7; k++) begin
        bus_h.valid = 1; bus_h.first = (k == 0); bus_h.neuron_id = 5'(k);
        bus_h.group_id = (k == 6) ? 3'b011 : 3'b111;
        for (int g = 0; g < 3; g++) bus_h.data[g] = 16'($urandom);
        #1;
        chk(val_h && (fst_h == (k == 0)), "pe valid/first");
        for (int g = 0; g < 3; g++) begin
          chk(d_h[g] == bus_h.data[g] && nid_h[g] == 5'(k), "lane copy");
          chk(gid_h[g] == ((k == 6 && g == 2) ? 3'b000 : (3'b001 << g)), "group code");
        end
        chk((k == 0) || !rdy_h, "ready low during stream");
        chk(!snap_h, "no snap during stream");
        @(negedge clk);
      end
      bus_h = '0;
      // cycle 7 after start: still busy
      chk(!rdy_h && !snap_h, "cycle 7 busy");
      obi_h = (wait_ob == 0);
      @(negedge clk);
      // cycle 8: results complete
      if (wait_ob == 0) chk(snap_h && rdy_h, $sformatf("snap and ready at 8 (stream %0d)", s));
      else begin
        for (int w = 0; w < wait_ob; w++) begin
          chk(!snap_h && !rdy_h, "waiting for output blocks");
          @(negedge clk);
        end
        obi_h = 1; #1;
        chk(snap_h && rdy_h, "snap once output blocks idle");
      end
      @(negedge clk);
      chk(!snap_h && rdy_h, "single snap");
    end
    // serial input of hidden layer 1
    for (int s = 0; s < 8; s++) begin
      chk(rdy_s, "serial ready");
      for (int g = 0; g < 3; g++) xs[g] = 16'($urandom);
      bus_s.valid = 1; bus_s.first = 1; bus_s.group_id = 3'b001; bus_s.data = xs;
      for (int k = 0; k < 5; k++) begin
        #1;
        if (k < 3) chk(val_s && fst_s == (k == 0) && d_s[0] == xs[k] && nid_s[0] == 5'(k) && gid_s[0] == 3'b001,
                       $sformatf("serial element %0d", k));
        else chk(!val_s, "serial stream is 3 long");
        chk((k == 0) || !rdy_s, "serial busy");
        chk(snap_s == (k == 4), $sformatf("serial snap at 4 (k=%0d)", k));
        @(negedge clk);
        bus_s = '0;
      end
      chk(rdy_s, "serial deadtime 5");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
