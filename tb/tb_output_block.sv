// tb_output_block: loads random PE results into an output block (7 neurons
// x 3 PEs, with ReLU) and checks the stream it sends: the first value 3
// cycles after load, then one neuron per cycle, each equal to
// ReLU((A+B)+C) with saturating adds. A second instance with 6 neurons and
// no ReLU checks the bubble in the last slot and the 2-cycle pipeline. The
// hold input is raised while the head of a stream waits, and the test checks
// that nothing moves and nothing is lost.
module tb_output_block;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst, load, hold;
  word_t [6:0][2:0] pe7;
  word_t [5:0][2:0] pe6;
  logic idle7, v7, f7, l7, idle6, v6, f6, l6;
  logic [4:0] id7, id6;
  word_t d7, d6;
  int checks = 0, failures = 0, holds = 0;

  output_block #(.N_GROUP(7), .N_SLOTS(7), .N_PE(3), .HAS_RELU(1'b1)) dut7 (
    .clk, .rst, .load, .pe_out(pe7), .hold, .idle(idle7), .out_valid(v7),
    .out_first(f7), .out_lane(l7), .out_id(id7), .out_data(d7));
  output_block #(.N_GROUP(6), .N_SLOTS(7), .N_PE(3), .HAS_RELU(1'b0)) dut6 (
    .clk, .rst, .load, .pe_out(pe6), .hold(1'b0), .idle(idle6), .out_valid(v6),
    .out_first(f6), .out_lane(l6), .out_id(id6), .out_data(d6));

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
    shortint e7[7], e6[7];
    int hold_cycles;
    rst = 1; load = 0; hold = 0; pe7 = '0; pe6 = '0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int t = 0; t < 60; t++) begin
      for (int n = 0; n < 7; n++)
        for (int p = 0; p < 3; p++) begin
          pe7[n][p] = (t % 7 == 3) ? 16'($urandom) : 16'(shortint'($urandom_range(0, 8191)) - shortint'(4096));
          if (n < 6) pe6[n][p] = 16'($urandom);
        end
      for (int n = 0; n < 7; n++) begin
        e7[n] = relu_r(add_s(add_s(pe7[n][0], pe7[n][1]), pe7[n][2]));
        e6[n] = (n < 6) ? add_s(add_s(pe6[n][0], pe6[n][1]), pe6[n][2]) : shortint'(0);
      end
      chk(idle7 && idle6, "idle before load");
      load = 1;
      @(negedge clk);
      load = 0;
      pe7 = '0; pe6 = '0;      // the block must have captured everything
      // cycle 1 after load: nothing out yet
      chk(!(v7 && f7), "no head at +1");
      @(negedge clk);
      // cycle 2: the 2-stage block (no ReLU) shows its head
      chk(v6 && f6 && id6 == 0 && d6 === e6[0], $sformatf("head6 t=%0d", t));
      hold_cycles = (t % 3 == 1) ? 1 + t % 4 : 0;
      @(negedge clk);
      // cycle 3: the head of the ReLU block
      chk(v7 && f7 && id7 == 0 && l7, $sformatf("head7 flags t=%0d", t));
      chk(d7 === e7[0], $sformatf("head7 t=%0d got %0d want %0d", t, d7, e7[0]));
      if (hold_cycles != 0) begin
        holds++;
        hold = 1;
        repeat (hold_cycles) begin
          @(negedge clk);
          chk(v7 && f7 && d7 === e7[0], "held head stays");
        end
        hold = 0;
      end
      for (int n = 1; n < 7; n++) begin
        @(negedge clk);
        chk(v7 && !f7 && id7 == 5'(n) && l7 && d7 === e7[n],
            $sformatf("n=%0d t=%0d got %0d want %0d", n, t, d7, e7[n]));
      end
      @(negedge clk);
      chk(!v7, "stream ends after 7");
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    // check the 6-neuron block stream separately, without hold
    for (int n = 0; n < 6; n++) for (int p = 0; p < 3; p++) pe6[n][p] = 16'($urandom);
    for (int n = 0; n < 7; n++)
      e6[n] = (n < 6) ? add_s(add_s(pe6[n][0], pe6[n][1]), pe6[n][2]) : shortint'(0);
    load = 1; @(negedge clk); load = 0;
    @(negedge clk);
    for (int n = 0; n < 7; n++) begin
      chk(v6 && (f6 == (n == 0)) && id6 == 5'(n) && (l6 == (n < 6)) && d6 === e6[n],
          $sformatf("six n=%0d got %0d want %0d lane %0d", n, d6, e6[n], l6));
      @(negedge clk);
    end
    chk(holds > 0, "hold exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
