// tb_pe: loads a random weight set and bias into one PE through its
// Write/Read port, then sends random 7-element streams (some with the last
// element marked absent by a zero Group ID) and checks that the partial sum
// appears exactly 8 cycles after the first element and matches the
// reference. Streams are sent back to back every 8 cycles.
module tb_pe;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  localparam int LANE = 1;          // test the PE of lane B
  localparam logic [2:0] GCODE = 3'b010;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst, wr, valid, first;
  word_t data, weight, out;
  logic [4:0] neuron_id;
  logic [2:0] group_id;
  int checks = 0, failures = 0;
  shortint w[7], bias;

  pe dut (.clk, .rst, .data, .neuron_id, .group_id, .wr, .weight, .valid, .first, .out);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    shortint xs[], ws[], exp;
    int n;
    rst = 1; wr = 0; valid = 0; first = 0; data = 0; weight = 0; neuron_id = 0; group_id = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int trial = 0; trial < 20; trial++) begin
      // load weights and bias
      for (int k = 0; k < 7; k++) begin
        w[k] = shortint'($urandom_range(0, 2047)) - shortint'(1024);
        wr = 1; neuron_id = 5'(k); group_id = GCODE; weight = w[k];
        @(negedge clk);
      end
      bias = shortint'($urandom_range(0, 4095)) - shortint'(2048);
      wr = 1; neuron_id = 5'd31; group_id = GCODE; weight = bias;
      @(negedge clk);
      wr = 0;
      repeat (3) @(negedge clk);
      for (int s = 0; s < 10; s++) begin
        n = (s % 2) ? 6 : 7;      // 6: last slot is a bubble
        xs = new[n]; ws = new[n];
        for (int k = 0; k < n; k++) begin
          xs[k] = shortint'($urandom_range(0, 8191)) - shortint'(4096);
          ws[k] = w[k];
        end
        for (int k = 0; k < 7; k++) begin
          valid = 1; first = (k == 0); neuron_id = 5'(k);
          group_id = (k < n) ? GCODE : 3'b000;
          data = (k < n) ? xs[k] : 16'($urandom);
          @(negedge clk);
        end
        valid = 0; first = 0; group_id = 0; data = 16'($urandom);
        // now 7 cycles after the first element: result is due next cycle
        exp = partial(xs, ws, bias);
        @(negedge clk);   // cycle 8 after the first element
        checks++;
        if (out !== exp) begin
          failures++;
          $display("FAIL trial %0d stream %0d: got %0d want %0d", trial, s, out, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
