// tb_mac_unit: drives random streams of 1..7 elements (data, weight) with a
// random bias into the MAC unit and compares the output, one cycle after the
// last element, with the reference partial sum. A few streams use large
// operands so that the 16-bit saturation is exercised both ways.
module tb_mac_unit;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst, en, first;
  word_t a, b, c, out;
  int checks = 0, failures = 0;

  mac_unit dut (.clk, .rst, .en, .first, .a, .b, .c, .out);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    shortint xs[], ws[], bias, exp;
    int n, big;
    rst = 1; en = 0; first = 0; a = 0; b = 0; c = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int t = 0; t < 500; t++) begin
      n = 1 + ($urandom % 7);
      big = (t % 10 == 0);
      xs = new[n]; ws = new[n];
      bias = shortint'($urandom_range(0, 4095)) - shortint'(2048);
      foreach (xs[i]) begin
        xs[i] = big ? shortint'($urandom) : shortint'($urandom_range(0, 8191)) - shortint'(4096);
        ws[i] = big ? shortint'($urandom) : shortint'($urandom_range(0, 2047)) - shortint'(1024);
      end
      for (int i = 0; i < n; i++) begin
        en = 1; first = (i == 0); a = xs[i]; b = ws[i]; c = bias;
        @(negedge clk);
      end
      en = 0; first = 0; a = 16'($urandom); c = 16'($urandom);
      exp = partial(xs, ws, bias);
      checks++;
      if (out !== exp) begin
        failures++;
        $display("FAIL stream %0d: got %0d want %0d", t, out, exp);
      end
      // the result holds while en is low
      @(negedge clk);
      checks++;
      if (out !== exp) begin failures++; $display("FAIL hold %0d", t); end
    end
    $display("saturations seen: %0d", sat_count);
    checks++;
    if (sat_count == 0) begin failures++; $display("FAIL no saturation exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
