// tb_weight_ram: writes random words to random addresses of the PE weight
// RAM, keeps a copy in a testbench array, and reads every written address
// back, checking that the data appears exactly one cycle after the address.
module tb_weight_ram;
  logic clk = 0;
  always #5 clk = ~clk;

  logic       we;
  logic [7:0] addr;
  logic [15:0] wdata, rdata;
  logic [15:0] model [256];
  bit          written [256];
  int checks = 0, failures = 0;

  weight_ram #(.DATA_W(16), .ADDR_W(8)) dut (.clk, .we, .addr, .wdata, .rdata);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; addr = 0; wdata = 0;
    @(posedge clk);
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      we = 1; addr = 8'($urandom); wdata = 16'($urandom);
      model[addr] = wdata; written[addr] = 1;
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < 256; a++) begin
      if (!written[a]) continue;
      @(negedge clk); addr = 8'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        $display("FAIL addr %0d: got %h want %h", a, rdata, model[a]);
      end
    end
    // read during write returns the old word (read-before-write)
    @(negedge clk); addr = 8'd7; we = 1; wdata = ~model[7];
    @(posedge clk); #1; checks++;
    if (written[7] && rdata !== model[7]) begin failures++; $display("FAIL read-during-write"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
