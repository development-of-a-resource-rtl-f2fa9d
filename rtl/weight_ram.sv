// weight_ram: the RAM unit of one processing element (PE).
//
// Stores the weights of one PE (and the bias of its neuron) in a 256 x 16
// array, addressed by Address[7:0] = {Neuron ID[4:0], Group ID[2:0]} as in
// the PE drawing the design follows. A write (Write/Read = 1) stores Weight
// at the address. Reads are synchronous: the word at the address presented
// in cycle t appears on rdata in cycle t+1; this register is the PE's one
// "data preparation" cycle. The array is written as distributed RAM would
// be used (no reset of the contents; weights must be loaded before use).
// The address layout and the synchronous read are this design's choices.
module weight_ram #(
  parameter int DATA_W = 16,
  parameter int ADDR_W = 8
) (
  input  logic              clk,
  input  logic              we,
  input  logic [ADDR_W-1:0] addr,
  input  logic [DATA_W-1:0] wdata,
  output logic [DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] mem [2**ADDR_W];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    rdata <= mem[addr];
  end

endmodule
