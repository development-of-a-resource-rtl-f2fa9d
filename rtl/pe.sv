// pe: processing element, the basic unit of every neuron.
//
// A PE holds the weights of one neuron for one input stream (lane A, B or
// C) in its RAM unit and multiplies that stream, one element per cycle,
// into its MAC unit. Layer-bus fields as drawn for the PE: Data[15:0],
// Neuron ID[4:0], Group ID[2:0], Write/Read and Weight[15:0]; the RAM
// address is {Neuron ID, Group ID}.
//
// Read mode (wr = 0): when valid is high the element Data is multiplied by
// the weight at {neuron_id, group_id}. group_id is the one-hot code of this
// PE's lane, or zero when the lane carries no element this cycle (the six-
// neuron group C); the element then counts as zero. first marks element 0
// of a stream: the accumulator restarts from the neuron's bias.
// Write mode (wr = 1): Weight is written at {neuron_id, group_id}; a write
// with neuron_id = BIAS_NID (31) also loads the bias register. The bias
// register is this design's choice (the paper does not mention biases).
//
// Timing: cycle t presents an element; cycle t+1 is the data-preparation
// cycle (RAM read, data register); the MAC adds it at the end of t+1. After
// a stream of N elements starting in cycle 0, out holds the neuron partial
// sum (Q5.10, saturated) from cycle N+1 until the next stream starts: 8
// cycles for the 7-element streams of the hidden layers, as the paper gives.
module pe
  import nn_pkg::*;
(
  input  logic             clk,
  input  logic             rst,
  input  word_t            data,
  input  logic [NID_W-1:0] neuron_id,
  input  logic [GID_W-1:0] group_id,
  input  logic             wr,
  input  word_t            weight,
  input  logic             valid,
  input  logic             first,
  output word_t            out
);

  word_t rdata;
  word_t data_r;
  word_t bias;
  logic  valid_r, first_r;

  weight_ram #(.DATA_W(DATA_W), .ADDR_W(ADDR_W)) u_ram (
    .clk   (clk),
    .we    (wr),
    .addr  ({neuron_id, group_id}),
    .wdata (weight),
    .rdata (rdata)
  );

  // data preparation stage
  always_ff @(posedge clk) begin
    if (rst) begin
      valid_r <= 1'b0;
      first_r <= 1'b0;
      data_r  <= '0;
      bias    <= '0;
    end else begin
      valid_r <= valid && !wr;
      first_r <= valid && !wr && first;
      data_r  <= (|group_id) ? data : '0;
      if (wr && neuron_id == BIAS_NID) bias <= weight;
    end
  end

  mac_unit u_mac (
    .clk   (clk),
    .rst   (rst),
    .en    (valid_r),
    .first (first_r),
    .a     (data_r),
    .b     (rdata),
    .c     (bias),
    .out   (out)
  );

endmodule
