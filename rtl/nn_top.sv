// nn_top: muon q/pT regression network, 3 inputs -> 20 -> 20 -> 20 -> 1.
//
// The network takes the three (already normalised) input variables of a
// muon candidate - the z of the RPC2 seed cluster and the z residuals of the
// RPC1 and RPC3 clusters to the seed line - as Q5.10 words and returns the
// predicted q/pT as one Q5.10 word. Four layers are chained by layer buses
// and ready lines:
//   hidden layer 1: 20 neurons x 1 PE, the 3 inputs sent serially, ReLU
//   hidden layer 2: 20 neurons x 3 PEs (lanes A, B, C), ReLU
//   hidden layer 3: 20 neurons x 3 PEs, ReLU
//   output layer  : 1 neuron x 3 PEs, no ReLU
// Between hidden layers the 20 values travel as three serial streams, one
// per neuron group (neurons 0-6, 7-13, 14-19), each 7 beats long.
//
// Interface: an event is taken when in_valid and in_ready are both high.
// out_valid pulses for one cycle with the result, 39 cycles (7+11+11+10)
// after the event was taken, and a new event can be taken every 8 cycles
// (the largest layer deadtime). The output is always accepted.
// Weights and biases are written one word per cycle through the wl_* port
// while the network is idle: wl_layer selects the layer (0..3), wl_neuron
// the neuron, wl_lane the PE (0=A, 1=B, 2=C; hidden layer 1 has only A),
// wl_src_id the source index inside that PE's input stream (input index for
// layer 1), or 31 for the neuron bias (load the bias into PE A, 0 into B, C).
// Layer sizes, grouping, latencies and deadtimes follow the paper; the
// handshake encoding, the load port and the biases are this design's own.
module nn_top
  import nn_pkg::*;
#(
  parameter int N_HIDDEN = 20
) (
  input  logic             clk,
  input  logic             rst,
  // event input
  input  logic             in_valid,
  output logic             in_ready,
  input  word_t [2:0]      x,
  // result
  output logic             out_valid,
  output word_t            out_data,
  // weight load
  input  logic             wl_we,
  input  logic [1:0]       wl_layer,
  input  logic [NID_W-1:0] wl_neuron,
  input  logic [1:0]       wl_lane,
  input  logic [NID_W-1:0] wl_src_id,
  input  word_t            wl_weight
);

  layer_bus_t bus0, bus1, bus2, bus3, bus4;
  logic       rdy1, rdy2, rdy3, rdy4;
  wload_t     wl [4];

  always_comb begin
    for (int l = 0; l < 4; l++) begin
      wl[l].we     = wl_we && (32'(wl_layer) == l);
      wl[l].neuron = wl_neuron;
      wl[l].lane   = wl_lane;
      wl[l].src_id = wl_src_id;
      wl[l].weight = wl_weight;
    end
  end

  always_comb begin
    bus0           = '0;
    bus0.valid     = in_valid;
    bus0.first     = in_valid;
    bus0.group_id  = 3'b001;
    bus0.data      = x;
  end
  assign in_ready = rdy1;

  nn_layer #(.N_NEURONS(N_HIDDEN), .N_LANES_L(1), .N_ELEM(3), .DEADTIME(5),
             .HAS_RELU(1'b1), .SERIAL_IN(1'b1)) u_l1 (
    .clk(clk), .rst(rst), .in_bus(bus0), .in_ready(rdy1), .wl(wl[0]),
    .out_bus(bus1), .out_ready(rdy2));

  nn_layer #(.N_NEURONS(N_HIDDEN), .N_LANES_L(3), .N_ELEM(GROUP_MAX), .DEADTIME(8),
             .HAS_RELU(1'b1), .SERIAL_IN(1'b0)) u_l2 (
    .clk(clk), .rst(rst), .in_bus(bus1), .in_ready(rdy2), .wl(wl[1]),
    .out_bus(bus2), .out_ready(rdy3));

  nn_layer #(.N_NEURONS(N_HIDDEN), .N_LANES_L(3), .N_ELEM(GROUP_MAX), .DEADTIME(8),
             .HAS_RELU(1'b1), .SERIAL_IN(1'b0)) u_l3 (
    .clk(clk), .rst(rst), .in_bus(bus2), .in_ready(rdy3), .wl(wl[2]),
    .out_bus(bus3), .out_ready(rdy4));

  nn_layer #(.N_NEURONS(1), .N_LANES_L(3), .N_ELEM(GROUP_MAX), .DEADTIME(8),
             .HAS_RELU(1'b0), .SERIAL_IN(1'b0)) u_out (
    .clk(clk), .rst(rst), .in_bus(bus3), .in_ready(rdy4), .wl(wl[3]),
    .out_bus(bus4), .out_ready(1'b1));

  assign out_valid = bus4.valid && bus4.first;
  assign out_data  = bus4.data[0];

  // the three group streams need 15..21 hidden neurons
  if (N_HIDDEN < 2 * GROUP_MAX + 1 || N_HIDDEN > 3 * GROUP_MAX) begin : g_bad_size
    $error("N_HIDDEN must be 15..21");
  end

endmodule
