// nn_layer: one fully connected layer of the network.
//
// Structure (one input block, N_NEURONS neuron blocks, one output block per
// neuron group):
//   layer_input  - ready handshake to the previous layer and distributor
//   pe           - N_LANES_L PEs per neuron; PE g of every neuron works on
//                  stream g (group A, B or C of the previous layer), so the
//                  three streams are processed in parallel
//   output_block - one per neuron group (neurons 0-6 = A, 7-13 = B,
//                  14-19 = C); adds the PE sums of each neuron, applies ReLU
//                  and sends the group as a serial stream
// The three group streams leave side by side on the outgoing layer bus:
// Data A/B/C, a shared Neuron ID (position in the stream) and Group ID bits
// marking which lanes carry a neuron (group C has only six).
//
// Configurations used by the network (Table of layer timing in the README):
//   hidden layer 1: N_LANES_L=1, N_ELEM=3, SERIAL_IN=1, DEADTIME=5, EXTRA_REG
//                   latency 7 cycles, deadtime 5
//   hidden 2, 3   : N_LANES_L=3, N_ELEM=7, DEADTIME=8: latency 11, deadtime 8
//   output layer  : N_NEURONS=1, HAS_RELU=0: latency 10, deadtime 8
// Latency counts from the start beat on in_bus to the start beat on out_bus
// when the next layer is ready. If it is not, the output blocks hold the
// head of the stream and the layer stops taking new streams.
// The grouping and the per-layer latencies follow the paper; the bus
// encoding and the back-pressure rule are this design's choices.
module nn_layer
  import nn_pkg::*;
#(
  parameter int N_NEURONS = 20,
  parameter int N_LANES_L = 3,
  parameter int N_ELEM    = 7,
  parameter int DEADTIME  = 8,
  parameter bit HAS_RELU  = 1'b1,
  parameter bit SERIAL_IN = 1'b0
) (
  input  logic       clk,
  input  logic       rst,
  input  layer_bus_t in_bus,
  output logic       in_ready,
  input  wload_t     wl,
  output layer_bus_t out_bus,
  input  logic       out_ready
);

  localparam int N_GROUPS = (N_NEURONS + GROUP_MAX - 1) / GROUP_MAX;

  function automatic int group_size(int g);
    int rest = N_NEURONS - g * GROUP_MAX;
    return (rest > GROUP_MAX) ? GROUP_MAX : rest;
  endfunction

  word_t      [N_LANES_L-1:0]              pe_data;
  logic [N_LANES_L-1:0][NID_W-1:0]         pe_nid;
  logic [N_LANES_L-1:0][GID_W-1:0]         pe_gid;
  logic                                    pe_valid, pe_first;
  logic [N_NEURONS-1:0][N_LANES_L-1:0]     pe_wr;
  word_t [N_NEURONS-1:0][N_LANES_L-1:0]    pe_out;

  logic                     snap, hold;
  logic [N_GROUPS-1:0]      ob_idle, ob_valid, ob_first, ob_lane;
  logic [N_GROUPS-1:0][NID_W-1:0] ob_id;
  word_t [N_GROUPS-1:0]     ob_data;

  layer_input #(
    .N_NEURONS (N_NEURONS),
    .N_LANES_L (N_LANES_L),
    .N_ELEM    (N_ELEM),
    .DEADTIME  (DEADTIME),
    .SERIAL_IN (SERIAL_IN)
  ) u_in (
    .clk      (clk),
    .rst      (rst),
    .in_bus   (in_bus),
    .in_ready (in_ready),
    .wl       (wl),
    .ob_idle  (&ob_idle),
    .snap     (snap),
    .pe_data  (pe_data),
    .pe_nid   (pe_nid),
    .pe_gid   (pe_gid),
    .pe_valid (pe_valid),
    .pe_first (pe_first),
    .pe_wr    (pe_wr)
  );

  for (genvar n = 0; n < N_NEURONS; n++) begin : g_neuron
    for (genvar l = 0; l < N_LANES_L; l++) begin : g_pe
      pe u_pe (
        .clk       (clk),
        .rst       (rst),
        .data      (pe_data[l]),
        .neuron_id (pe_nid[l]),
        .group_id  (pe_gid[l]),
        .wr        (pe_wr[n][l]),
        .weight    (wl.weight),
        .valid     (pe_valid),
        .first     (pe_first),
        .out       (pe_out[n][l])
      );
    end
  end

  // the head of a new stream waits until the next layer is ready
  assign hold = ob_valid[0] && ob_first[0] && !out_ready;

  for (genvar g = 0; g < N_GROUPS; g++) begin : g_ob
    localparam int NG = group_size(g);
    output_block #(
      .N_GROUP  (NG),
      .N_SLOTS  (N_NEURONS < GROUP_MAX ? N_NEURONS : GROUP_MAX),
      .N_PE     (N_LANES_L),
      .HAS_RELU (HAS_RELU)
    ) u_ob (
      .clk       (clk),
      .rst       (rst),
      .load      (snap),
      .pe_out    (pe_out[g*GROUP_MAX +: NG]),
      .hold      (hold),
      .idle      (ob_idle[g]),
      .out_valid (ob_valid[g]),
      .out_first (ob_first[g]),
      .out_lane  (ob_lane[g]),
      .out_id    (ob_id[g]),
      .out_data  (ob_data[g])
    );
  end

  always_comb begin
    out_bus           = '0;
    out_bus.valid     = ob_valid[0];
    out_bus.first     = ob_first[0];
    out_bus.neuron_id = ob_id[0];
    for (int g = 0; g < N_GROUPS; g++) begin
      out_bus.group_id[g] = ob_lane[g];
      out_bus.data[g]     = ob_data[g];
    end
  end

endmodule
