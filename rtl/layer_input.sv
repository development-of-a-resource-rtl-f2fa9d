// layer_input: input handshake and distributor of one network layer.
//
// Handshake: in_ready tells the previous layer that a new stream may start.
// A stream starts with a beat that has valid and first set while in_ready is
// high; its remaining N_ELEM-1 beats follow on consecutive cycles and are
// taken without further handshaking. After a start, in_ready stays low for
// DEADTIME cycles (the layer deadtime) and, beyond that, for as long as the
// finished PE results are waiting for the output blocks to take them
// (results_ready && !ob_idle). snap is the cycle in which the output blocks
// take the results; it comes N_ELEM+1 cycles after the start at the
// earliest, when the PE sums are complete.
//
// Distribution: every beat of lane g (Data g, Neuron ID, lane-valid bit g of
// Group ID) is fanned out to the PEs of lane g of all neurons, with Group ID
// turned into the one-hot code of the lane; the copies are combinational, and
// the PEs register them in their preparation cycle.
// For hidden layer 1 (SERIAL_IN = 1) the start beat carries the three
// network inputs X1..X3 in Data A/B/C at once; they are sent to the single
// lane of PEs as a 3-element stream with Neuron ID 0, 1, 2.
//
// Weight loading: a write request (wl.we) for neuron wl.neuron and PE
// wl.lane takes over that lane's Neuron ID / Group ID lines for one cycle
// and raises Write/Read of that one PE. Loads must be done while the layer
// is idle. The ready protocol, the serialiser and the load port are this
// design's choices; the paper names the handshake lines and the distributor
// but does not describe their signals.
module layer_input
  import nn_pkg::*;
#(
  parameter int N_NEURONS = 20,
  parameter int N_LANES_L = 3,   // PEs per neuron (1 for hidden layer 1)
  parameter int N_ELEM    = 7,   // elements per stream
  parameter int DEADTIME  = 8,   // cycles between stream starts
  parameter bit SERIAL_IN = 1'b0
) (
  input  logic                        clk,
  input  logic                        rst,
  input  layer_bus_t                  in_bus,
  output logic                        in_ready,
  input  wload_t                      wl,
  input  logic                        ob_idle,     // all output blocks idle
  output logic                        snap,        // output blocks take PE results
  // per-lane copies of the layer bus
  output word_t      [N_LANES_L-1:0]  pe_data,
  output logic [N_LANES_L-1:0][NID_W-1:0] pe_nid,
  output logic [N_LANES_L-1:0][GID_W-1:0] pe_gid,
  output logic                        pe_valid,
  output logic                        pe_first,
  output logic [N_NEURONS-1:0][N_LANES_L-1:0] pe_wr
);

  localparam int CW = $clog2(DEADTIME + N_ELEM + 2);

  logic [CW-1:0]    busy_cnt;   // deadtime still to run
  logic [CW-1:0]    done_cnt;   // cycles until the PE sums are complete
  logic [CW-1:0]    elem_cnt;   // beats of the current stream still to come
  logic             pending;    // PE results wait for the output blocks
  logic             accept, done, results_ready;
  word_t [2:0]      x_hold;     // serialiser of hidden layer 1
  logic [NID_W-1:0] ser_id;

  assign accept        = in_bus.valid && in_bus.first && in_ready;
  assign done          = (done_cnt == CW'(1));
  assign results_ready = done || pending;
  assign snap          = results_ready && ob_idle;
  assign in_ready      = (busy_cnt == '0) && !(results_ready && !snap) && !wl.we;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy_cnt <= '0;
      done_cnt <= '0;
      elem_cnt <= '0;
      pending  <= 1'b0;
      x_hold   <= '0;
      ser_id   <= '0;
    end else begin
      if (accept)              busy_cnt <= CW'(DEADTIME - 1);
      else if (busy_cnt != '0) busy_cnt <= busy_cnt - 1'b1;

      if (accept)              done_cnt <= CW'(N_ELEM + 1);
      else if (done_cnt != '0) done_cnt <= done_cnt - 1'b1;

      if (accept)              elem_cnt <= CW'(N_ELEM - 1);
      else if (elem_cnt != '0) elem_cnt <= elem_cnt - 1'b1;

      if (snap)      pending <= 1'b0;
      else if (done) pending <= 1'b1;

      if (accept) begin
        x_hold <= {in_bus.data[2], in_bus.data[1], in_bus.data[0]};
        ser_id <= NID_W'(1);
      end else if (elem_cnt != '0) begin
        x_hold <= {word_t'(0), x_hold[2], x_hold[1]};
        ser_id <= ser_id + 1'b1;
      end
    end
  end

  // distributor
  always_comb begin
    pe_valid = accept || (elem_cnt != '0);
    pe_first = accept;
    for (int g = 0; g < N_LANES_L; g++) begin
      if (SERIAL_IN) begin
        pe_data[g] = accept ? in_bus.data[0] : x_hold[1];
        pe_nid[g]  = accept ? '0 : ser_id;
        pe_gid[g]  = GID_W'(1) << g;
      end else begin
        pe_data[g] = in_bus.data[g];
        pe_nid[g]  = in_bus.neuron_id;
        pe_gid[g]  = in_bus.group_id[g] ? (GID_W'(1) << g) : '0;
      end
      if (wl.we && 32'(wl.lane) == g) begin
        pe_nid[g] = wl.src_id;
        pe_gid[g] = GID_W'(1) << g;
      end
    end
    for (int n = 0; n < N_NEURONS; n++)
      for (int g = 0; g < N_LANES_L; g++)
        pe_wr[n][g] = wl.we && (32'(wl.neuron) == n) && (32'(wl.lane) == g);
  end

  // A stream start is only taken when ready; weights are loaded while idle.
  a_load_idle: assert property (@(posedge clk) disable iff (rst)
      wl.we |-> (busy_cnt == '0 && elem_cnt == '0 && !results_ready));
  a_deadtime: assert property (@(posedge clk) disable iff (rst)
      accept |=> !in_ready [* (DEADTIME - 1)]);
  // the previous layer sends a stream without gaps
  if (!SERIAL_IN) begin : g_gap_check
    a_no_gap: assert property (@(posedge clk) disable iff (rst)
        (elem_cnt != '0) |-> (in_bus.valid && !in_bus.first));
  end

endmodule
