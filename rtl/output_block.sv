// output_block: output block of one neuron group of a layer.
//
// It takes the PE results of the N_GROUP neurons of its group (N_PE partial
// sums per neuron) when load is high, and sends the neuron values out
// serially, neuron 0 first, one per cycle, through a fixed pipeline:
//   stage 1: Adder (A + B) and Delay (C)   (1 cycle)
//   stage 2: Adder ((A + B) + C)           (1 cycle)
//   stage 3: ReLU                           (1 cycle, only if HAS_RELU)
// With N_PE = 1 (hidden layer 1) the adders carry the single sum through.
// Adds saturate to 16 bits (this design's choice).
// Neuron 0 enters stage 1 in the load cycle directly from the PE outputs;
// the rest wait in a shift register (the output buffer), so the first value
// leaves 3 cycles (2 without ReLU) after load and the last N_GROUP-1 cycles
// later. Lanes with fewer than GROUP_MAX neurons send bubbles (lane_valid 0)
// to keep the three group streams aligned.
// hold freezes the whole block; the layer raises it while the head of a new
// stream is waiting for the next layer to be ready. idle is high when the
// buffer holds nothing still to be sent, so a new load may be accepted.
// The stage order and the one-cycle stages follow the published block
// drawing; the neuron order of the stream, saturation and the hold input are
// this design's choices.
module output_block
  import nn_pkg::*;
#(
  parameter int N_GROUP  = 7,   // neurons in this group
  parameter int N_SLOTS  = 7,   // stream length (GROUP_MAX)
  parameter int N_PE     = 3,   // PEs per neuron
  parameter bit HAS_RELU = 1'b1
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         load,
  input  word_t [N_GROUP-1:0][N_PE-1:0] pe_out,
  input  logic                         hold,
  output logic                         idle,
  output logic                         out_valid,  // stream slot present
  output logic                         out_first,
  output logic                         out_lane,   // slot carries a neuron
  output logic [NID_W-1:0]             out_id,
  output word_t                        out_data
);

  localparam int NSTG = HAS_RELU ? 3 : 2;

  // output buffer: neurons 1..N_SLOTS-1 of the loaded group
  word_t [N_SLOTS-1:0][N_PE-1:0] buf_q;
  logic  [$clog2(N_SLOTS+1)-1:0] remain;    // slots still in the buffer
  logic  [NID_W-1:0]             next_id;   // slot index of buf_q[0]

  // stage 1 inputs
  logic                  s0_valid, s0_first, s0_lane;
  logic [NID_W-1:0]      s0_id;
  word_t [N_PE-1:0]      s0_v;

  always_comb begin
    s0_v = '0;
    if (load) begin
      s0_valid = 1'b1; s0_first = 1'b1; s0_lane = 1'b1; s0_id = '0;
      s0_v = pe_out[0];
    end else begin
      s0_valid = (remain != 0); s0_first = 1'b0;
      s0_lane  = (remain != 0) && (32'(next_id) < N_GROUP);
      s0_id    = next_id;
      s0_v     = buf_q[0];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      remain  <= '0;
      next_id <= '0;
      buf_q   <= '0;
    end else if (!hold) begin
      if (load) begin
        for (int n = 0; n < N_SLOTS - 1; n++)
          buf_q[n] <= (n + 1 < N_GROUP) ? pe_out[n+1] : '0;
        buf_q[N_SLOTS-1] <= '0;
        remain  <= ($bits(remain))'(N_SLOTS - 1);
        next_id <= NID_W'(1);
      end else if (remain != 0) begin
        for (int n = 0; n < N_SLOTS - 1; n++) buf_q[n] <= buf_q[n+1];
        buf_q[N_SLOTS-1] <= '0;
        remain  <= remain - 1'b1;
        next_id <= next_id + 1'b1;
      end
    end
  end

  // stage 1: Adder(A+B) and Delay(C)
  logic             s1_valid, s1_first, s1_lane;
  logic [NID_W-1:0] s1_id;
  word_t            s1_ab, s1_c;
  // stage 2: Adder
  logic             s2_valid, s2_first, s2_lane;
  logic [NID_W-1:0] s2_id;
  word_t            s2_sum;
  // stage 3: ReLU
  logic             s3_valid, s3_first, s3_lane;
  logic [NID_W-1:0] s3_id;
  word_t            s3_val;

  always_ff @(posedge clk) begin
    if (rst) begin
      {s1_valid, s1_first, s1_lane} <= '0;
      {s2_valid, s2_first, s2_lane} <= '0;
      {s3_valid, s3_first, s3_lane} <= '0;
      s1_id <= '0; s2_id <= '0; s3_id <= '0;
      s1_ab <= '0; s1_c <= '0; s2_sum <= '0; s3_val <= '0;
    end else if (!hold) begin
      s1_valid <= s0_valid; s1_first <= s0_first; s1_lane <= s0_lane; s1_id <= s0_id;
      s1_ab    <= (N_PE >= 2) ? add_sat(s0_v[0], s0_v[N_PE >= 2 ? 1 : 0]) : s0_v[0];
      s1_c     <= (N_PE >= 3) ? s0_v[N_PE >= 3 ? 2 : 0] : '0;
      s2_valid <= s1_valid; s2_first <= s1_first; s2_lane <= s1_lane; s2_id <= s1_id;
      s2_sum   <= add_sat(s1_ab, s1_c);
      s3_valid <= s2_valid; s3_first <= s2_first; s3_lane <= s2_lane; s3_id <= s2_id;
      s3_val   <= relu(s2_sum);
    end
  end

  always_comb begin
    if (NSTG == 3) begin
      out_valid = s3_valid; out_first = s3_first; out_lane = s3_lane;
      out_id    = s3_id;    out_data  = s3_lane ? s3_val : '0;
    end else begin
      out_valid = s2_valid; out_first = s2_first; out_lane = s2_lane;
      out_id    = s2_id;    out_data  = s2_lane ? s2_sum : '0;
    end
  end

  assign idle = (remain == 0);

endmodule
