// nn_pkg: shared widths, fixed-point helpers and the layer-bus type of the
// muon q/pT regression network (3 inputs, three hidden layers of 20 ReLU
// neurons, one linear output).
//
// Numbers are 16-bit two's-complement fixed point with 10 fractional bits
// (sign, 5 integer bits, 10 fraction bits; "Q5.10"), as chosen in the
// precision study the design follows. Products are Q10.20 and are summed in a
// wide accumulator; results are brought back to Q5.10 by an arithmetic right
// shift of 10 and saturation, a rounding rule this design chose.
//
// The layer bus carries one element of each of the three neuron-group streams
// (A, B, C) per cycle together with a shared Neuron ID (position inside the
// stream) and a 3-bit Group ID used as a per-lane valid mask.
// The 16-bit word with 10 fractional bits, the 5-bit Neuron ID, the 3-bit
// Group ID and the 7-neuron groups follow the paper; the accumulator width,
// the bus fields' meaning and the load-request format are this design's own.
package nn_pkg;

  localparam int DATA_W    = 16;   // word width
  localparam int FRAC      = 10;   // fractional bits
  localparam int ACC_W     = 48;   // MAC accumulator width (DSP-style)
  localparam int NID_W     = 5;    // Neuron ID[4:0]
  localparam int GID_W     = 3;    // Group ID[2:0]
  localparam int ADDR_W    = NID_W + GID_W;  // RAM Address[7:0]
  localparam int N_LANES   = 3;    // neuron groups A, B, C
  localparam int GROUP_MAX = 7;    // neurons per group (7, 7, 6)
  localparam logic [NID_W-1:0] BIAS_NID = '1;  // RAM slot of the bias

  typedef logic signed [DATA_W-1:0] word_t;

  // One beat of the stream between layers.
  typedef struct packed {
    logic                  valid;      // a stream element is on the bus
    logic                  first;      // element 0 of the stream
    logic [NID_W-1:0]      neuron_id;  // index of the element in its stream
    logic [GID_W-1:0]      group_id;   // lane valid mask: bit0=A, bit1=B, bit2=C
    word_t [N_LANES-1:0]   data;       // Data A/B/C
  } layer_bus_t;

  // Weight-load request, routed by the top to one layer.
  typedef struct packed {
    logic              we;       // write one weight
    logic [NID_W-1:0]  neuron;   // target neuron inside the layer
    logic [1:0]        lane;     // target PE inside the neuron (0=A,1=B,2=C)
    logic [NID_W-1:0]  src_id;   // Neuron ID part of the RAM address (BIAS_NID = bias)
    word_t             weight;   // Weight[15:0]
  } wload_t;

  // Saturate a wide signed value to one word.
  function automatic word_t sat16(input logic signed [ACC_W-1:0] v);
    if (v > ACC_W'(16'sh7fff))       return 16'sh7fff;
    else if (v < ACC_W'(16'sh8000))  return 16'sh8000;
    else                                       return word_t'(v);
  endfunction

  // Saturating 16-bit add, used by the output-block adders.
  function automatic word_t add_sat(input word_t a, input word_t b);
    logic signed [DATA_W:0] s;
    s = {a[DATA_W-1], a} + {b[DATA_W-1], b};
    return sat16(ACC_W'(s));
  endfunction

  function automatic word_t relu(input word_t a);
    return a[DATA_W-1] ? '0 : a;
  endfunction

endpackage
