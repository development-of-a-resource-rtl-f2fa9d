// mac_unit: the multiply-add-accumulate unit of a PE (one DSP slice).
//
// Each enabled cycle it forms the product a*b of a Q5.10 data word and a
// Q5.10 weight (a Q10.20 product) and either loads the accumulator with
// product + bias (first element of a stream; the bias c is Q5.10 and is
// aligned by shifting it left by FRAC) or adds the product to the
// accumulator. This is the DSP P = A*B + C / P = A*B + P pattern.
// The accumulator is ACC_W = 48 bits wide, as in a DSP48 slice, so a
// stream of a few elements cannot overflow it.
// out is the accumulator shifted right by FRAC (toward minus infinity) and
// saturated to 16 bits; it is valid one cycle after the last enabled cycle.
// The bias operand, the wide accumulator and the truncate-then-saturate
// rule are this design's choices: the paper only fixes 16-bit Q5.10 words.
module mac_unit
  import nn_pkg::*;
#(
  parameter int W  = DATA_W,
  parameter int FB = FRAC,
  parameter int AW = ACC_W
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                en,
  input  logic                first,
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  input  logic signed [W-1:0] c,
  output word_t               out
);

  logic signed [AW-1:0] acc;
  logic signed [AW-1:0] prod;
  logic signed [AW-1:0] addend;

  always_comb begin
    prod   = AW'(a) * AW'(b);
    addend = first ? (AW'(c) <<< FB) : acc;
  end

  always_ff @(posedge clk) begin
    if (rst)     acc <= '0;
    else if (en) acc <= prod + addend;
  end

  assign out = sat16(ACC_W'(acc >>> FB));

endmodule
