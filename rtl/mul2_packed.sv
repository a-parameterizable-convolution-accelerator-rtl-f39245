// mul2_packed -- two 8x8 signed products from one wide multiplication.
//
// The paper squeezes two multiplications into one DSP block. This module
// shows how: the two weights that meet the same activation are packed into
// one 27-bit operand, w0 * 2^18 + w1, and multiplied by the activation a
// once. The low 18 bits of the 35-bit result hold w1*a (it always fits in 18
// signed bits); subtracting it and shifting right by 18 leaves w0*a. The
// packing offset (18) is chosen here to match a 27x18 DSP multiplier; the
// paper gives no bit positions.
//
// Interface: purely combinational. a, w0, w1 are signed 8-bit; p0 = w0*a and
// p1 = w1*a are signed 16-bit.
module mul2_packed (
  input  logic signed [7:0]  a,
  input  logic signed [7:0]  w0,
  input  logic signed [7:0]  w1,
  output logic signed [15:0] p0,
  output logic signed [15:0] p1
);
  localparam int SHIFT = 18;

  logic signed [26:0] packed_w;
  (* use_dsp = "yes" *) logic signed [34:0] prod;
  logic signed [17:0] lo;
  logic signed [15:0] hi;

  always_comb begin
    packed_w = (27'(w0) <<< SHIFT) + 27'(w1);
    prod     = 35'(packed_w) * 35'(a);
    lo       = prod[SHIFT-1:0];
    hi       = 16'((prod - 35'(lo)) >>> SHIFT);
    p1       = 16'(lo);
    p0       = 16'(hi);
  end
endmodule
