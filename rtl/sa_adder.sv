// sa_adder: the "+" node of the averager.
//
// Adds two 64-bit beats lane by lane: each of the four 16-bit I/Q lanes is
// summed on its own, with no carry between lanes.  Sums wrap at 16 bits; with
// the shift K chosen so that M <= 2^K (the paper uses M = 64, K = 6) the sum
// of M shifted samples always fits, so no saturation logic is built.  The
// wrap-around behaviour is this design's choice, the paper does not discuss
// overflow.
//
// Purely combinational.
module sa_adder
  import sa_pkg::*;
(
  input  beat_t a_i,
  input  beat_t b_i,
  output beat_t sum_o
);

  always_comb begin
    for (int ln = 0; ln < LANES; ln++) begin
      sum_o[ln*SAMPLE_W +: SAMPLE_W] =
        a_i[ln*SAMPLE_W +: SAMPLE_W] + b_i[ln*SAMPLE_W +: SAMPLE_W];
    end
  end

endmodule
