// sa_shifter: the ">>" stage of the averager.
//
// Every I and Q component of the two complex-short samples in a 64-bit beat
// is shifted right by K bits.  Shifting before adding divides each of the
// M = 2^K averaged signals by M, so their sum is the mean and cannot leave
// the 16-bit range.  The paper describes a bit-wise right shift by K; this
// design makes it arithmetic (sign-preserving), since the samples are signed,
// which rounds toward minus infinity.  Shifts of 16 or more give 0 or -1.
//
// Purely combinational: data_o follows data_i and k_i in the same cycle.
module sa_shifter
  import sa_pkg::*;
(
  input  beat_t      data_i,   // two sc16 samples
  input  logic [4:0] k_i,      // shift amount K
  output beat_t      data_o    // each lane >>> K
);

  always_comb begin
    for (int ln = 0; ln < LANES; ln++) begin
      data_o[ln*SAMPLE_W +: SAMPLE_W] =
        $signed(data_i[ln*SAMPLE_W +: SAMPLE_W]) >>> k_i;
    end
  end

endmodule
