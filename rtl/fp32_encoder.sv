// fp32_encoder: packs the unpacked form produced by a posit decoder into an
// IEEE-754 binary32 word, on the input side of the FPU.
//
// The paper names this block (the "FP32 Encoder" after the posit decoders) but
// does not detail it; this is the plain packing it implies:
//   - biased exponent = scale + 127; in range it is stored with the fraction
//     (a posit of at most 16 bits has at most 13 fraction bits, so this is
//     exact);
//   - below the normal range the value becomes an FP32 subnormal, rounded to
//     nearest, ties to even (a carry out of the subnormal field correctly
//     gives the smallest normal number);
//   - above the normal range (possible for large es) the result saturates to
//     the largest finite FP32 number of the same sign, since a posit has no
//     infinity: this design's choice;
//   - NaR gives the canonical quiet NaN 0x7FC00000, zero gives +0.
//
// Interface: value (unpacked_t) in, fp (32 bits) out; combinational.
module fp32_encoder
  import posit_pkg::*;
(
  input  unpacked_t    value,
  output logic [31:0]  fp
);

  logic signed [SCALE_W:0] biased;
  logic [5:0]              shift;      // subnormal right shift, 1..26
  logic [49:0]             wide;       // {1, frac, 26 guard bits}
  logic [49:0]             shifted;
  logic [23:0]             field;
  logic                    guard, sticky;
  logic [23:0]             rounded;

  always_comb begin
    biased  = $signed({value.scale[SCALE_W-1], value.scale}) + (SCALE_W+1)'(127);
    shift   = (biased < -24) ? 6'd26 : 6'(1 - biased);
    wide    = {1'b1, value.frac, 26'b0};
    shifted = wide >> shift;
    field   = shifted[49:26];
    guard   = shifted[25];
    sticky  = |shifted[24:0];
    rounded = field + 24'(guard & (field[0] | sticky));

    if (value.nar) begin
      fp = FP32_QNAN;
    end else if (value.zero) begin
      fp = 32'h0;
    end else if (biased >= 255) begin
      fp = {value.sign, 8'hFE, 23'h7F_FFFF};
    end else if (biased >= 1) begin
      fp = {value.sign, biased[7:0], value.frac};
    end else begin
      fp = {value.sign, 7'b0, rounded};
    end
  end

endmodule
