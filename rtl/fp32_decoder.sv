// fp32_decoder: unpacks an IEEE-754 binary32 word (the FPU result) into the
// unpacked form taken by the posit encoders, on the output side of the FPU.
//
// The paper names this block (the "FP32 Decoder" ahead of the posit encoders)
// without detailing it; this is the plain unpacking it implies:
//   - normal numbers: scale = exponent - 127, fraction as stored;
//   - subnormal numbers are normalised with a leading-zero count so that the
//     posit encoder always sees a hidden one;
//   - exponent 255 (infinity or NaN) is flagged as NaR, +0 and -0 as zero.
//
// Interface: fp (32 bits) in, value (unpacked_t) out; combinational.
module fp32_decoder
  import posit_pkg::*;
(
  input  logic [31:0]  fp,
  output unpacked_t    value
);

  logic [7:0]  expo;
  logic [22:0] man;
  logic [4:0]  lz;          // leading zeros of a subnormal fraction
  logic [22:0] norm;

  always_comb begin
    expo = fp[30:23];
    man  = fp[22:0];
    lz   = 5'd0;
    for (int i = 0; i < 23; i++) begin
      if (man[i]) lz = 5'(22 - i);
    end
    norm = man << (lz + 5'd1);

    value.sign = fp[31];
    value.nar  = (expo == 8'hFF);
    value.zero = (expo == 8'h00) && (man == '0);
    if (expo == 8'h00) begin
      value.scale = -SCALE_W'(127) - SCALE_W'(lz);
      value.frac  = norm;
    end else begin
      value.scale = SCALE_W'(expo) - SCALE_W'(127);
      value.frac  = man;
    end
  end

endmodule
