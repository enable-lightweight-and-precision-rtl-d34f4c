// posit_encoder: combinational encoder from the unpacked form (sign, scale,
// fraction) to an n-bit posit with an exponent size es chosen at run time.
//
// Structure (after the paper's posit-encoder figure):
//   1. Dynamic es: an arithmetic right shift of the scale by es gives the
//      regime value k; masking the scale with (2^es - 1) gives the exponent
//      field exp.
//   2. A left shift by (7-es) places the es exponent bits directly above the
//      fraction: exp_mant.  This is the extra shifter that removes the unused
//      exponent bits before the regime is inserted.
//   3. The MSB of k selects the regime: for k >= 0 a run of k+1 ones and a
//      zero, for k < 0 a run of -k zeros and a one (rg_bits = k+2 or -k+1).
//      The regime shifter places the run in front of exp_mant; here this is
//      done by shifting {run fill, terminator, exp_mant} left by (n-1-run).
//   4. Rounding: round to nearest, ties to even, on the n-1 body bits using
//      the next bit (guard) and the OR of the rest (sticky).  Values at or
//      beyond the largest posit saturate to maxpos, nonzero values below the
//      smallest go to minpos; a posit never rounds to zero or to NaR.
//   5. Two's complement of the whole word when the sign is set.
// NaN/infinity inputs give NaR (1 followed by zeros); zero gives zero.
// Posit rounding is always round-to-nearest-even (the FP rounding mode in
// fcsr applies to the FP32 arithmetic only): this design's choice.
//
// Interface: value (unpacked_t) and es in, result (N bits) out; combinational.
module posit_encoder
  import posit_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  unpacked_t     value,
  input  logic [2:0]    es,
  output logic [N-1:0]  result
);

  localparam int unsigned L  = N - 1;           // body width
  localparam int unsigned EM = 7 + FRAC_W;      // exponent field (max 7) + fraction
  localparam int unsigned W  = L + 1 + EM;      // fill, terminator, exp_mant

  logic signed [SCALE_W-1:0] k;
  logic [6:0]                exp;
  logic [EM-1:0]             exp_mant;
  logic                      fill;              // regime run bit value
  logic [SCALE_W-1:0]        run;               // regime run length
  logic [W-1:0]              wide;
  logic [W-1:0]              shifted;
  logic [L-1:0]              body;
  logic [L-1:0]              body_r;
  logic                      guard, sticky;
  logic [N-1:0]              mag;

  always_comb begin
    k        = value.scale >>> es;
    exp      = 7'(value.scale) & 7'((1 << es) - 1);
    exp_mant = {exp, value.frac} << (7 - es);
    fill     = ~k[SCALE_W-1];
    run      = fill ? SCALE_W'(k + 1) : SCALE_W'(-k);
    wide     = {{L{fill}}, ~fill, exp_mant};
    shifted  = wide << (SCALE_W'(L) - run);
    body     = shifted[W-1 -: L];
    guard    = shifted[W-1-L];
    sticky   = |shifted[W-2-L:0];
    body_r   = body + L'(guard & (body[0] | sticky));

    if (k >= $signed(SCALE_W'(N - 2))) begin
      mag = {1'b0, {L{1'b1}}};                   // maxpos
    end else if (k < -$signed(SCALE_W'(N - 2))) begin
      mag = {{L{1'b0}}, 1'b1};                   // minpos
    end else begin
      mag = {1'b0, body_r};
    end

    if (value.nar) begin
      result = {1'b1, {L{1'b0}}};
    end else if (value.zero) begin
      result = '0;
    end else begin
      result = value.sign ? (~mag + N'(1)) : mag;
    end
  end

endmodule
