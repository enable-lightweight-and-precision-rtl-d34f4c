// posit_output_encoder: the codec placed behind the FPU result port.
//
// Following the paper's enhanced-microarchitecture figure, an FP32 decoder
// unpacks the binary32 result, an 8-bit and a 16-bit posit encoder work on it
// in parallel, the result's pprec bit picks one, and the result's pfmt bit
// chooses between the posit and the unchanged FP32 result.  With pfmt = FP32
// the codec is skipped.
//
// A posit result is written to the low bits of the 32-bit register with the
// upper bits cleared (this design's choice).
//
// Interface: fp (32 bits) and cfg (codec_cfg_t) in, result (32 bits) out;
// combinational.
module posit_output_encoder
  import posit_pkg::*;
(
  input  logic [31:0]  fp,
  input  codec_cfg_t   cfg,
  output logic [31:0]  result
);

  unpacked_t   unp;
  logic [7:0]  p8;
  logic [15:0] p16;
  logic [31:0] posit_word;

  fp32_decoder u_fp32_dec (.fp(fp), .value(unp));

  posit_encoder #(.N(8))  u_p8_enc  (.value(unp), .es(cfg.es), .result(p8));
  posit_encoder #(.N(16)) u_p16_enc (.value(unp), .es(cfg.es), .result(p16));

  assign posit_word = (cfg.prec == PREC_P16) ? {16'b0, p16} : {24'b0, p8};
  assign result     = (cfg.fmt == FMT_POSIT) ? posit_word : fp;

endmodule
