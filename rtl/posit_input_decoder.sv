// posit_input_decoder: the codec placed in front of one FPU operand port.
//
// Following the paper's enhanced-microarchitecture figure, an 8-bit and a
// 16-bit posit decoder work in parallel on the low bits of the 32-bit register
// operand; the operand's pprec bit picks one of them, an FP32 encoder packs
// the picked result into binary32, and the operand's pfmt bit chooses between
// that and the unchanged 32-bit operand.  With pfmt = FP32 the codec is
// skipped and the FPU sees the register value as is, which keeps standard
// IEEE-754 code working.  Each operand has its own pfmt/pprec/pes, so the
// three FPU operands may have different formats (mixed precision).
//
// A P8 operand is read from bits [7:0] and a P16 operand from bits [15:0] of
// the register; the upper bits are ignored (this design's choice).
//
// Interface: operand (32 bits) and cfg (codec_cfg_t) in, fp (32 bits) out;
// combinational.
module posit_input_decoder
  import posit_pkg::*;
(
  input  logic [31:0]  operand,
  input  codec_cfg_t   cfg,
  output logic [31:0]  fp
);

  unpacked_t   dec8, dec16, dec_sel;
  logic [31:0] fp_from_posit;

  posit_decoder #(.N(8))  u_p8_dec  (.operand(operand[7:0]),  .es(cfg.es), .result(dec8));
  posit_decoder #(.N(16)) u_p16_dec (.operand(operand[15:0]), .es(cfg.es), .result(dec16));

  assign dec_sel = (cfg.prec == PREC_P16) ? dec16 : dec8;

  fp32_encoder u_fp32_enc (.value(dec_sel), .fp(fp_from_posit));

  assign fp = (cfg.fmt == FMT_POSIT) ? fp_from_posit : operand;

endmodule
