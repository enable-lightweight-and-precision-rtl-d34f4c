// fcvt_decoder: decoder extension for the custom format-conversion
// instructions.
//
// Encodings (paper Table I), all in the OP-FP major opcode 0x53 with the
// otherwise unused funct5 values:
//   funct5 0x10  fcvt.p8.s / fcvt.p16.s    FP32 -> posit; rs2 = 0x00 (P8) or
//                                          0x08 (P16) gives the posit width,
//                                          fmt [26:25] = 0
//   funct5 0x12  fcvt.s.p8 / fcvt.s.p16    posit -> FP32; rs2 as above,
//                                          fmt = 0
//   funct5 0x11  fcvt.p<dst>.p<src>        posit -> posit; rs2 gives the
//                                          source width, fmt = 0 (P8) or
//                                          1 (P16) the destination width
// Bits [14:12], the rounding-mode field of ordinary F instructions, carry es.
// The paper says es is either static (from the instruction) or dynamic (from
// pcsr) "depending on the decoding of the es field" without giving the code;
// here es = 3'b111 selects the dynamic value, like the dynamic rounding mode,
// and 0..6 are static.  A dynamic source es is taken from pcsr slot 0 and a
// dynamic destination es from slot 3, so posit-to-posit conversion can also
// change es.
//
// Outputs: is_fcvt (the word is one of the instructions above), the codec
// configuration of source operand and result, and fpu_bypass, which tells the
// wrapper to skip the original FPU (only the codecs do the work).
// Combinational.
module fcvt_decoder
  import posit_pkg::*;
(
  input  logic [31:0] instr,
  input  pcsr_t       pcsr_i,
  output logic        is_fcvt,
  output codec_cfg_t  src_cfg,
  output codec_cfg_t  dst_cfg,
  output logic        fpu_bypass
);

  logic [4:0] funct5;
  logic [1:0] fmt;
  logic [4:0] rs2;
  logic [2:0] es_field;
  logic       rs2_ok;
  logic [2:0] src_es, dst_es;
  pprec_e     rs2_prec;

  always_comb begin
    funct5   = instr[31:27];
    fmt      = instr[26:25];
    rs2      = instr[24:20];
    es_field = instr[14:12];
    rs2_ok   = (rs2 == RS2_P8) || (rs2 == RS2_P16);
    rs2_prec = (rs2 == RS2_P16) ? PREC_P16 : PREC_P8;
    src_es   = (es_field == ES_DYN) ? pcsr_i.pes[0] : es_field;
    dst_es   = (es_field == ES_DYN) ? pcsr_i.pes[3] : es_field;

    is_fcvt = 1'b0;
    src_cfg = '{fmt: FMT_FP32, prec: PREC_P8, es: '0};
    dst_cfg = '{fmt: FMT_FP32, prec: PREC_P8, es: '0};

    if (instr[6:0] == OPC_OP_FP && rs2_ok) begin
      unique case (funct5)
        F5_FCVT_P_S: if (fmt == 2'b00) begin
          is_fcvt = 1'b1;
          dst_cfg = '{fmt: FMT_POSIT, prec: rs2_prec, es: dst_es};
        end
        F5_FCVT_S_P: if (fmt == 2'b00) begin
          is_fcvt = 1'b1;
          src_cfg = '{fmt: FMT_POSIT, prec: rs2_prec, es: src_es};
        end
        F5_FCVT_P_P: if (fmt[1] == 1'b0) begin
          is_fcvt = 1'b1;
          src_cfg = '{fmt: FMT_POSIT, prec: rs2_prec, es: src_es};
          dst_cfg = '{fmt: FMT_POSIT, prec: pprec_e'(fmt[0]), es: dst_es};
        end
        default: ;
      endcase
    end
    fpu_bypass = is_fcvt;
  end

endmodule
