// posit_pkg: types and constants shared by the posit/FP32 codecs and the
// extended FPU wrapper.
//
// The codecs exchange numbers in one "unpacked" form, unpacked_t: a sign, a
// signed power-of-two scale, a left-aligned 23-bit fraction (hidden one not
// stored) and two flags for the special values.  A posit P(n,es) with regime
// value k, exponent field e and fraction f has scale = k*2^es + e; an FP32
// number has scale = biased_exponent - 127.  The scale is 16 bits wide, which
// covers the widest case built here (P(16,7): |scale| <= 14*128+127).
//
// The pcsr layout follows the bit positions printed in the paper's register
// figure: pfmt in [3:0], pprec in [7:4], pes in [19:8] as four 3-bit fields,
// [31:20] reserved.  Which of the four slots sits lowest (operand 0) and the
// meaning of each value (pfmt=1 posit, pprec=1 16-bit) are this design's choice.
package posit_pkg;

  localparam int unsigned SCALE_W = 16;  // signed scale width
  localparam int unsigned FRAC_W  = 23;  // fraction width (FP32 mantissa)
  localparam int unsigned ES_W    = 3;   // pes field width per slot
  localparam int unsigned NSLOT   = 4;   // three operands + one result

  // Unpacked number exchanged between the codecs.
  typedef struct packed {
    logic                      nar;    // posit NaR / FP NaN or infinity
    logic                      zero;   // exact zero
    logic                      sign;
    logic signed [SCALE_W-1:0] scale;  // value = 1.frac * 2^scale
    logic [FRAC_W-1:0]         frac;   // left aligned
  } unpacked_t;

  // Codec configuration of one operand slot or of the result.
  typedef enum logic {
    FMT_FP32  = 1'b0,
    FMT_POSIT = 1'b1
  } pfmt_e;

  typedef enum logic {
    PREC_P8  = 1'b0,
    PREC_P16 = 1'b1
  } pprec_e;

  typedef struct packed {
    pfmt_e           fmt;
    pprec_e          prec;
    logic [ES_W-1:0] es;
  } codec_cfg_t;

  // pcsr as laid out in the register (bit 31 first).
  typedef struct packed {
    logic [11:0]                 reserved;  // [31:20]
    logic [NSLOT-1:0][ES_W-1:0]  pes;       // [19:8], slot i at [8+3i +: 3]
    logic [NSLOT-1:0]            pprec;     // [7:4]
    logic [NSLOT-1:0]            pfmt;      // [3:0]
  } pcsr_t;

  // CSR address of pcsr: the paper does not give one; a user-level custom
  // read/write address is used.
  localparam logic [11:0] PCSR_ADDR = 12'h800;

  // CSR operations (RISC-V csrrw / csrrs / csrrc).
  typedef enum logic [1:0] {
    CSR_NONE  = 2'd0,
    CSR_WRITE = 2'd1,
    CSR_SET   = 2'd2,
    CSR_CLEAR = 2'd3
  } csr_op_e;

  // Custom conversion instructions (paper Table I): OP-FP major opcode with
  // the otherwise unused funct5 values 0x10..0x12.
  localparam logic [6:0] OPC_OP_FP      = 7'h53;
  localparam logic [4:0] F5_FCVT_P_S    = 5'h10;  // FP32  -> posit
  localparam logic [4:0] F5_FCVT_P_P    = 5'h11;  // posit -> posit
  localparam logic [4:0] F5_FCVT_S_P    = 5'h12;  // posit -> FP32
  localparam logic [4:0] RS2_P8         = 5'h00;
  localparam logic [4:0] RS2_P16        = 5'h08;
  // es field value that selects the dynamic es held in pcsr (this design's
  // choice, after the RISC-V "dynamic rounding mode" encoding).
  localparam logic [2:0] ES_DYN         = 3'b111;

  // Canonical FP32 values.
  localparam logic [31:0] FP32_QNAN = 32'h7FC0_0000;

endpackage
