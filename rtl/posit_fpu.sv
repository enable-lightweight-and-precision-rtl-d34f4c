// posit_fpu: the extended FPU of a posit-enabled RISC-V core.  Posit support
// is added around an unchanged IEEE-754 FP32 FPU by placing codecs at its
// I/O: every FP instruction still runs in FP32 inside the FPU, while each of
// its three operands may arrive as an 8- or 16-bit posit and its result may
// leave as one.
//
//   core --instr, rs1/rs2/rs3--> [3 x posit_input_decoder] --FP32--> FPU
//   FPU --FP32 result--> [posit_output_encoder] --> core
//
// Configuration comes from pcsr (per operand and for the result: format,
// precision, exponent size), written with ordinary CSR instructions, so the
// standard F-extension instructions (fadd.s, fmul.s, fmadd.s, ...) compute on
// posits once pfmt is set.  With pfmt cleared all codecs are skipped and the
// unit behaves as a plain FP32 FPU.
//
// The custom conversions fcvt.{p8,p16}.s, fcvt.s.{p8,p16} and
// fcvt.{p8,p16}.{p8,p16} are recognised by fcvt_decoder.  They need no
// arithmetic: operand 0 goes through the input codec with the instruction's
// source configuration, straight (FPU bypassed) into the output codec with
// the destination configuration.  On such an instruction the FPU request is
// not raised and the FPU operands are held at zero so the FPU does not toggle.
//
// The original FPU is external (its ports are the fpu_* signals): in_valid /
// in_ready request handshake with the raw instruction word for the FPU's own
// decoding, the three FP32 operands and a tag; out_valid with result, flags
// and the returned tag.  The tag carries the result's codec configuration, so
// a later pcsr write does not change the encoding of a result still in flight.
//
// Timing: the codecs are combinational.  A conversion completes one cycle
// after it is accepted (result register on the bypass path); an arithmetic
// instruction completes when the FPU returns it.  A conversion is accepted
// only while no FPU operation is in flight, and an FPU operation is not issued
// in the cycle the bypass result is delivered, so the two result sources never
// collide.  The core is assumed always ready to take a result (no out_ready).
//
// Instructions whose source or destination is an integer register (compare,
// fcvt.w.s/fcvt.s.w, fmv, fclass) do not pass that operand or result through
// the codecs.  This and the choices above are this design's; the paper does
// not describe them.
module posit_fpu
  import posit_pkg::*;
(
  input  logic              clk,
  input  logic              rst_ni,

  // CSR port of pcsr (driven by the core's CSR unit)
  input  logic [11:0]       csr_addr,
  input  csr_op_e           csr_op,
  input  logic [31:0]       csr_wdata,
  output logic [31:0]       csr_rdata,

  // Issue from the core
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [31:0]       instr,
  input  logic [31:0]       operands [3],

  // Result to the core
  output logic              out_valid,
  output logic [31:0]       result,
  output logic [4:0]        flags,

  // Original FP32 FPU
  output logic              fpu_in_valid,
  input  logic              fpu_in_ready,
  output logic [31:0]       fpu_instr,
  output logic [31:0]       fpu_operands [3],
  output codec_cfg_t        fpu_tag_o,
  input  logic              fpu_out_valid,
  input  logic [31:0]       fpu_result,
  input  logic [4:0]        fpu_flags,
  input  codec_cfg_t        fpu_tag_i
);

  localparam int unsigned CNT_W = 4;

  pcsr_t        pcsr_q;
  codec_cfg_t   slot_cfg [NSLOT];
  logic         is_fcvt, bypass;
  codec_cfg_t   cvt_src_cfg, cvt_dst_cfg;
  codec_cfg_t   op_cfg [3];
  codec_cfg_t   res_cfg;
  logic [31:0]  dec_ops [3];
  logic         int_src, int_dst;
  logic [4:0]   funct5;
  logic         is_op_fp;

  // Bypass result register and FPU occupancy
  logic         byp_valid_q;
  logic [31:0]  byp_data_q;
  codec_cfg_t   byp_cfg_q;
  logic [CNT_W-1:0] inflight_q;
  logic         fpu_fire, byp_fire;

  // Output side
  logic [31:0]  enc_in;
  codec_cfg_t   enc_cfg;

  pcsr u_pcsr (
    .clk, .rst_ni, .csr_addr, .csr_op, .csr_wdata, .csr_rdata,
    .pcsr_o (pcsr_q),
    .cfg_o  (slot_cfg)
  );

  fcvt_decoder u_fcvt_dec (
    .instr      (instr),
    .pcsr_i     (pcsr_q),
    .is_fcvt    (is_fcvt),
    .src_cfg    (cvt_src_cfg),
    .dst_cfg    (cvt_dst_cfg),
    .fpu_bypass (bypass)
  );

  // Operand / result configuration for the instruction being issued
  always_comb begin
    funct5   = instr[31:27];
    is_op_fp = (instr[6:0] == OPC_OP_FP);
    int_dst  = is_op_fp && (funct5 == 5'h14 || funct5 == 5'h18 || funct5 == 5'h1C);
    int_src  = is_op_fp && (funct5 == 5'h1A || funct5 == 5'h1E);

    for (int i = 0; i < 3; i++) op_cfg[i] = slot_cfg[i];
    res_cfg = slot_cfg[3];

    if (is_fcvt) begin
      op_cfg[0] = cvt_src_cfg;
      res_cfg   = cvt_dst_cfg;
    end
    if (int_src) op_cfg[0].fmt = FMT_FP32;
    if (int_dst) res_cfg.fmt   = FMT_FP32;
  end

  for (genvar i = 0; i < 3; i++) begin : g_in_dec
    posit_input_decoder u_in_dec (
      .operand (operands[i]),
      .cfg     (op_cfg[i]),
      .fp      (dec_ops[i])
    );
  end

  // Issue control
  assign in_ready = bypass ? (inflight_q == '0) && !byp_valid_q
                           : fpu_in_ready && !byp_valid_q;
  assign fpu_fire = in_valid && in_ready && !bypass;
  assign byp_fire = in_valid && in_ready &&  bypass;

  assign fpu_in_valid = in_valid && !bypass && !byp_valid_q;
  assign fpu_instr    = instr;
  assign fpu_tag_o    = res_cfg;
  for (genvar i = 0; i < 3; i++) begin : g_iso
    // operand isolation of the unused FPU during conversions
    assign fpu_operands[i] = bypass ? '0 : dec_ops[i];
  end

  always_ff @(posedge clk or negedge rst_ni) begin
    if (!rst_ni) begin
      byp_valid_q <= 1'b0;
      byp_data_q  <= '0;
      byp_cfg_q   <= '{fmt: FMT_FP32, prec: PREC_P8, es: '0};
      inflight_q  <= '0;
    end else begin
      byp_valid_q <= byp_fire;
      if (byp_fire) begin
        byp_data_q <= dec_ops[0];
        byp_cfg_q  <= res_cfg;
      end
      inflight_q <= inflight_q + CNT_W'(fpu_fire) - CNT_W'(fpu_out_valid);
    end
  end

  // Output codec on whichever source has a result
  assign enc_in  = byp_valid_q ? byp_data_q : fpu_result;
  assign enc_cfg = byp_valid_q ? byp_cfg_q  : fpu_tag_i;

  posit_output_encoder u_out_enc (
    .fp     (enc_in),
    .cfg    (enc_cfg),
    .result (result)
  );

  assign out_valid = byp_valid_q || fpu_out_valid;
  assign flags     = byp_valid_q ? 5'b0 : fpu_flags;

  // The two result sources must never be valid together.
  a_no_collision: assert property (@(posedge clk) disable iff (!rst_ni)
                                   !(byp_valid_q && fpu_out_valid));
  // No FPU result without an operation in flight.
  a_no_spurious: assert property (@(posedge clk) disable iff (!rst_ni)
                                  fpu_out_valid |-> (inflight_q != '0) || fpu_fire);

endmodule
