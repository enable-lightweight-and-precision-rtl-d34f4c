// fpu_model: behavioural model of the original IEEE-754 FP32 FPU, for
// simulation only.  It stands in for the existing FPU that the posit codecs
// are wrapped around, with the ports posit_fpu expects: a valid/ready request
// carrying the instruction word, three FP32 operands and a tag, and a result
// with flags and the returned tag.
//
// One operation is held at a time (in_ready is low while busy).  The latency
// depends on the operation group, loosely after the pipeline depths quoted for
// the real unit: add/multiply/fused 3 cycles, compare/min/max/sign-inject
// 1 cycle, divide/square root 8 cycles (iterative).  Arithmetic comes from
// posit_ref_pkg::fp32_execute.
module fpu_model
  import posit_pkg::*;
  import posit_ref_pkg::*;
(
  input  logic        clk,
  input  logic        rst_ni,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] instr,
  input  logic [31:0] operands [3],
  input  codec_cfg_t  tag_i,
  output logic        out_valid,
  output logic [31:0] result,
  output logic [4:0]  flags,
  output codec_cfg_t  tag_o
);

  logic       busy;
  int         count;
  logic [31:0] res_q;
  logic [4:0]  flg_q;
  codec_cfg_t  tag_q;

  assign in_ready = !busy;

  function automatic int latency(logic [31:0] ins);
    if (ins[6:0] != 7'h53) return 3;
    case (ins[31:27])
      5'h00, 5'h01, 5'h02: return 3;
      5'h03, 5'h0B:        return 8;
      default:             return 1;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_ni) begin
    if (!rst_ni) begin
      busy      <= 1'b0;
      count     <= 0;
      out_valid <= 1'b0;
      res_q     <= '0;
      flg_q     <= '0;
      tag_q     <= '{fmt: FMT_FP32, prec: PREC_P8, es: '0};
    end else begin
      out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        bit [4:0] f;
        res_q <= fp32_execute(instr, operands[0], operands[1], operands[2], f);
        flg_q <= f;
        tag_q <= tag_i;
        busy  <= 1'b1;
        count <= latency(instr) - 1;
      end else if (busy) begin
        if (count == 0) begin
          busy      <= 1'b0;
          out_valid <= 1'b1;
        end else begin
          count <= count - 1;
        end
      end
    end
  end

  assign result = res_q;
  assign flags  = flg_q;
  assign tag_o  = tag_q;

endmodule
