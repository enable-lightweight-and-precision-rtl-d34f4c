// tb_posit_output_encoder: checks the result codec in FP32 pass-through, P8
// and P16 modes at every exponent size.  FP32 inputs are random words of all
// classes, biased towards the posit range.  Expected posits come from the
// reference FP32 unpacking followed by the bit-string posit encoder, placed
// in the low bits of a zeroed word.
module tb_posit_output_encoder;
  import posit_pkg::*;
  import posit_ref_pkg::*;

  int checks = 0, failures = 0;
  logic [31:0] fp, res;
  codec_cfg_t  cfg;
  int n_mode [3] = '{0, 0, 0};

  posit_output_encoder dut (.fp(fp), .cfg(cfg), .result(res));

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200000; t++) begin
      bit [31:0] e;
      int n;
      fp = $urandom;
      if (t % 2 == 0) fp[30:23] = 8'(127 + $signed($urandom_range(0, 60)) - 30);
      if (t % 50 == 1) fp[30:23] = 8'hFF;
      if (t % 50 == 2) fp[30:0] = '0;
      if (t % 50 == 3) fp[30:23] = 8'h00;
      cfg.fmt  = pfmt_e'($urandom_range(0, 3) != 0);
      cfg.prec = pprec_e'($urandom);
      cfg.es   = 3'($urandom);
      n = (cfg.prec == PREC_P16) ? 16 : 8;
      if (cfg.fmt == FMT_FP32) begin
        e = fp;
        n_mode[0]++;
      end else begin
        e = ref_posit_encode(n, int'(cfg.es), ref_fp32_unpack(fp));
        n_mode[n == 16 ? 2 : 1]++;
      end
      #1;
      checks++;
      if (res != e) begin
        failures++;
        if (failures < 10) $display("FAIL fp=%h fmt=%0d prec=%0d es=%0d got %h exp %h",
                                    fp, cfg.fmt, cfg.prec, cfg.es, res, e);
      end
    end
    // 1.0 -> P(16,1) 0x4000 ; -1.0 -> P(8,0) 0xC0 ; +inf -> NaR
    cfg = '{fmt: FMT_POSIT, prec: PREC_P16, es: 3'd1}; fp = 32'h3F80_0000; #1;
    checks++; if (res != 32'h0000_4000) failures++;
    cfg = '{fmt: FMT_POSIT, prec: PREC_P8, es: 3'd0}; fp = 32'hBF80_0000; #1;
    checks++; if (res != 32'h0000_00C0) failures++;
    fp = 32'h7F80_0000; #1;
    checks++; if (res != 32'h0000_0080) failures++;
    checks++;
    if (n_mode[0] == 0 || n_mode[1] == 0 || n_mode[2] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
