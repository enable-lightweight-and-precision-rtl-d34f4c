// tb_posit_input_decoder: checks the operand codec in all four modes
// (FP32 pass-through, P8, P16) at every exponent size.  Expected values come
// from the bit-walking posit reference followed by the reference FP32 packing;
// in FP32 mode the operand must pass unchanged.  Upper register bits are
// randomised to show they are ignored in posit mode.
module tb_posit_input_decoder;
  import posit_pkg::*;
  import posit_ref_pkg::*;

  int checks = 0, failures = 0;
  logic [31:0] operand, fp;
  codec_cfg_t  cfg;
  int n_mode [3] = '{0, 0, 0};

  posit_input_decoder dut (.operand(operand), .cfg(cfg), .fp(fp));

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
      operand = $urandom;
      cfg.fmt  = pfmt_e'($urandom_range(0, 3) != 0);
      cfg.prec = pprec_e'($urandom);
      cfg.es   = 3'($urandom);
      n = (cfg.prec == PREC_P16) ? 16 : 8;
      if (cfg.fmt == FMT_FP32) begin
        e = operand;
        n_mode[0]++;
      end else begin
        e = ref_unp_to_fp32(ref_posit_decode(n, operand, int'(cfg.es)));
        n_mode[n == 16 ? 2 : 1]++;
      end
      #1;
      checks++;
      if (fp != e) begin
        failures++;
        if (failures < 10) $display("FAIL op=%h fmt=%0d prec=%0d es=%0d got %h exp %h",
                                    operand, cfg.fmt, cfg.prec, cfg.es, fp, e);
      end
    end
    // P(16,1) 0x4000 = 1.0 ; P(8,0) 0xC0 = -1.0 ; P(8,0) 0x60 = 2.0
    cfg = '{fmt: FMT_POSIT, prec: PREC_P16, es: 3'd1}; operand = 32'h0000_4000; #1;
    checks++; if (fp != 32'h3F80_0000) failures++;
    cfg = '{fmt: FMT_POSIT, prec: PREC_P8, es: 3'd0}; operand = 32'hABCD_EFC0; #1;
    checks++; if (fp != 32'hBF80_0000) failures++;
    operand = 32'h0000_0060; #1;
    checks++; if (fp != 32'h4000_0000) failures++;
    checks++;
    if (n_mode[0] == 0 || n_mode[1] == 0 || n_mode[2] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
