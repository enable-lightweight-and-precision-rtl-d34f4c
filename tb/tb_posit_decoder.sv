// tb_posit_decoder: exhaustive check of posit_decoder for P8 and P16 at every
// exponent size 0..7.  Each pattern is decoded by the bit-walking reference
// model and sign, flags, scale and fraction are compared.
module tb_posit_decoder;
  import posit_pkg::*;
  import posit_ref_pkg::*;

  int checks = 0, failures = 0;
  logic [7:0]  op8;
  logic [15:0] op16;
  logic [2:0]  es;
  unpacked_t   r8, r16;

  posit_decoder #(.N(8))  dut8  (.operand(op8),  .es(es), .result(r8));
  posit_decoder #(.N(16)) dut16 (.operand(op16), .es(es), .result(r16));

  task automatic compare(string tag, int n, int unsigned pat, unpacked_t got);
    ref_unp_t exp_u = ref_posit_decode(n, pat, int'(es));
    bit ok;
    checks++;
    ok = (got.nar == exp_u.nar) && (got.zero == exp_u.zero);
    if (!exp_u.nar && !exp_u.zero)
      ok = ok && (got.sign == exp_u.sign) && (int'(got.scale) == exp_u.scale)
              && (got.frac == exp_u.frac);
    if (!ok) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s pat=%h es=%0d got s=%b sc=%0d f=%h z=%b n=%b exp s=%b sc=%0d f=%h z=%b n=%b",
                 tag, pat, es, got.sign, got.scale, got.frac, got.zero, got.nar,
                 exp_u.sign, exp_u.scale, exp_u.frac, exp_u.zero, exp_u.nar);
    end
  endtask

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 8; e++) begin
      es = 3'(e);
      for (int p = 0; p < 256; p++) begin
        op8 = 8'(p);
        #1;
        compare("P8", 8, p, r8);
      end
      for (int p = 0; p < 65536; p++) begin
        op16 = 16'(p);
        #1;
        compare("P16", 16, p, r16);
      end
    end
    // Worked example: 0x00A9 in P(16,2) is +2^(-7*4) * 2^1 * 1.01001b
    es = 3'd2; op16 = 16'b0000_0000_1010_1001; #1;
    checks++;
    if (!(r16.scale == -27 && r16.frac[22:18] == 5'b01001 && !r16.sign)) failures++;
    // 0x7FFD in P(16,2): k=12, e=2 -> scale 50, fraction 0
    op16 = 16'b0111_1111_1111_1101; #1;
    checks++;
    if (!(r16.scale == 50 && r16.frac == 0)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
