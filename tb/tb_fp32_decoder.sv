// tb_fp32_decoder: checks fp32_decoder on random binary32 words of every class
// (normal, subnormal, zero, infinity, NaN).  For finite nonzero inputs the
// value (1+frac)*2^scale rebuilt from the outputs must equal the value of the
// input word computed with real arithmetic; flags are checked directly.
module tb_fp32_decoder;
  import posit_pkg::*;
  import posit_ref_pkg::*;

  int checks = 0, failures = 0;
  logic [31:0] fp;
  unpacked_t   val;

  fp32_decoder dut (.fp(fp), .value(val));

  task automatic check();
    real want, got;
    bit ok;
    bit is_nar  = (fp[30:23] == 8'hFF);
    bit is_zero = (fp[30:0] == 0);
    #1;
    checks++;
    ok = (val.nar == is_nar) && (val.zero == is_zero);
    if (!is_nar && !is_zero) begin
      want = fp32_to_real(fp);
      got  = (1.0 + real'(val.frac) / 8388608.0) * pow2(int'(val.scale));
      if (val.sign) got = -got;
      ok = ok && (want == got);
    end
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL fp=%h got s=%b sc=%0d f=%h z=%b n=%b",
                                  fp, val.sign, val.scale, val.frac, val.zero, val.nar);
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
    foreach (fp[i]) fp[i] = 1'b0;
    check();
    fp = 32'h8000_0000; check();
    fp = 32'h7F80_0000; check();
    fp = 32'hFFC0_0001; check();
    fp = 32'h0000_0001; check();
    fp = 32'h3F80_0000; check();
    checks++; if (!(val.scale == 0 && val.frac == 0)) failures++;
    for (int t = 0; t < 200000; t++) begin
      fp = $urandom;
      if (t % 4 == 1) fp[30:23] = 8'h00;
      if (t % 16 == 2) fp[30:23] = 8'hFF;
      if (t % 8 == 3) fp[22:0] = fp[22:0] >> $urandom_range(0, 22);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
