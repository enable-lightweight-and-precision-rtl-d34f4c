// tb_fp32_encoder: checks fp32_encoder on random unpacked values whose scale
// covers the normal range, the subnormal range (with nearest-even rounding
// worked out through real arithmetic), underflow to zero and saturation above
// the FP32 range, plus NaR and zero.
module tb_fp32_encoder;
  import posit_pkg::*;
  import posit_ref_pkg::*;

  int checks = 0, failures = 0;
  unpacked_t   val;
  logic [31:0] fp;
  int n_sub = 0, n_sat = 0;

  fp32_encoder dut (.value(val), .fp(fp));

  task automatic check();
    ref_unp_t u;
    bit [31:0] e;
    u.nar = val.nar; u.zero = val.zero; u.sign = val.sign;
    u.scale = int'(val.scale); u.frac = val.frac;
    e = ref_unp_to_fp32(u);
    #1;
    checks++;
    if (fp != e) begin
      failures++;
      if (failures < 10) $display("FAIL s=%b sc=%0d f=%h got %h exp %h",
                                  val.sign, val.scale, val.frac, fp, e);
    end
    if (fp[30:23] == 0 && fp[22:0] != 0) n_sub++;
    if (fp[30:0] == 31'h7F7F_FFFF) n_sat++;
  endtask

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    val = '{nar: 1'b1, zero: 1'b0, sign: 1'b1, scale: '0, frac: '0};
    check();
    checks++; if (fp != 32'h7FC0_0000) failures++;
    val = '{nar: 1'b0, zero: 1'b1, sign: 1'b0, scale: '0, frac: '0};
    check();
    // 1.0 and -1.5
    val = '{nar: 1'b0, zero: 1'b0, sign: 1'b0, scale: '0, frac: '0};
    check(); checks++; if (fp != 32'h3F80_0000) failures++;
    val = '{nar: 1'b0, zero: 1'b0, sign: 1'b1, scale: '0, frac: 23'h40_0000};
    check(); checks++; if (fp != 32'hBFC0_0000) failures++;
    for (int t = 0; t < 100000; t++) begin
      val.nar = 0; val.zero = 0;
      val.sign = 1'($urandom);
      case (t % 4)
        0: val.scale = 16'($signed($urandom_range(0, 253)) - 126);
        1: val.scale = 16'($signed($urandom_range(0, 40)) - 165);
        2: val.scale = 16'($signed($urandom_range(0, 2000)) - 1000);
        default: val.scale = 16'($signed($urandom_range(0, 10)) - 131);
      endcase
      val.frac = 23'($urandom);
      if (t % 8 == 1) val.frac = 23'($urandom) & 23'h7F_F000;
      check();
    end
    checks++;
    if (n_sub == 0 || n_sat == 0) begin failures++; $display("cases not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
