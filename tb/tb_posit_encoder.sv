// tb_posit_encoder: checks posit_encoder for P8 and P16 at every exponent
// size.  Inputs are random signs, scales (inside and outside the posit range)
// and fractions, plus the exact value and the exact midpoints of neighbouring
// posits to exercise ties-to-even.  The expected posit is built by the
// bit-string reference model.
module tb_posit_encoder;
  import posit_pkg::*;
  import posit_ref_pkg::*;

  int checks = 0, failures = 0;
  unpacked_t   val;
  logic [2:0]  es;
  logic [7:0]  r8;
  logic [15:0] r16;
  int n_sat_max = 0, n_sat_min = 0;

  posit_encoder #(.N(8))  dut8  (.value(val), .es(es), .result(r8));
  posit_encoder #(.N(16)) dut16 (.value(val), .es(es), .result(r16));

  task automatic check_both();
    ref_unp_t u;
    bit [31:0] e8, e16;
    u.nar = val.nar; u.zero = val.zero; u.sign = val.sign;
    u.scale = int'(val.scale); u.frac = val.frac;
    e8  = ref_posit_encode(8,  int'(es), u);
    e16 = ref_posit_encode(16, int'(es), u);
    #1;
    checks += 2;
    if (r8 != e8[7:0]) begin
      failures++;
      if (failures < 10) $display("FAIL P8 es=%0d s=%b sc=%0d f=%h got %h exp %h",
                                  es, val.sign, val.scale, val.frac, r8, e8[7:0]);
    end
    if (r16 != e16[15:0]) begin
      failures++;
      if (failures < 10) $display("FAIL P16 es=%0d s=%b sc=%0d f=%h got %h exp %h",
                                  es, val.sign, val.scale, val.frac, r16, e16[15:0]);
    end
    if (r16 == 16'h7FFF) n_sat_max++;
    if (r16 == 16'h0001) n_sat_min++;
  endtask

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // specials
    es = 3'd1;
    val = '{nar: 1'b1, zero: 1'b0, sign: 1'b0, scale: '0, frac: '0};
    check_both();
    val = '{nar: 1'b0, zero: 1'b1, sign: 1'b0, scale: '0, frac: '0};
    check_both();
    // every posit of each width re-encodes to itself, and every midpoint
    // between neighbours is rounded to the even one
    for (int e = 0; e < 8; e++) begin
      es = 3'(e);
      for (int p = 1; p < 65536; p++) begin
        ref_unp_t u;
        u = ref_posit_decode(16, p, e);
        if (u.nar) continue;
        val.nar = 0; val.zero = 0; val.sign = u.sign;
        val.scale = 16'(u.scale); val.frac = u.frac;
        check_both();
        // midpoint: set the first bit below the fraction LSB when it exists
        if (u.frac[0] == 1'b0) begin
          int lsb;
          lsb = 0;
          while (lsb < 23 && u.frac[lsb] == 1'b0) lsb++;
          if (lsb > 0) begin
            val.frac = u.frac | (23'h1 << (lsb - 1));
            check_both();
          end
        end
      end
    end
    // random values, scales spanning far beyond the posit range
    for (int t = 0; t < 200000; t++) begin
      es = 3'($urandom_range(0, 7));
      val.nar = 0; val.zero = 0;
      val.sign = 1'($urandom);
      val.scale = 16'($signed($urandom_range(0, 4000)) - 2000);
      if (t % 2 == 0) val.scale = 16'($signed($urandom_range(0, 80)) - 40);
      val.frac = 23'($urandom);
      if (t % 3 == 0) val.frac[12:0] = '0;
      check_both();
    end
    checks++;
    if (n_sat_max == 0 || n_sat_min == 0) begin
      failures++;
      $display("saturation not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
