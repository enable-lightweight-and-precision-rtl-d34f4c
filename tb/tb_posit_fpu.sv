// tb_posit_fpu: end-to-end test of the extended FPU at its default (and only)
// configuration, with fpu_model standing in for the original FP32 FPU.
//
// A core-like driver issues a stream of instructions back to back, waiting
// only on in_ready, and writes pcsr between (and sometimes while) operations
// are in flight.  Every accepted instruction pushes its expected result on a
// queue; the expected value is worked out from the configuration in force when
// it was issued, with the bit-level posit reference models and the same FP32
// arithmetic as the FPU model.  Results are popped and compared in order.
//
// Phases: plain FP32 (codecs skipped), P(16,1), P(8,0), random mixed
// precision / mixed format / dynamic es, every custom conversion with static
// and dynamic es, and a final random mix.  Each mechanism below must occur at
// least once or it counts as a failure.
module tb_posit_fpu;
  import posit_pkg::*;
  import posit_ref_pkg::*;

  int checks = 0, failures = 0;

  logic        clk = 0, rst_ni = 0;
  logic [11:0] csr_addr;
  csr_op_e     csr_op;
  logic [31:0] csr_wdata, csr_rdata;
  logic        in_valid, in_ready;
  logic [31:0] instr;
  logic [31:0] operands [3];
  logic        out_valid;
  logic [31:0] result;
  logic [4:0]  flags;
  logic        fpu_in_valid, fpu_in_ready, fpu_out_valid;
  logic [31:0] fpu_instr, fpu_result;
  logic [31:0] fpu_operands [3];
  logic [4:0]  fpu_flags;
  codec_cfg_t  fpu_tag_o, fpu_tag_i;

  posit_fpu dut (
    .clk, .rst_ni,
    .csr_addr, .csr_op, .csr_wdata, .csr_rdata,
    .in_valid, .in_ready, .instr, .operands,
    .out_valid, .result, .flags,
    .fpu_in_valid, .fpu_in_ready, .fpu_instr, .fpu_operands, .fpu_tag_o,
    .fpu_out_valid, .fpu_result, .fpu_flags, .fpu_tag_i
  );

  fpu_model u_fpu (
    .clk, .rst_ni,
    .in_valid (fpu_in_valid), .in_ready (fpu_in_ready),
    .instr    (fpu_instr),    .operands (fpu_operands), .tag_i (fpu_tag_o),
    .out_valid(fpu_out_valid), .result  (fpu_result),   .flags (fpu_flags),
    .tag_o    (fpu_tag_i)
  );

  always #5 clk = ~clk;

  // ---- mechanism counters ----------------------------------------------------
  typedef enum int {
    M_FP32_OP, M_P8_OP, M_P16_OP, M_MIXED_PREC, M_MIXED_FMT, M_ES_CHANGE,
    M_CVT_P_S, M_CVT_S_P, M_CVT_P_P, M_CVT_STATIC_ES, M_CVT_DYN_ES,
    M_FPU_SKIPPED, M_STALL_FPU_BUSY, M_STALL_CVT_WAIT, M_INT_RESULT,
    M_CSR_WHILE_INFLIGHT, M_NAR_RESULT, M_SATURATE, M_FUSED, M_NUM
  } mech_e;
  int mech [M_NUM];
  string mech_name [M_NUM] = '{
    "fp32 op (codecs skipped)", "posit8 op", "posit16 op", "mixed precision",
    "mixed posit/fp32 operands", "dynamic es change", "fcvt.p.s", "fcvt.s.p",
    "fcvt.p.p", "conversion static es", "conversion dynamic es",
    "conversion without FPU request", "stall: FPU busy", "stall: conversion waits",
    "integer-result op", "pcsr write while in flight", "NaR result",
    "saturated posit result", "fused multiply-add"};

  // ---- expected results --------------------------------------------------------
  logic [31:0] exp_q [$];
  logic [31:0] pcsr_model;

  function automatic codec_cfg_t slot(int i);
    return '{fmt: pfmt_e'(pcsr_model[i]), prec: pprec_e'(pcsr_model[4+i]),
             es: pcsr_model[8+3*i +: 3]};
  endfunction

  function automatic logic [31:0] dec_ref(logic [31:0] op, codec_cfg_t c);
    if (c.fmt == FMT_FP32) return op;
    return ref_unp_to_fp32(ref_posit_decode(c.prec == PREC_P16 ? 16 : 8, op, int'(c.es)));
  endfunction

  function automatic logic [31:0] enc_ref(logic [31:0] f, codec_cfg_t c);
    if (c.fmt == FMT_FP32) return f;
    return ref_posit_encode(c.prec == PREC_P16 ? 16 : 8, int'(c.es), ref_fp32_unpack(f));
  endfunction

  // Expected architectural result of one instruction under pcsr_model.
  function automatic logic [31:0] expected(logic [31:0] ins, logic [31:0] ops [3]);
    codec_cfg_t c [3];
    codec_cfg_t r;
    logic [31:0] f [3];
    logic [31:0] res;
    bit [4:0] fl;
    logic [4:0] f5 = ins[31:27];
    logic [2:0] esf = ins[14:12];
    for (int i = 0; i < 3; i++) c[i] = slot(i);
    r = slot(3);
    if (ins[6:0] == 7'h53 && (f5 == 5'h10 || f5 == 5'h11 || f5 == 5'h12)) begin
      codec_cfg_t s, d;
      s = '{fmt: FMT_FP32, prec: PREC_P8, es: 3'd0};
      d = s;
      if (f5 != 5'h10) s = '{fmt: FMT_POSIT, prec: pprec_e'(ins[23]),
                             es: (esf == 3'b111) ? slot(0).es : esf};
      if (f5 != 5'h12) d = '{fmt: FMT_POSIT,
                             prec: (f5 == 5'h11) ? pprec_e'(ins[25]) : pprec_e'(ins[23]),
                             es: (esf == 3'b111) ? slot(3).es : esf};
      return enc_ref(dec_ref(ops[0], s), d);
    end
    for (int i = 0; i < 3; i++) f[i] = dec_ref(ops[i], c[i]);
    res = fp32_execute(ins, f[0], f[1], f[2], fl);
    if (ins[6:0] == 7'h53 && f5 == 5'h14) return res;
    return enc_ref(res, r);
  endfunction

  // ---- instruction builders ---------------------------------------------------
  function automatic logic [31:0] op_fp(logic [4:0] f5, logic [2:0] rm);
    return {f5, 2'b00, 5'd2, 5'd1, rm, 5'd3, 7'h53};
  endfunction

  function automatic logic [31:0] rand_arith();
    case ($urandom_range(0, 9))
      0: return op_fp(5'h00, 3'b000);                    // fadd.s
      1: return op_fp(5'h01, 3'b000);                    // fsub.s
      2: return op_fp(5'h02, 3'b000);                    // fmul.s
      3: return op_fp(5'h03, 3'b000);                    // fdiv.s
      4: return op_fp(5'h05, 3'($urandom_range(0, 1)));  // fmin/fmax.s
      5: return op_fp(5'h14, 3'($urandom_range(0, 2)));  // fle/flt/feq.s
      6: return {5'd4, 2'b00, 5'd2, 5'd1, 3'b000, 5'd3, 7'h43};  // fmadd.s
      7: return {5'd4, 2'b00, 5'd2, 5'd1, 3'b000, 5'd3, 7'h4F};  // fnmadd.s
      8: return op_fp(5'h0B, 3'b000) & ~32'h01F0_0000;     // fsqrt.s
      default: return op_fp(5'h02, 3'b000);
    endcase
  endfunction

  // A random register value suited to the configuration of slot i.
  function automatic logic [31:0] rand_operand(codec_cfg_t c);
    logic [31:0] v;
    if (c.fmt == FMT_FP32) begin
      v = $urandom;
      v[30:23] = 8'(127 + $signed($urandom_range(0, 20)) - 10);
      return v;
    end
    v = $urandom;
    if ($urandom_range(0, 40) == 0) v[15:0] = (c.prec == PREC_P16) ? 16'h8000 : 16'h0080;
    if ($urandom_range(0, 40) == 0) v[15:0] = 16'h0000;
    return v;
  endfunction

  // ---- driver ------------------------------------------------------------------
  task automatic csr_write(logic [31:0] val);
    @(negedge clk);
    in_valid  = 1'b0;
    csr_op    = CSR_WRITE;
    csr_addr  = PCSR_ADDR;
    csr_wdata = val;
    if (dut.inflight_q != 0) mech[M_CSR_WHILE_INFLIGHT]++;
    if (val[19:8] != pcsr_model[19:8]) mech[M_ES_CHANGE]++;
    @(posedge clk);
    pcsr_model = val & 32'h000F_FFFF;
    #1 csr_op = CSR_NONE;
  endtask

  task automatic issue(logic [31:0] ins, logic [31:0] ops [3]);
    logic [31:0] e;
    logic [4:0] f5 = ins[31:27];
    bit cvt = (ins[6:0] == 7'h53) && (f5 inside {5'h10, 5'h11, 5'h12});
    @(negedge clk);
    csr_op   = CSR_NONE;
    in_valid = 1'b1;
    instr    = ins;
    operands = ops;
    #1;
    while (!in_ready) begin
      if (cvt) mech[M_STALL_CVT_WAIT]++;
      else     mech[M_STALL_FPU_BUSY]++;
      @(negedge clk);
      #1;
    end
    e = expected(ins, ops);
    exp_q.push_back(e);
    if (cvt) begin
      if (fpu_in_valid) begin
        failures++;
        $display("FAIL FPU requested for a conversion %h", ins);
      end else mech[M_FPU_SKIPPED]++;
      case (f5)
        5'h10: mech[M_CVT_P_S]++;
        5'h12: mech[M_CVT_S_P]++;
        default: mech[M_CVT_P_P]++;
      endcase
      if (ins[14:12] == 3'b111) mech[M_CVT_DYN_ES]++;
      else mech[M_CVT_STATIC_ES]++;
    end else begin
      int np8 = 0, np16 = 0, nfp = 0;
      int nops = (ins[6:0] != 7'h53) ? 3 : 2;
      for (int i = 0; i < nops; i++) begin
        codec_cfg_t c = slot(i);
        if (c.fmt == FMT_FP32) nfp++;
        else if (c.prec == PREC_P16) np16++;
        else np8++;
      end
      if (nfp == nops) mech[M_FP32_OP]++;
      if (np8 > 0) mech[M_P8_OP]++;
      if (np16 > 0) mech[M_P16_OP]++;
      if (np8 > 0 && np16 > 0) mech[M_MIXED_PREC]++;
      if (nfp > 0 && nfp < nops) mech[M_MIXED_FMT]++;
      if (ins[6:0] == 7'h53 && f5 == 5'h14) mech[M_INT_RESULT]++;
      if (ins[6:0] != 7'h53) mech[M_FUSED]++;
    end
    @(posedge clk);
    #1 in_valid = 1'b0;
  endtask

  // ---- result monitor ----------------------------------------------------------
  always @(negedge clk) begin
    if (rst_ni && out_valid) begin
      logic [31:0] e;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected result %h", result);
      end else begin
        e = exp_q.pop_front();
        if (result != e) begin
          failures++;
          if (failures < 15) $display("FAIL result %h expected %h (pcsr %h)", result, e, pcsr_model);
        end
        if (pcsr_model[3] && (result == 32'h80 || result == 32'h8000)) mech[M_NAR_RESULT]++;
        if (result == 32'h7F || result == 32'h7FFF) mech[M_SATURATE]++;
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_random(int n, bit cvt_too);
    logic [31:0] ops [3];
    logic [31:0] ins;
    for (int t = 0; t < n; t++) begin
      for (int i = 0; i < 3; i++) ops[i] = rand_operand(slot(i));
      ins = rand_arith();
      if (cvt_too && $urandom_range(0, 3) == 0) begin
        logic [4:0] f5 = 5'(5'h10 + $urandom_range(0, 2));
        logic [1:0] fmt = (f5 == 5'h11) ? 2'($urandom_range(0, 1)) : 2'b00;
        ins = {f5, fmt, ($urandom_range(0, 1) != 0) ? 5'h08 : 5'h00, 5'd1,
               3'($urandom_range(0, 7)), 5'd3, 7'h53};
        ops[0] = (f5 == 5'h10) ? rand_operand('{fmt: FMT_FP32, prec: PREC_P8, es: 3'd0})
                               : $urandom;
      end
      issue(ins, ops);
      if ($urandom_range(0, 15) == 0)
        csr_write({12'b0, 12'($urandom), 4'($urandom), 4'($urandom)});
    end
  endtask

  initial begin
    logic [31:0] ops [3];
    foreach (mech[i]) mech[i] = 0;
    csr_addr = PCSR_ADDR; csr_op = CSR_NONE; csr_wdata = '0;
    in_valid = 1'b0; instr = '0;
    foreach (operands[i]) operands[i] = '0;
    pcsr_model = '0;
    repeat (3) @(posedge clk);
    #1 rst_ni = 1'b1;

    // reset value of pcsr: plain FP32
    @(negedge clk);
    checks++;
    if (csr_rdata != 32'h0) begin failures++; $display("FAIL pcsr reset %h", csr_rdata); end

    // 1. FP32 mode: 1.5 + 2.25 = 3.75, then random FP32 arithmetic
    ops = '{32'h3FC0_0000, 32'h4010_0000, 32'h0};
    issue(op_fp(5'h00, 3'b000), ops);
    run_random(200, 1'b0);

    // 2. P(16,1) everywhere: 0x4000 (1.0) * 0x5000 (2.0) = 0x5000
    csr_write({12'b0, 3'd1, 3'd1, 3'd1, 3'd1, 4'hF, 4'hF});
    ops = '{32'h4000, 32'h5000, 32'h0};
    issue(op_fp(5'h02, 3'b000), ops);
    run_random(300, 1'b0);

    // 3. P(8,0) everywhere: 0x40 (1.0) + 0x40 = 0x60 (2.0)
    csr_write({12'b0, 12'b0, 4'h0, 4'hF});
    ops = '{32'h40, 32'h40, 32'h0};
    issue(op_fp(5'h00, 3'b000), ops);
    run_random(300, 1'b0);

    // 4. mixed: rs1 P(8,0), rs2 P(16,2), rs3 FP32, result P(16,1)
    csr_write({12'b0, 3'd1, 3'd0, 3'd2, 3'd0, 4'b1010, 4'b1011});
    run_random(300, 1'b0);

    // 5. every conversion: fcvt.p16.s 1.0 with es=1 -> 0x4000; dynamic es
    csr_write({12'b0, 3'd2, 3'd0, 3'd0, 3'd1, 4'b0000, 4'b0000});
    ops = '{32'h3F80_0000, 32'h0, 32'h0};
    issue({5'h10, 2'b00, 5'h08, 5'd1, 3'd1, 5'd3, 7'h53}, ops);
    for (int f = 0; f < 3; f++)
      for (int fm = 0; fm < 2; fm++)
        for (int p = 0; p < 2; p++)
          for (int es = 0; es < 8; es++) begin
            if (f != 1 && fm == 1) continue;
            ops[0] = (f == 0) ? rand_operand('{fmt: FMT_FP32, prec: PREC_P8, es: 3'd0}) : $urandom;
            issue({5'(5'h10 + f), 2'(fm), p ? 5'h08 : 5'h00, 5'd1, 3'(es), 5'd3, 7'h53}, ops);
          end

    // 6. random mix of everything, with conversions right behind FPU operations
    for (int b = 0; b < 20; b++) begin
      csr_write({12'b0, 12'($urandom), 4'($urandom), 4'($urandom)});
      run_random(100, 1'b1);
    end

    repeat (20) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    foreach (mech[i]) begin
      checks++;
      $display("mechanism %-32s %0d", mech_name[i], mech[i]);
      if (mech[i] == 0) begin failures++; $display("FAIL mechanism never seen: %s", mech_name[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
