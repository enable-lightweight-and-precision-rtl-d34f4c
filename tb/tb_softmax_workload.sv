// tb_softmax_workload: runs a softmax kernel y_i = exp(x_i - max x) / sum_j
// exp(x_j - max x) through the extended FPU for vector lengths 8, 16, 32, 64
// and 128, in FP32, P(16,1) and P(8,0).
//
// The core's part is played by the testbench.  It writes pcsr once per kernel
// (all operands and the result in the same format), then issues only standard
// F instructions, the same stream for every format:
//   max      m = fmax.s over the vector
//   per i    t = (x_i - m) * 1/16                      fsub.s, fmul.s
//            p = 1 + t(1 + t(1/2 + t(1/6 + t/24)))      4 x fmadd.s
//            e_i = p^16                                4 x fmul.s (squaring)
//            s = s + e_i                               fadd.s
//   once     r = 1 / s                                 fdiv.s
//   per i    y_i = e_i * r                             fmul.s
// How exp() is computed is this testbench's choice; the kernel only has to
// exercise the FPU as such code does.  Constants are held in the kernel's
// format, as a compiled program would store them.  Every returned value is
// compared bit for bit with the same operation done by the reference models,
// and a posit kernel must take exactly as many FPU-path cycles as the FP32
// one.  The error of y against a real-arithmetic softmax is reported, not
// checked.
module tb_softmax_workload;
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

  // fd=4, fs1=1, fs2=2, fs3=3, rm=000 (or as noted)
  localparam logic [31:0] FADD_S  = {5'h00, 2'b00, 5'd2, 5'd1, 3'b000, 5'd4, 7'h53};
  localparam logic [31:0] FSUB_S  = {5'h01, 2'b00, 5'd2, 5'd1, 3'b000, 5'd4, 7'h53};
  localparam logic [31:0] FMUL_S  = {5'h02, 2'b00, 5'd2, 5'd1, 3'b000, 5'd4, 7'h53};
  localparam logic [31:0] FDIV_S  = {5'h03, 2'b00, 5'd2, 5'd1, 3'b000, 5'd4, 7'h53};
  localparam logic [31:0] FMAX_S  = {5'h05, 2'b00, 5'd2, 5'd1, 3'b001, 5'd4, 7'h53};
  localparam logic [31:0] FMADD_S = {5'd3,  2'b00, 5'd2, 5'd1, 3'b000, 5'd4, 7'h43};

  // Number formats: 0 = FP32, 1 = P(16,1), 2 = P(8,0)
  function automatic logic [31:0] pcsr_for(int f);
    case (f)
      1: return {12'b0, 3'd1, 3'd1, 3'd1, 3'd1, 4'hF, 4'hF};
      2: return {12'b0, 12'b0, 4'h0, 4'hF};
      default: return 32'h0;
    endcase
  endfunction

  function automatic string fname(int f);
    case (f)
      1: return "P(16,1)";
      2: return "P(8,0)";
      default: return "FP32";
    endcase
  endfunction

  function automatic int fwidth(int f);
    return (f == 1) ? 16 : 8;
  endfunction

  function automatic int fes(int f);
    return (f == 1) ? 1 : 0;
  endfunction

  // A real number rounded into the kernel's format.
  function automatic logic [31:0] to_fmt(int f, real v);
    logic [31:0] fp = real_to_fp32(v);
    if (f == 0) return fp;
    return ref_posit_encode(fwidth(f), fes(f), ref_fp32_unpack(fp));
  endfunction

  function automatic real from_fmt(int f, logic [31:0] w);
    if (f == 0) return fp32_to_real(w);
    return fp32_to_real(ref_unp_to_fp32(ref_posit_decode(fwidth(f), w, fes(f))));
  endfunction

  // Reference for one instruction in the kernel's format.
  function automatic logic [31:0] ref_op(int f, logic [31:0] ins, logic [31:0] a,
                                         logic [31:0] b, logic [31:0] c);
    bit [4:0] fl;
    logic [31:0] r;
    if (f == 0) return fp32_execute(ins, a, b, c, fl);
    r = fp32_execute(ins,
                     ref_unp_to_fp32(ref_posit_decode(fwidth(f), a, fes(f))),
                     ref_unp_to_fp32(ref_posit_decode(fwidth(f), b, fes(f))),
                     ref_unp_to_fp32(ref_posit_decode(fwidth(f), c, fes(f))), fl);
    return ref_posit_encode(fwidth(f), fes(f), ref_fp32_unpack(r));
  endfunction

  task automatic csr_write(logic [31:0] val);
    @(negedge clk);
    csr_op = CSR_WRITE; csr_addr = PCSR_ADDR; csr_wdata = val;
    @(negedge clk);
    csr_op = CSR_NONE;
  endtask

  // One instruction through the DUT and the reference; the DUT's value is
  // returned (so an error does not spread) and every mismatch is counted.
  int cur_f;
  int bad;
  task automatic op(logic [31:0] ins, logic [31:0] a, logic [31:0] b,
                    logic [31:0] c, output logic [31:0] r);
    logic [31:0] exp_r;
    exp_r = ref_op(cur_f, ins, a, b, c);
    @(negedge clk);
    in_valid = 1'b1; instr = ins;
    operands[0] = a; operands[1] = b; operands[2] = c;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    in_valid = 1'b0;
    while (!out_valid) @(negedge clk);
    r = result;
    checks++;
    if (r != exp_r) begin
      failures++; bad++;
      if (failures < 10) $display("FAIL %s instr %h (%h,%h,%h) -> %h expected %h",
                                  fname(cur_f), ins, a, b, c, r, exp_r);
    end
  endtask

  logic [31:0] x [128];
  logic [31:0] e [128];
  real         xr [128];
  longint      fp32_cycles [129];

  task automatic run_softmax(int f, int n);
    longint t0, cyc;
    logic [31:0] m, t, p, s, rcp, y;
    logic [31:0] c_1_16, c_1, c_1_2, c_1_6, c_1_24, zero;
    real  ref_max, ref_sum, err, max_err;
    cur_f = f;
    bad = 0;
    csr_write(pcsr_for(f));
    c_1_16 = to_fmt(f, 0.0625);
    c_1    = to_fmt(f, 1.0);
    c_1_2  = to_fmt(f, 0.5);
    c_1_6  = to_fmt(f, 1.0 / 6.0);
    c_1_24 = to_fmt(f, 1.0 / 24.0);
    zero   = '0;
    for (int i = 0; i < n; i++) begin
      // inputs in [-4, 4), as typical logits
      x[i]  = to_fmt(f, (real'($urandom_range(0, 65535)) - 32768.0) / 8192.0);
      xr[i] = from_fmt(f, x[i]);
    end
    t0 = longint'($time);
    m = x[0];
    for (int i = 1; i < n; i++) op(FMAX_S, m, x[i], zero, m);
    s = zero;
    for (int i = 0; i < n; i++) begin
      op(FSUB_S, x[i], m, zero, t);
      op(FMUL_S, t, c_1_16, zero, t);
      op(FMADD_S, t, c_1_24, c_1_6, p);
      op(FMADD_S, t, p, c_1_2, p);
      op(FMADD_S, t, p, c_1, p);
      op(FMADD_S, t, p, c_1, p);
      for (int k = 0; k < 4; k++) op(FMUL_S, p, p, zero, p);
      e[i] = p;
      op(FADD_S, s, p, zero, s);
    end
    op(FDIV_S, c_1, s, zero, rcp);
    // error against softmax of the same (already rounded) inputs
    ref_max = xr[0];
    for (int i = 1; i < n; i++) if (xr[i] > ref_max) ref_max = xr[i];
    ref_sum = 0.0;
    for (int i = 0; i < n; i++) ref_sum += $exp(xr[i] - ref_max);
    max_err = 0.0;
    for (int i = 0; i < n; i++) begin
      op(FMUL_S, e[i], rcp, zero, y);
      err = from_fmt(f, y) - $exp(xr[i] - ref_max) / ref_sum;
      if (err < 0.0) err = -err;
      if (err > max_err) max_err = err;
    end
    cyc = (longint'($time) - t0) / 10;
    if (f == 0) fp32_cycles[n] = cyc;
    else begin
      checks++;
      if (cyc != fp32_cycles[n]) begin
        failures++;
        $display("FAIL %s softmax %0d took %0d cycles, FP32 took %0d", fname(f), n,
                 cyc, fp32_cycles[n]);
      end
    end
    $display("SOFTMAX %-7s n=%-3d  instructions %5d  FPU-path cycles %6d  max |y error| %8.5f  mismatches %0d",
             fname(f), n, (n - 1) + 11 * n + 1 + n, cyc, max_err, bad);
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    csr_addr = PCSR_ADDR; csr_op = CSR_NONE; csr_wdata = '0;
    in_valid = 1'b0; instr = '0;
    foreach (operands[i]) operands[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst_ni = 1'b1;
    for (int f = 0; f < 3; f++)
      for (int n = 8; n <= 128; n *= 2) run_softmax(f, n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
