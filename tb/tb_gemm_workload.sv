// tb_gemm_workload: runs the matrix kernels used to evaluate posit-enabled
// cores through the extended FPU: GEMM C = A*B for N = 4, 8, 12, 16, 20 and
// GEMV y = A*x for N = 4..32, each in FP32, P(16,1) and P(8,0).
//
// The core's part is played by the testbench: it configures pcsr once per
// kernel (all three operands and the result in the same format), then issues
// one fmadd.s per multiply-accumulate, feeding each result back as the
// accumulator, exactly as compiled scalar C code would.  Because the codecs
// are in the FPU, the posit kernels use the same instruction stream as the
// FP32 one; only the pcsr write differs.  Each output element is compared with
// the same sequence of operations done by the reference models, and the cycles
// spent in the FPU are reported per kernel (load/store and loop overhead of a
// real core are not modelled).  A posit kernel must take exactly as many
// cycles as its FP32 counterpart.
module tb_gemm_workload;
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

  localparam logic [31:0] FMADD_S = {5'd3, 2'b00, 5'd2, 5'd1, 3'b000, 5'd4, 7'h43};

  // Number formats of the kernels: 0 = FP32, 1 = P(16,1), 2 = P(8,0)
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

  // A random element in [-1, 1) in the kernel's format.
  function automatic logic [31:0] rand_elem(int f);
    real v = (real'($urandom_range(0, 65535)) - 32768.0) / 32768.0;
    logic [31:0] fp = real_to_fp32(v);
    case (f)
      1: return ref_posit_encode(16, 1, ref_fp32_unpack(fp));
      2: return ref_posit_encode(8, 0, ref_fp32_unpack(fp));
      default: return fp;
    endcase
  endfunction

  // Reference multiply-accumulate in the kernel's format.
  function automatic logic [31:0] ref_mac(int f, logic [31:0] a, logic [31:0] b, logic [31:0] c);
    bit [4:0] fl;
    logic [31:0] r;
    int n  = (f == 1) ? 16 : 8;
    int es = (f == 1) ? 1 : 0;
    if (f == 0) return fp32_execute(FMADD_S, a, b, c, fl);
    r = fp32_execute(FMADD_S,
                     ref_unp_to_fp32(ref_posit_decode(n, a, es)),
                     ref_unp_to_fp32(ref_posit_decode(n, b, es)),
                     ref_unp_to_fp32(ref_posit_decode(n, c, es)), fl);
    return ref_posit_encode(n, es, ref_fp32_unpack(r));
  endfunction

  task automatic csr_write(logic [31:0] val);
    @(negedge clk);
    csr_op = CSR_WRITE; csr_addr = PCSR_ADDR; csr_wdata = val;
    @(negedge clk);
    csr_op = CSR_NONE;
  endtask

  // One fmadd.s through the DUT; returns the written-back value.
  task automatic mac(logic [31:0] a, logic [31:0] b, logic [31:0] c,
                     output logic [31:0] r);
    @(negedge clk);
    in_valid = 1'b1; instr = FMADD_S;
    operands[0] = a; operands[1] = b; operands[2] = c;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    in_valid = 1'b0;
    while (!out_valid) @(negedge clk);
    r = result;
  endtask

  logic [31:0] A [32][32];
  longint fp32_cycles [2][33];   // FP32 cycles per kernel kind and size
  logic [31:0] B [32][32];

  task automatic run_kernel(int f, int n, bit gemv);
    longint t0, cyc;
    int cols = gemv ? 1 : n;
    int bad = 0;
    csr_write(pcsr_for(f));
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        A[i][j] = rand_elem(f);
        B[i][j] = rand_elem(f);
      end
    t0 = longint'($time);
    for (int i = 0; i < n; i++)
      for (int j = 0; j < cols; j++) begin
        logic [31:0] acc, acc_ref, r;
        acc = 32'h0; acc_ref = 32'h0;
        for (int k = 0; k < n; k++) begin
          mac(A[i][k], B[k][j], acc, r);
          acc_ref = ref_mac(f, A[i][k], B[k][j], acc_ref);
          acc = r;
        end
        checks++;
        if (acc != acc_ref) begin
          failures++; bad++;
          if (failures < 10) $display("FAIL %s %0dx%0d C[%0d][%0d] %h expected %h",
                                      fname(f), n, n, i, j, acc, acc_ref);
        end
      end
    cyc = (longint'($time) - t0) / 10;
    // A posit kernel issues the same instructions as the FP32 one, so it must
    // take exactly as many cycles.
    if (f == 0) fp32_cycles[gemv][n] = cyc;
    else begin
      checks++;
      if (cyc != fp32_cycles[gemv][n]) begin
        failures++;
        $display("FAIL %s %0dx%0d took %0d cycles, FP32 took %0d", fname(f), n, n,
                 cyc, fp32_cycles[gemv][n]);
      end
    end
    $display("%s %-7s %2dx%-2d  MACs %6d  FPU-path cycles %7d  mismatches %0d",
             gemv ? "GEMV" : "GEMM", fname(f), n, n, n * n * cols, cyc, bad);
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
      for (int n = 4; n <= 20; n += 4) run_kernel(f, n, 1'b0);
    for (int f = 0; f < 3; f++)
      for (int n = 4; n <= 32; n *= 2) run_kernel(f, n, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
