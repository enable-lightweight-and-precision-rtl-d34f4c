// posit_decoder: combinational decoder for one n-bit posit with an exponent
// size es chosen at run time (0..7).
//
// Structure (after the paper's posit-decoder figure):
//   1. sign = operand[n-1]; the remaining n-1 bits are two's-complemented when
//      the sign is set, giving op[n-2:0] = |operand| without its sign.
//   2. A leading-run count gives cnt, the length of the run of bits equal to
//      op[n-2] (the regime run).  The figure labels this "Leading Zero Count";
//      here the operand is XORed with op[n-2] first so that one counter serves
//      both regime polarities.
//   3. k = cnt-1 when op[n-2]=1, else -cnt (the figure's two-way mux).
//   4. The regime shifter drops the regime and its terminating bit
//      (rg_bits = cnt+1), leaving exp_mant left-aligned.
//   5. Dynamic es: the exponent shifter shifts exp_mant left by es to give the
//      fraction; the top es bits of exp_mant are the exponent field e; the
//      k-align shifter forms k<<es, and an OR merges it with e, so
//      scale = k*2^es + e.  Exponent bits cut off by the end of the word read
//      as zero.
// Zero (all zeros) and NaR (1 followed by zeros) are flagged separately.
//
// Interface: operand (N bits) and es in, an unpacked_t out.  Purely
// combinational; N may be 8..24 (the design uses 8 and 16).
module posit_decoder
  import posit_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic [N-1:0]  operand,
  input  logic [2:0]    es,
  output unpacked_t     result
);

  localparam int unsigned L = N - 1;  // body width: regime, exponent, fraction

  logic                      sign;
  logic [L-1:0]              op;         // magnitude without sign
  logic [L-1:0]              run_bits;   // op with the regime polarity removed
  logic [$clog2(L+1)-1:0]    cnt;        // regime run length, 1..L
  logic signed [SCALE_W-1:0] k;
  logic [$clog2(L+2)-1:0]    rg_bits;    // regime length incl. terminator
  logic [L-1:0]              exp_mant;   // exponent + fraction, left aligned
  logic [L-1:0]              mant;       // fraction, left aligned
  logic [L-1:0]              e_wide;
  logic [6:0]                e;          // exponent field value

  // Count of leading zeros of run_bits (== length of the regime run).
  function automatic logic [$clog2(L+1)-1:0] lzc(input logic [L-1:0] v);
    lzc = ($clog2(L+1))'(L);
    for (int i = 0; i < int'(L); i++) begin
      if (v[i]) lzc = ($clog2(L+1))'(L - 1 - i);
    end
  endfunction

  always_comb begin
    sign     = operand[N-1];
    op       = sign ? (~operand[L-1:0] + L'(1)) : operand[L-1:0];
    run_bits = op ^ {L{op[L-1]}};
    cnt      = lzc(run_bits);
    k        = op[L-1] ? SCALE_W'(cnt) - SCALE_W'(1) : -SCALE_W'(cnt);
    rg_bits  = ($clog2(L+2))'(cnt) + 1'b1;
    exp_mant = (rg_bits >= L) ? '0 : op << rg_bits;
    mant     = exp_mant << es;
    e_wide   = exp_mant >> (L - es);
    e        = e_wide[6:0];

    result.sign  = sign;
    result.zero  = ~sign & (operand[L-1:0] == '0);
    result.nar   =  sign & (operand[L-1:0] == '0);
    result.scale = (k <<< es) | SCALE_W'(e);
    result.frac  = {mant, {(FRAC_W - L){1'b0}}};
  end

endmodule
