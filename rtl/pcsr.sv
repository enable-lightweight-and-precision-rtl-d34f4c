// pcsr: the custom posit control and status register.
//
// One 32-bit CSR holds the run-time codec configuration of the three FPU
// operands (slots 0..2) and of the result (slot 3):
//   [3:0]   pfmt   one bit per slot, 1 = posit, 0 = FP32 (codec skipped)
//   [7:4]   pprec  one bit per slot, 1 = 16-bit posit, 0 = 8-bit posit
//   [19:8]  pes    3 bits per slot, slot i at [8+3i +: 3], exponent size 0..7
//   [31:20] reserved, read as zero, writes ignored
// The field positions are those printed in the paper's register figure; the
// slot order inside each field, the value meanings and the CSR address
// (posit_pkg::PCSR_ADDR) are this design's choice.
//
// The core's CSR instructions reach it through a simple port: csr_op selects
// write, set or clear (csrrw/csrrs/csrrc) when csr_addr matches; csr_rdata
// always shows the current value so the core can return the old value.  The
// update is visible one clock later.  Reset clears the register, so the FPU
// starts in plain FP32 mode.
//
// Interface: clk, rst_ni (active-low asynchronous reset), csr_addr, csr_op,
// csr_wdata in; csr_rdata, the whole register (pcsr_o) and the four slot
// configurations (cfg_o) out.
module pcsr
  import posit_pkg::*;
(
  input  logic        clk,
  input  logic        rst_ni,
  input  logic [11:0] csr_addr,
  input  csr_op_e     csr_op,
  input  logic [31:0] csr_wdata,
  output logic [31:0] csr_rdata,
  output pcsr_t       pcsr_o,
  output codec_cfg_t  cfg_o [NSLOT]
);

  localparam logic [31:0] WMASK = 32'h000F_FFFF;

  pcsr_t       q;
  logic [31:0] d;
  logic        sel;

  assign sel = (csr_addr == PCSR_ADDR) && (csr_op != CSR_NONE);

  always_comb begin
    unique case (csr_op)
      CSR_WRITE: d = csr_wdata;
      CSR_SET:   d = q | csr_wdata;
      CSR_CLEAR: d = q & ~csr_wdata;
      default:   d = q;
    endcase
    d = d & WMASK;
  end

  always_ff @(posedge clk or negedge rst_ni) begin
    if (!rst_ni) begin
      q <= '0;
    end else if (sel) begin
      q <= pcsr_t'(d);
    end
  end

  assign csr_rdata = q;
  assign pcsr_o    = q;

  for (genvar i = 0; i < NSLOT; i++) begin : g_slot
    assign cfg_o[i] = '{fmt:  pfmt_e'(q.pfmt[i]),
                        prec: pprec_e'(q.pprec[i]),
                        es:   q.pes[i]};
  end

endmodule
