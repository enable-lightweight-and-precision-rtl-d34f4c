// tb_pcsr: drives random csrrw/csrrs/csrrc accesses (some to other CSR
// addresses) into pcsr and compares the read value and the four decoded slot
// configurations with a register model after every clock.  Also checks the
// reset value (all FP32) and that reserved bits stay zero.
module tb_pcsr;
  import posit_pkg::*;

  int checks = 0, failures = 0;
  logic        clk = 0, rst_ni = 0;
  logic [11:0] csr_addr;
  csr_op_e     csr_op;
  logic [31:0] csr_wdata, csr_rdata;
  pcsr_t       pcsr_o;
  codec_cfg_t  cfg [NSLOT];
  logic [31:0] model;

  pcsr dut (.clk, .rst_ni, .csr_addr, .csr_op, .csr_wdata, .csr_rdata,
            .pcsr_o, .cfg_o(cfg));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    checks++;
    if (csr_rdata != model || pcsr_o != model) begin
      failures++;
      if (failures < 10) $display("FAIL rdata %h model %h", csr_rdata, model);
    end
    for (int i = 0; i < NSLOT; i++) begin
      checks++;
      if (cfg[i].fmt != pfmt_e'(model[i]) || cfg[i].prec != pprec_e'(model[4+i]) ||
          cfg[i].es != model[8+3*i +: 3]) begin
        failures++;
        if (failures < 10) $display("FAIL slot %0d cfg %p model %h", i, cfg[i], model);
      end
    end
  endtask

  initial begin
    csr_addr = PCSR_ADDR; csr_op = CSR_NONE; csr_wdata = '0;
    model = '0;
    #12 rst_ni = 1;
    @(negedge clk);
    compare();
    for (int t = 0; t < 5000; t++) begin
      csr_op    = csr_op_e'($urandom_range(0, 3));
      csr_wdata = $urandom;
      csr_addr  = ($urandom_range(0, 4) == 0) ? 12'(PCSR_ADDR + 1) : PCSR_ADDR;
      @(posedge clk);
      if (csr_addr == PCSR_ADDR) begin
        case (csr_op)
          CSR_WRITE: model = csr_wdata;
          CSR_SET:   model = model | csr_wdata;
          CSR_CLEAR: model = model & ~csr_wdata;
          default: ;
        endcase
        model[31:20] = '0;
      end
      @(negedge clk);
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
