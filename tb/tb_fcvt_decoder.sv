// tb_fcvt_decoder: checks every conversion instruction of the custom table
// (fcvt.p8.s, fcvt.p16.s, fcvt.s.p8, fcvt.s.p16, fcvt.p8.p8, fcvt.p8.p16,
// fcvt.p16.p8, fcvt.p16.p16) with every es field value, static and dynamic,
// against configurations written out by hand from the table; then checks that
// random non-matching words (other funct5, rs2, fmt or opcode) are not taken.
module tb_fcvt_decoder;
  import posit_pkg::*;

  int checks = 0, failures = 0;
  logic [31:0] instr;
  pcsr_t       pcsr_i;
  logic        is_fcvt, fpu_bypass;
  codec_cfg_t  src_cfg, dst_cfg;

  fcvt_decoder dut (.instr, .pcsr_i, .is_fcvt, .src_cfg, .dst_cfg, .fpu_bypass);

  typedef struct {
    string      name;
    logic [6:0] funct7;   // funct5 and fmt
    logic [4:0] rs2;
    logic       src_posit, src_p16, dst_posit, dst_p16;
  } entry_t;

  entry_t tab [8] = '{
    '{"fcvt.p8.s",    7'b10000_00, 5'h00, 0, 0, 1, 0},
    '{"fcvt.p16.s",   7'b10000_00, 5'h08, 0, 0, 1, 1},
    '{"fcvt.s.p8",    7'b10010_00, 5'h00, 1, 0, 0, 0},
    '{"fcvt.s.p16",   7'b10010_00, 5'h08, 1, 1, 0, 0},
    '{"fcvt.p8.p8",   7'b10001_00, 5'h00, 1, 0, 1, 0},
    '{"fcvt.p8.p16",  7'b10001_00, 5'h08, 1, 1, 1, 0},
    '{"fcvt.p16.p8",  7'b10001_01, 5'h00, 1, 0, 1, 1},
    '{"fcvt.p16.p16", 7'b10001_01, 5'h08, 1, 1, 1, 1}
  };

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pcsr_i = '0;
    pcsr_i.pes[0] = 3'd5;
    pcsr_i.pes[3] = 3'd2;
    foreach (tab[i]) begin
      for (int es = 0; es < 8; es++) begin
        logic [2:0] s_es, d_es;
        s_es = (es == 7) ? 3'd5 : 3'(es);
        d_es = (es == 7) ? 3'd2 : 3'(es);
        instr = {tab[i].funct7, tab[i].rs2, 5'($urandom), 3'(es), 5'($urandom), 7'h53};
        #1;
        checks++;
        if (!is_fcvt || !fpu_bypass ||
            src_cfg.fmt != pfmt_e'(tab[i].src_posit) ||
            dst_cfg.fmt != pfmt_e'(tab[i].dst_posit) ||
            (tab[i].src_posit && (src_cfg.prec != pprec_e'(tab[i].src_p16) || src_cfg.es != s_es)) ||
            (tab[i].dst_posit && (dst_cfg.prec != pprec_e'(tab[i].dst_p16) || dst_cfg.es != d_es))) begin
          failures++;
          $display("FAIL %s es=%0d: is=%b src=%p dst=%p", tab[i].name, es, is_fcvt, src_cfg, dst_cfg);
        end
      end
    end
    for (int t = 0; t < 20000; t++) begin
      bit match;
      match = 0;
      instr = $urandom;
      if (t % 2 == 0) instr[6:0] = 7'h53;
      if (t % 4 == 0) instr[31:29] = 3'b100;
      if (t % 8 == 0) instr[24:20] = ($urandom_range(0, 1) != 0) ? 5'h08 : 5'h00;
      foreach (tab[i])
        if (instr[31:25] == tab[i].funct7 && instr[24:20] == tab[i].rs2 && instr[6:0] == 7'h53)
          match = 1;
      #1;
      checks++;
      if (is_fcvt != match || fpu_bypass != match) begin
        failures++;
        if (failures < 10) $display("FAIL random %h: is_fcvt=%b expected %b", instr, is_fcvt, match);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
