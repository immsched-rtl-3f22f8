// tb_pe: drives random instructions into one PE and compares accumulator and
// register file with a reference model written from the instruction list.
module tb_pe;
  import imm_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  pe_instr_t instr = PE_IDLE;
  logic signed [DW-1:0] row_in = '0, col_in = '0, rdat, sval;
  logic [RW-1:0] recip = '0;
  logic signed [AW-1:0] acc;
  always #5 clk = ~clk;
  pe dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) if (++cyc > 200000) begin
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  longint racc;
  int rrf [NREG];
  function automatic longint clampv(longint v, bit s8);
    if (s8) return (v < 0) ? 0 : (v > 255) ? 255 : v;
    return (v < -32768) ? -32768 : (v > 32767) ? 32767 : v;
  endfunction
  function automatic longint wrap32(longint v);
    return longint'(int'(v));
  endfunction

  initial begin
    racc = 0;
    foreach (rrf[i]) rrf[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      longint a, b, x, y;
      pe_instr_t ins;
      @(negedge clk);
      ins.op    = pe_op_e'($urandom_range(0, 9));
      ins.sa    = pe_src_e'($urandom_range(0, 2));
      ins.sb    = pe_src_e'($urandom_range(0, 2));
      ins.ra    = reg_e'($urandom_range(0, 7));
      ins.rb    = reg_e'($urandom_range(0, 7));
      ins.rd    = reg_e'($urandom_range(0, 7));
      ins.swap  = 1'($urandom);
      ins.sat8  = 1'($urandom);
      ins.shift = (ins.op == PE_RECIP) ? 6'd16 : 6'($urandom_range(0, 9));
      instr  = ins;
      en     = ($urandom_range(0, 9) != 0);
      row_in = DW'($urandom_range(0, 600) - 300);
      col_in = DW'($urandom_range(0, 600) - 300);
      recip  = RW'($urandom_range(0, 1 << 20));
      // reference
      a = (ins.sa == SRC_ROW) ? row_in : (ins.sa == SRC_COL) ? col_in : rrf[ins.ra];
      b = (ins.sb == SRC_ROW) ? row_in : (ins.sb == SRC_COL) ? col_in : rrf[ins.rb];
      x = ins.swap ? b : a;
      y = ins.swap ? a : b;
      #1;
      checks++;
      if (rdat != DW'(rrf[ins.ra])) begin failures++; $display("FAIL rdat t=%0d", t); end
      if (en) begin
        case (ins.op)
          PE_MUL:   racc = wrap32(x * y);
          PE_MAC:   racc = wrap32(racc + x * y);
          PE_ADD:   racc = wrap32(x + y);
          PE_SUB:   racc = wrap32(x - y);
          PE_LDA:   racc = x;
          PE_RECIP: racc = wrap32((racc * longint'(recip)) >>> 16);
          PE_WB:    rrf[ins.rd] = int'(clampv(racc >>> ins.shift, ins.sat8));
          PE_LDR:   rrf[ins.rd] = int'(a);
          PE_COPY:  rrf[ins.rd] = rrf[ins.ra];
          default: ;
        endcase
      end
      @(posedge clk);
      #1;
      checks++;
      if (longint'(acc) != racc) begin
        failures++; $display("FAIL acc t=%0d op=%s %0d/%0d", t, ins.op.name(), acc, racc);
      end
      if (sval != DW'(rrf[R_S])) begin failures++; $display("FAIL sval t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
