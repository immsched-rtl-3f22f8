// pe: one processing element of the engine array, extended for scheduling.
//
// Follows the PE drawn in the paper's hardware figure: an iBuffer, a crossbar
// that can exchange the two operands, a multiplier, a mux that selects the
// product or the bypassed operand, an add/subtract stage into the oBuffer,
// and the divider replaced by a multiplication with a reconfigurable
// reciprocal. Here the iBuffer is an 8-entry register file (imm_pkg::reg_e)
// that holds this PE's element of each particle matrix, and the oBuffer is
// the int32 accumulator `acc`.
//
// Interface: `instr` is issued to every PE of the array; the PE executes it
// only when `en` is high. Operand a/b come from the register file, the row
// bus (`row_in`) or the column bus (`col_in`). `recip` is the row's
// reciprocal for PE_RECIP. `acc` and `rdat` (= RF[instr.ra]) are visible to
// the engine. Timing: every instruction completes in one cycle; results are
// visible the next cycle. Register numbering, the instruction set and the
// saturation on write-back are this design's choices.
module pe
  import imm_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  pe_instr_t            instr,
  input  logic signed [DW-1:0] row_in,
  input  logic signed [DW-1:0] col_in,
  input  logic        [RW-1:0] recip,
  output logic signed [AW-1:0] acc,
  output logic signed [DW-1:0] rdat,
  output logic signed [DW-1:0] sval
);

  logic signed [DW-1:0] rf [NREG];
  logic signed [DW-1:0] a, b, x, y;
  logic signed [AW-1:0] prod, sel, acc_d;
  logic signed [AW+RW:0] rprod;
  logic signed [AW-1:0] shifted;
  logic signed [DW-1:0] wbval;

  function automatic logic signed [DW-1:0] pick(pe_src_e s,
      logic signed [DW-1:0] rin, logic signed [DW-1:0] cin,
      logic signed [DW-1:0] regv);
    unique case (s)
      SRC_ROW: return rin;
      SRC_COL: return cin;
      default: return regv;
    endcase
  endfunction

  always_comb begin
    a = pick(instr.sa, row_in, col_in, rf[instr.ra]);
    b = pick(instr.sb, row_in, col_in, rf[instr.rb]);
    // crossbar
    x = instr.swap ? b : a;
    y = instr.swap ? a : b;
    prod = AW'(x) * AW'(y);
    // mux: product or bypassed operand
    sel = (instr.op inside {PE_MUL, PE_MAC}) ? prod : AW'(x);
    // reciprocal multiply in place of a divider
    rprod = $signed({{(RW+1){acc[AW-1]}}, acc}) * $signed({1'b0, recip});
    unique case (instr.op)
      PE_MUL:   acc_d = sel;
      PE_MAC:   acc_d = acc + sel;
      PE_ADD:   acc_d = sel + AW'(y);
      PE_SUB:   acc_d = sel - AW'(y);
      PE_LDA:   acc_d = sel;
      PE_RECIP: acc_d = AW'(rprod >>> instr.shift);
      default:  acc_d = acc;
    endcase
    // write-back saturation
    shifted = acc >>> instr.shift;
    if (instr.sat8) begin
      if (shifted < 0)        wbval = '0;
      else if (shifted > 255) wbval = DW'(255);
      else                    wbval = shifted[DW-1:0];
    end else begin
      if (shifted < -32768)     wbval = DW'(-32768);
      else if (shifted > 32767) wbval = DW'(32767);
      else                      wbval = shifted[DW-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
      for (int i = 0; i < NREG; i++) rf[i] <= '0;
    end else if (en) begin
      acc <= acc_d;
      unique case (instr.op)
        PE_WB:   rf[instr.rd] <= wbval;
        PE_LDR:  rf[instr.rd] <= a;
        PE_COPY: rf[instr.rd] <= rf[instr.ra];
        default: ;
      endcase
    end
  end

  assign rdat = rf[instr.ra];
  assign sval = rf[R_S];

endmodule
