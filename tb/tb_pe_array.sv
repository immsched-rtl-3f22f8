// tb_pe_array: on a 3 x 4 array, loads one matrix row by row through the
// column bus (checking that row_en/col_en gate the writes), computes a matrix
// product with the outer-product dataflow (row bus x column bus, MAC), and
// an element-wise add between two loaded matrices.
module tb_pe_array;
  import imm_pkg::*;
  localparam int R = 3, C = 4;
  logic clk = 0, rst_n = 0;
  pe_instr_t instr = PE_IDLE;
  logic [R-1:0] row_en = '0;
  logic [C-1:0] col_en = '0;
  logic signed [R-1:0][DW-1:0] row_bus = '0;
  logic signed [C-1:0][DW-1:0] col_bus = '0;
  logic [R-1:0][RW-1:0] recip = '0;
  logic signed [R-1:0][C-1:0][AW-1:0] acc;
  logic signed [R-1:0][C-1:0][DW-1:0] rdat, sval;
  always #5 clk = ~clk;
  pe_array #(.R(R), .C(C)) dut (.*);
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) if (++cyc > 100000) begin
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int A [R][C], B [R][C], Km [C][C];
  function automatic pe_instr_t mk(pe_op_e op, pe_src_e sa, reg_e ra, pe_src_e sb, reg_e rb, reg_e rd);
    pe_instr_t i;
    i = PE_IDLE; i.op = op; i.sa = sa; i.ra = ra; i.sb = sb; i.rb = rb; i.rd = rd;
    return i;
  endfunction
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      foreach (A[i, j]) begin A[i][j] = $urandom_range(0, 255); B[i][j] = $urandom_range(0, 255); end
      foreach (Km[i, j]) Km[i][j] = $urandom_range(0, 20) - 10;
      // load A into R_S and B into R_V, one row per cycle, only columns 0..C-2 enabled for B
      for (int r = 0; r < R; r++) begin
        @(negedge clk);
        instr = mk(PE_LDR, SRC_COL, R_S, SRC_REG, R_S, R_S);
        row_en = R'(1) << r; col_en = '1;
        for (int j = 0; j < C; j++) col_bus[j] = DW'(A[r][j]);
        @(negedge clk);
        instr = mk(PE_LDR, SRC_COL, R_S, SRC_REG, R_S, R_V);
        col_en = {1'b0, {(C-1){1'b1}}};
        for (int j = 0; j < C; j++) col_bus[j] = DW'(B[r][j]);
      end
      // element-wise add
      @(negedge clk);
      row_en = '1; col_en = '1;
      instr = mk(PE_ADD, SRC_REG, R_S, SRC_REG, R_V, R_S);
      @(negedge clk);
      instr = PE_IDLE;
      foreach (A[i, j]) begin
        int expv;
        expv = A[i][j] + ((j < C-1) ? B[i][j] : 0);
        if (t == 0 && j == C-1) expv = A[i][j];
        checks++;
        if (t == 0 && int'(acc[i][j]) != expv) begin failures++; $display("FAIL add %0d %0d", i, j); end
        checks++;
        if (int'(sval[i][j]) != A[i][j]) begin failures++; $display("FAIL sval %0d %0d", i, j); end
      end
      // product P = A(:, 0..C-1) * Km : P[i][j] = sum_k A[i][k] * Km[k][j]
      @(negedge clk);
      instr = mk(PE_LDA, SRC_COL, R_S, SRC_REG, R_S, R_S); col_bus = '0;
      for (int k = 0; k < C; k++) begin
        @(negedge clk);
        instr = mk(PE_MAC, SRC_ROW, R_S, SRC_COL, R_S, R_S);
        for (int i = 0; i < R; i++) row_bus[i] = DW'(A[i][k]);
        for (int j = 0; j < C; j++) col_bus[j] = DW'(Km[k][j]);
      end
      @(negedge clk);
      instr = PE_IDLE;
      foreach (A[i, j]) begin
        int expv;
        expv = 0;
        for (int k = 0; k < C; k++) expv += A[i][k] * Km[k][j];
        checks++;
        if (int'(acc[i][j]) != expv) begin failures++; $display("FAIL mm %0d %0d: %0d/%0d", i, j, acc[i][j], expv); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
