// pe_array: the engine's R x C grid of PEs.
//
// As in the paper's hardware figure, each PE row is fed by a horizontal bus
// from the left buffer and each PE column by a vertical bus from the top
// buffer, and the PE outputs of a row are collected towards the buffer on
// the right. One instruction is broadcast to the whole array; PE (i,j)
// executes it when row_en[i] and col_en[j] are both set, which lets the
// engine write single rows (matrix loads) or the whole array (element-wise
// steps). recip[i] is the reciprocal carried with row i. Outputs expose
// every PE's accumulator, the register named by instr.ra and its S register,
// so the right-hand buffer can capture a whole matrix in one cycle (a
// modelling simplification: the paper does not give the width of that path).
module pe_array
  import imm_pkg::*;
#(
  parameter int unsigned R = 8,
  parameter int unsigned C = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  pe_instr_t                    instr,
  input  logic [R-1:0]                 row_en,
  input  logic [C-1:0]                 col_en,
  input  logic signed [R-1:0][DW-1:0]  row_bus,
  input  logic signed [C-1:0][DW-1:0]  col_bus,
  input  logic [R-1:0][RW-1:0]         recip,
  output logic signed [R-1:0][C-1:0][AW-1:0] acc,
  output logic signed [R-1:0][C-1:0][DW-1:0] rdat,
  output logic signed [R-1:0][C-1:0][DW-1:0] sval
);
  for (genvar i = 0; i < R; i++) begin : g_row
    for (genvar j = 0; j < C; j++) begin : g_col
      pe u_pe (
        .clk, .rst_n,
        .en    (row_en[i] & col_en[j]),
        .instr,
        .row_in(row_bus[i]),
        .col_in(col_bus[j]),
        .recip (recip[i]),
        .acc   (acc[i][j]),
        .rdat  (rdat[i][j]),
        .sval  (sval[i][j]));
    end
  end
endmodule
