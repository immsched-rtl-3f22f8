// te: tree element of the add/compare tree.
//
// Copied from the TE drawn in the paper's hardware figure: a comparator a > b
// steers one mux that passes the larger value to `c` and a second mux that
// passes the matching index (index_a or index_b) to `index`; an adder forms
// d = a + b. Values are unsigned. On a tie the comparator is false, so b and
// index_b are chosen (this tie rule follows from the printed ">" only).
// Purely combinational.
module te #(
  parameter int unsigned W  = 48,
  parameter int unsigned IW = 8
) (
  input  logic [W-1:0]  a,
  input  logic [W-1:0]  b,
  input  logic [IW-1:0] index_a,
  input  logic [IW-1:0] index_b,
  output logic [W-1:0]  c,
  output logic [IW-1:0] index,
  output logic [W-1:0]  d
);
  logic gt;
  assign gt    = a > b;
  assign c     = gt ? a : b;
  assign index = gt ? index_a : index_b;
  assign d     = a + b;
endmodule
