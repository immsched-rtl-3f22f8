// lfsr_rand: the "Rand" source inside the left and top buffers.
//
// The paper only names a random source in the buffers; it supplies the PSO
// random factors r1, r2 and the random initial particles. This design uses
// one 32-bit Galois LFSR (taps 32,22,2,1, polynomial 0x80200003) per output
// lane, each seeded differently from `seed` and the lane number, stepping
// once per cycle when `step` is high. Each lane outputs its low 8 bits, an
// unsigned factor in [0, 255] read as [0, 1). A zero seed is replaced by a
// fixed non-zero constant so that the LFSR never locks up. `load` reseeds.
module lfsr_rand #(
  parameter int unsigned LANES = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load,
  input  logic [31:0]           seed,
  input  logic                  step,
  output logic [LANES-1:0][7:0] r
);
  logic [31:0] st [LANES];

  function automatic logic [31:0] lane_seed(logic [31:0] s, int unsigned i);
    logic [31:0] v;
    v = s ^ (32'h9E37_79B9 * (i + 1));
    return (v == '0) ? 32'h1234_5679 : v;
  endfunction

  function automatic logic [31:0] next(logic [31:0] s);
    return s[0] ? ((s >> 1) ^ 32'h8020_0003) : (s >> 1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(LANES); i++) st[i] <= lane_seed(32'd1, i);
    end else if (load) begin
      for (int i = 0; i < int'(LANES); i++) st[i] <= lane_seed(seed, i);
    end else if (step) begin
      for (int i = 0; i < int'(LANES); i++) st[i] <= next(st[i]);
    end
  end

  always_comb
    for (int i = 0; i < int'(LANES); i++) r[i] = st[i][7:0];
endmodule
