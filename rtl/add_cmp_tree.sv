// add_cmp_tree: reduction tree of TEs with an accumulating output register.
//
// One vector of L unsigned lanes enters per cycle. A binary tree of te
// instances reduces it to its sum and to its maximum with the lane index of
// that maximum, all in the same cycle. As in the paper's figure, one more TE
// sits behind the tree and combines the tree result with the registered
// result of earlier vectors, so a long vector (or a whole matrix, row by row)
// can be summed or max-searched over several cycles.
//
// Interface: `in_valid` accepts `lanes`; `first` starts a new reduction
// (the register is loaded instead of combined). `base` is added to every
// lane index so that indices stay global across chunks. `sum`, `max` and
// `max_idx` are registered and valid the cycle after the last vector.
// L need not be a power of two (missing leaves read as zero). Pipelining
// the tree into stages is left out: the paper does not show stage registers.
module add_cmp_tree #(
  parameter int unsigned L  = 8,
  parameter int unsigned W  = 48,
  parameter int unsigned IW = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic                first,
  input  logic [IW-1:0]       base,
  input  logic [L-1:0][W-1:0] lanes,
  output logic [W-1:0]        sum,
  output logic [W-1:0]        max,
  output logic [IW-1:0]       max_idx
);
  localparam int unsigned LEVELS = (L <= 1) ? 1 : $clog2(L);
  localparam int unsigned P2     = 1 << LEVELS;

  // One generate scope per tree level; level 0 holds the padded leaves.
  for (genvar lv = 0; lv <= LEVELS; lv++) begin : g_lvl
    localparam int unsigned NN = P2 >> lv;
    logic [W-1:0]  sv [NN];
    logic [W-1:0]  mv [NN];
    logic [IW-1:0] iv [NN];
    if (lv == 0) begin : g_leaf
      for (genvar i = 0; i < NN; i++) begin : g_l
        if (i < L) begin : g_in
          assign sv[i] = lanes[i];
          assign mv[i] = lanes[i];
        end else begin : g_zero
          assign sv[i] = '0;
          assign mv[i] = '0;
        end
        assign iv[i] = IW'(i) + base;
      end
    end else begin : g_node
      for (genvar k = 0; k < NN; k++) begin : g_n
        logic [W-1:0] unused_d, unused_c;
        logic [IW-1:0] unused_i;
        // maximum path
        te #(.W(W), .IW(IW)) u_max (
          .a(g_lvl[lv-1].mv[2*k]), .b(g_lvl[lv-1].mv[2*k+1]),
          .index_a(g_lvl[lv-1].iv[2*k]), .index_b(g_lvl[lv-1].iv[2*k+1]),
          .c(mv[k]), .index(iv[k]), .d(unused_d));
        // sum path (the same TE type, adder output used)
        te #(.W(W), .IW(IW)) u_sum (
          .a(g_lvl[lv-1].sv[2*k]), .b(g_lvl[lv-1].sv[2*k+1]),
          .index_a('0), .index_b('0),
          .c(unused_c), .index(unused_i), .d(sv[k]));
      end
    end
  end

  logic [W-1:0]  t_sum, t_max;
  logic [IW-1:0] t_idx;
  assign t_sum = g_lvl[LEVELS].sv[0];
  assign t_max = g_lvl[LEVELS].mv[0];
  assign t_idx = g_lvl[LEVELS].iv[0];

  // accumulating TE behind the tree, fed back from the output register
  logic [W-1:0]  fb_c, fb_d, fb_unused;
  logic [IW-1:0] fb_i;
  // The fed-back TE compares for the maximum; its adder is not used because
  // sum and maximum are accumulated side by side.
  te #(.W(W), .IW(IW)) u_acc (
    .a(t_max), .b(max), .index_a(t_idx), .index_b(max_idx),
    .c(fb_c), .index(fb_i), .d(fb_unused));
  assign fb_d = t_sum + sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum <= '0; max <= '0; max_idx <= '0;
    end else if (in_valid) begin
      if (first) begin
        sum <= t_sum; max <= t_max; max_idx <= t_idx;
      end else begin
        sum <= fb_d; max <= fb_c; max_idx <= fb_i;
      end
    end
  end
endmodule
