// mask_gen: builds the global compatibility mask from the two graphs.
//
// Following the paper, query tile i may be mapped onto target PE j only if
// the in/out-degree relationship and the computation type allow it. This
// design takes the usual subgraph-isomorphism degree filter: out-degree and
// in-degree of i in Q must not exceed those of j in G; the types must be
// equal; PE j must be preemptible (an input, see the preemption policy);
// and i < n, j < m. Degrees are popcounts of adjacency rows (out) and
// columns (in). `start` registers the mask; `done` pulses one cycle later.
module mask_gen #(
  parameter int unsigned R   = 8,
  parameter int unsigned C   = 8,
  parameter int unsigned TYW = 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [$clog2(R+1)-1:0]      n,
  input  logic [$clog2(C+1)-1:0]      m,
  input  logic [R-1:0][R-1:0]         q_adj,
  input  logic [C-1:0][C-1:0]         g_adj,
  input  logic [R-1:0][TYW-1:0]       qtype,
  input  logic [C-1:0][TYW-1:0]       gtype,
  input  logic [C-1:0]                preemptible,
  output logic [R-1:0][C-1:0]         mask,
  output logic                        done
);
  logic [R-1:0][$clog2(R+1)-1:0] qout, qin;
  logic [C-1:0][$clog2(C+1)-1:0] gout, gin;
  logic [R-1:0][C-1:0] mask_d;

  always_comb begin
    for (int i = 0; i < int'(R); i++) begin
      qout[i] = '0; qin[i] = '0;
      for (int k = 0; k < int'(R); k++) begin
        qout[i] += ($clog2(R+1))'(q_adj[i][k]);
        qin[i]  += ($clog2(R+1))'(q_adj[k][i]);
      end
    end
    for (int j = 0; j < int'(C); j++) begin
      gout[j] = '0; gin[j] = '0;
      for (int k = 0; k < int'(C); k++) begin
        gout[j] += ($clog2(C+1))'(g_adj[j][k]);
        gin[j]  += ($clog2(C+1))'(g_adj[k][j]);
      end
    end
    for (int i = 0; i < int'(R); i++)
      for (int j = 0; j < int'(C); j++)
        mask_d[i][j] = (i < int'(n)) && (j < int'(m)) && preemptible[j]
                    && (qtype[i] == gtype[j])
                    && (32'(qout[i]) <= 32'(gout[j])) && (32'(qin[i]) <= 32'(gin[j]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask <= '0; done <= 1'b0;
    end else begin
      done <= start;
      if (start) mask <= mask_d;
    end
  end
endmodule
