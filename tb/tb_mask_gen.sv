// tb_mask_gen: random query/target graphs, types, preemptible sets and sizes;
// the mask is compared with a degree/type filter computed here.
module tb_mask_gen;
  localparam int R = 6, C = 8, TYW = 2;
  logic clk = 0, rst_n = 0, start = 0, done;
  logic [2:0] n;
  logic [3:0] m;
  logic [R-1:0][R-1:0] q_adj;
  logic [C-1:0][C-1:0] g_adj;
  logic [R-1:0][TYW-1:0] qtype;
  logic [C-1:0][TYW-1:0] gtype;
  logic [C-1:0] preemptible;
  logic [R-1:0][C-1:0] mask;
  always #5 clk = ~clk;
  mask_gen #(.R(R), .C(C), .TYW(TYW)) dut (.*);
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) if (++cyc > 100000) begin
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      n = 3'($urandom_range(1, R)); m = 4'($urandom_range(1, C));
      foreach (q_adj[i, j]) q_adj[i][j] = ($urandom_range(0, 3) == 0) && (i < j);
      foreach (g_adj[i, j]) g_adj[i][j] = ($urandom_range(0, 2) == 0) && (i < j);
      foreach (qtype[i]) qtype[i] = TYW'($urandom_range(0, 1));
      foreach (gtype[i]) gtype[i] = TYW'($urandom_range(0, 1));
      preemptible = C'($urandom);
      start = 1;
      @(negedge clk);
      start = 0;
      checks++;
      if (!done) begin failures++; $display("FAIL done timing"); end
      for (int i = 0; i < R; i++)
        for (int j = 0; j < C; j++) begin
          int qo, qi, go, gi;
          bit e;
          qo = 0; qi = 0; go = 0; gi = 0;
          for (int k = 0; k < R; k++) begin qo += q_adj[i][k]; qi += q_adj[k][i]; end
          for (int k = 0; k < C; k++) begin go += g_adj[j][k]; gi += g_adj[k][j]; end
          e = (i < n) && (j < m) && preemptible[j] && (qtype[i] == gtype[j]) && qo <= go && qi <= gi;
          checks++;
          if (mask[i][j] != e) begin failures++; $display("FAIL t=%0d mask[%0d][%0d]", t, i, j); end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
