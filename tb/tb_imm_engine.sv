// tb_imm_engine: one engine at its default 8 x 8 size, checked against a
// bit-exact model of the particle arithmetic written here:
//  - CMD_INIT: Q loaded as 0/254, V = 0, S_local = S, S masked and each row
//    normalised to 255 (up to truncation);
//  - CMD_STEP (with S* and S-bar): velocity, position clamp, mask,
//    reciprocal normalisation, and fitness -||254Q - (S G S^T >> 8)||^2 all
//    match the model exactly; S* is loaded; f_local is the running maximum;
//  - CMD_FINAL: greedy arg-max projection and Ullmann containment check.
// The same command sequence also runs with an infeasible query (a vertex
// with no compatible PE) to see feasible = 0, and with a particle pulled
// onto a known embedding to see feasible = 1.
module tb_imm_engine;
  import imm_pkg::*;
  localparam int R = 8, C = 8, IW = 3;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, use_sg = 0, use_sc = 0;
  cmd_e cmd = CMD_NONE;
  logic [31:0] seed = 32'h2468_ACE1;
  logic [3:0] n = 4'd4, m = 4'd8;
  logic signed [DW-1:0] w = 16'sd179, c1 = 16'sd384, c2 = 16'sd384, c3 = 16'sd128;
  logic [R-1:0][R-1:0] q_adj;
  logic [C-1:0][C-1:0] g_adj;
  logic [R-1:0][C-1:0] mask;
  logic [R-1:0][C-1:0][7:0] sg, sc;
  logic busy, done, feasible;
  fit_t fit;
  logic [R-1:0][IW-1:0] pi;
  logic [R-1:0][C-1:0][7:0] s_out;
  always #5 clk = ~clk;
  imm_engine #(.R(R), .C(C)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) if (++cyc > 200000) begin
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mirror of every PE register file
  logic signed [DW-1:0] rfm [R][C][NREG];
  for (genvar gi = 0; gi < R; gi++)
    for (genvar gj = 0; gj < C; gj++)
      for (genvar gr = 0; gr < NREG; gr++)
        assign rfm[gi][gj][gr] = dut.u_arr.g_row[gi].g_col[gj].u_pe.rf[gr];
  function automatic int rf(int i, int j, int r);
    return int'(rfm[i][j][r]);
  endfunction

  function automatic int sat(longint v, bit s8);
    if (s8) return (v < 0) ? 0 : (v > 255) ? 255 : int'(v);
    return (v < -32768) ? -32768 : (v > 32767) ? 32767 : int'(v);
  endfunction

  // reference normalisation of S (in place)
  task automatic ref_norm(ref int S [R][C]);
    for (int i = 0; i < R; i++) begin
      longint sum, q;
      for (int j = 0; j < C; j++) S[i][j] = sat(S[i][j] * int'(mask[i][j]), 1);
      sum = 0;
      for (int j = 0; j < C; j++) sum += S[i][j];
      q = (sum == 0) ? 0 : (longint'(255) * 65536) / sum;
      for (int j = 0; j < C; j++) S[i][j] = sat((longint'(S[i][j]) * q) >>> 16, 1);
    end
  endtask

  function automatic fit_t ref_fit(int S [R][C]);
    longint A [R][C], Cm [R][C], cost;
    for (int i = 0; i < R; i++)
      for (int j = 0; j < C; j++) begin
        A[i][j] = 0;
        for (int k = 0; k < m; k++) A[i][j] += longint'(S[i][k]) * g_adj[k][j];
        A[i][j] = (A[i][j] > 32767) ? 32767 : A[i][j];
      end
    cost = 0;
    for (int i = 0; i < R; i++)
      for (int j = 0; j < C; j++) begin
        longint t, e;
        Cm[i][j] = 0;
        if (j < R) for (int k = 0; k < m; k++) Cm[i][j] += A[i][k] * S[j][k];
        t = sat(Cm[i][j] >>> 8, 0);
        e = sat(((j < R && q_adj[i][j]) ? 254 : 0) - t, 0);
        cost += e * e;
      end
    return -fit_t'(cost);
  endfunction

  task automatic issue(cmd_e c, bit sgv, bit scv, output int lat);
    @(negedge clk);
    cmd = c; cmd_valid = 1; use_sg = sgv; use_sc = scv;
    @(negedge clk);
    cmd_valid = 0; cmd = CMD_NONE;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
  endtask

  int S [R][C], V [R][C], SL [R][C];
  int lat;
  fit_t best_local;

  task automatic run_case(bit expect_feasible, bit guided);
    int rl [R], rt [C];
    issue(CMD_INIT, 0, 0, lat);
    $display("init: %0d cycles", lat);
    for (int i = 0; i < R; i++)
      for (int j = 0; j < C; j++) begin
        S[i][j] = int'(s_out[i][j]);
        check(rf(i, j, R_Q) == ((j < R && q_adj[i][j]) ? 254 : 0), "Q loaded");
        check(rf(i, j, R_V) == 0, "V cleared");
        check(rf(i, j, R_SL) == S[i][j], "S_local = S");
        check(mask[i][j] || S[i][j] == 0, "S masked after init");
      end
    for (int i = 0; i < n; i++) begin
      int sum;
      sum = 0;
      for (int j = 0; j < C; j++) sum += S[i][j];
      check(sum == 0 || (sum <= 255 && sum >= 255 - C), $sformatf("row %0d normalised (%0d)", i, sum));
    end
    best_local = FIT_MIN;
    for (int st = 0; st < 3; st++) begin
      int Sn [R][C];
      fit_t f;
      foreach (sg[i, j]) sg[i][j] = mask[i][j] ? 8'($urandom_range(0, 255)) : 8'd0;
      if (guided) begin
        // S* is the embedding 0->0, 1->1, 2->2, 3->4 and pulls hard
        sg = '0; sg[0][0] = 8'd255; sg[1][1] = 8'd255; sg[2][2] = 8'd255; sg[3][4] = 8'd255;
      end
      foreach (sc[i, j]) sc[i][j] = mask[i][j] ? 8'($urandom_range(0, 255)) : 8'd0;
      for (int i = 0; i < R; i++) rl[i] = int'(dut.rl[i]);
      for (int j = 0; j < C; j++) rt[j] = int'(dut.rt[j]);
      for (int i = 0; i < R; i++)
        for (int j = 0; j < C; j++) begin
          S[i][j] = rf(i, j, R_S); V[i][j] = rf(i, j, R_V); SL[i][j] = rf(i, j, R_SL);
        end
      for (int i = 0; i < R; i++)
        for (int j = 0; j < C; j++) begin
          longint k1, k2, a;
          k1 = longint'(shortint'((longint'(c1) * rl[i]) >>> 8));
          k2 = longint'(shortint'((longint'(c2) * rt[j]) >>> 8));
          a = longint'(w) * V[i][j] + k1 * SL[i][j] - k1 * S[i][j]
            + k2 * sg[i][j] - k2 * S[i][j] + longint'(c3) * sc[i][j] - longint'(c3) * S[i][j];
          V[i][j] = sat(longint'(int'(a)) >>> 8, 0);
          Sn[i][j] = sat(S[i][j] + V[i][j], 1);
        end
      ref_norm(Sn);
      f = ref_fit(Sn);
      issue(CMD_STEP, 1, 1, lat);
      $display("step %0d: %0d cycles, fitness %0d", st, lat, fit);
      for (int i = 0; i < R; i++)
        for (int j = 0; j < C; j++) begin
          check(rf(i, j, R_V) == V[i][j], $sformatf("V[%0d][%0d] %0d/%0d", i, j, rf(i, j, R_V), V[i][j]));
          check(int'(s_out[i][j]) == Sn[i][j], $sformatf("S[%0d][%0d] %0d/%0d", i, j, s_out[i][j], Sn[i][j]));
          check(rf(i, j, R_SG) == int'(sg[i][j]), "S* loaded");
        end
      check(fit == f, $sformatf("fitness %0d/%0d", fit, f));
      if (f > best_local) best_local = f;
      check(dut.f_local == best_local, "f_local is the running best");
    end
    // final: projection and Ullmann check
    begin
      int P [R];
      bit used [C], fail, feas;
      foreach (used[j]) used[j] = 0;
      fail = 0;
      for (int i = 0; i < n; i++) begin
        int bv, bj;
        bv = 0; bj = -1;
        for (int j = 0; j < m; j++) if (!used[j] && int'(s_out[i][j]) >= bv && s_out[i][j] != 0) begin bv = s_out[i][j]; bj = j; end
        if (bj < 0) fail = 1; else begin used[bj] = 1; P[i] = bj; end
      end
      feas = !fail;
      if (!fail)
        for (int i = 0; i < n; i++) for (int k = 0; k < n; k++)
          if (q_adj[i][k] && !g_adj[P[i]][P[k]]) feas = 0;
      issue(CMD_FINAL, 0, 0, lat);
      $display("final: %0d cycles, feasible %0d", lat, feasible);
      check(feasible == feas, "feasibility");
      if (!fail) for (int i = 0; i < n; i++) check(int'(pi[i]) == P[i], $sformatf("pi[%0d]", i));
      if (expect_feasible == 0) check(!feasible, "infeasible case");
      if (guided) check(feasible && pi[0] == 0 && pi[1] == 1 && pi[2] == 2 && pi[3] == 4, "guided case feasible");
    end
  endtask

  initial begin
    q_adj = '0; q_adj[0][1] = 1; q_adj[1][2] = 1; q_adj[0][3] = 1;
    g_adj = '0;
    for (int r = 0; r < 2; r++)
      for (int c = 0; c < 4; c++) begin
        if (c < 3) g_adj[r*4+c][r*4+c+1] = 1;
        if (r < 1) g_adj[r*4+c][(r+1)*4+c] = 1;
      end
    mask = '0;
    for (int i = 0; i < 4; i++) for (int j = 0; j < 8; j++) mask[i][j] = (j != (i + 5) % 8);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 4; r++) begin
      seed = $urandom;
      run_case(1, 0);
    end
    // guided particle: only the pull towards S* acts
    w = '0; c1 = '0; c3 = '0; c2 = 16'sd32000;
    run_case(1, 1);
    w = 16'sd179; c1 = 16'sd384; c2 = 16'sd384; c3 = 16'sd128;
    mask[2] = '0;  // query vertex 2 has no compatible PE
    run_case(0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
