// tb_immsched_top: end-to-end test of the scheduler with 16 engines (default 8 x 8 engines).
//
// A 4-vertex query graph (edges 0->1, 1->2, 0->3) is matched into the
// 8-vertex target DAG of a 2 x 4 PE mesh (edges right and down), with one
// query vertex and four PEs of a second computation type. The test checks
// the compatibility mask against its own degree/type computation, checks
// that every mapping in the table is one-to-one, respects the mask and
// preserves every query edge, that at least one mapping is found, and that
// the selected mapping is the one whose smallest task slack is largest.
// It also counts how often each mechanism occurred: S* updates, consensus
// in use, feasible and infeasible particles, round-robin arbitration among
// several pending reports, reciprocal normalisation, duplicate mappings not
// stored; a mechanism that never occurred counts as a failure.
module tb_immsched_top;
  import imm_pkg::*;
  localparam int R = 8, C = 8, MAXM = 8, NT = 8, SW = 16;
  localparam int IW = 3, TW = 3, MW = 4;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  always #5 clk = ~clk;

  logic [3:0] n;
  logic [3:0] m;
  logic [7:0] epochs, steps;
  logic signed [15:0] w, c1, c2, c3;
  logic [31:0] seed;
  logic [R-1:0][R-1:0] q_adj;
  logic [C-1:0][C-1:0] g_adj;
  logic [R-1:0][1:0] qtype;
  logic [C-1:0][1:0] gtype;
  logic [C-1:0] preemptible;
  logic [C-1:0][TW-1:0] owner;
  logic [NT-1:0][SW-1:0] slack;
  logic busy, done, sel_valid;
  logic [R-1:0][C-1:0] mask;
  fit_t fbest;
  logic [MW-1:0] nmap, sel_idx;
  logic [MAXM-1:0][R-1:0][IW-1:0] maps;
  logic [SW-1:0] sel_slack;
  logic [15:0] n_feas, n_sgu;

  immsched_top #(.NE(16)) dut (.*, .n_feasible_reports(n_feas), .n_sg_updates(n_sgu));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mechanism counters (observed through the hierarchy)
  int c_sgupd = 0, c_sc_used = 0, c_feas = 0, c_infeas = 0, c_arb = 0, c_norm = 0, c_dup = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_gc.st == G_SREAD && dut.u_gc.improved) c_sgupd++;
    if (dut.cmd_valid && dut.cmd == CMD_STEP && dut.use_sc) c_sc_used++;
    if (dut.u_gc.st == G_FIN_W && dut.rep_valid) begin
      if (dut.rep_feas) c_feas++; else c_infeas++;
      if (dut.rep_feas && dut.u_gc.dup) c_dup++;
    end
    if ($countones(dut.u_router.pend) > 1) c_arb++;
    if (dut.g_eng[0].u_eng.u_recip.done) c_norm++;
  end

  int cycles = 0;
  always @(posedge clk) begin
    cycles++;
    if (cycles > 2000000) begin
      failures++;
      $display("FAIL: watchdog");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  function automatic int popc_row(logic [7:0] v); return $countones(v); endfunction

  initial begin
    n = 4; m = 8; epochs = 6; steps = 4;
    w = 16'sd179; c1 = 16'sd384; c2 = 16'sd384; c3 = 16'sd128;
    seed = 32'hC0FF_EE01;
    q_adj = '0; q_adj[0][1] = 1; q_adj[1][2] = 1; q_adj[0][3] = 1;
    g_adj = '0;
    for (int r = 0; r < 2; r++)
      for (int c = 0; c < 4; c++) begin
        if (c < 3) g_adj[r*4+c][r*4+c+1] = 1;
        if (r < 1) g_adj[r*4+c][(r+1)*4+c] = 1;
      end
    qtype = '0; qtype[2] = 2'd1;
    gtype = '0; gtype[2] = 2'd1; gtype[3] = 2'd1; gtype[6] = 2'd1; gtype[7] = 2'd1;
    preemptible = '1;
    for (int j = 0; j < C; j++) owner[j] = TW'(j / 2);
    slack = '0;
    slack[0] = 16'd100; slack[1] = 16'd300; slack[2] = 16'd50; slack[3] = 16'd200;

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    wait (done);
    @(posedge clk);
    $display("search finished after %0d cycles: nmap=%0d fbest=%0d sel=%0d slack=%0d",
             cycles, nmap, fbest, sel_idx, sel_slack);

    // mask reference
    for (int i = 0; i < R; i++)
      for (int j = 0; j < C; j++) begin
        int qo, qi, go, gi;
        bit exp;
        qo = 0; qi = 0; go = 0; gi = 0;
        for (int k = 0; k < R; k++) begin qo += q_adj[i][k]; qi += q_adj[k][i]; end
        for (int k = 0; k < C; k++) begin go += g_adj[j][k]; gi += g_adj[k][j]; end
        exp = (i < n) && (j < m) && preemptible[j] && qtype[i] == gtype[j] && qo <= go && qi <= gi;
        check(mask[i][j] == exp, $sformatf("mask[%0d][%0d]", i, j));
      end

    // mapping table
    check(nmap > 0, "at least one feasible mapping");
    for (int x = 0; x < int'(nmap); x++) begin
      bit ok;
      ok = 1;
      for (int i = 0; i < n; i++) begin
        if (!mask[i][maps[x][i]]) ok = 0;
        for (int k = 0; k < i; k++) if (maps[x][i] == maps[x][k]) ok = 0;
        for (int k = 0; k < n; k++)
          if (q_adj[i][k] && !g_adj[maps[x][i]][maps[x][k]]) ok = 0;
      end
      $display("map %0d: %0d %0d %0d %0d", x, maps[x][0], maps[x][1], maps[x][2], maps[x][3]);
      check(ok, $sformatf("mapping %0d is a valid embedding", x));
      for (int y = 0; y < x; y++) begin
        bit same;
        same = 1;
        for (int i = 0; i < n; i++) if (maps[x][i] != maps[y][i]) same = 0;
        check(!same, "mappings are distinct");
      end
    end

    // selection reference
    begin
      int best, besti, sc;
      best = -1; besti = -1;
      for (int x = 0; x < int'(nmap); x++) begin
        sc = 65535;
        for (int i = 0; i < n; i++) if (slack[owner[maps[x][i]]] < sc) sc = slack[owner[maps[x][i]]];
        if (sc > best) begin best = sc; besti = x; end
      end
      check(sel_valid == (nmap > 0), "sel_valid");
      if (nmap > 0) begin
        check(int'(sel_idx) == besti, "selected mapping index");
        check(int'(sel_slack) == best, "selected mapping slack");
      end
    end
    check(fbest != FIT_MIN && fbest <= 0, "best fitness recorded");
    check(int'(n_feas) == c_feas, "feasible report count");

    $display("mechanisms: sg_updates=%0d sc_used=%0d feasible=%0d infeasible=%0d arbitration=%0d recip=%0d dup=%0d",
             c_sgupd, c_sc_used, c_feas, c_infeas, c_arb, c_norm, c_dup);
    check(c_sgupd > 0, "S* update occurred");
    check(c_sc_used > 0, "consensus used");
    check(c_feas > 0, "feasible particle occurred");
    check(c_infeas > 0, "infeasible particle occurred");
    check(c_arb > 0, "router arbitration among several reports");
    check(c_norm > 0, "reciprocal normalisation");
    check(c_dup > 0, "duplicate mapping filtered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
