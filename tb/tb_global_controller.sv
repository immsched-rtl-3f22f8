// tb_global_controller: the controller with the router and three behavioural
// engines that answer each command after a random delay with random
// fitness, S matrix, feasibility and mapping (drawn from a small set so that
// duplicates occur). A reference written here, fed with the reports in the
// order the router delivers them, predicts f*, S* (checked after every
// step), use_sg/use_sc, the de-duplicated mapping table and the consensus
// matrix S-bar. The number of commands must be epochs * (steps + 2).
module tb_global_controller;
  import imm_pkg::*;
  localparam int NE = 3, R = 2, C = 4, MAXM = 4, IW = 2, EW = 2;
  logic clk = 0, rst_n = 0, start = 0;
  logic [7:0] epochs = 8'd4, steps = 8'd3;
  logic [1:0] n = 2'd2;
  logic cmd_valid, use_sg, use_sc, rep_valid, rep_feas, busy, done;
  cmd_e cmd;
  logic [R-1:0][C-1:0][7:0] sg, sc, rd_s;
  logic [EW-1:0] rep_id, rd_id;
  fit_t rep_fit, fbest;
  logic [R-1:0][IW-1:0] rep_pi;
  logic [2:0] nmap;
  logic [MAXM-1:0][R-1:0][IW-1:0] maps;
  logic [15:0] n_feasible_reports, n_sg_updates;
  always #5 clk = ~clk;

  // behavioural engines
  logic [NE-1:0] eng_done = '0;
  fit_t [NE-1:0] eng_fit;
  logic [NE-1:0] eng_feas;
  logic [NE-1:0][R-1:0][IW-1:0] eng_pi;
  logic [NE-1:0][R-1:0][C-1:0][7:0] eng_s;

  global_controller #(.NE(NE), .R(R), .C(C), .MAXM(MAXM)) dut (.*);
  noc_router #(.NE(NE), .R(R), .C(C)) u_rt (.*);

  int checks = 0, failures = 0, cyc = 0, ncmd = 0;
  always @(posedge clk) if (++cyc > 100000) begin
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int delay [NE];
  cmd_e pend_cmd;
  initial foreach (delay[e]) delay[e] = -1;
  always @(posedge clk) if (rst_n) begin
    eng_done <= '0;
    if (cmd_valid) begin
      ncmd++;
      pend_cmd = cmd;
      foreach (delay[e]) delay[e] = $urandom_range(1, 6);
    end else begin
      for (int e = 0; e < NE; e++) begin
        if (delay[e] == 0) begin
          eng_fit[e] <= fit_t'(-$urandom_range(0, 5000));
          for (int i = 0; i < R; i++) for (int j = 0; j < C; j++) eng_s[e][i][j] <= 8'($urandom);
          eng_feas[e] <= (pend_cmd == CMD_FINAL) && ($urandom_range(0, 1) == 1);
          for (int i = 0; i < R; i++) eng_pi[e][i] <= IW'($urandom_range(0, 1) + i);
          eng_done[e] <= 1'b1;
        end
        if (delay[e] >= 0) delay[e]--;
      end
    end
  end

  // reference
  fit_t rf_best;
  logic [R-1:0][C-1:0][7:0] rf_sg, rf_sc, rf_best_s;
  logic rf_sc_valid, rf_impr;
  logic [MAXM-1:0][R-1:0][IW-1:0] rf_maps;
  int rf_nmap;
  gst_e st_prev;
  always @(posedge clk) if (rst_n) begin
    if (start) begin
      rf_best = FIT_MIN; rf_sc_valid = 0; rf_nmap = 0; rf_impr = 0;
    end
    if (rep_valid && dut.st == G_STEP_W) begin
      if (rep_fit > rf_best) begin rf_best = rep_fit; rf_best_s = eng_s[rep_id]; rf_impr = 1; end
    end
    if (dut.st == G_SREAD) begin
      if (rf_impr) rf_sg = rf_best_s;
      rf_impr = 0;
    end
    if (rep_valid && dut.st == G_FIN_W && rep_feas) begin
      bit dupl;
      for (int i = 0; i < R; i++) for (int j = 0; j < C; j++)
        rf_sc[i][j] = rf_sc_valid ? 8'((int'(rf_sc[i][j]) + int'(eng_s[rep_id][i][j]) + 1) / 2) : eng_s[rep_id][i][j];
      rf_sc_valid = 1;
      dupl = 0;
      for (int x = 0; x < rf_nmap; x++) if (rf_maps[x] == rep_pi) dupl = 1;
      if (!dupl && rf_nmap < MAXM) begin rf_maps[rf_nmap] = rep_pi; rf_nmap++; end
    end
    // one cycle after G_SREAD the controller's S* must match
    if (st_prev == G_SREAD && use_sg) begin
      checks++;
      if (sg != rf_sg) begin failures++; $display("FAIL S* after step"); end
    end
    st_prev = dut.st;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      ncmd = 0;
      wait (done);
      @(negedge clk);
      checks++;
      if (ncmd != int'(epochs) * (int'(steps) + 2)) begin failures++; $display("FAIL commands %0d", ncmd); end
      checks++;
      if (fbest != rf_best) begin failures++; $display("FAIL fbest %0d/%0d", fbest, rf_best); end
      checks++;
      if (int'(nmap) != rf_nmap) begin failures++; $display("FAIL nmap %0d/%0d", nmap, rf_nmap); end
      for (int x = 0; x < rf_nmap; x++) begin
        checks++;
        if (maps[x] != rf_maps[x]) begin failures++; $display("FAIL map %0d", x); end
      end
      checks++;
      if (use_sc != rf_sc_valid || (rf_sc_valid && sc != rf_sc)) begin failures++; $display("FAIL S-bar"); end
      $display("run %0d: nmap=%0d fbest=%0d sg_updates=%0d feasible=%0d", run, nmap, fbest, n_sg_updates, n_feasible_reports);
      epochs = epochs + 8'd1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
