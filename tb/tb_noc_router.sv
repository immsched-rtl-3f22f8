// tb_noc_router: four engines report at random times (never twice before
// being served). Every report must reach the controller exactly once with
// its engine number and payload, at most one per cycle, and with all four
// pending the grants must rotate round-robin. The read path must return the
// named engine's S matrix.
module tb_noc_router;
  import imm_pkg::*;
  localparam int NE = 4, R = 2, C = 4, IW = 2, EW = 2;
  logic clk = 0, rst_n = 0;
  logic [NE-1:0] eng_done = '0;
  fit_t [NE-1:0] eng_fit;
  logic [NE-1:0] eng_feas;
  logic [NE-1:0][R-1:0][IW-1:0] eng_pi;
  logic [NE-1:0][R-1:0][C-1:0][7:0] eng_s;
  logic rep_valid, rep_feas;
  logic [EW-1:0] rep_id, rd_id = '0;
  fit_t rep_fit;
  logic [R-1:0][IW-1:0] rep_pi;
  logic [R-1:0][C-1:0][7:0] rd_s;
  always #5 clk = ~clk;
  noc_router #(.NE(NE), .R(R), .C(C)) dut (.*);
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) if (++cyc > 100000) begin
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int outstanding [NE];
  int sent = 0, got = 0;
  int last_id = -1, rr_ok = 0;
  initial begin
    foreach (outstanding[e]) outstanding[e] = 0;
    foreach (eng_fit[e]) begin
      eng_fit[e] = fit_t'(e * 1000 - 7); eng_feas[e] = e[0];
      eng_pi[e] = '0; eng_pi[e][0] = IW'(e);
    end
    foreach (eng_s[e, i, j]) eng_s[e][i][j] = 8'(e * 16 + i * 4 + j);
    repeat (2) @(posedge clk);
    rst_n = 1;
    // phase 1: all four at once, grants must rotate
    @(negedge clk);
    eng_done = '1;
    foreach (outstanding[e]) outstanding[e]++;
    sent += 4;
    @(negedge clk);
    eng_done = '0;
    // phase 2: random reports
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int e = 0; e < NE; e++)
        eng_done[e] = (outstanding[e] == 0) && ($urandom_range(0, 3) == 0);
      foreach (outstanding[e]) if (eng_done[e]) begin outstanding[e]++; sent++; end
      rd_id = EW'($urandom_range(0, NE - 1));
      #1;
      checks++;
      if (rd_s != eng_s[rd_id]) begin failures++; $display("FAIL read path"); end
    end
    @(negedge clk);
    eng_done = '0;
    repeat (10) @(negedge clk);
    checks++;
    if (got != sent) begin failures++; $display("FAIL got %0d sent %0d", got, sent); end
    checks++;
    if (rr_ok != 3) begin failures++; $display("FAIL round robin %0d", rr_ok); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // monitor (sampled just before the clock edge)
  always @(posedge clk) if (rst_n && rep_valid) begin
    got++;
    checks++;
    if (outstanding[rep_id] != 1) begin failures++; $display("FAIL unexpected report %0d", rep_id); end
    outstanding[rep_id] = 0;
    checks++;
    if (rep_fit != eng_fit[rep_id] || rep_feas != eng_feas[rep_id] || rep_pi != eng_pi[rep_id]) begin
      failures++; $display("FAIL payload");
    end
    if (got >= 2 && got <= 4 && int'(rep_id) == (last_id + 1) % NE) rr_ok++;
    last_id = rep_id;
  end
endmodule
