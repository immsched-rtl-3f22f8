// tb_preempt_select: random mapping tables, owners and slacks; the chosen
// mapping must maximise the minimum slack of the tasks it preempts (first on
// ties), with done nmap + 2 cycles after start.
module tb_preempt_select;
  localparam int R = 4, C = 8, MAXM = 6, NT = 4, SW = 16, IW = 3, TW = 2, MW = 3;
  logic clk = 0, rst_n = 0, start = 0, done, sel_valid;
  logic [2:0] n;
  logic [MW-1:0] nmap, sel_idx;
  logic [MAXM-1:0][R-1:0][IW-1:0] maps;
  logic [C-1:0][TW-1:0] owner;
  logic [NT-1:0][SW-1:0] slack;
  logic [SW-1:0] sel_slack;
  always #5 clk = ~clk;
  preempt_select #(.R(R), .C(C), .MAXM(MAXM), .NT(NT), .SW(SW)) dut (.*);
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) if (++cyc > 100000) begin
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int best, besti, lat;
      @(negedge clk);
      n = 3'($urandom_range(1, R));
      nmap = MW'($urandom_range(0, MAXM));
      foreach (maps[x, i]) maps[x][i] = IW'($urandom_range(0, C - 1));
      foreach (owner[j]) owner[j] = TW'($urandom_range(0, NT - 1));
      foreach (slack[k]) slack[k] = SW'($urandom_range(0, 20) * 10);
      best = -1; besti = 0;
      for (int x = 0; x < nmap; x++) begin
        int s;
        s = 65535;
        for (int i = 0; i < n; i++) if (slack[owner[maps[x][i]]] < s) s = slack[owner[maps[x][i]]];
        if (s > best) begin best = s; besti = x; end
      end
      start = 1;
      @(negedge clk);
      start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != nmap + 2) begin failures++; $display("FAIL latency %0d nmap %0d", lat, nmap); end
      checks++;
      if (sel_valid != (nmap != 0)) begin failures++; $display("FAIL valid"); end
      if (nmap != 0) begin
        checks++;
        if (int'(sel_idx) != besti || int'(sel_slack) != best) begin
          failures++; $display("FAIL t=%0d sel %0d/%0d slack %0d/%0d", t, sel_idx, besti, sel_slack, best);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
