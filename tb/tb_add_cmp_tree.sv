// tb_add_cmp_tree: random vectors (with a 6-lane, non power-of-two tree),
// single-vector and multi-vector accumulation of sum, max and arg-max.
module tb_add_cmp_tree;
  localparam int L = 6, W = 20, IW = 5;
  logic clk = 0, rst_n = 0, in_valid = 0, first = 0;
  logic [IW-1:0] base = '0;
  logic [L-1:0][W-1:0] lanes = '0;
  logic [W-1:0] sum, max;
  logic [IW-1:0] max_idx;
  always #5 clk = ~clk;
  add_cmp_tree #(.L(L), .W(W), .IW(IW)) dut (.*);
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) if (++cyc > 100000) begin
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int nv, esum, emax, eidx;
      nv = 1 + (t % 4);
      esum = 0; emax = -1; eidx = 0;
      for (int v = 0; v < nv; v++) begin
        @(negedge clk);
        in_valid = 1; first = (v == 0); base = IW'(v * L);
        for (int l = 0; l < L; l++) begin
          lanes[l] = W'($urandom_range(0, (t % 3 == 0) ? 3 : 5000));
          esum += int'(lanes[l]);
          // tree picks the later lane on ties; the accumulating TE compares
          // the new vector (a) against the register (b): b wins ties.
        end
        begin
          int vm, vi;
          vm = -1; vi = 0;
          for (int l = 0; l < L; l++) if (int'(lanes[l]) >= vm) begin vm = lanes[l]; vi = v * L + l; end
          if (v == 0 || vm > emax) begin emax = vm; eidx = vi; end
        end
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (int'(sum) != esum || int'(max) != emax || int'(max_idx) != eidx) begin
        failures++;
        $display("FAIL t=%0d sum %0d/%0d max %0d/%0d idx %0d/%0d", t, sum, esum, max, emax, max_idx, eidx);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
