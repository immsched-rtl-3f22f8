// tb_lfsr_rand: compares every lane with a software Galois LFSR (polynomial
// 0x80200003, lane seed = seed ^ 0x9E3779B9*(lane+1)), checks hold when
// step is low and that lanes differ from each other.
module tb_lfsr_rand;
  localparam int L = 4;
  logic clk = 0, rst_n = 0, load = 0, step = 0;
  logic [31:0] seed = 32'h1357_9BDF;
  logic [L-1:0][7:0] r;
  always #5 clk = ~clk;
  lfsr_rand #(.LANES(L)) dut (.*);
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) if (++cyc > 100000) begin
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic [31:0] model [L];
  int differ = 0;
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); load = 1;
    for (int i = 0; i < L; i++) model[i] = seed ^ (32'h9E37_79B9 * (i + 1));
    @(negedge clk); load = 0;
    for (int t = 0; t < 1000; t++) begin
      step = (t % 5 != 0);
      for (int i = 0; i < L; i++) begin
        checks++;
        if (r[i] != model[i][7:0]) begin failures++; $display("FAIL lane %0d t=%0d", i, t); end
      end
      if (r[0] != r[1]) differ++;
      @(negedge clk);
      if (step) for (int i = 0; i < L; i++)
        model[i] = model[i][0] ? ((model[i] >> 1) ^ 32'h8020_0003) : (model[i] >> 1);
    end
    checks++;
    if (differ < 900) begin failures++; $display("FAIL lanes correlated"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
