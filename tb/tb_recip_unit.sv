// tb_recip_unit: q = floor(255*65536/den) for random and edge denominators,
// den = 0 gives 0 at once; latency RW + 1 cycles from start to done.
module tb_recip_unit;
  import imm_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [RW-1:0] den = '0, q;
  always #5 clk = ~clk;
  recip_unit dut (.*);
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) if (++cyc > 200000) begin
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      int lat;
      longint expq;
      @(negedge clk);
      den = (t < 4) ? RW'(t) : (t < 8) ? RW'(255 * 65536 - 2 + t) : RW'($urandom_range(1, 40000));
      expq = (den == 0) ? 0 : (longint'(255) * 65536) / longint'(den);
      start = 1;
      @(negedge clk);
      start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (longint'(q) != expq) begin failures++; $display("FAIL den=%0d q=%0d exp=%0d", den, q, expq); end
      checks++;
      if (lat != ((den == 0) ? 1 : RW + 1)) begin failures++; $display("FAIL latency %0d den=%0d", lat, den); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
