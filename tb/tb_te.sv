// tb_te: exhaustive-style random test of the tree element: c = max(a,b) with
// the index of the larger value (b on a tie) and d = a + b.
module tb_te;
  logic [15:0] a, b, c, d;
  logic [3:0] ia, ib, idx;
  int checks = 0, failures = 0;
  te #(.W(16), .IW(4)) dut (.a, .b, .index_a(ia), .index_b(ib), .c, .index(idx), .d);
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 2000; t++) begin
      a = 16'($urandom_range(0, 300)); b = (t % 7 == 0) ? a : 16'($urandom_range(0, 300));
      ia = 4'($urandom); ib = 4'($urandom);
      #1;
      checks++;
      if (c != ((a > b) ? a : b) || idx != ((a > b) ? ia : ib) || d != 16'(a + b)) begin
        failures++;
        $display("FAIL a=%0d b=%0d c=%0d idx=%0d d=%0d", a, b, c, idx, d);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
