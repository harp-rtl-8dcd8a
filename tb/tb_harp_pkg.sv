// tb_harp_pkg: checks the parity-check column construction of harp_pkg.
//  - P=3, counting down: the four data columns must be 111, 110, 101, 011
//    (row 0 as the most significant bit), the (7,4) textbook example.
//  - P=7 (64 columns) and P=8 (128 columns, the (136,128) code), both orders:
//    every column has at least two ones (never a parity unit column or zero)
//    and all columns are distinct, which makes the code single-error
//    correcting. Out-of-range indices return 0.
module tb_harp_pkg;
  import harp_pkg::*;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [15:0] ex [4];
    ex = '{16'b111, 16'b110, 16'b101, 16'b011};
    for (int i = 0; i < 4; i++) check(hamming_col(i, 3, 1'b1) == ex[i], $sformatf("(7,4) column %0d", i));
    check(hamming_col(4, 3, 1'b1) == 16'd0, "out of range");
    for (int p = 7; p <= 8; p++) begin
      for (int d = 0; d < 2; d++) begin
        int k;
        logic [15:0] seen [$];
        logic [15:0] v;
        k = (p == 7) ? 64 : 128;
        seen.delete();
        for (int i = 0; i < k; i++) begin
          v = hamming_col(i, p, d[0]);
          check($countones(v) >= 2 && v < 16'(1 << p), $sformatf("P=%0d col %0d weight", p, i));
          foreach (seen[j]) check(seen[j] != v, $sformatf("P=%0d col %0d distinct", p, i));
          seen.push_back(v);
        end
      end
    end
    check(K == 64 && P == 7, "(71,64) default");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
