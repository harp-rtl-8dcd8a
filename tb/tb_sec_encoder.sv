// tb_sec_encoder: checks the systematic SEC Hamming encoder.
//
// 1. K=4, P=3 (descending column order): the codeword of each unit dataword
//    must equal the matching row of the textbook (7,4) generator matrix
//    G^T = [I | 111; 110; 101; 011], typed in below.
// 2. K=64, P=7, both column orders: for random datawords the data bits must
//    pass unchanged and the parity must equal a reference computed here from
//    an independently built column list; H.c must be zero.
module tb_sec_encoder;
  localparam int K = 64, P = 7;
  int checks = 0, failures = 0;

  // (7,4) example
  logic [3:0] d4;
  logic [6:0] c4;
  sec_encoder #(.K(4), .P(3), .DESC(1'b1)) u4 (.d(d4), .c(c4));
  // rows of G^T written as {d0 d1 d2 d3 | p0 p1 p2} left to right
  logic [6:0] GT [4] = '{7'b1000_111, 7'b0100_110, 7'b0010_101, 7'b0001_011};

  logic [K-1:0]   d;
  logic [K+P-1:0] cd, ca;
  sec_encoder #(.K(K), .P(P), .DESC(1'b1)) ud (.d(d), .c(cd));
  sec_encoder #(.K(K), .P(P), .DESC(1'b0)) ua (.d(d), .c(ca));

  // reference column list: values with >= 2 ones, in the chosen order
  function automatic logic [P-1:0] ref_col(int i, bit desc);
    int n = 0;
    for (int t = 0; t < 128; t++) begin
      int v = desc ? 127 - t : t;
      if ($countones(7'(v)) >= 2) begin
        if (n == i) return 7'(v);
        n++;
      end
    end
    return '0;
  endfunction

  function automatic logic [P-1:0] syn_of(logic [K+P-1:0] c, bit desc);
    logic [P-1:0] s = '0;
    for (int i = 0; i < K; i++) if (c[i]) s ^= ref_col(i, desc);
    for (int r = 0; r < P; r++) if (c[K+r]) s ^= 7'(1 << (P-1-r));
    return s;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    for (int i = 0; i < 4; i++) begin
      d4 = 4'(1 << i);
      #1;
      // c4 bit order: c4[0..3] = d0..d3, c4[4..6] = p0..p2
      for (int b = 0; b < 7; b++) check(c4[b] == GT[i][6-b], $sformatf("(7,4) unit %0d bit %0d", i, b));
    end
    for (int t = 0; t < 200; t++) begin
      d = {$urandom(), $urandom()};
      if (t == 0) d = '0;
      if (t == 1) d = '1;
      #1;
      check(cd[K-1:0] == d && ca[K-1:0] == d, "systematic data bits");
      check(syn_of(cd, 1) == '0, $sformatf("H.c=0 (desc) d=%h", d));
      check(syn_of(ca, 0) == '0, $sformatf("H.c=0 (asc) d=%h", d));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
