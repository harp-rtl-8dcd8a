// tb_sec_decoder: checks syndrome decoding, correction, miscorrection and the
// decode bypass of the SEC decoder, for the (71,64) on-die code.
//
// Codewords are built here from an independent column list. For each random
// dataword: no error (clean), one data error (corrected, position reported),
// one parity error (data intact, corr_parity), two data errors (the decoder
// must flip exactly the bit whose column equals the XOR of the two, or nothing
// if none matches), and a bypass read (raw bits returned). Also the (7,4)
// example code: a single error in each position is located.
module tb_sec_decoder;
  localparam int K = 64, P = 7;
  int checks = 0, failures = 0;
  int miscorrections = 0;

  logic [K+P-1:0] c;
  logic           bypass;
  logic [K-1:0]   d;
  logic [P-1:0]   syn;
  logic           err, cd, cp, nm;
  logic [5:0]     pos;
  sec_decoder #(.K(K), .P(P), .DESC(1'b1)) dut (
    .c, .bypass, .d, .syndrome(syn), .err, .corr_data(cd), .corr_pos(pos),
    .corr_parity(cp), .no_match(nm));

  logic [6:0] c4;
  logic [3:0] d4;
  logic [2:0] s4;
  logic       e4, cd4, cp4, nm4;
  logic [1:0] pos4;
  sec_decoder #(.K(4), .P(3), .DESC(1'b1)) dut4 (
    .c(c4), .bypass(1'b0), .d(d4), .syndrome(s4), .err(e4), .corr_data(cd4), .corr_pos(pos4),
    .corr_parity(cp4), .no_match(nm4));

  function automatic logic [P-1:0] ref_col(int i);
    int n = 0;
    for (int v = 127; v > 0; v--) begin
      if ($countones(7'(v)) >= 2) begin
        if (n == i) return 7'(v);
        n++;
      end
    end
    return '0;
  endfunction

  function automatic logic [K+P-1:0] enc(logic [K-1:0] x);
    logic [P-1:0] s = '0;
    logic [K+P-1:0] r;
    for (int i = 0; i < K; i++) if (x[i]) s ^= ref_col(i);
    r[K-1:0] = x;
    for (int j = 0; j < P; j++) r[K+j] = s[P-1-j];
    return r;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    logic [K-1:0] x, exp_d;
    logic [K+P-1:0] cw;
    int a, b, m;
    bypass = 0;
    for (int t = 0; t < 300; t++) begin
      x  = {$urandom(), $urandom()};
      cw = enc(x);
      // clean
      c = cw; bypass = 0; #1;
      check(d == x && !err && !cd && !cp && !nm, "clean word");
      // single data error
      a = $urandom_range(K-1);
      c = cw ^ (71'(1) << a); #1;
      check(d == x && err && cd && pos == 6'(a) && syn == ref_col(a), $sformatf("single error bit %0d", a));
      // bypass returns the raw erroneous data
      bypass = 1; #1;
      check(d == (x ^ (64'(1) << a)), "bypass raw data");
      bypass = 0;
      // single parity error
      b = $urandom_range(P-1);
      c = cw ^ (71'(1) << (K + b)); #1;
      check(d == x && err && cp && !cd && !nm, $sformatf("parity error %0d", b));
      // double data error: miscorrection at the bit whose column is col(a)^col(b)
      do b = $urandom_range(K-1); while (b == a);
      c = cw ^ (71'(1) << a) ^ (71'(1) << b); #1;
      exp_d = x ^ (64'(1) << a) ^ (64'(1) << b);
      m = -1;
      for (int i = 0; i < K; i++) if (ref_col(i) == (ref_col(a) ^ ref_col(b))) m = i;
      if (m >= 0) begin
        exp_d[m] = ~exp_d[m];
        miscorrections++;
      end
      check(d == exp_d && err && (cd == (m >= 0)), $sformatf("double error %0d,%0d -> %0d", a, b, m));
    end
    check(miscorrections > 0, "some double errors miscorrect");
    // (7,4) code from the worked example: codeword of 1011 is 1011 + parity
    // p = col0 ^ col2 ^ col3 = 111^101^011 = 001 -> c = {p2 p1 p0 d3 d2 d1 d0}
    for (int e = 0; e < 7; e++) begin
      c4 = 7'b100_1101 ^ 7'(1 << e); #1;
      check(d4 == 4'b1101 && e4 && (e < 4 ? (cd4 && pos4 == 2'(e)) : cp4), $sformatf("(7,4) error at %0d", e));
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
