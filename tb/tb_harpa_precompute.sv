// tb_harpa_precompute: checks HARP-A's indirect-error prediction. For random
// direct-error masks with 0..10 set bits, the expected set of bits at risk of
// indirect error is computed here by enumerating every subset of two or more
// of the (lowest MAXB) direct bits, XOR-ing their H columns and looking the
// result up among the data columns. The result, the overflow flag and the
// latency (done in cycle 2^n after start for n >= 2, cycle 1 otherwise) are
// compared.
module tb_harpa_precompute;
  localparam int K = 64, P = 7, MAXB = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done, overflow;
  logic [K-1:0] direct = '0, indirect;
  harpa_precompute #(.K(K), .P(P), .MAXB(MAXB)) dut (.*);

  function automatic logic [P-1:0] ref_col(int i);
    int n = 0;
    for (int v = 127; v > 0; v--) if ($countones(7'(v)) >= 2) begin
      if (n == i) return 7'(v);
      n++;
    end
    return '0;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int pos [$];
    int n, cyc, nb, found;
    logic [K-1:0] expv;
    logic [P-1:0] s;
    found = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 120; t++) begin
      nb = t % 11;
      direct = '0;
      while ($countones(direct) < nb) direct[$urandom_range(K-1)] = 1'b1;
      pos.delete();
      for (int i = 0; i < K; i++) if (direct[i] && pos.size() < MAXB) pos.push_back(i);
      n = pos.size();
      expv = '0;
      for (int sub = 1; sub < (1 << n); sub++) begin
        if ($countones(sub) < 2) continue;
        s = '0;
        for (int j = 0; j < n; j++) if (sub[j]) s ^= ref_col(pos[j]);
        for (int i = 0; i < K; i++) if (ref_col(i) == s && !direct[i]) expv[i] = 1'b1;
      end
      if (expv != '0) found++;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(indirect == expv, $sformatf("indirect set, n=%0d", n));
      check(overflow == (nb > MAXB), "overflow flag");
      check(cyc == ((n >= 2) ? (1 << n) : 1), $sformatf("latency %0d for n=%0d", cyc, n));
    end
    check(found > 10, "predictions exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
