// tb_ondie_ecc: checks the chip-side on-die ECC datapath against the storage
// model: stored codewords are valid (H.c = 0, data bits systematic), a single
// raw error is corrected on a normal read, a bypass read returns the raw data
// bits with the error, and two raw errors produce the miscorrection that the
// parity-check matrix predicts (computed here independently). Read latency is
// one cycle (the storage model's).
module tb_ondie_ecc;
  localparam int AW = 4, K = 64, P = 7, N = 71;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic mem_req = 0, mem_we = 0, mem_bypass = 0, mem_rvalid;
  logic [AW-1:0] mem_addr = '0;
  logic [K-1:0] mem_wdata = '0, mem_rdata;
  logic st_req, st_we, st_rvalid;
  logic [AW-1:0] st_addr;
  logic [N-1:0] st_wdata, st_rdata;

  ondie_ecc #(.ADDR_W(AW)) dut (.*);
  error_prone_store #(.ADDR_W(AW), .W(N)) u_st (.clk, .st_req, .st_we, .st_addr, .st_wdata, .st_rvalid, .st_rdata);

  function automatic logic [P-1:0] ref_col(int i);
    int n = 0;
    for (int v = 127; v > 0; v--) if ($countones(7'(v)) >= 2) begin
      if (n == i) return 7'(v);
      n++;
    end
    return '0;
  endfunction
  function automatic logic [P-1:0] syn_of(logic [N-1:0] c);
    logic [P-1:0] s = '0;
    for (int i = 0; i < K; i++) if (c[i]) s ^= ref_col(i);
    for (int r = 0; r < P; r++) if (c[K+r]) s ^= 7'(1 << (P-1-r));
    return s;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(logic [AW-1:0] a, logic [K-1:0] x);
    @(negedge clk); mem_req = 1; mem_we = 1; mem_addr = a; mem_wdata = x;
    @(negedge clk); mem_req = 0; mem_we = 0;
  endtask
  task automatic rd(logic [AW-1:0] a, bit byp, output logic [K-1:0] x);
    int lat = 0;
    @(negedge clk); mem_req = 1; mem_we = 0; mem_bypass = byp; mem_addr = a;
    @(negedge clk); mem_req = 0; mem_bypass = 0;
    #1;
    while (!mem_rvalid) begin @(negedge clk); #1; lat++; end
    check(lat == 0, "read latency one cycle");
    x = mem_rdata;
  endtask

  initial begin
    logic [K-1:0] x, y, e;
    int a, b, m;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      x = {$urandom(), $urandom()};
      wr(AW'(t), x);
      check(u_st.mem[AW'(t)][K-1:0] == x && syn_of(u_st.mem[AW'(t)]) == '0, "stored codeword valid");
      rd(AW'(t), 0, y);
      check(y == x, "clean read");
      // one raw error in the data part
      a = $urandom_range(K-1);
      u_st.mem[AW'(t)][a] = ~u_st.mem[AW'(t)][a];
      rd(AW'(t), 0, y);
      check(y == x, $sformatf("single error %0d corrected", a));
      rd(AW'(t), 1, y);
      check(y == (x ^ (64'(1) << a)), "bypass shows raw error");
      // a second raw error: miscorrection predicted by H
      do b = $urandom_range(K-1); while (b == a);
      u_st.mem[AW'(t)][b] = ~u_st.mem[AW'(t)][b];
      e = (64'(1) << a) | (64'(1) << b);
      m = -1;
      for (int i = 0; i < K; i++) if (ref_col(i) == (ref_col(a) ^ ref_col(b))) m = i;
      if (m >= 0) e[m] = ~e[m];
      rd(AW'(t), 0, y);
      check(y == (x ^ e), "double error decodes as H predicts");
      rd(AW'(t), 1, y);
      check(y == (x ^ (64'(1) << a) ^ (64'(1) << b)), "bypass shows both raw errors");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
