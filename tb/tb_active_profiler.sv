// tb_active_profiler: checks round-based active profiling against a storage
// model with known at-risk cells (true cells, 1 -> 0 failures).
//  - Written patterns are monitored: charged = all ones; checkered = 0xAAAA...
//    in even rounds and inverted in odd rounds; random = inverse of the
//    previous round in odd rounds and a new pattern every two rounds.
//  - Profile updates are collected; with failure probability 1 the profile
//    after one charged round, one checkered round (odd bits only), two
//    checkered rounds and two random rounds must equal the expected sets.
//  - With probability 0.5 nothing outside the at-risk set may be marked.
//  - Reads must use the bypass path; a run of R rounds over D words with a
//    wait of W cycles must finish in cycle 1 + R*(3D + W + 1) after start.
module tb_active_profiler;
  localparam int AW = 4, K = 64, D = 1 << AW;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  harp_pkg::pattern_e pattern = harp_pkg::PAT_CHARGED;
  logic [15:0] n_rounds = 1, round;
  logic [31:0] wait_cycles = 5, bits_found;
  logic mem_req, mem_we, mem_bypass, mem_rvalid;
  logic [AW-1:0] mem_addr, mk_addr;
  logic [K-1:0] mem_wdata, mem_rdata, mk_bits, mk_vals;
  logic mk_en;

  active_profiler #(.ADDR_W(AW), .K(K)) dut (.*);
  error_prone_store #(.ADDR_W(AW), .W(K)) u_st (.clk, .st_req(mem_req), .st_we(mem_we), .st_addr(mem_addr),
    .st_wdata(mem_wdata), .st_rvalid(mem_rvalid), .st_rdata(mem_rdata));

  logic [K-1:0] prof [D];
  logic [K-1:0] wlog [8][D];   // written words per round
  int bad_bypass = 0;

  always @(posedge clk) begin
    if (mk_en) prof[mk_addr] <= prof[mk_addr] | mk_bits;
    if (mem_req && mem_we) wlog[round[2:0]][mem_addr] <= mem_wdata;
    if (mem_req && !mem_we && !mem_bypass) bad_bypass++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(harp_pkg::pattern_e p, int r, int w, int pm);
    int cyc;
    for (int a = 0; a < D; a++) prof[a] = '0;
    u_st.prob_pm = pm;
    @(negedge clk); pattern = p; n_rounds = 16'(r); wait_cycles = 32'(w); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    check(cyc == 1 + r * (3*D + w + 1), $sformatf("run length %0d for %0d rounds", cyc, r));
  endtask

  initial begin
    logic [K-1:0] risk [D];
    logic [K-1:0] odd;
    int extra;
    for (int i = 0; i < K; i++) odd[i] = (i % 2 == 1);
    for (int a = 0; a < D; a++) begin
      risk[a] = '0;
      repeat ($urandom_range(4)) risk[a][$urandom_range(K-1)] = 1'b1;
      u_st.risk[a] = risk[a];
    end
    repeat (2) @(negedge clk);
    rst_n = 1;

    run(harp_pkg::PAT_CHARGED, 1, 5, 1000);
    for (int a = 0; a < D; a++) begin
      check(wlog[0][a] == '1, "charged pattern");
      check(prof[a] == risk[a], $sformatf("charged profile word %0d", a));
    end
    check(bits_found > 0, "bits found counted");

    run(harp_pkg::PAT_CHECKERED, 1, 3, 1000);
    for (int a = 0; a < D; a++) begin
      check(wlog[0][a] == odd, "checkered even round");
      check(prof[a] == (risk[a] & odd), "checkered one round: odd bits only");
    end
    run(harp_pkg::PAT_CHECKERED, 2, 0, 1000);
    for (int a = 0; a < D; a++) begin
      check(wlog[1][a] == ~odd, "checkered odd round inverted");
      check(prof[a] == risk[a], "checkered two rounds: all");
    end

    run(harp_pkg::PAT_RANDOM, 4, 2, 1000);
    for (int a = 0; a < D; a++) begin
      check(wlog[1][a] == ~wlog[0][a] && wlog[3][a] == ~wlog[2][a], "random inverted in odd rounds");
      check(wlog[2][a] != wlog[0][a], "random pattern changes every two rounds");
      check(prof[a] == risk[a], "random profile");
    end

    run(harp_pkg::PAT_RANDOM, 6, 0, 500);
    extra = 0;
    for (int a = 0; a < D; a++) if ((prof[a] & ~risk[a]) != '0) extra++;
    check(extra == 0, "no false positives at p=0.5");
    check(bad_bypass == 0, "all profiling reads bypass on-die ECC");

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
