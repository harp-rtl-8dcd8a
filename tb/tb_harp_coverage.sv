// tb_harp_coverage: the coverage experiment of the HARP evaluation, run on the
// RTL at its default size (1024 words, (71,64) on-die code).
//
// For every combination of n = 2, 3, 4, 5 cells at risk per 71-bit codeword
// (placed uniformly over data and parity bits) and a per-read failure
// probability of 0.25, 0.5, 0.75 and 1.0 (true cells, 1 -> 0), the system runs
// 128 rounds of HARP-U active profiling with the random pattern. After every
// round the fraction of at-risk data bits in the error profile (direct-error
// coverage) is sampled. Checked per configuration:
//  - full direct coverage is reached within the 128 rounds;
//  - afterwards the CPU writes every word and reads it 4 times: no read may
//    need more than one correction from the secondary ECC (at most one
//    post-correction error remains per word once all direct bits are known),
//    and every read returns the written data.
// Printed: the round at which each configuration reached full coverage and
// the coverage after 1, 2, 4 and 8 rounds.
module tb_harp_coverage;
  localparam int AW = 10, K = 64, N = 71, D = 1 << AW;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cpu_req = 0, cpu_we = 0, cpu_ready, cpu_rvalid;
  logic [AW-1:0] cpu_addr = '0;
  logic [K-1:0] cpu_wdata = '0, cpu_rdata;
  logic prof_start = 0, harp_aware = 0, prof_done;
  harp_pkg::pattern_e prof_pattern = harp_pkg::PAT_RANDOM;
  logic [15:0] prof_rounds = 128;
  logic [31:0] prof_wait = 0;
  harp_pkg::mode_e mode;
  logic st_req, st_we, st_rvalid;
  logic [AW-1:0] st_addr;
  logic [N-1:0] st_wdata, st_rdata;
  logic ev_reactive;
  logic [AW-1:0] ev_reactive_addr;
  logic [5:0] ev_reactive_pos;
  logic [31:0] cnt_active_obs, cnt_harpa_bits, cnt_harpa_overflow, cnt_reactive, cnt_unlocated;

  harp_system dut (.*);
  error_prone_store #(.ADDR_W(AW), .W(N)) u_st (.*);

  logic [K-1:0] data [D];
  int multi_post = 0;   // reads whose repaired data held more than one error

  // post-repair errors seen by the secondary ECC on each CPU read
  always @(posedge clk) begin
    if (dut.u_mc.rd_hit && $countones(dut.u_mc.repaired ^ data[dut.u_mc.addr_q]) > 1) multi_post++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int coverage_pm();
    int found = 0, total = 0;
    for (int a = 0; a < D; a++) begin
      logic [K-1:0] m;
      m = dut.u_mc.u_repair.valid[a] ? dut.u_mc.u_repair.mask_mem[a] : '0;
      total += $countones(u_st.risk[a][K-1:0]);
      found += $countones(u_st.risk[a][K-1:0] & m);
    end
    return (total == 0) ? 1000 : (found * 1000) / total;
  endfunction

  task automatic run(int n, int pm);
    int full_at = -1;
    int cov [4];
    int last_round = 0;
    int wrong = 0;
    logic [K-1:0] x;
    u_st.prob_pm = pm;
    for (int a = 0; a < D; a++) begin
      u_st.risk[a] = '0;
      while ($countones(u_st.risk[a]) < n) u_st.risk[a][$urandom_range(N-1)] = 1'b1;
    end
    @(negedge clk); prof_start = 1;
    @(negedge clk); prof_start = 0;
    while (!prof_done) begin
      @(negedge clk);
      if (int'(dut.u_mc.u_active.round) != last_round || prof_done) begin
        int c;
        last_round = int'(dut.u_mc.u_active.round);
        if (prof_done) last_round = 128;
        c = coverage_pm();
        if (last_round == 1) cov[0] = c;
        if (last_round == 2) cov[1] = c;
        if (last_round == 4) cov[2] = c;
        if (last_round == 8) cov[3] = c;
        if (c == 1000 && full_at < 0) full_at = last_round;
      end
    end
    check(full_at > 0 && full_at <= 128, $sformatf("n=%0d p=%0d/1000: full direct coverage", n, pm));
    // reactive phase
    multi_post = 0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); cpu_req = 1; cpu_we = 1; cpu_addr = AW'(a); cpu_wdata = {$urandom(), $urandom()};
      data[a] = cpu_wdata;
      @(negedge clk); cpu_req = 0;
      while (!cpu_ready) @(negedge clk);
    end
    for (int r = 0; r < 4; r++)
      for (int a = 0; a < D; a++) begin
        @(negedge clk); cpu_req = 1; cpu_we = 0; cpu_addr = AW'(a);
        @(negedge clk); cpu_req = 0;
        while (!cpu_rvalid) @(negedge clk);
        if (cpu_rdata != data[a]) wrong++;
      end
    check(multi_post == 0, $sformatf("n=%0d p=%0d/1000: at most one post-correction error per read (%0d reads had more)", n, pm, multi_post));
    check(wrong == 0, $sformatf("n=%0d p=%0d/1000: %0d wrong reads", n, pm, wrong));
    $display("n=%0d p=%0.2f: full direct coverage after %0d rounds; coverage after 1/2/4/8 rounds = %0d/%0d/%0d/%0d per mille; reactive ids so far %0d",
             n, pm / 1000.0, full_at, cov[0], cov[1], cov[2], cov[3], cnt_reactive);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 2; n <= 5; n++)
      for (int p = 1; p <= 4; p++) run(n, 250 * p);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
