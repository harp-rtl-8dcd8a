// tb_harp_system: end-to-end test of the HARP memory system at its default
// size (1024 words of 64 bits, (71,64) on-die code), with 128 profiling rounds.
//
// The storage array is error_prone_store: each word gets 2 to 5 cells at risk
// anywhere in its 71-bit codeword (data or parity), failing from 1 to 0 with
// probability 0.5 on every read. Three runs:
//  1. HARP-U: 128 rounds of random-pattern active profiling, then the CPU
//     writes every word and reads all of them many times. Every profiled mask
//     must cover the word's at-risk data bits (full direct coverage), every
//     read must return the written data and the secondary ECC must never be
//     exceeded; miscorrections by on-die ECC must show up and be caught.
//  2. HARP-A: the same with harp_aware set; the precompute phase must predict
//     some indirect-error bits, and all reads must still be correct.
//  3. Too little profiling (one checkered round): direct bits are missed, so
//     some reads carry more errors than the secondary SEC code can handle -
//     the limitation HARP's full-coverage requirement avoids. Counted, not
//     failed.
// Each mechanism (active marking, bypass reads, on-die correction, on-die
// miscorrection, repair substitution, reactive identification, HARP-A
// prediction and overflow, CPU stall during profiling, mode switches,
// secondary ECC exceeded) is counted; one that never happens is a failure.
module tb_harp_system;
  localparam int AW = 10, K = 64, P = 7, N = 71, D = 1 << AW;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cpu_req = 0, cpu_we = 0, cpu_ready, cpu_rvalid;
  logic [AW-1:0] cpu_addr = '0;
  logic [K-1:0] cpu_wdata = '0, cpu_rdata;
  logic prof_start = 0, harp_aware = 0, prof_done;
  harp_pkg::pattern_e prof_pattern = harp_pkg::PAT_RANDOM;
  logic [15:0] prof_rounds = 128;
  logic [31:0] prof_wait = 8;
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

  // ---------------------------------------------------------------- mechanism counters
  int n_active_marks = 0, n_bypass_reads = 0, n_ondie_corr = 0, n_miscorr = 0, n_repair = 0;
  int n_reactive = 0, n_precomp = 0, n_stall = 0, n_active_mode = 0, n_exceeded = 0, n_wrong = 0;
  logic [N-1:0] cw [D];        // last codeword written to each word
  logic [K-1:0] data [D];      // last CPU data written
  logic [AW-1:0] rd_addr;
  logic          rd_byp;

  always @(posedge clk) begin
    if (st_req && st_we) cw[st_addr] <= st_wdata;
    if (st_req && !st_we) begin rd_addr <= st_addr; rd_byp <= dut.u_mc.mem_bypass; end
    if (dut.u_mc.u_active.mk_en && mode == harp_pkg::MODE_ACTIVE) n_active_marks++;
    if (st_req && !st_we && dut.u_mc.mem_bypass) n_bypass_reads++;
    if (mode == harp_pkg::MODE_ACTIVE) n_active_mode++;
    if (mode == harp_pkg::MODE_PRECOMP) n_precomp++;
    if (cpu_req && !cpu_ready && mode != harp_pkg::MODE_NORMAL) n_stall++;
    if (ev_reactive) n_reactive++;
    if (st_rvalid && !rd_byp && mode == harp_pkg::MODE_NORMAL) begin
      logic [N-1:0] raw;
      logic [K-1:0] post;
      raw  = st_rdata ^ cw[rd_addr];
      post = dut.u_mc.mem_rdata ^ data[rd_addr];
      if (raw != '0 && post == '0) n_ondie_corr++;
      if ((post & ~raw[K-1:0]) != '0) n_miscorr++;
      if ((post & dut.u_mc.rm_lk_mask) != '0) n_repair++;
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cpu_write(int a, logic [K-1:0] x);
    @(negedge clk); cpu_req = 1; cpu_we = 1; cpu_addr = AW'(a); cpu_wdata = x;
    while (!cpu_ready) @(negedge clk);
    data[a] = x;
    @(negedge clk); cpu_req = 0;
    while (!cpu_ready) @(negedge clk);
  endtask

  task automatic cpu_read(int a, output logic [K-1:0] x);
    @(negedge clk); cpu_req = 1; cpu_we = 0; cpu_addr = AW'(a);
    while (!cpu_ready) @(negedge clk);
    @(negedge clk); cpu_req = 0;
    while (!cpu_rvalid) @(negedge clk);
    x = cpu_rdata;
  endtask

  task automatic profile(bit aware, harp_pkg::pattern_e p, int rounds);
    @(negedge clk); prof_start = 1; harp_aware = aware; prof_pattern = p; prof_rounds = 16'(rounds);
    @(negedge clk); prof_start = 0;
    cpu_req = 1; cpu_we = 0; cpu_addr = '0;   // a CPU request that must wait
    while (!prof_done) @(negedge clk);
    cpu_req = 0;
    @(negedge clk);
  endtask

  // write everything, then read everything `passes` times
  task automatic traffic(int passes, bit expect_ok, string tag);
    logic [K-1:0] x;
    int wrong = 0;
    int unloc0 = int'(cnt_unlocated);
    for (int a = 0; a < D; a++) cpu_write(a, {$urandom(), $urandom()});
    for (int p = 0; p < passes; p++)
      for (int a = 0; a < D; a++) begin
        cpu_read(a, x);
        if (x != data[a]) wrong++;
      end
    n_exceeded += wrong + int'(cnt_unlocated) - unloc0;
    if (expect_ok) begin
      check(wrong == 0, $sformatf("%s: %0d wrong reads", tag, wrong));
      check(int'(cnt_unlocated) == unloc0, $sformatf("%s: secondary ECC exceeded", tag));
    end
    $display("%s: wrong reads %0d, reactive ids so far %0d, unlocated %0d", tag, wrong, n_reactive, cnt_unlocated);
  endtask

  task automatic check_direct_coverage(string tag);
    int missed = 0;
    for (int a = 0; a < D; a++) begin
      logic [K-1:0] m;
      m = dut.u_mc.u_repair.valid[a] ? dut.u_mc.u_repair.mask_mem[a] : '0;
      if ((u_st.risk[a][K-1:0] & ~m) != '0) missed++;
    end
    check(missed == 0, $sformatf("%s: %0d words with missed direct bits", tag, missed));
  endtask

  int harpa_bits = 0, harpa_ovf = 0;

  task automatic check_direct_fraction(string tag, int min_pct);
    int found = 0, total = 0;
    for (int a = 0; a < D; a++) begin
      logic [K-1:0] m;
      m = dut.u_mc.u_repair.valid[a] ? dut.u_mc.u_repair.mask_mem[a] : '0;
      total += $countones(u_st.risk[a][K-1:0]);
      found += $countones(u_st.risk[a][K-1:0] & m);
    end
    $display("%s: %0d of %0d at-risk data bits found", tag, found, total);
    check(found * 100 >= total * min_pct, $sformatf("%s: direct coverage below %0d%%", tag, min_pct));
  endtask

  initial begin
    u_st.prob_pm = 500;
    for (int a = 0; a < D; a++) begin
      int n;
      n = 2 + (a % 4);
      while ($countones(u_st.risk[a]) < n) u_st.risk[a][$urandom_range(N-1)] = 1'b1;
      data[a] = '0;
      cw[a] = '0;
    end
    // one word with more direct bits than HARP-A enumerates
    u_st.risk[7] = '0;
    while ($countones(u_st.risk[7][K-1:0]) < 9) u_st.risk[7][$urandom_range(K-1)] = 1'b1;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // a short run: bypass reads make direct bits as easy to find as without
    // on-die ECC, so 8 rounds (each bit holds a 1 in 4 of them) at p=0.5
    // cover about 1 - 0.5^4 = 94% of the at-risk data bits
    profile(0, harp_pkg::PAT_RANDOM, 8);
    check_direct_fraction("HARP-U, 8 rounds", 90);
    profile(0, harp_pkg::PAT_RANDOM, 128);
    check_direct_coverage("HARP-U");
    traffic(8, 1, "HARP-U");
    profile(1, harp_pkg::PAT_RANDOM, 128);
    check_direct_coverage("HARP-A");
    check(cnt_harpa_bits > 0, "HARP-A predicted indirect bits");
    harpa_bits = int'(cnt_harpa_bits);
    harpa_ovf  = int'(cnt_harpa_overflow);
    traffic(8, 1, "HARP-A");
    profile(0, harp_pkg::PAT_CHECKERED, 1);
    traffic(4, 0, "under-profiled");

    $display("mechanisms: active_marks=%0d bypass_reads=%0d ondie_corrections=%0d miscorrections=%0d repairs=%0d reactive=%0d precomp_cycles=%0d harpa_bits=%0d harpa_overflow=%0d stall_cycles=%0d active_cycles=%0d secondary_exceeded=%0d",
             n_active_marks, n_bypass_reads, n_ondie_corr, n_miscorr, n_repair, n_reactive, n_precomp,
             harpa_bits, harpa_ovf, n_stall, n_active_mode, n_exceeded);
    check(n_active_marks > 0, "active profiling marked bits");
    check(n_bypass_reads > 0, "bypass reads");
    check(n_ondie_corr > 0, "on-die ECC corrected errors");
    check(n_miscorr > 0, "on-die ECC miscorrected (indirect errors)");
    check(n_repair > 0, "repair substituted bits");
    check(n_reactive > 0, "reactive profiler identified bits");
    check(n_precomp > 0, "HARP-A precompute phase");
    check(harpa_ovf > 0, "HARP-A overflow");
    check(n_stall > 0, "CPU stalled during profiling");
    check(n_active_mode > 0, "active profiling mode");
    check(n_exceeded > 0, "secondary ECC exceeded when under-profiled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
