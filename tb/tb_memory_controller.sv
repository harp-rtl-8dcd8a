// tb_memory_controller: checks the HARP controller's sequencing and datapaths
// with a simple chip model written here. The model stores 64-bit words; a
// bypass read returns the stored word with every at-risk bit that holds a 1
// cleared (direct errors, failure probability 1); a normal read returns the
// stored word XOR a per-word "post-correction" error mask that the test sets
// (standing in for what on-die ECC would hand out). Checked:
//  - CPU writes/reads round-trip; write takes 3 cycles, read 3 cycles.
//  - prof_start: mode goes ACTIVE, cpu_ready stays low, reads use bypass.
//  - after profiling, direct errors on profiled bits are repaired silently.
//  - one unprofiled post-correction error is corrected, reported once on
//    ev_reactive with the right position, and repaired on later reads.
//  - two unprofiled errors are counted as unlocated or miscorrected.
//  - with harp_aware, the PRECOMP phase runs and predicts exactly the bits
//    that the reference enumeration predicts; a later error on such a bit is
//    repaired without a reactive report.
module tb_memory_controller;
  localparam int AW = 3, K = 64, D = 1 << AW;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cpu_req = 0, cpu_we = 0, cpu_ready, cpu_rvalid;
  logic [AW-1:0] cpu_addr = '0;
  logic [K-1:0] cpu_wdata = '0, cpu_rdata;
  logic prof_start = 0, harp_aware = 0, prof_done;
  harp_pkg::pattern_e prof_pattern = harp_pkg::PAT_RANDOM;
  logic [15:0] prof_rounds = 4;
  logic [31:0] prof_wait = 2;
  harp_pkg::mode_e mode;
  logic mem_req, mem_we, mem_bypass, mem_rvalid = 0;
  logic [AW-1:0] mem_addr;
  logic [K-1:0] mem_wdata, mem_rdata = '0;
  logic ev_reactive;
  logic [AW-1:0] ev_reactive_addr;
  logic [5:0] ev_reactive_pos;
  logic [31:0] cnt_active_obs, cnt_harpa_bits, cnt_harpa_overflow, cnt_reactive, cnt_unlocated;

  memory_controller #(.ADDR_W(AW), .K(K), .P(7), .MAXB(8)) dut (.*);

  // chip model
  logic [K-1:0] store [D];
  logic [K-1:0] risk  [D];
  logic [K-1:0] post  [D];
  int nonbypass_in_active = 0, cpu_accept_in_active = 0, ev_count = 0;
  logic [5:0] last_pos;
  always @(posedge clk) begin
    mem_rvalid <= 1'b0;
    if (mem_req && mem_we) store[mem_addr] <= mem_wdata;
    if (mem_req && !mem_we) begin
      mem_rvalid <= 1'b1;
      mem_rdata  <= mem_bypass ? (store[mem_addr] & ~risk[mem_addr]) : (store[mem_addr] ^ post[mem_addr]);
      if (mode == harp_pkg::MODE_ACTIVE && !mem_bypass) nonbypass_in_active++;
    end
    if (mode != harp_pkg::MODE_NORMAL && cpu_req && cpu_ready) cpu_accept_in_active++;
    if (ev_reactive) begin ev_count++; last_pos <= ev_reactive_pos; end
  end

  function automatic logic [6:0] ref_col(int i);
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

  task automatic cpu_write(int a, logic [K-1:0] x, output int cyc);
    @(negedge clk); cpu_req = 1; cpu_we = 1; cpu_addr = AW'(a); cpu_wdata = x;
    cyc = 0;
    while (!cpu_ready) begin @(negedge clk); end
    @(negedge clk); cpu_req = 0; cyc = 1;
    while (!cpu_ready) begin @(negedge clk); cyc++; end
  endtask

  task automatic cpu_read(int a, output logic [K-1:0] x, output int cyc);
    @(negedge clk); cpu_req = 1; cpu_we = 0; cpu_addr = AW'(a);
    while (!cpu_ready) @(negedge clk);
    @(negedge clk); cpu_req = 0; cyc = 1;
    while (!cpu_rvalid) begin @(negedge clk); cyc++; end
    x = cpu_rdata;
    @(negedge clk);
  endtask

  task automatic profile(bit aware, output bit saw_precomp);
    saw_precomp = 0;
    @(negedge clk); prof_start = 1; harp_aware = aware;
    @(negedge clk); prof_start = 0;
    check(mode == harp_pkg::MODE_ACTIVE, "mode ACTIVE after prof_start");
    // try to issue a CPU request while profiling: must not be accepted
    cpu_req = 1; cpu_we = 0; cpu_addr = '0;
    while (!prof_done) begin
      @(negedge clk);
      if (mode == harp_pkg::MODE_PRECOMP) saw_precomp = 1;
      if (!prof_done) check(!cpu_ready, "CPU held off while profiling");
    end
    cpu_req = 0;
    @(negedge clk);
    check(mode == harp_pkg::MODE_NORMAL, "back to normal mode");
  endtask

  initial begin
    logic [K-1:0] data [D];
    logic [K-1:0] x, expv;
    int cyc, e0, a, b, m;
    bit pc;
    logic [6:0] s;
    int pos [$];
    for (int i = 0; i < D; i++) begin store[i] = '0; post[i] = '0; risk[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;

    // 1. plain traffic with an empty profile
    for (int i = 0; i < D; i++) begin
      data[i] = {$urandom(), $urandom()};
      cpu_write(i, data[i], cyc);
      check(cyc == 3, $sformatf("write occupancy %0d word %0d", cyc, i));
    end
    for (int i = 0; i < D; i++) begin
      cpu_read(i, x, cyc);
      check(x == data[i] && cyc == 2, $sformatf("read back word %0d (cyc %0d)", i, cyc));
    end

    // 2. HARP-U active profiling with direct-error bits
    for (int i = 0; i < D; i++) repeat (3) risk[i][$urandom_range(K-1)] = 1'b1;
    profile(0, pc);
    check(!pc, "no PRECOMP for HARP-U");
    check(cnt_active_obs > 0, "active profiler observed errors");
    check(nonbypass_in_active == 0, "profiling reads bypass on-die ECC");
    check(cpu_accept_in_active == 0, "no CPU access during profiling");

    for (int i = 0; i < D; i++) begin
      data[i] = {$urandom(), $urandom()};
      cpu_write(i, data[i], cyc);
    end
    // 3. direct errors on profiled bits (post-correction data shows them)
    e0 = ev_count;
    for (int i = 0; i < D; i++) begin
      post[i] = risk[i];
      cpu_read(i, x, cyc);
      check(x == data[i], "profiled direct errors repaired");
    end
    check(ev_count == e0, "no reactive reports for profiled bits");
    // 4. one extra (indirect) error per word
    for (int i = 0; i < D; i++) begin
      do a = $urandom_range(K-1); while (risk[i][a]);
      post[i] = risk[i] | (64'(1) << a);
      e0 = ev_count;
      cpu_read(i, x, cyc);
      check(x == data[i] && ev_count == e0 + 1 && last_pos == 6'(a), $sformatf("reactive correction word %0d bit %0d", i, a));
      cpu_read(i, x, cyc);
      check(x == data[i] && ev_count == e0 + 1, "bit repaired after reactive identification");
      // a write after identification keeps the repair working
      data[i] = {$urandom(), $urandom()};
      cpu_write(i, data[i], cyc);
      cpu_read(i, x, cyc);
      check(x == data[i] && ev_count == e0 + 1, "repair after rewrite");
      risk[i][a] = 1'b1;  // now part of the profile
    end
    check(cnt_reactive == 32'(D), "reactive counter");
    // 5. two unprofiled errors: beyond the secondary SEC code
    e0 = int'(cnt_unlocated) + ev_count;
    do a = $urandom_range(K-1); while (risk[0][a]);
    do b = $urandom_range(K-1); while (risk[0][b] || b == a);
    post[0] = risk[0] | (64'(1) << a) | (64'(1) << b);
    cpu_read(0, x, cyc);
    check(x != data[0] && (int'(cnt_unlocated) + ev_count == e0 + 1), "double error unlocated or miscorrected");
    post[0] = risk[0];

    // 6. HARP-A
    for (int i = 0; i < D; i++) begin risk[i] = '0; post[i] = '0; end
    for (int i = 0; i < D; i++) while ($countones(risk[i]) < 4) risk[i][$urandom_range(K-1)] = 1'b1;
    risk[1] = '0;
    while ($countones(risk[1]) < 9) risk[1][$urandom_range(K-1)] = 1'b1;  // more than MAXB
    prof_rounds = 2;
    profile(1, pc);
    check(pc, "PRECOMP phase ran");
    check(cnt_harpa_overflow == 1, "HARP-A overflow counted");
    expv = '0;
    m = 0;
    for (int i = 0; i < D; i++) begin
      logic [K-1:0] pred;
      pos.delete();
      for (int j = 0; j < K; j++) if (risk[i][j] && pos.size() < 8) pos.push_back(j);
      pred = '0;
      for (int sub = 1; sub < (1 << pos.size()); sub++) begin
        if ($countones(sub) < 2) continue;
        s = '0;
        for (int j = 0; j < pos.size(); j++) if (sub[j]) s ^= ref_col(pos[j]);
        for (int j = 0; j < K; j++) if (ref_col(j) == s && !risk[i][j]) pred[j] = 1'b1;
      end
      m += $countones(pred);
      data[i] = {$urandom(), $urandom()};
      cpu_write(i, data[i], cyc);
      if (pred != '0) begin
        e0 = ev_count;
        post[i] = pred;
        cpu_read(i, x, cyc);
        check(x == data[i] && ev_count == e0, "HARP-A predicted bits repaired without reactive report");
        post[i] = '0;
      end
    end
    check(cnt_harpa_bits == 32'(m) && m > 0, $sformatf("HARP-A predicted %0d bits, expected %0d", cnt_harpa_bits, m));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
