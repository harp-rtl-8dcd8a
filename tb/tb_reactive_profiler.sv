// tb_reactive_profiler: checks the secondary ECC. Words are written (parity
// stored), looked up and checked with 0, 1 or 2 flipped data bits: no error
// must pass clean; one error must be corrected and its position reported;
// two errors must never be reported as clean (with a SEC code they are either
// miscorrected or unlocated - the case active profiling must rule out). Words
// not written since the last clear must not be checked.
module tb_reactive_profiler;
  localparam int AW = 4, K = 64, D = 1 << AW;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear = 0, wr_en = 0, lk_en = 0;
  logic [AW-1:0] wr_addr = '0, lk_addr = '0;
  logic [K-1:0] wr_data = '0, chk_data = '0, corrected;
  logic chk_valid_word, detect, corr_data, unlocated;
  logic [5:0] corr_pos;

  reactive_profiler #(.ADDR_W(AW), .K(K), .P2(7)) dut (.*);

  logic [K-1:0] model [D];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int a, b, c;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < D; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = AW'(i); wr_data = {$urandom(), $urandom()}; model[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 400; t++) begin
      a = $urandom_range(D-1);
      @(negedge clk); lk_en = 1; lk_addr = AW'(a);
      @(negedge clk); lk_en = 0;
      chk_data = model[a]; #1;
      check(chk_valid_word && !detect && corrected == model[a], "clean word");
      b = $urandom_range(K-1);
      chk_data = model[a] ^ (64'(1) << b); #1;
      check(detect && corr_data && corr_pos == 6'(b) && corrected == model[a], $sformatf("single error %0d", b));
      do c = $urandom_range(K-1); while (c == b);
      chk_data = model[a] ^ (64'(1) << b) ^ (64'(1) << c); #1;
      check(detect && (corr_data ? corrected != model[a] : unlocated), "double error not silently passed");
    end
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    @(negedge clk); lk_en = 1; lk_addr = '0;
    @(negedge clk); lk_en = 0;
    chk_data = ~model[0]; #1;
    check(!chk_valid_word && !detect && corrected == chk_data, "unwritten word not checked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
