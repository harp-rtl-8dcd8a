// tb_repair_mechanism: checks the error profile and bit repair against a
// reference model kept here (mask and replacement value per word). Random
// sequences of mark, write and lookup operations are applied; after every
// lookup the mask, and the repair of random raw data, are compared with the
// model. clear must empty the profile. Lookup latency is one cycle.
module tb_repair_mechanism;
  localparam int AW = 4, K = 64, D = 1 << AW;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear = 0, lk_en = 0, wr_en = 0, mk_en = 0;
  logic [AW-1:0] lk_addr = '0, wr_addr = '0, mk_addr = '0;
  logic [K-1:0] lk_mask, lk_repl, raw_data = '0, repaired_data, wr_data = '0, wr_bits = '0, mk_bits = '0, mk_vals = '0;

  repair_mechanism #(.ADDR_W(AW), .K(K)) dut (.*);

  logic [K-1:0] m_mask [D];
  logic [K-1:0] m_val  [D];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic lookup(int a, output logic [K-1:0] msk);
    @(negedge clk); lk_en = 1; lk_addr = AW'(a);
    @(negedge clk); lk_en = 0;
    msk = lk_mask;
  endtask

  initial begin
    logic [K-1:0] msk, r;
    int a;
    for (int i = 0; i < D; i++) begin m_mask[i] = '0; m_val[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      a = $urandom_range(D-1);
      case ($urandom_range(3))
        0: begin  // mark a few bits
          r = {$urandom(), $urandom()} & {$urandom(), $urandom()} & {$urandom(), $urandom()};
          @(negedge clk); mk_en = 1; mk_addr = AW'(a); mk_bits = r; mk_vals = {$urandom(), $urandom()};
          m_mask[a] |= r;
          m_val[a]  = (m_val[a] & ~r) | (mk_vals & r);
          @(negedge clk); mk_en = 0;
        end
        1: begin  // CPU write: look up the mask, then store replacement bits
          lookup(a, msk);
          @(negedge clk); wr_en = 1; wr_addr = AW'(a); wr_data = {$urandom(), $urandom()}; wr_bits = msk;
          m_val[a] = (m_val[a] & ~msk) | (wr_data & msk);
          @(negedge clk); wr_en = 0;
        end
        default: begin  // read: look up and repair
          lookup(a, msk);
          check(msk == m_mask[a], $sformatf("mask of word %0d", a));
          raw_data = {$urandom(), $urandom()};
          #1;
          check(repaired_data == ((raw_data & ~m_mask[a]) | (m_val[a] & m_mask[a])), "repaired data");
        end
      endcase
      if (t == 400) begin
        @(negedge clk); clear = 1;
        @(negedge clk); clear = 0;
        for (int i = 0; i < D; i++) m_mask[i] = '0;
        for (int i = 0; i < D; i++) begin
          lookup(i, msk);
          check(msk == '0, "cleared");
        end
      end
    end
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
