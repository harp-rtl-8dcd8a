// error_prone_store: behavioural model of a DRAM storage array for simulation.
//
// Holds 2^ADDR_W codewords of W bits. A write stores the codeword. A read
// returns the stored codeword one cycle later, after applying data-retention
// failures: every cell marked at risk (risk[addr][bit]) that stores a 1 loses
// it with probability prob_pm/1000 (true cells fail only from 1 to 0; errors
// are independent per bit and per read). A failed cell keeps its wrong value
// until it is written again. Testbenches set risk[] and prob_pm directly.
// Not synthesizable; not part of the design.
module error_prone_store #(
  parameter int unsigned ADDR_W = 10,
  parameter int unsigned W      = 71
) (
  input  logic              clk,
  input  logic              st_req,
  input  logic              st_we,
  input  logic [ADDR_W-1:0] st_addr,
  input  logic [W-1:0]      st_wdata,
  output logic              st_rvalid,
  output logic [W-1:0]      st_rdata
);
  localparam int DEPTH = 1 << ADDR_W;
  logic [W-1:0] mem  [DEPTH];
  logic [W-1:0] risk [DEPTH];
  int           prob_pm = 1000;
  int           reads = 0, raw_errors = 0;

  initial begin
    st_rvalid = 1'b0;
    st_rdata  = '0;
    for (int a = 0; a < DEPTH; a++) begin
      mem[a]  = '0;
      risk[a] = '0;
    end
  end

  always @(posedge clk) begin
    st_rvalid <= 1'b0;
    if (st_req) begin
      if (st_we) mem[st_addr] <= st_wdata;
      else begin
        logic [W-1:0] v;
        v = mem[st_addr];
        for (int b = 0; b < W; b++) begin
          if (risk[st_addr][b] && v[b] && ($urandom_range(999) < prob_pm)) begin
            v[b] = 1'b0;
            raw_errors++;
          end
        end
        mem[st_addr] <= v;
        st_rdata     <= v;
        st_rvalid    <= 1'b1;
        reads++;
      end
    end
  end
endmodule
