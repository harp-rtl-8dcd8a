// active_profiler: round-based active error profiling over the ECC bypass path.
//
// One round: (1) write a data pattern to every word of memory; (2) wait
// wait_cycles, the interval over which cells may lose their data (e.g. a
// retention test with refresh paused); (3) read every word back with on-die
// ECC bypassed and compare the raw data bits with what was written. Every
// mismatching bit is at risk of direct error and is added to the error profile
// (mk_*). The profile after n_rounds rounds is the union over all rounds.
// Because the bypass read shows raw data bits, this is profiling as if the
// chip had no on-die ECC.
//
// Patterns (harp_pkg::pattern_e):
//  - PAT_CHARGED: all ones in every round.
//  - PAT_CHECKERED: bit i = i mod 2 in even rounds, inverted in odd rounds.
//  - PAT_RANDOM: pseudo-random words from a 64-bit xorshift generator; odd
//    rounds use the inverse of the previous round's data, and a fresh random
//    pattern starts every two rounds. The generator is re-seeded at the start
//    of each pass, so the read pass regenerates the written data instead of
//    storing it.
// Generator, checkered phase and the retention-wait counter are this design's
// choices; the three patterns and their inversion schedule follow the paper's
// evaluation methodology.
//
// Timing: start is accepted when busy is low. Writes go out one per cycle;
// each read waits for mem_rvalid before the next is issued. A round takes
// 2^ADDR_W write cycles, wait_cycles, then 2^ADDR_W reads (each issue cycle
// plus the memory's latency). done pulses for one cycle at the end.
module active_profiler #(
  parameter int unsigned  ADDR_W = 10,
  parameter int unsigned  K      = harp_pkg::K,
  parameter logic [63:0]  SEED   = 64'h9E37_79B9_7F4A_7C15
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  harp_pkg::pattern_e   pattern,
  input  logic [15:0]          n_rounds,
  input  logic [31:0]          wait_cycles,
  output logic                 busy,
  output logic                 done,
  output logic [15:0]          round,
  // memory command
  output logic                 mem_req,
  output logic                 mem_we,
  output logic                 mem_bypass,
  output logic [ADDR_W-1:0]    mem_addr,
  output logic [K-1:0]         mem_wdata,
  input  logic                 mem_rvalid,
  input  logic [K-1:0]         mem_rdata,
  // error-profile update
  output logic                 mk_en,
  output logic [ADDR_W-1:0]    mk_addr,
  output logic [K-1:0]         mk_bits,
  output logic [K-1:0]         mk_vals,
  output logic [31:0]          bits_found
);

  typedef enum logic [2:0] {S_IDLE, S_WRITE, S_WAIT, S_READ, S_RWAIT} state_e;

  state_e              state;
  harp_pkg::pattern_e  pat_q;
  logic [15:0]         nr_q;
  logic [31:0]         wait_q, wcnt;
  logic [ADDR_W-1:0]   addr;
  logic [63:0]         seed, gen;
  logic [K-1:0]        expect_w;

  function automatic logic [63:0] xorshift(input logic [63:0] x);
    logic [63:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 7);
    y = y ^ (y << 17);
    return y;
  endfunction

  // pattern word for the current address and round
  always_comb begin
    unique case (pat_q)
      harp_pkg::PAT_CHARGED: expect_w = '1;
      harp_pkg::PAT_CHECKERED: begin
        for (int i = 0; i < K; i++) expect_w[i] = (i % 2 == 1) ^ round[0];
      end
      default: expect_w = K'(gen) ^ {K{round[0]}};
    endcase
  end

  logic [K-1:0] mism;
  assign mism = mem_rdata ^ expect_w;

  always_comb begin
    mem_req    = (state == S_WRITE) || (state == S_READ);
    mem_we     = (state == S_WRITE);
    mem_bypass = (state == S_READ);
    mem_addr   = addr;
    mem_wdata  = expect_w;
    mk_en      = (state == S_RWAIT) && mem_rvalid && (mism != '0);
    mk_addr    = addr;
    mk_bits    = mism;
    mk_vals    = expect_w;
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      pat_q      <= harp_pkg::PAT_RANDOM;
      nr_q       <= '0;
      wait_q     <= '0;
      wcnt       <= '0;
      addr       <= '0;
      seed       <= SEED;
      gen        <= SEED;
      round      <= '0;
      done       <= 1'b0;
      bits_found <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            pat_q      <= pattern;
            nr_q       <= n_rounds;
            wait_q     <= wait_cycles;
            round      <= '0;
            addr       <= '0;
            seed       <= SEED;
            gen        <= SEED;
            bits_found <= '0;
            if (n_rounds == '0) done <= 1'b1;
            else                state <= S_WRITE;
          end
        end
        S_WRITE: begin
          gen  <= xorshift(gen);
          addr <= addr + 1'b1;
          if (addr == '1) begin
            gen   <= seed;
            wcnt  <= wait_q;
            state <= S_WAIT;
          end
        end
        S_WAIT: begin
          if (wcnt == '0) state <= S_READ;
          else            wcnt  <= wcnt - 1'b1;
        end
        S_READ: state <= S_RWAIT;
        S_RWAIT: begin
          if (mem_rvalid) begin
            bits_found <= bits_found + 32'($countones(mism));
            gen        <= xorshift(gen);
            addr       <= addr + 1'b1;
            if (addr == '1) begin
              // end of round: a new random pattern after every odd round
              if (round[0]) begin
                seed <= xorshift(gen);
                gen  <= xorshift(gen);
              end else begin
                gen  <= seed;
              end
              round <= round + 1'b1;
              if (round + 16'd1 == nr_q) begin
                state <= S_IDLE;
                done  <= 1'b1;
              end else begin
                state <= S_WRITE;
              end
            end else begin
              state <= S_READ;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
