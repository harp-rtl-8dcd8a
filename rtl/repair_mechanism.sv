// repair_mechanism: bit-granularity repair with its error profile.
//
// The error profile holds, for every memory word, a K-bit mask of the bits
// known to be at risk of error. For every at-risk bit the mechanism keeps a
// replacement bit holding the value the CPU last wrote there. On a read, the
// data coming from the memory chip is repaired by taking the replacement bit
// in every masked position: repaired = (raw & ~mask) | (repl & mask).
// This models the "ideal" repair the system relies on: any number of at-risk
// bits per word can be repaired (a practical scheme such as ECP bounds that).
//
// Ports and timing:
//  - lk_en/lk_addr: look up a word; lk_mask and lk_repl are valid the next
//    cycle and hold until the next lookup. raw_data -> repaired_data is
//    combinational on the held lookup.
//  - wr_en: store wr_data into the replacement bits selected by wr_bits
//    (the controller passes the word's looked-up mask).
//  - mk_en: add mk_bits to a word's mask and set their replacement bits to
//    mk_vals in the same cycle (profile update from a profiler).
//  - clear: empty the whole profile in one cycle (per-word valid flags).
// Only one of wr_en / mk_en may be high in a cycle (asserted).
module repair_mechanism #(
  parameter int unsigned ADDR_W = 10,
  parameter int unsigned K      = harp_pkg::K
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              lk_en,
  input  logic [ADDR_W-1:0] lk_addr,
  output logic [K-1:0]      lk_mask,
  output logic [K-1:0]      lk_repl,
  input  logic [K-1:0]      raw_data,
  output logic [K-1:0]      repaired_data,
  input  logic              wr_en,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [K-1:0]      wr_data,
  input  logic [K-1:0]      wr_bits,
  input  logic              mk_en,
  input  logic [ADDR_W-1:0] mk_addr,
  input  logic [K-1:0]      mk_bits,
  input  logic [K-1:0]      mk_vals
);

  localparam int unsigned DEPTH = 1 << ADDR_W;

  logic [K-1:0]     mask_mem [DEPTH];
  logic [K-1:0]     repl_mem [DEPTH];
  logic [DEPTH-1:0] valid;
  logic             lk_valid;
  logic [K-1:0]     lk_mask_raw;

  // per-word valid flags: a cleared word reads as "no bits at risk"
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     valid <= '0;
    else if (clear) valid <= '0;
    else if (mk_en) valid[mk_addr] <= 1'b1;
  end

  // mask memory with per-bit write enables (set-only, so no read-modify-write)
  always_ff @(posedge clk) begin
    if (mk_en) begin
      for (int i = 0; i < K; i++) begin
        if (mk_bits[i] || !valid[mk_addr]) mask_mem[mk_addr][i] <= mk_bits[i];
      end
    end
  end

  // replacement bits with per-bit write enables
  always_ff @(posedge clk) begin
    if (mk_en) begin
      for (int i = 0; i < K; i++) begin
        if (mk_bits[i]) repl_mem[mk_addr][i] <= mk_vals[i];
      end
    end else if (wr_en) begin
      for (int i = 0; i < K; i++) begin
        if (wr_bits[i]) repl_mem[wr_addr][i] <= wr_data[i];
      end
    end
  end

  // registered lookup
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lk_valid    <= 1'b0;
      lk_mask_raw <= '0;
      lk_repl     <= '0;
    end else if (lk_en) begin
      lk_valid    <= valid[lk_addr] && !clear;
      lk_mask_raw <= mask_mem[lk_addr];
      lk_repl     <= repl_mem[lk_addr];
    end
  end

  assign lk_mask       = lk_valid ? lk_mask_raw : '0;
  assign repaired_data = (raw_data & ~lk_mask) | (lk_repl & lk_mask);

  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && mk_en));

endmodule
