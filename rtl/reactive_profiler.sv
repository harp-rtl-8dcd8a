// reactive_profiler: the secondary ECC in the memory controller.
//
// Every CPU write is encoded with a (K+P2, K) SEC Hamming code and the P2
// parity bits are kept in a controller-side array, one entry per memory word,
// so each on-die ECC word is covered by one secondary SEC word. Every read,
// after the repair mechanism has patched the bits already in the error
// profile, is checked against the stored parity. Once active profiling has
// found every bit at risk of direct error, at most one error (an on-die
// miscorrection) can remain in a word, which this code corrects. The position
// it corrects (corr_pos with corr_data) is reported so the controller can add
// it to the error profile; the corrected word goes to the CPU.
//
// unlocated flags a non-zero syndrome that does not point at a data bit: more
// errors than the code can handle (or a parity-only syndrome, which cannot
// happen with an error-free parity array). Nothing is recorded then.
//
// Ports and timing:
//  - wr_en: encode wr_data and store its parity at wr_addr; mark the word
//    as holding parity.
//  - lk_en/lk_addr: look up the stored parity; used the next cycle.
//  - chk_data -> corrected/detect/corr_data/corr_pos/unlocated: combinational,
//    on the held lookup. chk_valid_word is low for a word written before the
//    last clear (it holds no parity); the flags are then forced low.
//  - clear: forget all parity (start of an active profiling run, which
//    overwrites memory with test patterns).
// The secondary H uses the counting-up column order (DESC=0), unlike the
// on-die code; the paper leaves the secondary code's H open.
module reactive_profiler #(
  parameter int unsigned ADDR_W = 10,
  parameter int unsigned K      = harp_pkg::K,
  parameter int unsigned P2     = harp_pkg::P
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 wr_en,
  input  logic [ADDR_W-1:0]    wr_addr,
  input  logic [K-1:0]         wr_data,
  input  logic                 lk_en,
  input  logic [ADDR_W-1:0]    lk_addr,
  input  logic [K-1:0]         chk_data,
  output logic                 chk_valid_word,
  output logic [K-1:0]         corrected,
  output logic                 detect,
  output logic                 corr_data,
  output logic [$clog2(K)-1:0] corr_pos,
  output logic                 unlocated
);

  localparam int unsigned DEPTH = 1 << ADDR_W;

  logic [P2-1:0]    par_mem [DEPTH];
  logic [DEPTH-1:0] written;
  logic [K+P2-1:0]  wr_cw;
  logic [P2-1:0]    lk_par;
  logic             lk_written;

  sec_encoder #(.K(K), .P(P2), .DESC(1'b0)) u_enc (
    .d (wr_data),
    .c (wr_cw)
  );

  always_ff @(posedge clk) begin
    if (wr_en) par_mem[wr_addr] <= wr_cw[K+P2-1:K];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      written <= '0;
    else if (clear)  written <= '0;
    else if (wr_en)  written[wr_addr] <= 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lk_par     <= '0;
      lk_written <= 1'b0;
    end else if (lk_en) begin
      lk_par     <= par_mem[lk_addr];
      lk_written <= written[lk_addr] && !clear;
    end
  end

  logic [P2-1:0] syn;
  logic          err, cd, cp, nm;
  logic [K-1:0]  dec_d;

  sec_decoder #(.K(K), .P(P2), .DESC(1'b0)) u_dec (
    .c           ({lk_par, chk_data}),
    .bypass      (1'b0),
    .d           (dec_d),
    .syndrome    (syn),
    .err         (err),
    .corr_data   (cd),
    .corr_pos    (corr_pos),
    .corr_parity (cp),
    .no_match    (nm)
  );

  assign chk_valid_word = lk_written;
  assign corrected      = lk_written ? dec_d : chk_data;
  assign detect         = lk_written && err;
  assign corr_data      = lk_written && cd;
  assign unlocated      = lk_written && (cp || nm);

endmodule
