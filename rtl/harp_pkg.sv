// harp_pkg: constants and helpers shared by the HARP memory system.
//
// The memory chip protects each 64-bit dataword with a systematic single-error
// correcting (SEC) Hamming code, (71,64), as in current DRAM on-die ECC. The
// parity-check matrix H = [A | I] is systematic: data bit i has column A[i] and
// parity bit r has the unit column of row r. A column is held as a P-bit value
// whose most significant bit is row 0.
//
// hamming_col() defines A: data column i is the i-th value with at least two
// ones, counting down from 2^P-1 (DESC=1) or up from 3 (DESC=0). Counting down
// with P=3, K=4 reproduces the textbook (7,4) example H with data columns
// 111, 110, 101, 011. Real on-die ECC uses a vendor-chosen column arrangement;
// this fixed one is this design's choice. The secondary ECC in the controller
// uses the counting-up order so that the two codes differ.
package harp_pkg;

  // (71,64) on-die code: K data bits, P parity-check bits.
  parameter int unsigned K = 64;
  parameter int unsigned P = 7;

  // Data patterns of the active profiler.
  typedef enum logic [1:0] {
    PAT_RANDOM    = 2'd0,  // pseudo-random, inverted every other round, new every two rounds
    PAT_CHARGED   = 2'd1,  // all ones (true cells fail only when storing 1)
    PAT_CHECKERED = 2'd2   // consecutive bits alternate, inverted every round
  } pattern_e;

  // Phase of the HARP memory controller.
  typedef enum logic [1:0] {
    MODE_NORMAL  = 2'd0,   // CPU traffic, reactive profiling by the secondary ECC
    MODE_ACTIVE  = 2'd1,   // active profiling over the ECC bypass path
    MODE_PRECOMP = 2'd2    // HARP-A: precomputing bits at risk of indirect error
  } mode_e;

  // i-th data column of a systematic SEC Hamming parity-check matrix with p
  // rows (see the header). Returns 0 if i is out of range.
  function automatic logic [15:0] hamming_col(input int unsigned i, input int unsigned p,
                                              input bit desc);
    int unsigned n;
    logic [15:0] v;
    n = 0;
    for (int unsigned j = 1; j < (1 << p); j++) begin
      v = desc ? 16'((1 << p) - j) : 16'(j);
      if ((v & (v - 16'd1)) != 16'd0) begin  // at least two ones
        if (n == i) return v;
        n++;
      end
    end
    return 16'd0;
  endfunction

endpackage
