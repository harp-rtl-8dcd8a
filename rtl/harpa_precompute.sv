// harpa_precompute: HARP-A prediction of bits at risk of indirect error.
//
// Given the bits of one word found at risk of direct error (direct) and the
// on-die code's parity-check matrix, every combination of two or more of those
// bits failing together is an uncorrectable pattern. Its syndrome is the XOR
// of the failing bits' H columns; if that equals the column of a data bit m,
// the on-die decoder would flip m, so m is at risk of indirect error. The
// module enumerates the combinations and returns the union of such m.
//
// How it works: on start, the positions of the lowest MAXB set bits of direct
// are captured (overflow is raised if there are more; the rest are ignored).
// A subset counter then steps through all 2^n - 1 non-empty subsets of the n
// captured bits, one per cycle, skipping single-bit subsets (correctable).
// Only data-bit combinations are explored: which parity bits are at risk is
// not visible through the bypass path.
//
// Timing: start is accepted when busy is low. Counting the cycle that accepts
// start as cycle 0, with n captured bits done is high for one cycle in cycle
// 2^n (cycles 1 .. 2^n-1 each test one subset) for n >= 2, and in cycle 1 for
// n < 2. indirect holds its value
// until the next start and never contains a bit of direct.
// The exhaustive enumeration is this design's choice; the paper only says the
// bits are precomputed from H using a method of prior work.
module harpa_precompute #(
  parameter int unsigned K    = harp_pkg::K,
  parameter int unsigned P    = harp_pkg::P,
  parameter int unsigned MAXB = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [K-1:0] direct,
  output logic         busy,
  output logic         done,
  output logic         overflow,
  output logic [K-1:0] indirect
);

  localparam int unsigned PW = $clog2(K);
  localparam int unsigned CW = $clog2(MAXB + 1);

  logic [P-1:0] col [K];
  for (genvar i = 0; i < K; i++) begin : g_col
    assign col[i] = P'(harp_pkg::hamming_col(i, P, 1'b1));
  end

  // capture: positions of the lowest MAXB set bits
  logic [PW-1:0] cap_pos [MAXB];
  logic [CW-1:0] cap_n;
  logic          cap_ovf;
  always_comb begin
    cap_n   = '0;
    cap_ovf = 1'b0;
    for (int j = 0; j < MAXB; j++) cap_pos[j] = '0;
    for (int i = 0; i < K; i++) begin
      if (direct[i]) begin
        if (cap_n == CW'(MAXB)) cap_ovf = 1'b1;
        else begin
          for (int j = 0; j < MAXB; j++) begin
            if (CW'(j) == cap_n) cap_pos[j] = PW'(i);
          end
          cap_n          = cap_n + CW'(1);
        end
      end
    end
  end

  logic [P-1:0]  pos_col [MAXB];
  logic [PW-1:0] pos  [MAXB];
  logic [CW-1:0] n_q;
  logic [MAXB:0] sub;     // current subset (bit j: captured bit j fails)
  logic [MAXB:0] last;    // 2^n - 1
  logic [K-1:0]  direct_q;

  always_comb begin
    last = '0;
    for (int j = 0; j < MAXB; j++) begin
      if (CW'(j) < n_q) last[j] = 1'b1;
    end
  end

  for (genvar j = 0; j < MAXB; j++) begin : g_poscol
    assign pos_col[j] = col[pos[j]];
  end

  // syndrome of the current subset and the data bit it points at
  logic [P-1:0]  syn;
  logic          multi;
  logic          match;
  logic [PW-1:0] match_pos;
  always_comb begin
    syn = '0;
    for (int j = 0; j < MAXB; j++) begin
      if (sub[j]) syn ^= pos_col[j];
    end
    multi     = (sub & (sub - 1'b1)) != '0;
    match     = 1'b0;
    match_pos = '0;
    for (int i = 0; i < K; i++) begin
      if (syn == col[i]) begin
        match     = 1'b1;
        match_pos = PW'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      overflow <= 1'b0;
      indirect <= '0;
      n_q      <= '0;
      sub      <= '0;
      direct_q <= '0;
      for (int j = 0; j < MAXB; j++) pos[j] <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          for (int j = 0; j < MAXB; j++) pos[j] <= cap_pos[j];
          n_q      <= cap_n;
          overflow <= cap_ovf;
          direct_q <= direct;
          indirect <= '0;
          if (cap_n < CW'(2)) begin
            done <= 1'b1;
          end else begin
            busy <= 1'b1;
            sub  <= (MAXB+1)'(1);
          end
        end
      end else begin
        if (multi && match && !direct_q[match_pos]) indirect[match_pos] <= 1'b1;
        if (sub == last) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          sub <= sub + 1'b1;
        end
      end
    end
  end

endmodule
