// sec_decoder: SEC Hamming syndrome decoder with a decode-bypass path.
//
// The syndrome s = H.c' is the XOR of the columns of all set codeword bits.
// If s equals the column of data bit i, bit i is flipped. With one raw error
// this corrects it; with two or more, s can equal the column of a bit that was
// not in error and the decoder then adds an error there (a miscorrection, the
// source of "indirect" errors). If s equals a parity column only a parity bit
// is flipped, which is invisible in the data. A non-zero s that matches no
// column leaves the data as read.
//
// With bypass set, d is the raw data portion c'[K-1:0]: correction is skipped,
// which is the read path HARP asks memory chips to expose. The syndrome flags
// are still computed; they describe what a normal read would have done.
//
// Interface: c (K+P) and bypass in; d (K), syndrome (P), err, corr_data,
// corr_pos, corr_parity and no_match out. Purely combinational.
module sec_decoder #(
  parameter int unsigned K    = harp_pkg::K,
  parameter int unsigned P    = harp_pkg::P,
  parameter bit          DESC = 1'b1
) (
  input  logic [K+P-1:0]         c,
  input  logic                   bypass,
  output logic [K-1:0]           d,
  output logic [P-1:0]           syndrome,
  output logic                   err,
  output logic                   corr_data,
  output logic [$clog2(K)-1:0]   corr_pos,
  output logic                   corr_parity,
  output logic                   no_match
);

  logic [P-1:0] col [K];
  for (genvar i = 0; i < K; i++) begin : g_col
    assign col[i] = P'(harp_pkg::hamming_col(i, P, DESC));
  end

  logic [K-1:0] hit;
  always_comb begin
    syndrome = '0;
    for (int i = 0; i < K; i++) begin
      if (c[i]) syndrome ^= col[i];
    end
    for (int r = 0; r < P; r++) begin
      syndrome[P-1-r] ^= c[K+r];
    end
    corr_pos = '0;
    for (int i = 0; i < K; i++) begin
      hit[i] = (syndrome == col[i]);
      if (hit[i]) corr_pos = ($clog2(K))'(i);
    end
    err         = (syndrome != '0);
    corr_data   = (hit != '0);
    corr_parity = err && ((syndrome & (syndrome - P'(1))) == '0);
    no_match    = err && !corr_data && !corr_parity;
    d           = bypass ? c[K-1:0] : (c[K-1:0] ^ hit);
  end

endmodule
