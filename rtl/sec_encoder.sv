// sec_encoder: systematic SEC Hamming encoder (c = G.d).
//
// The K data bits pass to c[K-1:0] unchanged (systematic encoding). Parity bit
// c[K+r] is the XOR of the data bits whose H column has a one in row r, so the
// codeword satisfies H.c = 0 for H = [A | I]. The columns of A come from
// harp_pkg::hamming_col(); DESC picks their order (1 for the on-die code,
// 0 for the controller's secondary code).
//
// Interface: d (K bits) in, c (K+P bits) out. Purely combinational. The K
// data outputs are plain wires from d; that is what systematic encoding
// means, and only the P parity outputs hold logic.
//
// The systematic Hamming code and the (71,64) size follow the paper (its
// small example matrix is reproduced at K=4, P=3); the column order for
// larger codes is this design's choice.
module sec_encoder #(
  parameter int unsigned K    = harp_pkg::K,
  parameter int unsigned P    = harp_pkg::P,
  parameter bit          DESC = 1'b1
) (
  input  logic [K-1:0]   d,
  output logic [K+P-1:0] c
);

  if (K > (1 << P) - P - 1) begin : g_size_check
    $error("sec_encoder: K=%0d data bits need more than P=%0d parity bits", K, P);
  end

  logic [P-1:0] col [K];
  for (genvar i = 0; i < K; i++) begin : g_col
    assign col[i] = P'(harp_pkg::hamming_col(i, P, DESC));
  end

  logic [P-1:0] par;  // bit P-1-r holds row r
  always_comb begin
    par = '0;
    for (int i = 0; i < K; i++) begin
      if (d[i]) par ^= col[i];
    end
    c[K-1:0] = d;
    for (int r = 0; r < P; r++) begin
      c[K+r] = par[P-1-r];
    end
  end

endmodule
