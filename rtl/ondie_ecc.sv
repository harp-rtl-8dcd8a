// ondie_ecc: the memory chip's on-die ECC datapath, with HARP's decode bypass.
//
// A write command encodes the K-bit dataword into a (K+P)-bit codeword and
// forwards it to the storage array. A read command is forwarded to the array;
// when the array returns the codeword c', it is decoded (corrected or, for some
// multi-bit errors, miscorrected) and the dataword is returned. A read with
// mem_bypass set returns the raw stored data bits instead, never the parity
// bits. That bypass read is the only change HARP needs inside the chip.
//
// Timing: commands pass to the array in the same cycle (encoder and decoder
// are combinational). One command per cycle; a read's data appears with the
// array's st_rvalid, and the bypass bit of the oldest outstanding read is
// applied to it. The array is assumed to answer reads in order and to have at
// most one read outstanding (as the controller in this design issues them).
// The command outputs (st_req, st_we, st_addr) and the data part of st_wdata
// are wires from the inputs: the chip's ECC adds parity and a read path, and
// leaves the command and the stored data bits as they are.
//
// The code is the (71,64) SEC Hamming code of the paper's main evaluation; its
// column order (harp_pkg::hamming_col, DESC=1) is this design's choice.
module ondie_ecc #(
  parameter int unsigned ADDR_W = 10,
  parameter int unsigned K      = harp_pkg::K,
  parameter int unsigned P      = harp_pkg::P
) (
  input  logic              clk,
  input  logic              rst_n,
  // command from the memory controller
  input  logic              mem_req,
  input  logic              mem_we,
  input  logic              mem_bypass,
  input  logic [ADDR_W-1:0] mem_addr,
  input  logic [K-1:0]      mem_wdata,
  output logic              mem_rvalid,
  output logic [K-1:0]      mem_rdata,
  // storage array
  output logic              st_req,
  output logic              st_we,
  output logic [ADDR_W-1:0] st_addr,
  output logic [K+P-1:0]    st_wdata,
  input  logic              st_rvalid,
  input  logic [K+P-1:0]    st_rdata
);

  logic bypass_q;  // bypass bit of the outstanding read

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bypass_q <= 1'b0;
    else if (mem_req && !mem_we) bypass_q <= mem_bypass;
  end

  assign st_req  = mem_req;
  assign st_we   = mem_we;
  assign st_addr = mem_addr;

  sec_encoder #(.K(K), .P(P), .DESC(1'b1)) u_enc (
    .d (mem_wdata),
    .c (st_wdata)
  );

  logic [P-1:0]         syn_unused;
  logic                 err_unused, cd_unused, cp_unused, nm_unused;
  logic [$clog2(K)-1:0] pos_unused;

  sec_decoder #(.K(K), .P(P), .DESC(1'b1)) u_dec (
    .c           (st_rdata),
    .bypass      (bypass_q),
    .d           (mem_rdata),
    .syndrome    (syn_unused),
    .err         (err_unused),
    .corr_data   (cd_unused),
    .corr_pos    (pos_unused),
    .corr_parity (cp_unused),
    .no_match    (nm_unused)
  );

  assign mem_rvalid = st_rvalid;

endmodule
