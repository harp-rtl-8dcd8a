// harp_system: a HARP-enabled memory system (top level).
//
// The HARP memory controller (active profiler, HARP-A precompute, error
// profile with bit repair, secondary-ECC reactive profiler) drives one memory
// chip whose on-die ECC offers a decode-bypass read. The chip's storage array
// is not part of this RTL: its command port (st_*) is a top-level port, to be
// connected to a DRAM array or, in simulation, to an error-injecting model.
//
// Use: pulse prof_start (with prof_pattern, prof_rounds, prof_wait and
// harp_aware) to run active profiling; the CPU port is ready again when mode
// returns to MODE_NORMAL and prof_done has pulsed. From then on reads are
// repaired and checked, and every newly found at-risk bit is reported on
// ev_reactive. Timing of each side is described in memory_controller and
// ondie_ecc; the storage array must answer a read with st_rvalid one or more
// cycles after st_req.
module harp_system #(
  parameter int unsigned ADDR_W = 10,
  parameter int unsigned K      = harp_pkg::K,
  parameter int unsigned P      = harp_pkg::P,
  parameter int unsigned MAXB   = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // CPU port
  input  logic                 cpu_req,
  input  logic                 cpu_we,
  input  logic [ADDR_W-1:0]    cpu_addr,
  input  logic [K-1:0]         cpu_wdata,
  output logic                 cpu_ready,
  output logic                 cpu_rvalid,
  output logic [K-1:0]         cpu_rdata,
  // profiling control
  input  logic                 prof_start,
  input  harp_pkg::pattern_e   prof_pattern,
  input  logic [15:0]          prof_rounds,
  input  logic [31:0]          prof_wait,
  input  logic                 harp_aware,
  output harp_pkg::mode_e      mode,
  output logic                 prof_done,
  // storage array of the memory chip
  output logic                 st_req,
  output logic                 st_we,
  output logic [ADDR_W-1:0]    st_addr,
  output logic [K+P-1:0]       st_wdata,
  input  logic                 st_rvalid,
  input  logic [K+P-1:0]       st_rdata,
  // events and counters
  output logic                 ev_reactive,
  output logic [ADDR_W-1:0]    ev_reactive_addr,
  output logic [$clog2(K)-1:0] ev_reactive_pos,
  output logic [31:0]          cnt_active_obs,
  output logic [31:0]          cnt_harpa_bits,
  output logic [31:0]          cnt_harpa_overflow,
  output logic [31:0]          cnt_reactive,
  output logic [31:0]          cnt_unlocated
);

  logic              mem_req, mem_we, mem_bypass, mem_rvalid;
  logic [ADDR_W-1:0] mem_addr;
  logic [K-1:0]      mem_wdata, mem_rdata;

  memory_controller #(.ADDR_W(ADDR_W), .K(K), .P(P), .MAXB(MAXB)) u_mc (
    .clk, .rst_n,
    .cpu_req, .cpu_we, .cpu_addr, .cpu_wdata, .cpu_ready, .cpu_rvalid, .cpu_rdata,
    .prof_start, .prof_pattern, .prof_rounds, .prof_wait, .harp_aware, .mode, .prof_done,
    .mem_req, .mem_we, .mem_bypass, .mem_addr, .mem_wdata, .mem_rvalid, .mem_rdata,
    .ev_reactive, .ev_reactive_addr, .ev_reactive_pos,
    .cnt_active_obs, .cnt_harpa_bits, .cnt_harpa_overflow, .cnt_reactive, .cnt_unlocated
  );

  ondie_ecc #(.ADDR_W(ADDR_W), .K(K), .P(P)) u_chip_ecc (
    .clk, .rst_n,
    .mem_req, .mem_we, .mem_bypass, .mem_addr, .mem_wdata, .mem_rvalid, .mem_rdata,
    .st_req, .st_we, .st_addr, .st_wdata, .st_rvalid, .st_rdata
  );

endmodule
