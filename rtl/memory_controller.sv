// memory_controller: HARP memory controller (active + reactive profiling,
// error profile and bit repair) for one memory chip with on-die ECC.
//
// Phases (mode output, harp_pkg::mode_e):
//  - MODE_ACTIVE: after prof_start the controller empties the error profile
//    and the secondary-ECC parity, and hands the memory port to the active
//    profiler, which finds bits at risk of direct error over the bypass path.
//    The CPU is held off (cpu_ready low): active profiling owns the chip.
//  - MODE_PRECOMP (HARP-A, only when harp_aware is set at prof_start): every
//    word's direct-error mask is read from the profile and handed to
//    harpa_precompute; the predicted indirect-error bits are added to the
//    profile. With harp_aware clear (HARP-U) this phase is skipped.
//  - MODE_NORMAL: CPU reads and writes. A write stores secondary-ECC parity,
//    refreshes the replacement bits of the word's at-risk bits and writes the
//    chip (on-die ECC encodes it). A read fetches the on-die-corrected word,
//    repairs the profiled bits, and checks the result with the secondary
//    ECC; a corrected single error is returned fixed to the CPU and its
//    position is added to the profile (reactive profiling), so it is
//    repaired from then on.
// Write data thus passes reactive profiler -> repair -> chip, and read data
// chip -> repair -> reactive profiler -> CPU, the order of the HARP system
// block diagram.
//
// Timing: a CPU request is accepted (cpu_req && cpu_ready) only in MODE_NORMAL
// with no request in flight. A write takes 3 cycles (accept, profile lookup,
// write). A read takes accept, issue, then waits for mem_rvalid; cpu_rvalid is
// high in that cycle. The chip port allows one outstanding read. Counters
// are free-running 32-bit (cleared by reset; cnt_active_obs and the HARP-A
// counters restart with each prof_start).
module memory_controller #(
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
  // memory chip port
  output logic                 mem_req,
  output logic                 mem_we,
  output logic                 mem_bypass,
  output logic [ADDR_W-1:0]    mem_addr,
  output logic [K-1:0]         mem_wdata,
  input  logic                 mem_rvalid,
  input  logic [K-1:0]         mem_rdata,
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

  typedef enum logic [3:0] {
    S_IDLE, S_W_LK, S_W_DO, S_R_ISSUE, S_R_WAIT,
    S_ACTIVE, S_PC_LK, S_PC_START, S_PC_WAIT
  } state_e;

  state_e            state;
  logic [ADDR_W-1:0] addr_q;
  logic [K-1:0]      wdata_q;
  logic              aware_q;
  logic              clear;

  // ---------------------------------------------------------------- active profiler
  logic              ap_start, ap_busy, ap_done;
  logic [15:0]       ap_round;
  logic              ap_mem_req, ap_mem_we, ap_mem_bypass;
  logic [ADDR_W-1:0] ap_mem_addr;
  logic [K-1:0]      ap_mem_wdata;
  logic              ap_mk_en;
  logic [ADDR_W-1:0] ap_mk_addr;
  logic [K-1:0]      ap_mk_bits, ap_mk_vals;

  active_profiler #(.ADDR_W(ADDR_W), .K(K)) u_active (
    .clk, .rst_n,
    .start       (ap_start),
    .pattern     (prof_pattern),
    .n_rounds    (prof_rounds),
    .wait_cycles (prof_wait),
    .busy        (ap_busy),
    .done        (ap_done),
    .round       (ap_round),
    .mem_req     (ap_mem_req),
    .mem_we      (ap_mem_we),
    .mem_bypass  (ap_mem_bypass),
    .mem_addr    (ap_mem_addr),
    .mem_wdata   (ap_mem_wdata),
    .mem_rvalid  (mem_rvalid),
    .mem_rdata   (mem_rdata),
    .mk_en       (ap_mk_en),
    .mk_addr     (ap_mk_addr),
    .mk_bits     (ap_mk_bits),
    .mk_vals     (ap_mk_vals),
    .bits_found  (cnt_active_obs)
  );

  // ---------------------------------------------------------------- repair mechanism
  logic              rm_lk_en;
  logic [ADDR_W-1:0] rm_lk_addr;
  logic [K-1:0]      rm_lk_mask, rm_lk_repl, repaired;
  logic              rm_wr_en;
  logic              rm_mk_en;
  logic [ADDR_W-1:0] rm_mk_addr;
  logic [K-1:0]      rm_mk_bits, rm_mk_vals;

  repair_mechanism #(.ADDR_W(ADDR_W), .K(K)) u_repair (
    .clk, .rst_n,
    .clear         (clear),
    .lk_en         (rm_lk_en),
    .lk_addr       (rm_lk_addr),
    .lk_mask       (rm_lk_mask),
    .lk_repl       (rm_lk_repl),
    .raw_data      (mem_rdata),
    .repaired_data (repaired),
    .wr_en         (rm_wr_en),
    .wr_addr       (addr_q),
    .wr_data       (wdata_q),
    .wr_bits       (rm_lk_mask),
    .mk_en         (rm_mk_en),
    .mk_addr       (rm_mk_addr),
    .mk_bits       (rm_mk_bits),
    .mk_vals       (rm_mk_vals)
  );

  // ---------------------------------------------------------------- reactive profiler
  logic                 rp_wr_en, rp_lk_en;
  logic                 rp_valid_word, rp_detect, rp_corr, rp_unloc;
  logic [K-1:0]         rp_corrected;
  logic [$clog2(K)-1:0] rp_pos;

  reactive_profiler #(.ADDR_W(ADDR_W), .K(K), .P2(P)) u_reactive (
    .clk, .rst_n,
    .clear          (clear),
    .wr_en          (rp_wr_en),
    .wr_addr        (addr_q),
    .wr_data        (wdata_q),
    .lk_en          (rp_lk_en),
    .lk_addr        (addr_q),
    .chk_data       (repaired),
    .chk_valid_word (rp_valid_word),
    .corrected      (rp_corrected),
    .detect         (rp_detect),
    .corr_data      (rp_corr),
    .corr_pos       (rp_pos),
    .unlocated      (rp_unloc)
  );

  // ---------------------------------------------------------------- HARP-A
  logic         pc_start, pc_busy, pc_done, pc_ovf;
  logic [K-1:0] pc_indirect;

  harpa_precompute #(.K(K), .P(P), .MAXB(MAXB)) u_harpa (
    .clk, .rst_n,
    .start    (pc_start),
    .direct   (rm_lk_mask),
    .busy     (pc_busy),
    .done     (pc_done),
    .overflow (pc_ovf),
    .indirect (pc_indirect)
  );

  // ---------------------------------------------------------------- control
  logic rd_hit;  // read response in normal mode
  assign rd_hit = (state == S_R_WAIT) && mem_rvalid;

  always_comb begin
    cpu_ready  = (state == S_IDLE) && !prof_start;
    cpu_rvalid = rd_hit;
    cpu_rdata  = rp_corrected;

    clear    = (state == S_IDLE) && prof_start;
    ap_start = clear;
    pc_start = (state == S_PC_START);

    unique case (state)
      S_ACTIVE: mode = harp_pkg::MODE_ACTIVE;
      S_PC_LK, S_PC_START, S_PC_WAIT: mode = harp_pkg::MODE_PRECOMP;
      default:  mode = harp_pkg::MODE_NORMAL;
    endcase

    // memory port: the active profiler owns it while profiling
    if (state == S_ACTIVE) begin
      mem_req    = ap_mem_req;
      mem_we     = ap_mem_we;
      mem_bypass = ap_mem_bypass;
      mem_addr   = ap_mem_addr;
      mem_wdata  = ap_mem_wdata;
    end else begin
      mem_req    = (state == S_W_DO) || (state == S_R_ISSUE);
      mem_we     = (state == S_W_DO);
      mem_bypass = 1'b0;
      mem_addr   = addr_q;
      mem_wdata  = wdata_q;
    end

    // profile lookups
    rm_lk_en   = (state == S_W_LK) || (state == S_R_ISSUE) || (state == S_PC_LK);
    rm_lk_addr = addr_q;
    rp_lk_en   = (state == S_R_ISSUE);
    rm_wr_en   = (state == S_W_DO);
    rp_wr_en   = (state == S_W_DO);

    // profile updates
    if (state == S_ACTIVE) begin
      rm_mk_en   = ap_mk_en;
      rm_mk_addr = ap_mk_addr;
      rm_mk_bits = ap_mk_bits;
      rm_mk_vals = ap_mk_vals;
    end else if (state == S_PC_WAIT) begin
      rm_mk_en   = pc_done && (pc_indirect != '0);
      rm_mk_addr = addr_q;
      rm_mk_bits = pc_indirect;
      rm_mk_vals = '0;
    end else begin
      rm_mk_en   = rd_hit && rp_corr;
      rm_mk_addr = addr_q;
      rm_mk_bits = K'(1) << rp_pos;
      rm_mk_vals = rp_corrected;
    end

    ev_reactive      = rd_hit && rp_corr;
    ev_reactive_addr = addr_q;
    ev_reactive_pos  = rp_pos;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state              <= S_IDLE;
      addr_q             <= '0;
      wdata_q            <= '0;
      aware_q            <= 1'b0;
      prof_done          <= 1'b0;
      cnt_harpa_bits     <= '0;
      cnt_harpa_overflow <= '0;
      cnt_reactive       <= '0;
      cnt_unlocated      <= '0;
    end else begin
      prof_done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (prof_start) begin
            aware_q            <= harp_aware;
            cnt_harpa_bits     <= '0;
            cnt_harpa_overflow <= '0;
            state              <= S_ACTIVE;
          end else if (cpu_req) begin
            addr_q   <= cpu_addr;
            wdata_q  <= cpu_wdata;
            state    <= cpu_we ? S_W_LK : S_R_ISSUE;
          end
        end
        S_W_LK:    state <= S_W_DO;
        S_W_DO:    state <= S_IDLE;
        S_R_ISSUE: state <= S_R_WAIT;
        S_R_WAIT: begin
          if (mem_rvalid) begin
            if (rp_corr)  cnt_reactive  <= cnt_reactive + 1'b1;
            if (rp_unloc) cnt_unlocated <= cnt_unlocated + 1'b1;
            state <= S_IDLE;
          end
        end
        S_ACTIVE: begin
          if (ap_done) begin
            addr_q <= '0;
            if (aware_q) state <= S_PC_LK;
            else begin
              state     <= S_IDLE;
              prof_done <= 1'b1;
            end
          end
        end
        S_PC_LK:    state <= S_PC_START;
        S_PC_START: state <= S_PC_WAIT;
        S_PC_WAIT: begin
          if (pc_done) begin
            cnt_harpa_bits <= cnt_harpa_bits + 32'($countones(pc_indirect));
            if (pc_ovf) cnt_harpa_overflow <= cnt_harpa_overflow + 1'b1;
            addr_q <= addr_q + 1'b1;
            if (addr_q == '1) begin
              state     <= S_IDLE;
              prof_done <= 1'b1;
            end else begin
              state <= S_PC_LK;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // one read outstanding on the chip port; responses only for issued reads
  logic rd_out;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_out <= 1'b0;
    else if (mem_req && !mem_we) rd_out <= 1'b1;
    else if (mem_rvalid) rd_out <= 1'b0;
  end

  a_rvalid_for_read: assert property (@(posedge clk) disable iff (!rst_n) mem_rvalid |-> rd_out);
  a_one_read: assert property (@(posedge clk) disable iff (!rst_n) (mem_req && !mem_we) |-> !rd_out || mem_rvalid);

endmodule
