// st_rerand_monitor: event counters that trigger ST re-randomization.
//
// STBPU watches two kinds of events per hardware thread: branch
// mispredictions (wrong direction of a conditional, or wrong target of any
// branch) and BTB evictions. For each kind there is a threshold register and
// a down-counter, all accessible only to privileged software, which saves
// and restores them with the thread's context. A counter is decremented on
// every event; when it reaches zero the monitor pulses rerand for that thread
// (the token registers then load a fresh random token) and reloads that
// counter from its threshold. Out of reset the thresholds hold the values
// derived in the publication's security analysis for an attack-difficulty
// factor r = 0.05 (41500 mispredictions, 26500 evictions) and the counters
// equal the thresholds. Counter width, per-thread thresholds, treating a
// threshold of 0 like 1 and the MSR selector encoding are choices of this
// implementation.
//
// Interface: one misprediction and one eviction event per cycle (each with
// the thread it belongs to); rerand is a registered one-cycle pulse in the
// cycle after the event that emptied a counter. MSR writes take effect at the
// clock edge and win over an event in the same cycle; msr_rdata is
// combinational and zero for unprivileged reads.
module st_rerand_monitor
  import stbpu_pkg::*;
#(
  parameter int unsigned THREADS         = 2,
  parameter int unsigned CNT_W           = 32,
  parameter int unsigned MISP_THRESHOLD  = 41500,
  parameter int unsigned EVICT_THRESHOLD = 26500,
  localparam int unsigned TID_W          = (THREADS > 1) ? $clog2(THREADS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               misp_valid,
  input  logic [TID_W-1:0]   misp_tid,
  input  logic               evict_valid,
  input  logic [TID_W-1:0]   evict_tid,
  input  logic               msr_we,
  input  logic               msr_re,
  input  logic               msr_priv,
  input  logic [TID_W-1:0]   msr_tid,
  input  mon_sel_e           msr_sel,
  input  logic [CNT_W-1:0]   msr_wdata,
  output logic [CNT_W-1:0]   msr_rdata,
  output logic [THREADS-1:0] rerand
);
  logic [CNT_W-1:0] thr_m [THREADS];
  logic [CNT_W-1:0] thr_e [THREADS];
  logic [CNT_W-1:0] cnt_m [THREADS];
  logic [CNT_W-1:0] cnt_e [THREADS];
  logic [THREADS-1:0] wr;   // privileged MSR write to thread t

  always_comb
    for (int t = 0; t < THREADS; t++) wr[t] = msr_we && msr_priv && msr_tid == TID_W'(t);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < THREADS; t++) begin
        thr_m[t] <= CNT_W'(MISP_THRESHOLD);
        thr_e[t] <= CNT_W'(EVICT_THRESHOLD);
        cnt_m[t] <= CNT_W'(MISP_THRESHOLD);
        cnt_e[t] <= CNT_W'(EVICT_THRESHOLD);
      end
      rerand <= '0;
    end else begin
      rerand <= '0;
      for (int t = 0; t < THREADS; t++) begin
        // misprediction counter
        if (wr[t] && msr_sel == MON_MISP_CNT) cnt_m[t] <= msr_wdata;
        else if (misp_valid && misp_tid == TID_W'(t)) begin
          if (cnt_m[t] <= 1) begin
            cnt_m[t]  <= thr_m[t];
            rerand[t] <= 1'b1;
          end else cnt_m[t] <= cnt_m[t] - 1'b1;
        end
        // eviction counter
        if (wr[t] && msr_sel == MON_EVCT_CNT) cnt_e[t] <= msr_wdata;
        else if (evict_valid && evict_tid == TID_W'(t)) begin
          if (cnt_e[t] <= 1) begin
            cnt_e[t]  <= thr_e[t];
            rerand[t] <= 1'b1;
          end else cnt_e[t] <= cnt_e[t] - 1'b1;
        end
        // thresholds
        if (wr[t] && msr_sel == MON_MISP_THRESH) thr_m[t] <= msr_wdata;
        if (wr[t] && msr_sel == MON_EVCT_THRESH) thr_e[t] <= msr_wdata;
      end
    end
  end

  always_comb begin
    msr_rdata = '0;
    if (msr_re && msr_priv) begin
      case (msr_sel)
        MON_MISP_THRESH: msr_rdata = thr_m[msr_tid];
        MON_EVCT_THRESH: msr_rdata = thr_e[msr_tid];
        MON_MISP_CNT:    msr_rdata = cnt_m[msr_tid];
        default:         msr_rdata = cnt_e[msr_tid];
      endcase
    end
  end

endmodule
