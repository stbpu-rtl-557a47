// stbpu_top: Secret-Token Branch Prediction Unit (STBPU).
//
// A Skylake-like branch predictor (shared 4096-entry 8-way BTB, shared 16k
// PHT, per-thread 16-entry RSB, GHR and BHB) in which every structure is
// addressed through keyed remapping functions and every stored target is
// encrypted, so that branches of software entities with different secret
// tokens (STs) cannot be made to collide deterministically:
//   R1(psi, ip)            -> BTB index, tag, offset   (address mode 1)
//   R2(psi, BHB)           -> tag XORed into the R1 tag (history mode 2,
//                             used for indirect branches and for returns
//                             when the RSB is empty)
//   R3(psi, ip)            -> PHT index (1-level mode)
//   R4(psi, GHR, ip)       -> PHT index (2-level mode)
//   stored target          =  target[31:0] ^ phi          (BTB and RSB)
//   predicted target       =  {ip[47:32], stored ^ phi}   (function 5)
// psi and phi are the low and high halves of the ST of the hardware thread.
// Mispredictions and BTB evictions are counted per thread; when a counter
// runs down from its threshold to zero the thread's ST is replaced with a
// fresh random value, which silently retires all that thread's BPU contents
// without touching other threads' entries.
//
// Prediction port: pr_valid with thread, branch address, branch type and
// the PHT mode (pr_two_level). One cycle later pr_resp_valid with pr_taken
// (direction; 1 for unconditional kinds), pr_target_valid, pr_target and the
// target's source.
// Resolve port (valid/ready): the resolved branch with direction, target,
// fall-through address (pushed on the RSB by calls) and what was predicted
// for it. Training is in order and non-speculative: GHR, BHB and RSB change
// when a branch resolves, taken branches write the BTB (indirect branches
// and returns in mode 2, others in mode 1), conditionals train the PHT. After
// an accepted resolve rs_ready is low for one cycle (BTB and PHT
// read-modify-write).
// MSR port: privileged reads and writes of a thread's ST, thresholds and
// counters (combinational read data; writes at the clock edge).
// Random source: rng_data[t] is loaded into thread t's ST in a cycle where
// rng_take[t] is high.
//
// The keyed structure, the XOR encryption, the event counters and the
// structure sizes follow the publication. PHT mode selection by the front
// end, the mode-2 tag as R1 tag XOR R2, in-order training and the port
// protocols are this implementation's choices.
module stbpu_top
  import stbpu_pkg::*;
#(
  parameter int unsigned THREADS         = 2,
  parameter int unsigned BTB_SETS        = 512,
  parameter int unsigned BTB_WAYS        = 8,
  parameter int unsigned BTB_TAG_W       = 8,
  parameter int unsigned BTB_OFF_W       = 5,
  parameter int unsigned PHT_ENTRIES     = 16384,
  parameter int unsigned RSB_DEPTH       = 16,
  parameter int unsigned MISP_THRESHOLD  = 41500,
  parameter int unsigned EVICT_THRESHOLD = 26500,
  localparam int unsigned TID_W          = (THREADS > 1) ? $clog2(THREADS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // prediction
  input  logic               pr_valid,
  input  logic [TID_W-1:0]   pr_tid,
  input  logic [VA_W-1:0]    pr_ip,
  input  br_type_e           pr_type,
  input  logic               pr_two_level,
  output logic               pr_resp_valid,
  output logic               pr_taken,
  output logic               pr_target_valid,
  output logic [VA_W-1:0]    pr_target,
  output tgt_src_e           pr_src,
  // resolution
  input  logic               rs_valid,
  output logic               rs_ready,
  input  logic [TID_W-1:0]   rs_tid,
  input  logic [VA_W-1:0]    rs_ip,
  input  br_type_e           rs_type,
  input  logic               rs_two_level,
  input  logic               rs_taken,
  input  logic [VA_W-1:0]    rs_target,
  input  logic [VA_W-1:0]    rs_fallthru,
  input  logic               rs_pred_taken,
  input  logic               rs_pred_target_valid,
  input  logic [VA_W-1:0]    rs_pred_target,
  // privileged registers
  input  logic               msr_valid,
  input  logic               msr_write,
  input  logic               msr_priv,
  input  logic [TID_W-1:0]   msr_tid,
  input  msr_addr_e          msr_addr,
  input  logic [ST_W-1:0]    msr_wdata,
  output logic [ST_W-1:0]    msr_rdata,
  output logic               msr_fault,
  // random source
  input  logic [ST_W-1:0]    rng_data [THREADS],
  output logic [THREADS-1:0] rng_take,
  // observed events
  output logic               misp_event,
  output logic               evict_event,
  output logic [THREADS-1:0] rerand_event,
  output logic               rsb_overflow,
  output logic               rsb_underflow
);
  localparam int unsigned IDX_W  = $clog2(BTB_SETS);
  localparam int unsigned R1_W   = IDX_W + BTB_TAG_W + BTB_OFF_W;
  localparam int unsigned PIDX_W = $clog2(PHT_ENTRIES);

  // ---------------- per-thread state ----------------
  logic [KEY_W-1:0] psi [THREADS];
  logic [KEY_W-1:0] phi [THREADS];
  logic [GHR_W-1:0] ghr [THREADS];
  logic [BHB_W-1:0] bhb [THREADS];
  logic [TGT_W-1:0] rsb_top [THREADS];
  logic [THREADS-1:0] rsb_empty, rsb_ovf, rsb_unf;

  logic rs_acc;
  assign rs_acc = rs_valid && rs_ready;

  logic [TGT_W-1:0] enc_target, enc_fallthru;

  for (genvar t = 0; t < THREADS; t++) begin : g_thread
    st_history u_hist (
      .clk, .rst_n,
      .upd_valid (rs_acc && rs_tid == TID_W'(t)),
      .upd_type  (rs_type),
      .upd_taken (rs_taken),
      .upd_ip    (rs_ip),
      .ghr       (ghr[t]),
      .bhb       (bhb[t])
    );
    st_rsb #(.DEPTH(RSB_DEPTH), .W(TGT_W)) u_rsb (
      .clk, .rst_n,
      .push      (rs_acc && rs_tid == TID_W'(t) && is_call(rs_type)),
      .push_data (enc_fallthru),
      .pop       (rs_acc && rs_tid == TID_W'(t) && rs_type == BR_RET),
      .top       (rsb_top[t]),
      .empty     (rsb_empty[t]),
      .overflow  (rsb_ovf[t]),
      .underflow (rsb_unf[t])
    );
  end

  assign rsb_overflow  = |rsb_ovf;
  assign rsb_underflow = |rsb_unf;

  // ---------------- tokens and monitor ----------------
  logic [THREADS-1:0] rerand;
  logic               tok_fault, mon_fault_q;
  logic [ST_W-1:0]    tok_rdata;
  logic [31:0]        mon_rdata;
  logic               msr_is_st;
  mon_sel_e           mon_sel;

  assign msr_is_st = (msr_addr == MSR_ST);
  always_comb begin
    case (msr_addr)
      MSR_MISP_THRESH: mon_sel = MON_MISP_THRESH;
      MSR_EVCT_THRESH: mon_sel = MON_EVCT_THRESH;
      MSR_MISP_CNT:    mon_sel = MON_MISP_CNT;
      default:         mon_sel = MON_EVCT_CNT;
    endcase
  end

  st_token_regs #(.THREADS(THREADS)) u_tokens (
    .clk, .rst_n,
    .wr_en      (msr_valid && msr_write && msr_is_st),
    .wr_priv    (msr_priv),
    .wr_tid     (msr_tid),
    .wr_data    (msr_wdata),
    .rd_en      (msr_valid && !msr_write && msr_is_st),
    .rd_priv    (msr_priv),
    .rd_tid     (msr_tid),
    .rd_data    (tok_rdata),
    .rerand     (rerand),
    .rng_data   (rng_data),
    .psi        (psi),
    .phi        (phi),
    .priv_fault (tok_fault)
  );

  logic               misp;
  logic [TID_W-1:0]   ev_tid_q;
  logic               btb_ev;

  st_rerand_monitor #(
    .THREADS(THREADS), .CNT_W(32),
    .MISP_THRESHOLD(MISP_THRESHOLD), .EVICT_THRESHOLD(EVICT_THRESHOLD)
  ) u_monitor (
    .clk, .rst_n,
    .misp_valid  (misp),
    .misp_tid    (rs_tid),
    .evict_valid (btb_ev),
    .evict_tid   (ev_tid_q),
    .msr_we      (msr_valid && msr_write && !msr_is_st),
    .msr_re      (msr_valid && !msr_write && !msr_is_st),
    .msr_priv    (msr_priv),
    .msr_tid     (msr_tid),
    .msr_sel     (mon_sel),
    .msr_wdata   (msr_wdata[31:0]),
    .msr_rdata   (mon_rdata),
    .rerand      (rerand)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mon_fault_q <= 1'b0;
    else        mon_fault_q <= msr_valid && !msr_is_st && !msr_priv;
  end

  assign msr_rdata    = msr_is_st ? tok_rdata : ST_W'(mon_rdata);
  assign msr_fault    = tok_fault || mon_fault_q;
  assign rng_take     = rerand;
  assign rerand_event = rerand;

  // ---------------- prediction: cycle 0 ----------------
  logic [R1_W-1:0]      p_r1;
  logic [BTB_TAG_W-1:0] p_r2;
  logic [PIDX_W-1:0]    p_r3, p_r4;
  logic                 p_mode2, p_rsb_use;

  st_remap #(.IN_W(KEY_W + VA_W),         .OUT_W(R1_W),      .PBOX_C(0)) u_pr1 (.din({psi[pr_tid], pr_ip}), .dout(p_r1));
  st_remap #(.IN_W(KEY_W + BHB_W),        .OUT_W(BTB_TAG_W), .PBOX_C(1)) u_pr2 (.din({psi[pr_tid], bhb[pr_tid]}), .dout(p_r2));
  st_remap #(.IN_W(KEY_W + VA_W),         .OUT_W(PIDX_W),    .PBOX_C(2)) u_pr3 (.din({psi[pr_tid], pr_ip}), .dout(p_r3));
  st_remap #(.IN_W(KEY_W + GHR_W + VA_W), .OUT_W(PIDX_W),    .PBOX_C(3)) u_pr4 (.din({psi[pr_tid], ghr[pr_tid], pr_ip}), .dout(p_r4));

  assign p_rsb_use = (pr_type == BR_RET) && !rsb_empty[pr_tid];
  assign p_mode2   = is_indirect(pr_type) || (pr_type == BR_RET);

  logic                 btb_lk_resp, btb_lk_hit, pht_lk_resp, pht_lk_taken;
  logic [TGT_W-1:0]     btb_lk_target;
  logic [1:0]           pht_lk_ctr;

  // ---------------- resolution: accept cycle ----------------
  logic [R1_W-1:0]      r_r1;
  logic [BTB_TAG_W-1:0] r_r2;
  logic [PIDX_W-1:0]    r_r3, r_r4;
  logic                 r_mode2;

  st_remap #(.IN_W(KEY_W + VA_W),         .OUT_W(R1_W),      .PBOX_C(0)) u_rr1 (.din({psi[rs_tid], rs_ip}), .dout(r_r1));
  st_remap #(.IN_W(KEY_W + BHB_W),        .OUT_W(BTB_TAG_W), .PBOX_C(1)) u_rr2 (.din({psi[rs_tid], bhb[rs_tid]}), .dout(r_r2));
  st_remap #(.IN_W(KEY_W + VA_W),         .OUT_W(PIDX_W),    .PBOX_C(2)) u_rr3 (.din({psi[rs_tid], rs_ip}), .dout(r_r3));
  st_remap #(.IN_W(KEY_W + GHR_W + VA_W), .OUT_W(PIDX_W),    .PBOX_C(3)) u_rr4 (.din({psi[rs_tid], ghr[rs_tid], rs_ip}), .dout(r_r4));

  assign r_mode2 = is_indirect(rs_type) || (rs_type == BR_RET);

  logic [VA_W-1:0] unused_dec_t, unused_dec_f;

  st_target_crypt u_enc_target (
    .phi (phi[rs_tid]), .plain_target (rs_target), .enc_target (enc_target),
    .stored ('0), .branch_ip ('0), .pred_target (unused_dec_t)
  );
  st_target_crypt u_enc_fallthru (
    .phi (phi[rs_tid]), .plain_target (rs_fallthru), .enc_target (enc_fallthru),
    .stored ('0), .branch_ip ('0), .pred_target (unused_dec_f)
  );

  logic btb_up_ready, pht_up_ready;
  assign rs_ready = btb_up_ready && pht_up_ready;

  st_btb #(
    .SETS(BTB_SETS), .WAYS(BTB_WAYS), .TAG_W(BTB_TAG_W), .OFF_W(BTB_OFF_W), .TGT_W(TGT_W)
  ) u_btb (
    .clk, .rst_n,
    .lk_valid      (pr_valid),
    .lk_index      (p_r1[IDX_W-1:0]),
    .lk_tag        (p_r1[IDX_W +: BTB_TAG_W] ^ (p_mode2 ? p_r2 : '0)),
    .lk_off        (p_r1[IDX_W + BTB_TAG_W +: BTB_OFF_W]),
    .lk_resp_valid (btb_lk_resp),
    .lk_hit        (btb_lk_hit),
    .lk_target     (btb_lk_target),
    .up_valid      (rs_acc && rs_taken),
    .up_ready      (btb_up_ready),
    .up_index      (r_r1[IDX_W-1:0]),
    .up_tag        (r_r1[IDX_W +: BTB_TAG_W] ^ (r_mode2 ? r_r2 : '0)),
    .up_off        (r_r1[IDX_W + BTB_TAG_W +: BTB_OFF_W]),
    .up_target     (enc_target),
    .ev_valid      (btb_ev)
  );

  st_pht #(.ENTRIES(PHT_ENTRIES), .CTR_W(2)) u_pht (
    .clk, .rst_n,
    .lk_valid      (pr_valid),
    .lk_index      (pr_two_level ? p_r4 : p_r3),
    .lk_resp_valid (pht_lk_resp),
    .lk_taken      (pht_lk_taken),
    .lk_ctr        (pht_lk_ctr),
    .up_valid      (rs_acc && rs_type == BR_COND),
    .up_ready      (pht_up_ready),
    .up_index      (rs_two_level ? r_r4 : r_r3),
    .up_taken      (rs_taken)
  );

  // misprediction: wrong direction of a conditional, or wrong/missing target
  // of a taken branch
  always_comb begin
    misp = 1'b0;
    if (rs_acc) begin
      if (rs_type == BR_COND && rs_taken != rs_pred_taken) misp = 1'b1;
      if (rs_taken && (!rs_pred_target_valid || rs_pred_target != rs_target)) misp = 1'b1;
    end
  end
  assign misp_event = misp;

  always_ff @(posedge clk) begin
    if (rs_acc) ev_tid_q <= rs_tid;
  end
  assign evict_event = btb_ev;

  // ---------------- prediction: cycle 1 ----------------
  br_type_e         q_type;
  logic [VA_W-1:0]  q_ip;
  logic [KEY_W-1:0] q_phi;
  logic [TGT_W-1:0] q_rsb_top;
  logic             q_rsb_use, q_mode2;

  always_ff @(posedge clk) begin
    if (pr_valid) begin
      q_type    <= pr_type;
      q_ip      <= pr_ip;
      q_phi     <= phi[pr_tid];
      q_rsb_top <= rsb_top[pr_tid];
      q_rsb_use <= p_rsb_use;
      q_mode2   <= p_mode2;
    end
  end

  logic [TGT_W-1:0] q_stored;
  logic [VA_W-1:0]  dec_target, unused_enc_in;
  logic [TGT_W-1:0] unused_enc;
  assign q_stored = q_rsb_use ? q_rsb_top : btb_lk_target;

  st_target_crypt u_dec (
    .phi (q_phi), .plain_target ('0), .enc_target (unused_enc),
    .stored (q_stored), .branch_ip (q_ip), .pred_target (dec_target)
  );

  always_comb begin
    pr_resp_valid   = btb_lk_resp && pht_lk_resp;
    pr_taken        = (q_type == BR_COND) ? pht_lk_taken : 1'b1;
    pr_target_valid = q_rsb_use || btb_lk_hit;
    pr_target       = dec_target;
    if (q_rsb_use)       pr_src = SRC_RSB;
    else if (btb_lk_hit) pr_src = q_mode2 ? SRC_BTB2 : SRC_BTB1;
    else                 pr_src = SRC_NONE;
  end

endmodule
