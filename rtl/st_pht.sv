// st_pht: pattern history table of saturating counters.
//
// The PHT predicts the direction of conditional branches. It is a direct-
// mapped table (default 16384 entries) of CTR_W-bit saturating counters; the
// prediction is the counter's most significant bit. STBPU computes its index
// with the keyed remapping R3 (address only, "1-level" mode) or R4 (address
// and global history, "2-level" mode); the table itself is unchanged from the
// baseline predictor.
//
// Lookup port: lk_valid with lk_index; one cycle later lk_resp_valid, lk_taken
// and the counter value lk_ctr.
// Update port (valid/ready): the counter is read in the accept cycle and the
// incremented (taken) or decremented (not taken), saturated value is written
// in the next cycle, during which up_ready is low.
// Counters start at weakly not-taken; initial contents, the two-cycle update
// and reading the table in both the lookup and update ports are choices of
// this implementation.
module st_pht #(
  parameter int unsigned ENTRIES = 16384,
  parameter int unsigned CTR_W   = 2,
  localparam int unsigned IDX_W  = $clog2(ENTRIES)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             lk_valid,
  input  logic [IDX_W-1:0] lk_index,
  output logic             lk_resp_valid,
  output logic             lk_taken,
  output logic [CTR_W-1:0] lk_ctr,
  input  logic             up_valid,
  output logic             up_ready,
  input  logic [IDX_W-1:0] up_index,
  input  logic             up_taken
);
  localparam logic [CTR_W-1:0] CTR_MAX  = '1;
  localparam logic [CTR_W-1:0] CTR_INIT = CTR_W'((1 << (CTR_W - 1)) - 1);

  logic [CTR_W-1:0] ctr [ENTRIES];

  initial begin
    for (int i = 0; i < ENTRIES; i++) ctr[i] = CTR_INIT;
  end

  // lookup
  logic lk_q;
  always_ff @(posedge clk) begin
    if (lk_valid) lk_ctr <= ctr[lk_index];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lk_q <= 1'b0;
    else        lk_q <= lk_valid;
  end
  assign lk_resp_valid = lk_q;
  assign lk_taken      = lk_ctr[CTR_W-1];

  // update: read, then write the saturated new value
  logic             up_q;
  logic [IDX_W-1:0] up_idx_q;
  logic             up_taken_q;
  logic [CTR_W-1:0] up_old_q;
  logic [CTR_W-1:0] up_new;

  assign up_ready = !up_q;

  always_ff @(posedge clk) begin
    if (up_valid && up_ready) begin
      up_old_q   <= ctr[up_index];
      up_idx_q   <= up_index;
      up_taken_q <= up_taken;
    end
  end

  always_comb begin
    if (up_taken_q) up_new = (up_old_q == CTR_MAX) ? up_old_q : up_old_q + 1'b1;
    else            up_new = (up_old_q == '0)      ? up_old_q : up_old_q - 1'b1;
  end

  always_ff @(posedge clk) begin
    if (up_q) ctr[up_idx_q] <= up_new;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) up_q <= 1'b0;
    else        up_q <= up_valid && up_ready;
  end

endmodule
