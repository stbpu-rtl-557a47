// st_history: branch history shift registers of one hardware thread.
//
// GHR (GHR_W bits, default 16) records the taken/not-taken outcome of every
// conditional branch; it feeds the 2-level PHT remapping R4. BHB (BHB_W bits,
// default 58) accumulates branch context for the indirect predictor: every
// direct jump, direct call and taken conditional branch folds its 48-bit
// address to 24 bits by XOR (ip[23:0] ^ ip[47:24]) and mixes it into the BHB
// shifted left by two: bhb <= (bhb << 2) ^ fold(ip). The BHB feeds the BTB
// mode-2 remapping R2. The publication describes the fold only as an XOR
// fold mixed into the BHB; the fold width and shift distance are this
// implementation's choice, as is updating the histories when a branch
// resolves (in order) rather than speculatively.
//
// Interface: upd_valid with the branch type, direction and address updates
// both registers at the next clock edge; ghr and bhb are register outputs.
module st_history
  import stbpu_pkg::*;
#(
  parameter int unsigned GHR_LEN = GHR_W,
  parameter int unsigned BHB_LEN = BHB_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               upd_valid,
  input  br_type_e           upd_type,
  input  logic               upd_taken,
  input  logic [VA_W-1:0]    upd_ip,
  output logic [GHR_LEN-1:0] ghr,
  output logic [BHB_LEN-1:0] bhb
);
  localparam int unsigned FOLD_W = VA_W / 2;

  logic [FOLD_W-1:0] fold;
  logic              mix;

  always_comb begin
    fold = upd_ip[FOLD_W-1:0] ^ upd_ip[VA_W-1:FOLD_W];
    mix  = (upd_type == BR_JMP) || (upd_type == BR_CALL) || (upd_type == BR_COND && upd_taken);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ghr <= '0;
      bhb <= '0;
    end else if (upd_valid) begin
      if (upd_type == BR_COND) ghr <= {ghr[GHR_LEN-2:0], upd_taken};
      if (mix)                 bhb <= {bhb[BHB_LEN-3:0], 2'b00} ^ BHB_LEN'(fold);
    end
  end

endmodule
