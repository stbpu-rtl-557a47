// st_token_regs: secret-token (ST) registers, one per hardware thread.
//
// Each hardware thread holds the 64-bit ST of the software entity it runs.
// The low 32 bits are psi, the key of the remapping functions; the high 32
// bits are phi, the key that encrypts stored targets. Only privileged
// software may read or write a token (to save and restore it on context and
// mode switches, or to let several processes share one); an unprivileged
// access is ignored, reads as zero and pulses priv_fault. When the
// re-randomization monitor asks for it, a thread's token is replaced by a
// fresh random value from rng_data in the same clock edge. The split of the
// token into psi (low) and phi (high), reset to zero and "an OS write wins
// over a simultaneous re-randomization" are choices of this implementation.
//
// Interface: writes and re-randomizations take effect at the clock edge;
// rd_data, psi and phi are combinational views of the registers.
module st_token_regs
  import stbpu_pkg::*;
#(
  parameter int unsigned THREADS = 2,
  localparam int unsigned TID_W  = (THREADS > 1) ? $clog2(THREADS) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   wr_en,
  input  logic                   wr_priv,
  input  logic [TID_W-1:0]       wr_tid,
  input  logic [ST_W-1:0]        wr_data,
  input  logic                   rd_en,
  input  logic                   rd_priv,
  input  logic [TID_W-1:0]       rd_tid,
  output logic [ST_W-1:0]        rd_data,
  input  logic [THREADS-1:0]     rerand,
  input  logic [ST_W-1:0]        rng_data [THREADS],
  output logic [KEY_W-1:0]       psi [THREADS],
  output logic [KEY_W-1:0]       phi [THREADS],
  output logic                   priv_fault
);
  logic [ST_W-1:0] st [THREADS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < THREADS; t++) st[t] <= '0;
      priv_fault <= 1'b0;
    end else begin
      for (int t = 0; t < THREADS; t++) begin
        if (wr_en && wr_priv && wr_tid == TID_W'(t)) st[t] <= wr_data;
        else if (rerand[t])                          st[t] <= rng_data[t];
      end
      priv_fault <= (wr_en && !wr_priv) || (rd_en && !rd_priv);
    end
  end

  always_comb begin
    rd_data = (rd_en && rd_priv) ? st[rd_tid] : '0;
    for (int t = 0; t < THREADS; t++) begin
      psi[t] = st[t][KEY_W-1:0];
      phi[t] = st[t][ST_W-1:KEY_W];
    end
  end

endmodule
