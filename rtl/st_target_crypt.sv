// st_target_crypt: target encryption and function 5 (target decryption and
// extension) of STBPU.
//
// The BTB and the return stack keep only the low 32 bits of a target. Before
// such a value is stored it is XORed with phi, the encryption half of the
// current thread's secret token. When a stored value is used for a prediction
// it is XORed with the phi of the thread that is predicting and extended to a
// 48-bit address with the upper 16 bits of the branch's own address. A value
// written under one token and read under another therefore decrypts to an
// unrelated address. This is exactly the scheme of the publication.
//
// Interface: two independent combinational paths, no clock.
//   encrypt: plain_target (48) , phi -> enc_target (32)
//   decrypt: stored (32), branch_ip (48), phi -> pred_target (48)
module st_target_crypt
  import stbpu_pkg::*;
(
  input  logic [KEY_W-1:0] phi,
  input  logic [VA_W-1:0]  plain_target,
  output logic [TGT_W-1:0] enc_target,
  input  logic [TGT_W-1:0] stored,
  input  logic [VA_W-1:0]  branch_ip,
  output logic [VA_W-1:0]  pred_target
);
  always_comb begin
    enc_target  = plain_target[TGT_W-1:0] ^ phi;
    pred_target = {branch_ip[VA_W-1:TGT_W], stored ^ phi};
  end
endmodule
