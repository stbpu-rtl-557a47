// st_remap: keyed single-cycle remapping function R(psi, x).
//
// STBPU replaces the fixed index/tag hash functions of a branch predictor by
// keyed, non-linear remappings whose first input is the thread's 32-bit key
// psi, so that each software entity sees its own branch-to-entry mapping.
// One generic module serves all four remappings of the predictor:
//   R1: 32 psi + 48 address          (80 bits) -> 9 index, 8 tag, 5 offset
//   R2: 32 psi + 58 BHB              (90 bits) -> 8 tag
//   R3: 32 psi + 48 address          (80 bits) -> 14 PHT index
//   R4: 32 psi + 16 GHR + 48 address (96 bits) -> 14 PHT index
//
// The layer structure is the published construction of R1 (six stages):
//   1. substitution layer of 4-bit S-boxes over the (zero-padded) input,
//   2. XOR fold of the upper half onto the lower half (80 -> 40 bits for R1),
//   3. substitution layer,
//   4. three bit permutations (P-boxes) of the word, XORed together,
//   5. substitution layer,
//   6. compression (C-S) to OUT_W bits.
// The S-box tables are PRESENT and SPONGENT. What the publication leaves open
// is fixed here: the S-box kind per slot alternates (PRESENT in even slots in
// stages 1 and 5, SPONGENT in even slots in stage 3); the P-boxes are the
// three fixed pseudo-random permutations drawn at elaboration from a seed
// that includes PBOX_C, so each remapping (R1..R4) has its own wiring; the compression
// XORs every stage-5 bit i into output bit (i mod OUT_W); inputs are padded
// with zeros to a multiple of 8 bits. R2..R4 reuse the R1 structure.
//
// Interface: din -> dout, purely combinational (no clock), so a lookup can
// compute it inside the cycle of the request.
module st_remap #(
  parameter int unsigned IN_W  = 80,
  parameter int unsigned OUT_W = 22,
  parameter int unsigned PBOX_C = 0   // selects this instance's P-box wiring
) (
  input  logic [IN_W-1:0]  din,
  output logic [OUT_W-1:0] dout
);
  import stbpu_pkg::*;

  localparam int unsigned PAD_W = ((IN_W + 7) / 8) * 8;
  localparam int unsigned MID_W = PAD_W / 2;

  // P-box wiring: copy k is a pseudo-random permutation of MID_W wires,
  // drawn at elaboration by a Fisher-Yates shuffle driven by a 32-bit linear
  // congruential generator x <- x * 1664525 + 1013904223 seeded with
  // 32'h9E3779B9 * (k + 1) + PBOX_C; output bit i of copy k reads input bit
  // perm[i].
  typedef int unsigned perm_t [MID_W];

  function automatic perm_t gen_perm(int unsigned k);
    perm_t       p;
    int unsigned x;
    int unsigned j;
    int unsigned tmp;
    for (int unsigned i = 0; i < MID_W; i++) p[i] = i;
    x = 32'h9E3779B9 * (k + 1) + PBOX_C;
    for (int unsigned i = MID_W - 1; i > 0; i--) begin
      x   = x * 1664525 + 1013904223;
      j   = (x >> 8) % (i + 1);
      tmp = p[i];
      p[i] = p[j];
      p[j] = tmp;
    end
    return p;
  endfunction

  localparam perm_t PERM0 = gen_perm(0);
  localparam perm_t PERM1 = gen_perm(1);
  localparam perm_t PERM2 = gen_perm(2);

  logic [PAD_W-1:0] pad;
  logic [PAD_W-1:0] s1;
  logic [MID_W-1:0] s2, s3, s4, s5;

  always_comb begin
    pad = '0;
    pad[IN_W-1:0] = din;

    // 1. substitution
    for (int unsigned b = 0; b < PAD_W / 4; b++)
      s1[4*b +: 4] = (b % 2 == 0) ? sbox_present(pad[4*b +: 4]) : sbox_spongent(pad[4*b +: 4]);

    // 2. XOR fold to half width
    s2 = s1[MID_W-1:0] ^ s1[PAD_W-1:MID_W];

    // 3. substitution
    for (int unsigned b = 0; b < MID_W / 4; b++)
      s3[4*b +: 4] = (b % 2 == 0) ? sbox_spongent(s2[4*b +: 4]) : sbox_present(s2[4*b +: 4]);

    // 4. P-box, XOR, P-box, XOR, P-box
    for (int unsigned i = 0; i < MID_W; i++)
      s4[i] = s3[PERM0[i]] ^ s3[PERM1[i]] ^ s3[PERM2[i]];

    // 5. substitution
    for (int unsigned b = 0; b < MID_W / 4; b++)
      s5[4*b +: 4] = (b % 2 == 0) ? sbox_present(s4[4*b +: 4]) : sbox_spongent(s4[4*b +: 4]);

    // 6. compression
    dout = '0;
    for (int unsigned i = 0; i < MID_W; i++)
      dout[i % OUT_W] = dout[i % OUT_W] ^ s5[i];
  end

  initial begin
    assert (OUT_W <= MID_W) else $error("st_remap: OUT_W must not exceed half the padded input width");
  end

endmodule
