// stbpu_pkg: types, widths and S-boxes shared by the STBPU blocks.
//
// The widths follow the Skylake-like predictor that STBPU protects: 48-bit
// virtual addresses, 32-bit stored targets, a 64-bit secret token (ST) split
// into a 32-bit remapping key (psi) and a 32-bit encryption key (phi), a
// 58-bit branch history buffer and 16 global-history bits fed to the keyed
// PHT index function. The two 4-bit S-boxes are the PRESENT and SPONGENT
// S-boxes used as non-linear layers of the remapping functions. The branch
// type and MSR address encodings are choices of this implementation.
package stbpu_pkg;

  localparam int unsigned VA_W   = 48;  // virtual address width
  localparam int unsigned TGT_W  = 32;  // stored target bits (BTB and RSB)
  localparam int unsigned ST_W   = 64;  // secret token
  localparam int unsigned KEY_W  = 32;  // psi and phi halves of the token
  localparam int unsigned BHB_W  = 58;  // branch history buffer
  localparam int unsigned GHR_W  = 16;  // global history bits used by R4

  // Branch kinds seen by the predictor.
  typedef enum logic [2:0] {
    BR_COND     = 3'd0,  // conditional direct jump
    BR_JMP      = 3'd1,  // unconditional direct jump
    BR_CALL     = 3'd2,  // direct call
    BR_IND_JMP  = 3'd3,  // indirect jump
    BR_IND_CALL = 3'd4,  // indirect call
    BR_RET      = 3'd5   // return
  } br_type_e;

  // Where a predicted target came from.
  typedef enum logic [1:0] {
    SRC_NONE = 2'd0,  // no target (BTB miss)
    SRC_BTB1 = 2'd1,  // BTB, address-only addressing (mode 1)
    SRC_BTB2 = 2'd2,  // BTB, address + BHB addressing (mode 2)
    SRC_RSB  = 2'd3   // return stack
  } tgt_src_e;

  // Model-specific registers reachable by privileged software.
  typedef enum logic [2:0] {
    MSR_ST          = 3'd0,  // 64-bit secret token of a thread
    MSR_MISP_THRESH = 3'd1,  // misprediction threshold
    MSR_EVCT_THRESH = 3'd2,  // BTB eviction threshold
    MSR_MISP_CNT    = 3'd3,  // misprediction down-counter
    MSR_EVCT_CNT    = 3'd4   // eviction down-counter
  } msr_addr_e;

  // Selector of the monitor's four 32-bit registers.
  typedef enum logic [1:0] {
    MON_MISP_THRESH = 2'd0,
    MON_EVCT_THRESH = 2'd1,
    MON_MISP_CNT    = 2'd2,
    MON_EVCT_CNT    = 2'd3
  } mon_sel_e;

  function automatic logic is_call(br_type_e t);
    return (t == BR_CALL) || (t == BR_IND_CALL);
  endfunction

  function automatic logic is_indirect(br_type_e t);
    return (t == BR_IND_JMP) || (t == BR_IND_CALL);
  endfunction

  // PRESENT S-box: x = 0..F -> C 5 6 B 9 0 A D 3 E F 8 4 7 1 2
  function automatic logic [3:0] sbox_present(logic [3:0] x);
    case (x)
      4'h0: return 4'hC;  4'h1: return 4'h5;  4'h2: return 4'h6;  4'h3: return 4'hB;
      4'h4: return 4'h9;  4'h5: return 4'h0;  4'h6: return 4'hA;  4'h7: return 4'hD;
      4'h8: return 4'h3;  4'h9: return 4'hE;  4'hA: return 4'hF;  4'hB: return 4'h8;
      4'hC: return 4'h4;  4'hD: return 4'h7;  4'hE: return 4'h1;  default: return 4'h2;
    endcase
  endfunction

  // SPONGENT S-box: x = 0..F -> E D B 0 2 1 4 F 7 A 8 5 9 C 3 6
  function automatic logic [3:0] sbox_spongent(logic [3:0] x);
    case (x)
      4'h0: return 4'hE;  4'h1: return 4'hD;  4'h2: return 4'hB;  4'h3: return 4'h0;
      4'h4: return 4'h2;  4'h5: return 4'h1;  4'h6: return 4'h4;  4'h7: return 4'hF;
      4'h8: return 4'h7;  4'h9: return 4'hA;  4'hA: return 4'h8;  4'hB: return 4'h5;
      4'hC: return 4'h9;  4'hD: return 4'hC;  4'hE: return 4'h3;  default: return 4'h6;
    endcase
  endfunction

endpackage
