// tb_st_remap: self-checking test of the keyed remapping function.
//
// Two instances are tested: R1 shape (80 -> 22 bits) and R2 shape (90 -> 8
// bits, which exercises input padding). Every output is compared with a
// reference model written here from the layer description (S-box tables as
// arrays, fold, three affine P-boxes, modular compression). On top of the
// exact comparison the test measures the properties a remapping must have:
//  - avalanche: flipping one input bit changes on average 25..75 % of the
//    output bits, and no input bit leaves the output unchanged on average;
//  - uniformity: the 9-bit R1 index over random inputs spreads evenly
//    (coefficient of variation of the bin counts below 0.15);
//  - key dependence: changing psi changes the output for most addresses.
module tb_st_remap;
  localparam int unsigned IW1 = 80, OW1 = 22;
  localparam int unsigned IW2 = 90, OW2 = 8;

  logic [IW1-1:0] din1;  logic [OW1-1:0] dout1;
  logic [IW2-1:0] din2;  logic [OW2-1:0] dout2;

  st_remap #(.IN_W(IW1), .OUT_W(OW1), .PBOX_C(0)) dut1 (.din(din1), .dout(dout1));
  st_remap #(.IN_W(IW2), .OUT_W(OW2), .PBOX_C(1)) dut2 (.din(din2), .dout(dout2));

  int checks = 0, failures = 0;

  localparam logic [3:0] PRESENT  [16] = '{4'hC,4'h5,4'h6,4'hB,4'h9,4'h0,4'hA,4'hD,4'h3,4'hE,4'hF,4'h8,4'h4,4'h7,4'h1,4'h2};
  localparam logic [3:0] SPONGENT [16] = '{4'hE,4'hD,4'hB,4'h0,4'h2,4'h1,4'h4,4'hF,4'h7,4'hA,4'h8,4'h5,4'h9,4'hC,4'h3,4'h6};

  // reference model, bit vectors held in 128-bit containers
  function automatic logic [127:0] ref_remap(logic [127:0] x, int iw, int ow, int pc);
    int pw, mw;
    logic [127:0] a, b, c, d, e, y;
    int perm [3][64];
    pw = ((iw + 7) / 8) * 8;
    mw = pw / 2;
    // P-box wirings: Fisher-Yates shuffles driven by the documented LCG
    for (int k = 0; k < 3; k++) begin
      bit [31:0] xs;
      int j, tmp;
      for (int i = 0; i < mw; i++) perm[k][i] = i;
      xs = 32'h9E3779B9 * (k + 1) + pc;
      for (int i = mw - 1; i > 0; i--) begin
        xs = xs * 1664525 + 1013904223;
        j = int'((xs >> 8) % (i + 1));
        tmp = perm[k][i]; perm[k][i] = perm[k][j]; perm[k][j] = tmp;
      end
    end
    a = '0;
    for (int i = 0; i < iw; i++) a[i] = x[i];
    b = '0;
    for (int k = 0; k < pw / 4; k++) begin
      logic [3:0] n;
      n = a[4*k +: 4];
      b[4*k +: 4] = (k % 2 == 0) ? PRESENT[n] : SPONGENT[n];
    end
    c = '0;
    for (int i = 0; i < mw; i++) c[i] = b[i] ^ b[i + mw];
    d = '0;
    for (int k = 0; k < mw / 4; k++) begin
      logic [3:0] n;
      n = c[4*k +: 4];
      d[4*k +: 4] = (k % 2 == 0) ? SPONGENT[n] : PRESENT[n];
    end
    e = '0;
    for (int i = 0; i < mw; i++) begin
      logic v;
      v = 1'b0;
      for (int j = 0; j < 3; j++) v ^= d[perm[j][i]];
      e[i] = v;
    end
    // substitution 5
    c = '0;
    for (int k = 0; k < mw / 4; k++) begin
      logic [3:0] n;
      n = e[4*k +: 4];
      c[4*k +: 4] = (k % 2 == 0) ? PRESENT[n] : SPONGENT[n];
    end
    y = '0;
    for (int i = 0; i < mw; i++) y[i % ow] ^= c[i];
    return y;
  endfunction

  function automatic logic [127:0] rnd128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [127:0] r;
    int hd_total, hd_n, zero_bits;
    int bin_cnt [512];
    real mean, var_s, cv, avg;
    int diff_key;

    // exact comparison, both shapes
    for (int n = 0; n < 2000; n++) begin
      r = rnd128();
      din1 = r[IW1-1:0];
      din2 = r[IW2-1:0];
      #1;
      check(dout1 == ref_remap(128'(din1), IW1, OW1, 0)[OW1-1:0], $sformatf("R1 shape mismatch for %h", din1));
      check(dout2 == ref_remap(128'(din2), IW2, OW2, 1)[OW2-1:0], $sformatf("R2 shape mismatch for %h", din2));
    end

    // avalanche on the 80 -> 22 instance
    hd_total = 0; hd_n = 0; zero_bits = 0;
    for (int bit_i = 0; bit_i < IW1; bit_i++) begin
      int hd_bit;
      hd_bit = 0;
      for (int n = 0; n < 50; n++) begin
        logic [OW1-1:0] o0;
        r = rnd128();
        din1 = r[IW1-1:0]; #1; o0 = dout1;
        din1[bit_i] = ~din1[bit_i]; #1;
        hd_bit += $countones(o0 ^ dout1);
      end
      if (hd_bit == 0) zero_bits++;
      hd_total += hd_bit;
      hd_n += 50;
    end
    avg = real'(hd_total) / real'(hd_n) / real'(OW1);
    $display("avalanche: average fraction of output bits flipped = %0.3f", avg);
    check(avg > 0.25 && avg < 0.75, "avalanche average outside 25..75 %");
    check(zero_bits == 0, "an input bit has no effect on the output");

    // uniformity of the 9-bit index
    foreach (bin_cnt[i]) bin_cnt[i] = 0;
    for (int n = 0; n < 51200; n++) begin
      r = rnd128();
      din1 = r[IW1-1:0]; #1;
      bin_cnt[dout1[8:0]]++;
    end
    mean = 100.0; var_s = 0.0;
    foreach (bin_cnt[i]) var_s += (real'(bin_cnt[i]) - mean) ** 2;
    cv = $sqrt(var_s / 512.0) / mean;
    $display("uniformity: CV of index bins = %0.3f", cv);
    check(cv < 0.15, "index distribution not uniform");

    // key dependence: same address, two keys
    diff_key = 0;
    for (int n = 0; n < 1000; n++) begin
      logic [OW1-1:0] o0;
      r = rnd128();
      din1 = r[IW1-1:0]; #1; o0 = dout1;
      din1[79:48] = din1[79:48] ^ $urandom_range(1, 32'hFFFF_FFFF); #1;
      if (o0 != dout1) diff_key++;
    end
    $display("key dependence: %0d of 1000 addresses remapped differently", diff_key);
    check(diff_key > 990, "changing psi leaves too many outputs unchanged");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
