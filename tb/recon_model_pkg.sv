// recon_model_pkg: bit-level reference model of the reconciliation protocol,
// used by the testbenches to predict what the hardware must produce.
//
// It works on unpacked bit arrays (one element per key bit), not on the
// 64-bit words of the RTL, and repeats the protocol from its definition:
// n0 from n0*p <= 0.8 (at least 8, at most N/2); per pass the block
// parities, the Hamming syndrome (XOR of the block-local positions of the
// 1 bits) for differing blocks and Bob's correction at position
// block*n + (syndrome_A ^ syndrome_B); the two-LFSR swap permutation; the
// stop rule; the CRC-64 (polynomial 0x42F0E1EBA9EA3693, zero start, bits in
// key order from bit 63 of word 0). The LFSR tap table is repeated here for
// the widths the testbenches use.
package recon_model_pkg;

  typedef struct {
    int          passes;
    int          leak;
    int          fixed;
    bit          key_ok;
    longint unsigned crc_a;
    longint unsigned crc_b;
  } result_t;

  function automatic int lfsr_next(int s, int w);
    int taps[$];
    int fb;
    case (w)
      9:  taps = '{9, 5};
      10: taps = '{10, 7};
      11: taps = '{11, 9};
      12: taps = '{12, 6, 4, 1};
      13: taps = '{13, 4, 3, 1};
      14: taps = '{14, 5, 3, 1};
      15: taps = '{15, 14};
      16: taps = '{16, 15, 13, 4};
      default: taps = '{w};
    endcase
    fb = 0;
    foreach (taps[k]) fb ^= (s >> (taps[k] - 1)) & 1;
    return ((s << 1) | fb) & ((1 << w) - 1);
  endfunction

  function automatic int lg_n0(int p_q16, int lg_key);
    int r = 3;
    for (int k = 3; k <= lg_key - 1; k++)
      if ((longint'(p_q16) << k) <= 64'd52428) r = k;
    return r;
  endfunction

  function automatic longint unsigned crc64(ref bit k[]);
    longint unsigned c = 0;
    bit fb;
    for (int w = 0; w < k.size() / 64; w++)
      for (int i = 63; i >= 0; i--) begin
        fb = c[63] ^ k[w*64 + i];
        c  = c << 1;
        if (fb) c ^= 64'h42F0_E1EB_A9EA_3693;
      end
    return c;
  endfunction

  // Runs the protocol on Alice's key a and Bob's key b (both modified).
  function automatic result_t reconcile(ref bit a[], ref bit b[], input int p_q16,
                                        input int seed_a, input int seed_b);
    result_t r;
    int nbits = a.size();
    int lgk   = $clog2(nbits);
    int lg    = lg_n0(p_q16, lgk);
    int sa    = (seed_a == 0) ? 1 : seed_a;
    int sb    = (seed_b == 0) ? 1 : seed_b;
    int n, m, cnt, sya, syb;
    bit pa, pb, t;
    bit diff[];
    r = '{default: 0};
    forever begin
      n = 1 << lg;
      m = nbits / n;
      cnt = 0;
      diff = new[m];
      r.passes++;
      r.leak += m;
      for (int j = 0; j < m; j++) begin
        pa = 0;
        pb = 0;
        for (int q = 0; q < n; q++) begin
          pa ^= a[j*n + q];
          pb ^= b[j*n + q];
        end
        diff[j] = pa ^ pb;
        cnt += diff[j];
      end
      if (cnt == 0 || lg == lgk - 1) break;
      for (int j = 0; j < m; j++) if (diff[j]) begin
        sya = 0;
        syb = 0;
        for (int q = 0; q < n; q++) begin
          if (a[j*n + q]) sya ^= q;
          if (b[j*n + q]) syb ^= q;
        end
        b[j*n + (sya ^ syb)] ^= 1'b1;
        r.fixed++;
        r.leak += lg;
      end
      for (int i = 0; i < nbits; i++) begin
        t = a[sa]; a[sa] = a[sb]; a[sb] = t;
        t = b[sa]; b[sa] = b[sb]; b[sb] = t;
        sa = lfsr_next(sa, lgk);
        sb = lfsr_next(sb, lgk);
      end
      lg++;
    end
    r.crc_a  = crc64(a);
    r.crc_b  = crc64(b);
    r.key_ok = (r.crc_a == r.crc_b);
    r.leak  += 64;
    return r;
  endfunction

endpackage
