// tb_c2po_ref_pkg -- bit-exact reference model of the C2PO datapath.
//
// Computes one C2PO iteration straight from the algorithm, without the
// systolic schedule of the hardware: w = Hbar (tau x) summed per array in
// 18-bit accumulators (15 fraction bits) and across arrays in 21 bits,
// z = x - Hbar_T w in 18 bits (11 fraction bits), then the projection.
// Products are formed at full precision and truncated once, as in the
// hardware. Since every sum wraps modulo 2^n, the order of summation does
// not matter, so agreement with the RTL checks the schedule, the memory
// layout and the data movement. Hbar is passed flattened: entry (r, b) is
// hb[r*B + b], rows 0..U-1 are H, row U is v^H.
package tb_c2po_ref_pkg;
  import c2po_pkg::*;

  function automatic logic signed [MW-1:0] mul_trunc(
      logic signed [BW-1:0] br, logic signed [BW-1:0] bi,
      logic signed [HW-1:0] hr, logic signed [HW-1:0] hi,
      bit conj, bit want_im, int shift);
    logic signed [63:0] p;
    if (!conj) p = want_im ? (64'(br) * 64'(hi) + 64'(bi) * 64'(hr))
                           : (64'(br) * 64'(hr) - 64'(bi) * 64'(hi));
    else       p = want_im ? (64'(bi) * 64'(hr) - 64'(br) * 64'(hi))
                           : (64'(br) * 64'(hr) + 64'(bi) * 64'(hi));
    p = p >>> shift;
    return p[MW-1:0];
  endfunction

  function automatic logic signed [PW-1:0] proj1(logic signed [PW-1:0] z,
                                                 ref int nclip);
    if (z > 18'sd1638)  begin nclip++; return 18'sd2048; end
    if (z < -18'sd1638) begin nclip++; return -18'sd2048; end
    return z + (z >>> 2);
  endfunction

  // one iteration: x <- prox(x - tau Hbar_T Hbar x); returns clip count
  function automatic int ref_iter(const ref h_t hb[], input int B, input int U,
                                  input int tau_shift, ref x_t x[]);
    int NA = B / U;
    b_t tx[];
    b_t w[];
    int nclip = 0;
    tx = new[B];
    w  = new[U+1];
    for (int b = 0; b < B; b++) tx[b] = tau_x(x[b], tau_shift);
    // wide product and adder tree
    for (int r = 0; r <= U; r++) begin
      logic signed [TW-1:0] sr = '0, si = '0;
      for (int a = 0; a < NA; a++) begin
        logic signed [MW-1:0] ar = '0, ai = '0;
        for (int k = 0; k < U; k++) begin
          int b = a*U + k;
          h_t h = hb[r*B + b];
          ar += mul_trunc(tx[b].re, tx[b].im, h.re, h.im, 0, 0, SHIFT_WIDE);
          ai += mul_trunc(tx[b].re, tx[b].im, h.re, h.im, 0, 1, SHIFT_WIDE);
        end
        sr += TW'(ar);
        si += TW'(ai);
      end
      begin
        logic signed [TW-1:0] tr = sr >>> (TF - BF), ti = si >>> (TF - BF);
        w[r].re = tr[BW-1:0];
        w[r].im = ti[BW-1:0];
      end
    end
    // tall product and projection
    for (int b = 0; b < B; b++) begin
      logic signed [MW-1:0] zr, zi;
      logic signed [PW-1:0] pr, pi;
      zr = MW'(x[b].re) <<< (MF_TALL - XF);
      zi = MW'(x[b].im) <<< (MF_TALL - XF);
      for (int k = 0; k < U; k++) begin
        h_t h = hb[k*B + b];
        zr -= mul_trunc(w[k].re, w[k].im, h.re, h.im, 1, 0, SHIFT_TALL);
        zi -= mul_trunc(w[k].re, w[k].im, h.re, h.im, 1, 1, SHIFT_TALL);
      end
      begin
        h_t h = hb[U*B + b];
        zr += mul_trunc(w[U].re, w[U].im, h.re, h.im, 1, 0, SHIFT_TALL);
        zi += mul_trunc(w[U].re, w[U].im, h.re, h.im, 1, 1, SHIFT_TALL);
      end
      pr = proj1(zr, nclip);
      pi = proj1(zi, nclip);
      pr = pr >>> (PF - XF);
      pi = pi >>> (PF - XF);
      x[b].re = pr[XW-1:0];
      x[b].im = pi[XW-1:0];
    end
    return nclip;
  endfunction

  // random channel entry, roughly complex Gaussian with variance 1/U
  // (sum of four uniforms), in the 10-bit / 8-fraction-bit format
  function automatic h_t rand_h(int U);
    h_t h;
    int sr = 0, si = 0;
    int sd;
    sd = (U >= 16) ? 1 : 2;
    for (int i = 0; i < 4; i++) begin
      sr += int'($urandom_range(0, 128)) - 64;
      si += int'($urandom_range(0, 128)) - 64;
    end
    h.re = HW'(sr / (2 * sd));
    h.im = HW'(si / (2 * sd));
    return h;
  endfunction

endpackage
