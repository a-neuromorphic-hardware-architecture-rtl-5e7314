// tb_nef_ref_pkg: reference model of the NEF recogniser used by the testbenches.
//
// Written from the algorithm, not from the RTL: it steps each 20-bit LFSR
// (x^20 + x^17 + 1) in software, forms the stimulus of every hidden neuron as the sum of
// the 5-bit random weights of the lit pixels, codes it to 0..254, applies the broken-stick
// tuning curve and sums firing rate x decoding weight per digit.
package tb_nef_ref_pkg;

  localparam int NPIX = 784;
  localparam int NGEN = 49;

  function automatic logic [19:0] lfsr_next(input logic [19:0] s);
    logic fb;
    fb = s[19] ^ s[16];
    return {s[18:0], fb};
  endfunction

  // 5-bit two's complement field j of an LFSR state
  function automatic int rw_field(input logic [19:0] s, input int j);
    int v;
    v = int'(s[5*j +: 5]);
    if (v >= 16) v -= 32;
    return v;
  endfunction

  function automatic int stim_code(input int sum, input int shift);
    int v;
    v = (sum >>> shift) + 128;
    if (v < 0) v = 0;
    if (v > 254) v = 254;
    return v;
  endfunction

  // F_rate = max(2 * gain * T / N_A, 0), N_A = 64, mirrored upper half
  function automatic int frate(input int stim, input int idx);
    int t, g, f;
    if (idx < 32) begin
      t = 255 - (stim + 4 * idx);
      g = idx;
    end else begin
      t = stim + 4 * idx - 4 * 63;
      g = 63 - idx;
    end
    if (t <= 0) return 0;
    f = (2 * g * t) / 64;
    return f;
  endfunction

  function automatic int dw_field(input logic [59:0] w, input int j);
    int v;
    v = int'(w[6*j +: 6]);
    if (v >= 32) v -= 64;
    return v;
  endfunction

  // Encoder sums of neurons 0..n-1 for one digit: every neuron takes 4 cycles and every
  // generator steps once per cycle from its seed.
  function automatic void encoder_sums(input logic [NPIX-1:0] digit,
                                       input logic [19:0] seeds [NGEN],
                                       input int n, ref int sums []);
    logic [19:0] st [NGEN];
    sums = new[n];
    for (int g = 0; g < NGEN; g++) st[g] = seeds[g];
    for (int k = 0; k < n; k++) begin
      int s;
      s = 0;
      for (int p = 0; p < 4; p++) begin
        for (int g = 0; g < NGEN; g++) begin
          for (int j = 0; j < 4; j++)
            if (digit[196 * p + 4 * g + j]) s += rw_field(st[g], j);
          st[g] = lfsr_next(st[g]);
        end
      end
      sums[k] = s;
    end
  endfunction

  // A digit lighting exactly the pixels whose random weight for neuron 0 is positive:
  // it drives neuron 0's stimulus to its upper limit.
  function automatic logic [NPIX-1:0] positive_pixels(input logic [19:0] seeds [NGEN]);
    logic [NPIX-1:0] d;
    logic [19:0] st [NGEN];
    for (int g = 0; g < NGEN; g++) st[g] = seeds[g];
    for (int p = 0; p < 4; p++)
      for (int g = 0; g < NGEN; g++) begin
        for (int j = 0; j < 4; j++) d[196 * p + 4 * g + j] = rw_field(st[g], j) > 0;
        st[g] = lfsr_next(st[g]);
      end
    return d;
  endfunction

  // An MNIST-like sparse binary digit: about one pixel in five lit.
  function automatic logic [NPIX-1:0] sparse_digit();
    logic [NPIX-1:0] d;
    for (int i = 0; i < NPIX; i++) d[i] = ($urandom_range(0, 4) == 0);
    return d;
  endfunction

endpackage
