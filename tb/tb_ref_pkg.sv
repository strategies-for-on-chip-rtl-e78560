// tb_ref_pkg -- reference models used by the testbenches.
//
// Written independently of the RTL: the in-pixel encoder is modelled with
// integer division and addition from its region table (not with bit slicing),
// the bit shuffle and zeromask encoding with plain loops over integers, and
// the coalescing stage as a word queue cut into fixed-size blocks.
//
// Every model follows the design description's definitions (encoding table,
// shuffle, zeromask fragment = metadata word + non-zero words); the
// end-of-frame zero padding follows this design's own coalescer policy.
package tb_ref_pkg;

  // Denoise: high gain (0) and value below the floor -> 0.
  function automatic int unsigned denoise_ref(int unsigned gain, int unsigned adc,
                                              int unsigned floor_v);
    return (gain == 0 && adc < floor_v) ? 0 : adc;
  endfunction

  // Region number 1..6 of a sample.
  function automatic int unsigned region_ref(int unsigned gain, int unsigned adc);
    int unsigned base;
    base = (gain == 0) ? 1 : (gain == 1) ? 3 : 5;
    return base + ((adc >= 1024) ? 1 : 0);
  endfunction

  // Encoded value M = ADC / D + offset, per the region table.
  function automatic int unsigned enc_ref(int unsigned gain, int unsigned adc);
    int unsigned d[7]   = '{0, 64, 256, 32, 64, 8, 16};
    int unsigned off[7] = '{0, 0, 16, 32, 64, 128, 256};
    int unsigned r;
    r = region_ref(gain, adc);
    return adc / d[r] + off[r];
  endfunction

  // Zeromask of n words: metadata word (bit n-1-i set when word i != 0)
  // followed by the non-zero words; appended to q. Returns the length.
  function automatic int unsigned zm_ref(input int unsigned w[$], ref int unsigned q[$]);
    int unsigned meta;
    int unsigned n;
    n = w.size();
    meta = 0;
    for (int i = 0; i < n; i++) if (w[i] != 0) meta += (1 << (n - 1 - i));
    q.push_back(meta);
    for (int i = 0; i < n; i++) if (w[i] != 0) q.push_back(w[i]);
    return 1 + $countones(meta);
  endfunction

  // Bit shuffle of n pixels of b bits: block j holds bit j of pixel i at
  // position n-1-i.
  function automatic void shuffle_ref(input int unsigned pix[$], input int unsigned b,
                                      ref int unsigned blk[$]);
    int unsigned n;
    n = pix.size();
    blk.delete();
    for (int j = 0; j < b; j++) begin
      int unsigned v;
      v = 0;
      for (int i = 0; i < n; i++) v = v * 2 + ((pix[i] >> j) & 1);
      blk.push_back(v);
    end
  endfunction

endpackage
