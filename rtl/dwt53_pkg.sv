// dwt53_pkg: widths shared by the 5/3 integer lifting wavelet modules.
//
// The input samples are unsigned SAMPLE_W-bit integers (8 bits, as in the
// analysis module's description). The lifting steps of the 5/3 filter grow
// the value range: the detail coefficient d[n] = odd - floor((e0+e2)/2) spans
// -(2^W-1) .. 2^W-1 and needs W+1 signed bits; the scaling coefficient
// s[n] = even + floor((d[n]+d[n-1])/4) spans -2^(W-1) .. 2^W+2^(W-1)-2 and
// needs W+2 signed bits. These widths are this design's choice, made so the
// transform is exact and lossless for every input; the original
// implementation reported 8-bit registers in the analysis module and 9-bit
// registers in the reconstruction module.
package dwt53_pkg;

  parameter int unsigned SAMPLE_W_DEFAULT = 8;

  // Width of a detail coefficient d[n] for SAMPLE_W-bit input.
  function automatic int unsigned d_width(input int unsigned sample_w);
    return sample_w + 1;
  endfunction

  // Width of a scaling coefficient s[n] for SAMPLE_W-bit input.
  function automatic int unsigned s_width(input int unsigned sample_w);
    return sample_w + 2;
  endfunction

endpackage
