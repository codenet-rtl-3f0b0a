// codenet_ref_pkg: integer reference model of the accelerator's arithmetic,
// written independently of the RTL, used by the testbenches.
//
// Feature maps are flat int arrays indexed ((y * W) + x) * C + c.  The
// convolutions return the exact sum wrapped to 16 bits (the engines add in
// 16-bit registers, and wrapping each add equals wrapping the total);
// quant() gives the 8-bit result of scale, bias, optional ReLU and shift.
package codenet_ref_pkg;

  function automatic int wrap16(longint v);
    longint m;
    m = v & 64'hFFFF;
    return (m >= 32768) ? int'(m - 65536) : int'(m);
  endfunction

  function automatic int wrap8(longint v);
    longint m;
    m = v & 64'hFF;
    return (m >= 128) ? int'(m - 256) : int'(m);
  endfunction

  function automatic int quant(int sum16, int scale, int bias, int shift, bit relu);
    longint y;
    y = longint'(sum16) * longint'(scale) + longint'(bias);
    if (relu && y < 0) y = 0;
    y = y >>> shift;
    return wrap8(y);
  endfunction

  // 1x1 convolution: out[p][o] = sum_i in[p][i] * w[o*IC + i]
  function automatic void conv1x1(input int in_fm[], input int w[], input int npix,
                                  input int ic, input int oc, output int sums[]);
    sums = new[npix * oc];
    for (int p = 0; p < npix; p++)
      for (int o = 0; o < oc; o++) begin
        longint s = 0;
        for (int i = 0; i < ic; i++) s += longint'(in_fm[p*ic + i]) * longint'(w[o*ic + i]);
        sums[p*oc + o] = wrap16(s);
      end
  endfunction

  function automatic int clip_off(int off);
    return (off < 0) ? 0 : (off > 7) ? 7 : off;
  endfunction

  // 3x3 depthwise square-shape deformable convolution, zero padding.
  // w[c*9 + 3*i + j] is the tap of row i, column j; offs[] holds one offset
  // per output pixel (row-major over the output) and is used when deform.
  function automatic void dwconv(input int in_fm[], input int w[], input int offs[],
                                 input int h, input int wd, input int c, input int stride,
                                 input bit deform, output int sums[], output int ho, output int wo);
    ho = (h + stride - 1) / stride;
    wo = (wd + stride - 1) / stride;
    sums = new[ho * wo * c];
    for (int yo = 0; yo < ho; yo++)
      for (int xo = 0; xo < wo; xo++) begin
        int d = deform ? clip_off(offs[yo*wo + xo]) : 1;
        for (int ch = 0; ch < c; ch++) begin
          longint s = 0;
          for (int i = 0; i < 3; i++)
            for (int j = 0; j < 3; j++) begin
              int y = yo*stride + (i-1)*d;
              int x = xo*stride + (j-1)*d;
              if (y >= 0 && y < h && x >= 0 && x < wd)
                s += longint'(in_fm[(y*wd + x)*c + ch]) * longint'(w[ch*9 + 3*i + j]);
            end
          sums[(yo*wo + xo)*c + ch] = wrap16(s);
        end
      end
  endfunction

endpackage
