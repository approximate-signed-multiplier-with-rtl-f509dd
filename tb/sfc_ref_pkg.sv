// sfc_ref_pkg: reference models used by the testbenches.
//
// Everything here is computed from the published truth tables and from plain
// integer arithmetic, independently of the RTL structure:
//   * the values (not the bit split) of the sign-focused compressors;
//   * ref_mult(): the approximate product, obtained by adding the weights of
//     all partial products column by column, with the compressor values
//     substituted where the design approximates;
//   * ref_conv(): the zero-padded 3 x 3 Laplacian convolution of one pixel,
//     using ref_mult() for every product.
package sfc_ref_pkg;

  // approximate A+B+C+D+1: value 2*carry+sum for index {A,B,C,D}
  localparam int ABCD1_APX_VAL [16] = '{1,2,2,2, 2,3,3,3, 2,3,3,3, 3,3,3,3};
  // approximate A+B+C+1: value for index {A,B,C}
  localparam int ABC1_APX_VAL  [8]  = '{1,3,3,3, 2,3,3,3};

  function automatic int bitof(int x, int i);
    return (x >> i) & 1;
  endfunction

  // Baugh-Wooley bit of weight 2^(i+j) for 8-bit operands (two's complement)
  function automatic int ppbit(int a, int b, int i, int j);
    int v;
    v = bitof(a & 255, i) & bitof(b & 255, j);
    if ((i == 7) != (j == 7)) v = 1 - v;
    return v;
  endfunction

  function automatic int ref_mult(int a, int b);
    int v7a, v7b, s7a, s7b, p7, hc, v8, es, ec, fv, fs, fc, n8, q8, val;
    v7a = ABCD1_APX_VAL[ppbit(a,b,0,7)*8 + ppbit(a,b,1,6)*4 + ppbit(a,b,2,5)*2 + ppbit(a,b,3,4)];
    v7b = ABC1_APX_VAL[ppbit(a,b,4,3)*4 + ppbit(a,b,5,2)*2 + ppbit(a,b,6,1)];
    s7a = v7a & 1;  s7b = v7b & 1;
    p7  = s7a ^ s7b;
    hc  = s7a & s7b;
    v8  = 1 + ppbit(a,b,1,7) + ppbit(a,b,2,6) + ppbit(a,b,3,5) + ppbit(a,b,4,4);
    es  = v8 & 1;  ec = v8 >> 1;
    fv  = ppbit(a,b,5,3) + ppbit(a,b,6,2) + ppbit(a,b,7,1);
    fs  = fv & 1;  fc = fv >> 1;
    n8  = es + fs + (v7a >> 1) + (v7b >> 1);
    q8  = (n8 > 3) ? 3 : n8;                // two-output 4:2 saturates at 3
    val = 64 + 128 * p7 + 256 * ((q8 & 1) + hc) + 512 * ((q8 >> 1) + ec + fc) + 32768;
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++)
        if (i + j >= 9) val += ppbit(a,b,i,j) << (i + j);
    val &= 16'hFFFF;
    return (val >= 32768) ? val - 65536 : val;
  endfunction

  function automatic int lap_coeff(int t);
    return (t == 4) ? 8 : -1;
  endfunction

  // Laplacian response at (r,c) of a W x H image stored row-major in img,
  // zero outside the image, every product through ref_mult(pixel, coeff).
  function automatic int ref_conv(const ref int img[], input int w, input int h, input int r, input int c);
    int acc, px;
    acc = 0;
    for (int dr = -1; dr <= 1; dr++)
      for (int dc = -1; dc <= 1; dc++) begin
        if (r + dr < 0 || r + dr >= h || c + dc < 0 || c + dc >= w) px = 0;
        else px = img[(r + dr) * w + (c + dc)];
        acc += ref_mult(px, lap_coeff((dr + 1) * 3 + (dc + 1)));
      end
    return acc;
  endfunction

endpackage
