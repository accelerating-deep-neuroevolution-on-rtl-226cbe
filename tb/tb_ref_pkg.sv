// tb_ref_pkg: reference arithmetic for the testbenches.
//
// Straightforward loop-level models written without reference to the RTL's
// structure: floating-point BT.601 luminance and bilinear re-sampling (the
// testbenches allow one grey level of difference for the RTL's fixed-point
// weights), and an exact integer model of a convolution layer with the
// network's number format (product sum shifted right by 13 with truncation
// toward minus infinity, saturated to 16 bits, optional ReLU).
package tb_ref_pkg;

  function automatic int ref_luma(input int r, input int g, input int b);
    real y;
    y = 0.299 * r + 0.587 * g + 0.114 * b;
    return int'($floor(y + 0.5));
  endfunction

  // bilinear sample of an 8-bit image stored row-major in img (w x h) at
  // output (ox, oy) of an ow x oh grid, pixel-centre convention
  function automatic real ref_bilinear(ref byte unsigned img[], input int w, input int h,
                                       input int ow, input int oh, input int ox, input int oy);
    real sx, sy, fx, fy, a, b, c, d;
    int x0, y0;
    sx = (ox + 0.5) * w / ow - 0.5;
    sy = (oy + 0.5) * h / oh - 0.5;
    x0 = int'($floor(sx));
    y0 = int'($floor(sy));
    fx = sx - x0;
    fy = sy - y0;
    a = img[y0 * w + x0];
    b = img[y0 * w + x0 + 1];
    c = img[(y0 + 1) * w + x0];
    d = img[(y0 + 1) * w + x0 + 1];
    return (1.0 - fy) * ((1.0 - fx) * a + fx * b) + fy * ((1.0 - fx) * c + fx * d);
  endfunction

  function automatic shortint ref_requant(input longint acc, input bit relu);
    longint s;
    s = acc >>> 13;
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    if (relu && s < 0) s = 0;
    return shortint'(s);
  endfunction

  // convolution, HWC activations, weights indexed [oc][ky][kx][ic]
  function automatic void ref_conv(ref shortint act[], ref shortint wt[], ref shortint res[],
                                   input int iw, input int ih, input int ic, input int k,
                                   input int s, input int oc, input bit relu);
    int ow, oh;
    longint acc;
    ow = (iw - k) / s + 1;
    oh = (ih - k) / s + 1;
    res = new[ow * oh * oc];
    for (int oy = 0; oy < oh; oy++)
      for (int ox = 0; ox < ow; ox++)
        for (int o = 0; o < oc; o++) begin
          acc = 0;
          for (int ky = 0; ky < k; ky++)
            for (int kx = 0; kx < k; kx++)
              for (int i = 0; i < ic; i++)
                acc += longint'(wt[((o * k + ky) * k + kx) * ic + i])
                     * longint'(act[((oy * s + ky) * iw + ox * s + kx) * ic + i]);
          res[(oy * ow + ox) * oc + o] = ref_requant(acc, relu);
        end
  endfunction

  // position of weight (o, ky, kx, i) in a layer engine's write index space
  function automatic int wt_index(input int o, input int ky, input int kx, input int i,
                                  input int k, input int ic, input int cpf, input int kpf);
    int kg, kl, cg, cl, word;
    kg = o / kpf; kl = o % kpf; cg = i / cpf; cl = i % cpf;
    word = ((kg * k + ky) * k + kx) * (ic / cpf) + cg;
    return word * cpf * kpf + kl * cpf + cl;
  endfunction

endpackage
