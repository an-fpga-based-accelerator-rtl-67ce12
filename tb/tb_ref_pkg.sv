// tb_ref_pkg: reference model used by the testbenches.
//
// Straightforward loop-nest implementations of the layer types the accelerator runs
// (standard / group / horizontally fused convolution, depthwise convolution, max
// pooling) over plain byte arrays in the accelerator's memory layout:
//   feature map [channel][row][column], weights [group][lane][input ch][ky][kx].
// They share nothing with the RTL's dataflow: no blocking, no Z-flow order, no
// kernel segmentation, so a mismatch points at the hardware.
package tb_ref_pkg;
  import acc_pkg::*;

  function automatic logic [7:0] quant(input longint acc, input int sh, input bit relu);
    longint v;
    v = acc >>> sh;
    if (relu && v < 0) v = 0;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return 8'(v);
  endfunction

  // Computes one layer; `outm` must already have nof * noy * nox entries.
  function automatic void ref_layer(input layer_cfg_t c, input logic [7:0] inm[],
                                    input logic [7:0] wm[], ref logic [7:0] outm[]);
    int s, nox, noy, nk2, och, off;
    longint acc;
    s   = (c.stride == 2) ? 2 : 1;
    nox = int'(out_dim(c.nix, c.nkx, c.pad, c.stride));
    noy = int'(out_dim(c.niy, c.nky, c.pad, c.stride));
    nk2 = int'(c.nkx) * int'(c.nky);
    if (c.engine == ENG_CONV) begin
      for (int g = 0; g < int'(c.groups); g++)
        for (int j = 0; j < int'(c.noft); j++) begin
          off = 0; och = 0;
          for (int i = 0; i < int'(c.nbr); i++) begin
            if (j >= off && j < off + int'(c.br[i].nofg))
              och = int'(c.br[i].och_base) + g * int'(c.br[i].nofg) + j - off;
            off += int'(c.br[i].nofg);
          end
          for (int oy = 0; oy < noy; oy++)
            for (int ox = 0; ox < nox; ox++) begin
              acc = 0;
              for (int ci = 0; ci < int'(c.nifg); ci++)
                for (int ky = 0; ky < int'(c.nky); ky++)
                  for (int kx = 0; kx < int'(c.nkx); kx++) begin
                    int iy, ix;
                    iy = s * oy + ky - int'(c.pad);
                    ix = s * ox + kx - int'(c.pad);
                    if (iy >= 0 && iy < int'(c.niy) && ix >= 0 && ix < int'(c.nix)) begin
                      int ia, wa;
                      logic signed [7:0] pv, wv;
                      ia = (g * int'(c.nifg) + ci) * int'(c.niy) * int'(c.nix) + iy * int'(c.nix) + ix;
                      wa = ((g * int'(c.noft) + j) * int'(c.nifg) + ci) * nk2 + ky * int'(c.nkx) + kx;
                      pv = inm[ia];
                      wv = wm[wa];
                      acc += longint'(pv) * longint'(wv);
                    end
                  end
              begin
                int oa;
                oa = och * noy * nox + oy * nox + ox;
                outm[oa] = quant(acc, int'(c.shift), c.relu);
              end
            end
        end
    end else begin
      for (int ch = 0; ch < int'(c.nif); ch++)
        for (int oy = 0; oy < noy; oy++)
          for (int ox = 0; ox < nox; ox++) begin
            acc = (c.engine == ENG_POOL) ? -128 : 0;
            for (int ky = 0; ky < int'(c.nky); ky++)
              for (int kx = 0; kx < int'(c.nkx); kx++) begin
                int iy, ix;
                longint p;
                iy = s * oy + ky - int'(c.pad);
                ix = s * ox + kx - int'(c.pad);
                if (iy >= 0 && iy < int'(c.niy) && ix >= 0 && ix < int'(c.nix)) begin
                  logic signed [7:0] pv;
                  int ia;
                  ia = ch * int'(c.niy) * int'(c.nix) + iy * int'(c.nix) + ix;
                  pv = inm[ia];
                  p = longint'(pv);
                end else begin
                  p = (c.engine == ENG_POOL) ? -128 : 0;
                end
                if (c.engine == ENG_POOL) begin
                  if (p > acc) acc = p;
                end else begin
                  begin
                    logic signed [7:0] wv;
                    int wa;
                    wa = ch * nk2 + ky * int'(c.nkx) + kx;
                    wv = wm[wa];
                    acc += p * longint'(wv);
                  end
                end
              end
            begin
              int oa;
              oa = ch * noy * nox + oy * nox + ox;
              outm[oa] = quant(acc, int'(c.shift), c.relu);
            end
          end
    end
  endfunction

  // A descriptor with the common fields filled in.
  function automatic layer_cfg_t mk_cfg(input engine_e e, input int nix, input int niy,
                                        input int nif, input int nof, input int k,
                                        input int stride, input int pad, input int shift);
    layer_cfg_t c;
    c = '0;
    c.engine = e; c.nix = DIM_W'(nix); c.niy = DIM_W'(niy); c.nif = DIM_W'(nif);
    c.nof = DIM_W'(nof); c.nkx = KW'(k); c.nky = KW'(k); c.stride = 2'(stride);
    c.pad = 4'(pad); c.shift = 5'(shift); c.groups = 1; c.nifg = DIM_W'(nif);
    c.noft = DIM_W'(nof); c.nbr = 1; c.br[0].nofg = DIM_W'(nof); c.br[0].och_base = '0;
    if (e != ENG_CONV) begin c.nof = DIM_W'(nif); c.noft = 1; c.nifg = 1; end
    return c;
  endfunction

  function automatic int wbytes(input layer_cfg_t c);
    if (c.engine == ENG_POOL) return 0;
    if (c.engine == ENG_DWCV) return int'(c.nif) * int'(c.nkx) * int'(c.nky);
    return int'(c.groups) * int'(c.noft) * int'(c.nifg) * int'(c.nkx) * int'(c.nky);
  endfunction

endpackage
