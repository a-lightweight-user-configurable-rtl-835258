// tb_ref_pkg: reference models used by the testbenches, written directly from
// the definitions (not from the RTL structure): integer square root with
// floor or rounding, floor cube root, the preprocessing chain applied to a
// whole frame, and the stream format of the compressed data.
package tb_ref_pkg;
  import detector_pkg::*;

  typedef logic [NROWS-1:0][PIX_W-1:0]             vec_t;
  typedef logic [NROWS-1:0][NCOLS-1:0][PIX_W-1:0]  frame_t;

  function automatic int isqrt_floor(int n);
    int r = 0;
    while ((r + 1) * (r + 1) <= n) r++;
    return r;
  endfunction

  function automatic int isqrt_round(int n);
    return $rtoi($sqrt(real'(n)) + 0.5);
  endfunction

  function automatic int icbrt(int n);
    int r = 0;
    while ((r + 1) * (r + 1) * (r + 1) <= n) r++;
    return r;
  endfunction

  function automatic int quant(int v, quant_e q);
    case (q)
      Q_SQRT_FLOOR: return isqrt_floor(v);
      Q_SQRT_ROUND: return isqrt_round(v);
      Q_CUBE_ROOT:  return icbrt(v);
      default:      return v;
    endcase
  endfunction

  // The vectors the preprocessing stage should deliver for one frame.
  function automatic void preprocess_frame(input frame_t f, input pp_cfg_t cfg, output vec_t out[$]);
    int pix[NROWS][NCOLS];
    int kept[$];
    int pmax = (1 << PIX_W) - 1;
    out = {};
    for (int c = 0; c < NCOLS; c++) begin
      if (cfg.crop_en && (c < int'(cfg.crop_col_lo) || c > int'(cfg.crop_col_hi))) continue;
      kept.push_back(c);
    end
    for (int r = 0; r < NROWS; r++)
      for (int c = 0; c < NCOLS; c++) begin
        int v = int'(f[r][c]);
        if (cfg.crop_en && (r < int'(cfg.crop_row_lo) || r > int'(cfg.crop_row_hi))) v = 0;
        if (cfg.bg_en) v = (v > int'(cfg.bg_level)) ? v - int'(cfg.bg_level) : 0;
        pix[r][c] = v;
      end
    if (!cfg.bin_en) begin
      foreach (kept[k]) begin
        vec_t v;
        for (int r = 0; r < NROWS; r++) v[r] = PIX_W'(quant(pix[r][kept[k]], cfg.quant));
        out.push_back(v);
      end
    end else begin
      int ngrp = (kept.size() + 3) / 4;
      for (int g = 0; g < ngrp; g++) begin
        vec_t v;
        for (int half = 0; half < 2; half++)
          for (int br = 0; br < NROWS / 2; br++) begin
            int s = 0;
            for (int dc = 0; dc < 2; dc++) begin
              int k = 4 * g + 2 * half + dc;
              if (k < kept.size()) s += pix[2*br][kept[k]] + pix[2*br+1][kept[k]];
            end
            if (s > pmax) s = pmax;
            v[half * NROWS / 2 + br] = PIX_W'(quant(s, cfg.quant));
          end
        out.push_back(v);
      end
    end
  endfunction

  // Decode one column vector from a stream of 16-bit words starting at pos:
  // a metadata word of four 4-bit widths, then each region's bit planes.
  function automatic vec_t decode_vec(input logic [WORD_W-1:0] s[$], inout int pos);
    vec_t v = '0;
    logic [WORD_W-1:0] meta = s[pos++];
    for (int c = 0; c < NCOMP; c++) begin
      int bw = int'(meta[c*BW_W +: BW_W]);
      for (int k = 0; k < bw; k++) begin
        logic [WORD_W-1:0] pl = s[pos++];
        for (int i = 0; i < REGION; i++) v[c*REGION + i][k] = pl[i];
      end
    end
    return v;
  endfunction
endpackage
