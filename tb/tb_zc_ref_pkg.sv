// tb_zc_ref_pkg: reference model of the ZAC-DEST coder for the testbenches.
//
// Written from the coding rules, independent of the RTL: masks are built
// chunk by chunk, counts use $countones, and the sender and receiver tables
// are plain arrays with round-robin replacement. encode() returns the coded
// word, how it was coded and the word the receiver must rebuild (DR).
package tb_zc_ref_pkg;
  import zc_pkg::*;

  // (N,k) of each setting, listed again here rather than taken from the RTL.
  function automatic void nk(gran_e g, output int n, output int k);
    case (g)
      GRAN_64_16: begin n = 64; k = 16; end
      GRAN_64_8:  begin n = 64; k = 8;  end
      GRAN_32_8:  begin n = 32; k = 8;  end
      GRAN_32_4:  begin n = 32; k = 4;  end
      GRAN_16_4:  begin n = 16; k = 4;  end
      GRAN_16_2:  begin n = 16; k = 2;  end
      GRAN_8_2:   begin n = 8;  k = 2;  end
      GRAN_8_1:   begin n = 8;  k = 1;  end
      default:    begin n = 64; k = 0;  end
    endcase
  endfunction

  function automatic logic [63:0] ref_low_mask(gran_e g);
    int n, k;
    logic [63:0] m = '0;
    nk(g, n, k);
    for (int c = 0; c < 64 / n; c++)
      for (int j = 0; j < k; j++) m[c*n + j] = 1'b1;
    return m;
  endfunction

  function automatic logic [63:0] ref_high_mask(gran_e g);
    int n, k;
    logic [63:0] m = '0;
    nk(g, n, k);
    for (int c = 0; c < 64 / n; c++)
      for (int j = 0; j < k; j++) m[c*n + n - 1 - j] = 1'b1;
    return m;
  endfunction

  function automatic int ref_limit(sim_e s);
    case (s)
      SIM_90: return 7;
      SIM_80: return 13;
      SIM_75: return 16;
      default: return 20;
    endcase
  endfunction

  function automatic void ref_dbi(input logic [63:0] v, output logic [63:0] o, output logic [7:0] f);
    for (int b = 0; b < 8; b++) begin
      f[b] = $countones(v[b*8 +: 8]) > 4;
      o[b*8 +: 8] = f[b] ? ~v[b*8 +: 8] : v[b*8 +: 8];
    end
  endfunction

  function automatic zc_cfg_t rand_cfg();
    zc_cfg_t c;
    c.approx_en = ($urandom % 4) != 0;
    c.sim_sel   = sim_e'($urandom % 4);
    c.tol_sel   = gran_e'($urandom % 9);
    c.trunc_sel = gran_e'($urandom % 9);
    return c;
  endfunction

  // Sender model (also the receiver's table, which must stay equal to it).
  class zc_ref_coder;
    int          entries;
    logic [63:0] tab [64];
    bit          vld [64];
    int          ptr;
    int          writes;     // table writes so far
    bit          tol_block;  // last word: similar enough, but a protected bit differed

    function new(int n = 64);
      entries = n;
      ptr = 0;
      writes = 0;
      tol_block = 0;
      foreach (vld[i]) vld[i] = 0;
      foreach (tab[i]) tab[i] = '0;
    endfunction

    function void encode(input zc_cfg_t cfg, input logic [63:0] word,
                         output zc_enc_word_t ew, output kind_e kind,
                         output logic [63:0] dr);
      logic [63:0] tm, dcdt, mset, x, pre;
      int best, bestd, d, lim;
      bit approx, ok_sim, ok_tol, any;
      approx = cfg.approx_en;
      tm   = approx ? ref_low_mask(cfg.trunc_sel) : '0;
      dcdt = word & ~tm;
      any  = 0; best = 0; bestd = 1000;
      for (int i = 0; i < entries; i++)
        if (vld[i]) begin
          any = 1;
          d = $countones((tab[i] ^ dcdt) & ~tm);
          if (d < bestd) begin bestd = d; best = i; end
        end
      mset = tab[best] & ~tm;
      x    = mset ^ dcdt;
      lim  = approx ? ref_limit(cfg.sim_sel) : 1;
      ok_sim = $countones(x) < lim;
      ok_tol = approx ? ((x & ref_high_mask(cfg.tol_sel)) == 0) : 1;
      ew = '0;
      tol_block = (dcdt != 0) && any && ok_sim && !ok_tol;
      if (dcdt == 0) begin
        kind = KIND_ZERO; pre = '0; dr = '0;
      end else if (any && ok_sim && ok_tol) begin
        kind = KIND_SKIP; pre = 64'd1 << best; dr = mset;
        ew.side.is_addr = 1'b1;
      end else if (any && $countones(dcdt) > $countones(x) + $countones(best)) begin
        kind = KIND_DIFF; pre = x; dr = dcdt;
        ew.side.is_diff = 1'b1;
        ew.side.idx = 6'(best);
      end else begin
        kind = KIND_RAW; pre = dcdt; dr = dcdt;
      end
      ref_dbi(pre, ew.data, ew.dbi);
      if (kind == KIND_DIFF || kind == KIND_RAW) begin
        tab[ptr] = dcdt; vld[ptr] = 1;
        ptr = (ptr + 1) % entries;
        writes++;
      end
    endfunction
  endclass

  // Random word stream with the reuse a data trace shows: zeros, repeats,
  // near repeats (a few flipped bits, often in the low bits) and fresh words.
  class zc_stim;
    logic [63:0] hist [16];
    function new();
      foreach (hist[i]) hist[i] = {$urandom, $urandom};
    endfunction
    function logic [63:0] next();
      logic [63:0] w;
      int r = $urandom % 100;
      if (r < 10)      w = '0;
      else if (r < 25) w = hist[$urandom % 16];
      else if (r < 70) begin
        w = hist[$urandom % 16];
        for (int f = 0; f < int'($urandom % 24); f++) w[$urandom % 64] ^= 1'b1;
      end else if (r < 80) begin
        w = hist[$urandom % 16];
        for (int f = 0; f < int'($urandom % 12); f++) w[$urandom % 64] ^= 1'b1;
        w[7:0] = 8'($urandom);
      end else if (r < 90) w = {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
      else w = {$urandom, $urandom};
      hist[$urandom % 16] = w;
      return w;
    endfunction
  endclass

endpackage
