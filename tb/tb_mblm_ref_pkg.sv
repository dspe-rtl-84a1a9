// tb_mblm_ref_pkg: integer reference for the Booth BN score and path choice,
// written from the formulas (Eq. 4 and Eq. 5 of the method) independently of
// rtl/booth_bn.sv.
package tb_mblm_ref_pkg;
  import dspe_pkg::*;

  function automatic int popc8(int v);
    int c;
    c = 0;
    for (int b = 0; b < 8; b++) if (v[b]) c++;
    return c;
  endfunction

  function automatic int ref_score(logic [7:0] a [8], dspe_cfg_t cfg);
    int bs, rl, run, idx, ph, pl, s;
    bs = 0; rl = 1; run = 1;
    for (int i = 1; i < 8; i++) begin
      bs += 8 - popc8(int'(a[i]) ^ int'(a[i-1]));
      run = (a[i] == a[i-1]) ? run + 1 : 1;
      if (run > rl) rl = run;
    end
    idx = ((bs >= int'(cfg.bs_th)) ? 2 : 0) + ((rl >= int'(cfg.rl_th)) ? 1 : 0);
    ph  = int'(cfg.bn_phigh[idx]);
    pl  = 255 - ph;
    s   = (int'(cfg.r_low) * pl + int'(cfg.r_high) * ph) / 256;
    return (s > 255) ? 255 : s;
  endfunction
endpackage
