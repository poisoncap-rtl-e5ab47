// tb_ref_pkg: reference model of the poison rules used by the cache and
// system testbenches. It is written from the rules directly, with its own bit
// slicing, so that it does not share code with the design:
//   load : pass unpoisoned or privileged words; same-layer same-version
//          poison traps (silent mode: zero); other version reads zero
//          (init-trap mode: trap); a probe never traps and returns zero.
//   store: to poison, allowed for perm_poison, strictly broader bounds or a
//          different version, else cancelled; allowed stores over poison zero
//          the unwritten bytes; a poison store writes {1, ver, len[61:0], base}.
package tb_ref_pkg;
  import poisoncap_pkg::*;

  function automatic logic ref_is_poison(cword_t w);
    return w.tag && w.data[127];
  endfunction

  function automatic logic ref_priv(cap_t c, cword_t w);
    logic [64:0] ct, pt; logic [63:0] pb, pl;
    pb = w.data[63:0]; pl = {2'b00, w.data[125:64]};
    ct = c.base + 65'(c.length); pt = pb + 65'(pl);
    return c.perm_poison || ((c.base <= pb) && (ct >= pt) && !((c.base == pb) && (ct == pt)));
  endfunction

  function automatic cword_t ref_poison_word(cap_t c);
    cword_t r;
    r.tag = 1'b1;
    r.data = {1'b1, c.version, c.length[61:0], c.base};
    return r;
  endfunction

  // load: returns data and exception
  function automatic void ref_load(cap_t c, poison_cfg_t cfg, logic probe, cword_t w,
                                   output cword_t d, output exc_e x);
    d = w; x = EXC_NONE;
    if (probe) d = '0;
    else if (ref_is_poison(w) && !ref_priv(c, w)) begin
      d = '0;
      if (c.version == w.data[126]) x = cfg.silent ? EXC_NONE : EXC_UAF;
      else                          x = cfg.init_trap ? EXC_UNINIT : EXC_NONE;
    end
  endfunction

  // store: updates the word in place, returns 1 when cancelled
  function automatic logic ref_store(cap_t c, logic poison_op, cword_t wd, logic [15:0] bm,
                                     ref cword_t w);
    logic p;
    p = ref_is_poison(w);
    if (p && !ref_priv(c, w) && (c.version == w.data[126])) return 1'b1;
    if (poison_op) w = ref_poison_word(c);
    else begin
      for (int i = 0; i < 16; i++)
        w.data[i*8 +: 8] = bm[i] ? wd.data[i*8 +: 8] : (p ? 8'h00 : w.data[i*8 +: 8]);
      w.tag = (bm == 16'hFFFF) && wd.tag;
    end
    return 1'b0;
  endfunction
endpackage
