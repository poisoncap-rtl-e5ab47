// tb_poison_load_check: directed and random checks of the load-path poison
// rules against a reference written here from the rules: unpoisoned or
// privileged (perm_poison or strictly broader bounds) words pass through;
// same-layer same-version poison traps (or reads zero in silent mode);
// same-layer other-version poison reads zero (or traps with init trapping);
// probes never trap and report the poison state.
module tb_poison_load_check;
  import poisoncap_pkg::*;
  int checks = 0, failures = 0;

  cap_t cap; poison_cfg_t cfg; logic probe; cword_t w;
  cword_t rdata; exc_e exc; logic poisoned, privileged, zeroed;

  poison_load_check dut (.cap, .cfg, .probe, .mem_word(w), .rdata, .exc, .poisoned, .privileged, .zeroed);

  function automatic cword_t pw(logic [63:0] b, logic [63:0] l, logic v);
    cword_t r;
    r.tag = 1'b1;
    r.data = {1'b1, v, l[61:0], b};
    return r;
  endfunction

  task automatic expect_out(cword_t e_d, exc_e e_x, logic e_p, string what);
    #1;
    checks++;
    if (rdata !== e_d || exc !== e_x || poisoned !== e_p) begin
      failures++;
      $display("FAIL %s: rdata=%h exc=%0d pois=%b exp %h %0d %b", what, rdata, exc, poisoned, e_d, e_x, e_p);
    end
  endtask

  // independent reference
  task automatic ref_model(output cword_t d, output exc_e x, output logic p);
    logic [64:0] ct, pt; logic [63:0] pb, pl; logic broad, pv;
    p  = w.tag && w.data[127];
    pb = w.data[63:0]; pl = {2'b00, w.data[125:64]}; pv = w.data[126];
    ct = cap.base + 65'(cap.length); pt = pb + 65'(pl);
    broad = (cap.base <= pb) && (ct >= pt) && !((cap.base == pb) && (ct == pt));
    d = w; x = EXC_NONE;
    if (probe) d = '0;
    else if (p && !(cap.perm_poison || broad)) begin
      d = '0;
      if (cap.version == pv) x = cfg.silent ? EXC_NONE : EXC_UAF;
      else                   x = cfg.init_trap ? EXC_UNINIT : EXC_NONE;
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cword_t d; exc_e x; logic p;
    cfg = '0; probe = 0;
    cap = '{tag:1, perm_poison:0, version:0, base:64'h1000, length:64'h40};
    // plain data
    w = '{tag:0, data:128'h8000_0000_dead_beef_0000_0000_1234_5678};
    expect_out(w, EXC_NONE, 0, "untagged data with bit127 set");
    // own poison, same version -> UAF trap
    w = pw(64'h1000, 64'h40, 0);
    expect_out('0, EXC_UAF, 1, "UAF trap");
    cfg.silent = 1;
    expect_out('0, EXC_NONE, 1, "UAF silent zero");
    checks++; if (!zeroed) begin failures++; $display("FAIL zeroed flag"); end
    cfg.silent = 0;
    // other version -> auto zero, or trap
    cap.version = 1;
    expect_out('0, EXC_NONE, 1, "uninit read zero");
    cfg.init_trap = 1;
    expect_out('0, EXC_UNINIT, 1, "uninit read trap");
    cfg.init_trap = 0; cap.version = 0;
    // broader bounds (upstream allocator) -> raw
    cap.base = 64'h0F00; cap.length = 64'h1000;
    expect_out(w, EXC_NONE, 1, "broader bounds pass");
    checks++; if (!privileged) begin failures++; $display("FAIL privileged flag"); end
    // narrower bounds (sub-object) -> denied
    cap.base = 64'h1010; cap.length = 64'h10;
    expect_out('0, EXC_UAF, 1, "narrower bounds denied");
    // partial overlap -> denied
    cap.base = 64'h1020; cap.length = 64'h100;
    expect_out('0, EXC_UAF, 1, "partial overlap denied");
    // perm_poison (kernel) -> raw
    cap.perm_poison = 1;
    expect_out(w, EXC_NONE, 1, "perm_poison pass");
    cap.perm_poison = 0;
    // probe never traps
    probe = 1;
    expect_out('0, EXC_NONE, 1, "CGetPoison on poison");
    w.tag = 0;
    expect_out('0, EXC_NONE, 0, "CGetPoison on data");
    probe = 0;
    // random
    repeat (3000) begin
      cap.tag = 1; cap.perm_poison = ($urandom % 8) == 0; cap.version = $urandom;
      cap.base = 64'($urandom % 256) << 4; cap.length = 64'($urandom % 64) << 4;
      cfg = 2'($urandom); probe = ($urandom % 8) == 0;
      if ($urandom % 4 == 0) w = '{tag:$urandom, data:{$urandom,$urandom,$urandom,$urandom}};
      else w = pw(64'($urandom % 256) << 4, 64'($urandom % 64) << 4, $urandom);
      #1; ref_model(d, x, p);
      expect_out(d, x, p, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
