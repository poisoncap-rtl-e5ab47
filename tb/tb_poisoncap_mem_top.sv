// tb_poisoncap_mem_top: end-to-end test of the two-core poison-aware memory
// hierarchy at its default sizes (two 4-way 32 KiB L1 data caches, shared
// 16-way 1 MiB LLC), with the behavioural DRAM model behind it.
//
// Each core runs the life cycle of heap objects through a nested allocator,
// then random traffic, while the other core does the same at the same time:
//   allocate (version 0) and write -> free by poisoning the object with its
//   own capability -> use after free (trap, silent zero, cancelled store,
//   CGetPoison) -> nested free of a half-object by a sub-allocator: the
//   half traps through its own capability but stays readable through the
//   object capability and the arena capability -> reallocate with version
//   1: read before write reads zero or traps, a narrow write detoxes and
//   zero-fills -> kernel (perm_poison) reads poison intact.
// Objects sit 64 KiB apart so that they share one L1 set and one LLC set,
// forcing evictions at every level. Every response is compared with a flat
// reference memory (tb_ref_pkg). Each mechanism must happen at least once.
module tb_poisoncap_mem_top;
  import poisoncap_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  poison_cfg_t cfg_bus, cfg_lk;
  logic core_req_valid [2], core_req_ready [2], core_resp_valid [2];
  core_req_t core_req [2]; core_resp_t core_resp [2];
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  line_req_t mem_req; cline_t mem_resp_data;
  logic [6:0] ev_l1 [2]; logic [3:0] ev_llc; logic ev_arb_conflict;
  int n_reads, n_writes;

  // the policy is shared by both cores; core 0 changes it. The reference
  // uses the value seen at the lookup cycle, the clock edge before the
  // response appears.
  always @(posedge clk) cfg_lk <= cfg_bus;

  poisoncap_mem_top dut (
    .clk, .rst_n, .cfg(cfg_bus), .core_req_valid, .core_req_ready, .core_req,
    .core_resp_valid, .core_resp, .mem_req_valid, .mem_req_ready, .mem_req,
    .mem_resp_valid, .mem_resp_data, .ev_l1, .ev_llc, .ev_arb_conflict);
  tb_line_mem #(.LAT(8)) dram (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .resp_valid(mem_resp_valid), .resp_data(mem_resp_data), .n_reads, .n_writes);

  // mechanism counters
  int m_l1 [7] = '{default:0};
  int m_llc [4] = '{default:0};
  int m_conf = 0, m_uaf = 0, m_uninit = 0, m_silent = 0, m_autozero = 0, m_priv = 0, m_probe = 0;
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    for (int c = 0; c < 2; c++) for (int e = 0; e < 7; e++) m_l1[e] += int'(ev_l1[c][e]);
    for (int e = 0; e < 4; e++) m_llc[e] += int'(ev_llc[e]);
    m_conf += int'(ev_arb_conflict);
    if (cyc > 2000000) begin
      failures++;
      $display("watchdog");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  cword_t refm [logic [59:0]];
  function automatic cword_t rd(logic [63:0] a);
    return refm.exists(a[63:4]) ? refm[a[63:4]] : '0;
  endfunction

  int done = 0;
  localparam int NOBJ = 24;
  localparam logic [63:0] STRIDE = 64'h1_0000;

  for (genvar p = 0; p < 2; p++) begin : g_core
    logic [63:0] arena;
    assign arena = 64'h1000_0000 * (p + 1);

    task automatic op(mem_op_e o, cap_t c, logic [63:0] a, logic [15:0] bm, cword_t wd);
      core_resp_t rs; cword_t w, ed; exc_e ex; logic canc;
      @(negedge clk);
      core_req[p] = '{op:o, cap:c, addr:a, bmask:bm, wdata:wd}; core_req_valid[p] = 1;
      while (!core_req_ready[p]) @(negedge clk);
      @(posedge clk);
      @(negedge clk); core_req_valid[p] = 0;
      while (!core_resp_valid[p]) @(negedge clk);
      rs = core_resp[p];
      w = rd(a);
      checks++;
      if (o == OP_LOAD || o == OP_GETPOISON) begin
        ref_load(c, cfg_lk, o == OP_GETPOISON, w, ed, ex);
        if (rs.rdata !== ed || rs.exc !== ex || rs.poisoned !== ref_is_poison(w)) begin
          failures++;
          $display("FAIL core%0d load a=%h got %h/%0d exp %h/%0d", p, a, rs.rdata, rs.exc, ed, ex);
        end
        if (o == OP_GETPOISON) m_probe++;
        else if (ref_is_poison(w)) begin
          if (ref_priv(c, w)) m_priv++;
          else if (ex == EXC_UAF) m_uaf++;
          else if (ex == EXC_UNINIT) m_uninit++;
          else if (c.version == w.data[126]) m_silent++;
          else m_autozero++;
        end
      end else begin
        canc = ref_store(c, o == OP_POISON, wd, bm, w);
        refm[a[63:4]] = w;
        if (rs.store_cancelled !== canc) begin
          failures++;
          $display("FAIL core%0d store a=%h cancelled=%b exp %b", p, a, rs.store_cancelled, canc);
        end
      end
    endtask

    function automatic cap_t objcap(int k, logic v);
      return '{tag:1, perm_poison:0, version:v, base:arena + STRIDE * k, length:64};
    endfunction

    initial begin
      cap_t arena_cap, kern, sub;
      cword_t wd;
      core_req_valid[p] = 0; core_req[p] = '0;
      if (p == 0) cfg_bus = '0;
      @(posedge rst_n);
      repeat (2) @(posedge clk);
      arena_cap = '{tag:1, perm_poison:0, version:0, base:arena, length:STRIDE * NOBJ};
      kern = '{tag:1, perm_poison:1, version:0, base:0, length:64'hFFFF_FFFF_FFFF};
      // allocate and initialise objects
      for (int k = 0; k < NOBJ; k++)
        for (int i = 0; i < 4; i++) begin
          wd = '{tag:0, data:{32'(p), 32'(k), 32'(i), 32'hC0FFEE}};
          op(OP_STORE, objcap(k, 0), arena + STRIDE * k + 16 * i, 16'hFFFF, wd);
        end
      // free the even objects: poison every word with the object's capability
      for (int k = 0; k < NOBJ; k += 2)
        for (int i = 0; i < 4; i++) op(OP_POISON, objcap(k, 0), arena + STRIDE * k + 16 * i, '0, '0);
      // use after free: trap, then silent mode, then a cancelled store, then probes
      op(OP_LOAD, objcap(0, 0), arena + 16, '0, '0);
      if (p == 0) cfg_bus.silent = 1;
      op(OP_LOAD, objcap(2, 0), arena + STRIDE * 2, '0, '0);
      op(OP_STORE, objcap(2, 0), arena + STRIDE * 2, 16'h00FF, '{tag:0, data:128'h1234});
      op(OP_GETPOISON, objcap(4, 0), arena + STRIDE * 4 + 32, '0, '0);
      op(OP_GETPOISON, objcap(5, 0), arena + STRIDE * 5 + 32, '0, '0);
      if (p == 0) cfg_bus = '0;
      // nested allocator frees the upper half of object 1
      sub = '{tag:1, perm_poison:0, version:0, base:arena + STRIDE + 32, length:32};
      op(OP_POISON, sub, arena + STRIDE + 32, '0, '0);
      op(OP_POISON, sub, arena + STRIDE + 48, '0, '0);
      op(OP_LOAD, sub, arena + STRIDE + 48, '0, '0);          // trap
      op(OP_LOAD, objcap(1, 0), arena + STRIDE + 48, '0, '0); // upstream: allowed
      op(OP_LOAD, arena_cap, arena + STRIDE + 32, '0, '0);    // arena: allowed
      // reallocate object 0 with the other version
      op(OP_LOAD, objcap(0, 1), arena, '0, '0);               // reads zero
      if (p == 0) cfg_bus.init_trap = 1;
      op(OP_LOAD, objcap(0, 1), arena + 16, '0, '0);          // traps when enabled
      if (p == 0) cfg_bus = '0;
      op(OP_STORE, objcap(0, 1), arena + 16, 16'h000F, '{tag:0, data:128'hAABBCCDD});
      op(OP_LOAD, objcap(0, 1), arena + 16, '0, '0);          // write plus zeros
      // the kernel sees poison as it is
      op(OP_LOAD, kern, arena + STRIDE * 6, '0, '0);
      // random traffic on the same objects
      repeat (3000) begin
        int k; logic [63:0] a; cap_t c; mem_op_e o; logic [15:0] bm;
        k = ($urandom % 4 == 0) ? int'($urandom % NOBJ) : int'($urandom % 3);
        a = arena + STRIDE * k + 16 * ($urandom % 4);
        case ($urandom % 5)
          0: c = arena_cap;
          1: c = kern;
          2: c = '{tag:1, perm_poison:0, version:1'($urandom), base:a & ~64'h1F, length:32};
          default: c = objcap(k, 1'($urandom));
        endcase
        case ($urandom % 8)
          0, 1, 2: o = OP_LOAD;
          3, 4:    o = OP_STORE;
          5, 6:    o = OP_POISON;
          default: o = OP_GETPOISON;
        endcase
        bm = ($urandom % 2) ? 16'hFFFF : 16'($urandom);
        wd = '{tag:1'($urandom), data:{$urandom, $urandom, $urandom, $urandom}};
        wd.data[127] = 1'b0;
        op(o, c, a, bm, wd);
      end
      done++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done == 2);
    repeat (5) @(posedge clk);
    $display("L1: hit=%0d miss=%0d evict_poisoned=%0d writeback=%0d store_cancel=%0d detox=%0d line_poisoned=%0d",
             m_l1[0], m_l1[1], m_l1[2], m_l1[3], m_l1[4], m_l1[5], m_l1[6]);
    $display("LLC: hit=%0d miss=%0d evict_poisoned=%0d writeback=%0d; arbiter conflicts=%0d; dram reads=%0d writes=%0d",
             m_llc[0], m_llc[1], m_llc[2], m_llc[3], m_conf, n_reads, n_writes);
    $display("loads: uaf_trap=%0d uninit_trap=%0d silent_zero=%0d auto_zero=%0d privileged=%0d probes=%0d",
             m_uaf, m_uninit, m_silent, m_autozero, m_priv, m_probe);
    for (int e = 0; e < 7; e++) begin checks++; if (m_l1[e] == 0) begin failures++; $display("FAIL L1 event %0d never happened", e); end end
    for (int e = 0; e < 4; e++) begin checks++; if (m_llc[e] == 0) begin failures++; $display("FAIL LLC event %0d never happened", e); end end
    checks++; if (m_conf == 0)     begin failures++; $display("FAIL no arbiter contention"); end
    checks++; if (m_uaf == 0)      begin failures++; $display("FAIL no UAF trap"); end
    checks++; if (m_uninit == 0)   begin failures++; $display("FAIL no uninit trap"); end
    checks++; if (m_silent == 0)   begin failures++; $display("FAIL no silent zero"); end
    checks++; if (m_autozero == 0) begin failures++; $display("FAIL no auto zero"); end
    checks++; if (m_priv == 0)     begin failures++; $display("FAIL no privileged access"); end
    checks++; if (m_probe == 0)    begin failures++; $display("FAIL no probe"); end
    $display("cycles=%0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
