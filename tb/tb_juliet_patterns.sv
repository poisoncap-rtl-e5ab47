// tb_juliet_patterns: the memory-level patterns behind the three classes of
// temporal-safety test programs (double free, use after free, use of
// uninitialised heap memory), run on the full two-core hierarchy. Core 0
// plays an allocator and a program; core 1 stays idle.
//   use after free : allocate (version v), write, free by poisoning with the
//                    object's capability, read through the stale capability
//                    -> EXC_UAF; write through it -> cancelled. The "good"
//                    variant reads before the free and gets its data.
//   double free    : the allocator probes the first word with CGetPoison
//                    before poisoning; the second free of the same object
//                    sees poison and is reported. A repeated poison store
//                    with the same capability is cancelled by the hardware.
//   uninitialised  : reallocate a freed object with the other version and
//                    initialisation trapping on; reading a word before
//                    writing it -> EXC_UNINIT; the "good" variant writes
//                    first and reads back its data with the rest zeroed.
// Each bad case must be caught and each good case must pass.
module tb_juliet_patterns;
  import poisoncap_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  poison_cfg_t cfg;
  logic core_req_valid [2], core_req_ready [2], core_resp_valid [2];
  core_req_t core_req [2]; core_resp_t core_resp [2];
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  line_req_t mem_req; cline_t mem_resp_data;
  logic [6:0] ev_l1 [2]; logic [3:0] ev_llc; logic ev_arb_conflict;
  int n_reads, n_writes;

  poisoncap_mem_top dut (
    .clk, .rst_n, .cfg, .core_req_valid, .core_req_ready, .core_req,
    .core_resp_valid, .core_resp, .mem_req_valid, .mem_req_ready, .mem_req,
    .mem_resp_valid, .mem_resp_data, .ev_l1, .ev_llc, .ev_arb_conflict);
  tb_line_mem #(.LAT(8)) dram (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .resp_valid(mem_resp_valid), .resp_data(mem_resp_data), .n_reads, .n_writes);

  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (cyc > 200000) begin
      failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  task automatic op(mem_op_e o, cap_t c, logic [63:0] a, logic [15:0] bm, cword_t wd, output core_resp_t rs);
    @(negedge clk);
    core_req[0] = '{op:o, cap:c, addr:a, bmask:bm, wdata:wd}; core_req_valid[0] = 1;
    while (!core_req_ready[0]) @(negedge clk);
    @(posedge clk);
    @(negedge clk); core_req_valid[0] = 0;
    while (!core_resp_valid[0]) @(negedge clk);
    rs = core_resp[0];
  endtask

  task automatic expect_true(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // allocator free: probe, then poison every word unless already poisoned
  task automatic do_free(cap_t c, output logic double_free);
    core_resp_t rs;
    op(OP_GETPOISON, c, c.base, '0, '0, rs);
    double_free = rs.poisoned;
    if (!double_free)
      for (int i = 0; i < int'(c.length / 16); i++) op(OP_POISON, c, c.base + 64'(16 * i), '0, '0, rs);
  endtask

  initial begin
    core_resp_t rs; cap_t c, c2; logic df; cword_t wd;
    int uaf_caught = 0, df_caught = 0, uninit_caught = 0;
    cfg = '0;
    core_req_valid[1] = 0; core_req[1] = '0; core_req_valid[0] = 0; core_req[0] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 16; t++) begin
      c = '{tag:1, perm_poison:0, version:0, base:64'h4000_0000 + 64'(t) * 64'h1000, length:64};
      wd = '{tag:0, data:{96'h0, 32'(t)}};
      // CWE-416 good and bad
      cfg = '0;
      op(OP_STORE, c, c.base, 16'hFFFF, wd, rs);
      op(OP_LOAD, c, c.base, '0, '0, rs);
      expect_true(rs.exc == EXC_NONE && rs.rdata == wd, "UAF good: read before free");
      do_free(c, df);
      expect_true(!df, "first free is not a double free");
      op(OP_LOAD, c, c.base, '0, '0, rs);
      expect_true(rs.exc == EXC_UAF, "UAF bad: read after free traps");
      if (rs.exc == EXC_UAF) uaf_caught++;
      op(OP_STORE, c, c.base + 16, 16'hFFFF, wd, rs);
      expect_true(rs.store_cancelled, "UAF bad: write after free cancelled");
      // CWE-415
      do_free(c, df);
      expect_true(df, "double free detected by probe");
      if (df) df_caught++;
      op(OP_POISON, c, c.base, '0, '0, rs);
      expect_true(rs.store_cancelled, "repeated poison store cancelled");
      // CWE-457: reallocate with the other version
      cfg.init_trap = 1;
      c2 = c; c2.version = 1;
      op(OP_LOAD, c2, c2.base + 32, '0, '0, rs);
      expect_true(rs.exc == EXC_UNINIT, "uninit bad: read before write traps");
      if (rs.exc == EXC_UNINIT) uninit_caught++;
      op(OP_STORE, c2, c2.base + 48, 16'h00FF, '{tag:0, data:128'h1122334455667788}, rs);
      expect_true(!rs.store_cancelled, "uninit good: first write allowed");
      op(OP_LOAD, c2, c2.base + 48, '0, '0, rs);
      expect_true(rs.exc == EXC_NONE && rs.rdata == '{tag:0, data:128'h1122334455667788},
                  "uninit good: read after write returns data, rest zero");
      // the stale version-0 capability still cannot read the reused memory
      cfg = '0;
      op(OP_LOAD, c, c.base + 32, '0, '0, rs);
      expect_true(rs.exc == EXC_UAF, "stale capability still trapped on unwritten word");
    end
    $display("caught: use_after_free=%0d double_free=%0d uninitialised=%0d of 16 each", uaf_caught, df_caught, uninit_caught);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
