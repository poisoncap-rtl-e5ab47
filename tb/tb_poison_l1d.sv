// tb_poison_l1d: checks the L1 data cache with its poison checks against a
// flat reference memory (tb_ref_pkg), behind the behavioural memory model.
// A small configuration (1 KiB, 4 ways, 4 sets) forces evictions. Directed
// part: fill one set, poison one whole line, and check that the next miss
// evicts that line instead of the round-robin way (the other three lines
// still hit), that a hit answers in 2 cycles, and that the poisoned line
// written back to memory is read back intact through a privileged
// capability. Random part: loads, stores, poison stores and probes through
// capabilities of several allocation layers and versions, every response
// compared with the reference.
module tb_poison_l1d;
  import poisoncap_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  poison_cfg_t cfg;
  logic req_valid, req_ready, resp_valid;
  core_req_t req; core_resp_t resp;
  logic mreq_valid, mreq_ready, mresp_valid;
  line_req_t mreq; cline_t mresp_data;
  logic ev_hit, ev_miss, ev_evp, ev_wb, ev_sc, ev_dt, ev_lp;
  int n_reads, n_writes;

  poison_l1d #(.SIZE_BYTES(1024), .WAYS(4)) dut (
    .clk, .rst_n, .cfg, .req_valid, .req_ready, .req, .resp_valid, .resp,
    .mreq_valid, .mreq_ready, .mreq, .mresp_valid, .mresp_data,
    .ev_hit, .ev_miss, .ev_evict_poisoned(ev_evp), .ev_writeback(ev_wb),
    .ev_store_cancel(ev_sc), .ev_detox(ev_dt), .ev_line_poisoned(ev_lp));

  tb_line_mem #(.LAT(3)) mem (.clk, .rst_n, .req_valid(mreq_valid), .req_ready(mreq_ready), .req(mreq),
    .resp_valid(mresp_valid), .resp_data(mresp_data), .n_reads, .n_writes);

  int cyc = 0, n_evp = 0, n_hit = 0, n_miss = 0, n_sc = 0, n_dt = 0, n_lp = 0, n_wb = 0;
  always @(posedge clk) begin
    cyc++;
    n_evp += int'(ev_evp); n_hit += int'(ev_hit); n_miss += int'(ev_miss);
    n_sc += int'(ev_sc); n_dt += int'(ev_dt); n_lp += int'(ev_lp); n_wb += int'(ev_wb);
    if (cyc > 400000) begin
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

  task automatic access(input core_req_t rq, output core_resp_t rs, output int lat);
    @(negedge clk);
    req = rq; req_valid = 1;
    while (!req_ready) @(negedge clk);
    @(posedge clk); lat = 1;
    @(negedge clk); req_valid = 0;
    while (!resp_valid) begin @(negedge clk); lat++; end
    rs = resp;
  endtask

  // issue one request, apply it to the reference and compare
  task automatic op_check(mem_op_e op, cap_t c, logic [63:0] a, logic [15:0] bm, cword_t wd, output int lat);
    core_req_t rq; core_resp_t rs; cword_t w, ed; exc_e ex; logic canc;
    rq = '{op:op, cap:c, addr:a, bmask:bm, wdata:wd};
    access(rq, rs, lat);
    w = rd(a);
    checks++;
    if (op == OP_LOAD || op == OP_GETPOISON) begin
      ref_load(c, cfg, op == OP_GETPOISON, w, ed, ex);
      if (rs.rdata !== ed || rs.exc !== ex || rs.poisoned !== ref_is_poison(w)) begin
        failures++;
        $display("FAIL load a=%h got %h/%0d/%b exp %h/%0d/%b", a, rs.rdata, rs.exc, rs.poisoned, ed, ex, ref_is_poison(w));
      end
    end else begin
      canc = ref_store(c, op == OP_POISON, wd, bm, w);
      refm[a[63:4]] = w;
      if (rs.store_cancelled !== canc) begin
        failures++;
        $display("FAIL store a=%h cancelled=%b exp %b", a, rs.store_cancelled, canc);
      end
    end
  endtask

  initial begin
    cap_t c, kern; int lat, e0, h0;
    cword_t wd;
    req_valid = 0; req = '0; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    kern = '{tag:1, perm_poison:1, version:0, base:0, length:64'hFFFF_FFFF};
    // fill set 0 with four lines, distinct data
    for (int k = 0; k < 4; k++) begin
      wd = '{tag:0, data:{32'(k), 32'h1, 32'h2, 32'h3}};
      op_check(OP_STORE, '{tag:1, perm_poison:0, version:0, base:64'(k*256), length:64}, 64'(k*256), 16'hFFFF, wd, lat);
    end
    // hit latency
    op_check(OP_LOAD, '{tag:1, perm_poison:0, version:0, base:256, length:64}, 64'd256, '0, '0, lat);
    checks++;
    if (lat != 2) begin failures++; $display("FAIL hit latency %0d", lat); end
    // free line 2: poison its four words with the allocation's capability
    c = '{tag:1, perm_poison:0, version:0, base:512, length:64};
    for (int i = 0; i < 4; i++) op_check(OP_POISON, c, 64'(512 + 16*i), '0, '0, lat);
    checks++;
    if (n_lp != 1) begin failures++; $display("FAIL line poisoned events %0d", n_lp); end
    // use after free traps
    op_check(OP_LOAD, c, 64'd528, '0, '0, lat);
    // a new line in the same set must evict the poisoned line
    e0 = n_evp;
    op_check(OP_LOAD, '{tag:1, perm_poison:0, version:0, base:1024, length:64}, 64'd1024, '0, '0, lat);
    checks++;
    if (n_evp != e0 + 1) begin failures++; $display("FAIL poisoned line not chosen"); end
    h0 = n_hit;
    for (int k = 0; k < 4; k++) if (k != 2)
      op_check(OP_LOAD, '{tag:1, perm_poison:0, version:0, base:64'(k*256), length:64}, 64'(k*256), '0, '0, lat);
    checks++;
    if (n_hit != h0 + 3) begin failures++; $display("FAIL live lines were evicted (hits %0d)", n_hit - h0); end
    // the poison survived the write-back: a privileged read returns it
    op_check(OP_LOAD, kern, 64'd512, '0, '0, lat);
    // random traffic over 32 lines in 4 sets
    repeat (6000) begin
      mem_op_e op; logic [63:0] a, ab; cap_t rc; logic [15:0] bm;
      cfg = 2'($urandom);
      a  = 64'($urandom % 128) << 4;
      case ($urandom % 4)
        0: begin ab = a & ~64'h3F; rc = '{tag:1, perm_poison:0, version:1'($urandom), base:ab, length:64}; end
        1: begin ab = a & ~64'h1F; rc = '{tag:1, perm_poison:0, version:1'($urandom), base:ab, length:32}; end
        2: rc = '{tag:1, perm_poison:0, version:1'($urandom), base:0, length:1024};
        default: rc = '{tag:1, perm_poison:($urandom % 2 == 0), version:1'($urandom), base:a, length:16};
      endcase
      case ($urandom % 8)
        0, 1, 2: op = OP_LOAD;
        3, 4:    op = OP_STORE;
        5, 6:    op = OP_POISON;
        default: op = OP_GETPOISON;
      endcase
      bm = ($urandom % 2) ? 16'hFFFF : 16'($urandom);
      wd = '{tag:1'($urandom), data:{$urandom, $urandom, $urandom, $urandom}};
      wd.data[127] = 1'b0;
      op_check(op, rc, a, bm, wd, lat);
    end
    $display("events: hit=%0d miss=%0d evict_poisoned=%0d writeback=%0d cancel=%0d detox=%0d line_poisoned=%0d",
             n_hit, n_miss, n_evp, n_wb, n_sc, n_dt, n_lp);
    checks++;
    if (n_evp == 0 || n_wb == 0 || n_sc == 0 || n_dt == 0) begin failures++; $display("FAIL mechanism not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
