// tb_poison_llc: checks the shared last-level cache (2 KiB, 16 ways, 2 sets
// here) against a flat reference of lines, behind the behavioural memory
// model. Directed part: fill one set with 16 written lines, one of them made
// only of poison capabilities, then read a 17th line: the poisoned line must
// be the victim and the 15 live lines must still hit; a hit answers in 2
// cycles. Random part: line reads and write-backs, some fully poisoned, with
// every read compared to the reference.
module tb_poison_llc;
  import poisoncap_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, resp_valid; line_req_t req; cline_t resp_data;
  logic mreq_valid, mreq_ready, mresp_valid; line_req_t mreq; cline_t mresp_data;
  logic ev_hit, ev_miss, ev_evp, ev_wb;
  int n_reads, n_writes;

  poison_llc #(.SIZE_BYTES(2048), .WAYS(16)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req, .resp_valid, .resp_data,
    .mreq_valid, .mreq_ready, .mreq, .mresp_valid, .mresp_data,
    .ev_hit, .ev_miss, .ev_evict_poisoned(ev_evp), .ev_writeback(ev_wb));
  tb_line_mem #(.LAT(5)) mem (.clk, .rst_n, .req_valid(mreq_valid), .req_ready(mreq_ready), .req(mreq),
    .resp_valid(mresp_valid), .resp_data(mresp_data), .n_reads, .n_writes);

  int cyc = 0, n_evp = 0, n_hit = 0, n_miss = 0, n_wb = 0;
  always @(posedge clk) begin
    cyc++;
    n_evp += int'(ev_evp); n_hit += int'(ev_hit); n_miss += int'(ev_miss); n_wb += int'(ev_wb);
    if (cyc > 400000) begin
      failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  cline_t refm [logic [57:0]];

  function automatic cline_t rand_line(logic poison);
    cline_t l;
    for (int i = 0; i < 4; i++) begin
      l[i].data = {$urandom, $urandom, $urandom, $urandom};
      l[i].tag  = poison ? 1'b1 : 1'($urandom);
      l[i].data[127] = poison;
    end
    return l;
  endfunction

  task automatic access(input logic we, input logic [63:0] a, input cline_t d, output int lat);
    @(negedge clk);
    req = '{we:we, addr:a, data:d}; req_valid = 1;
    while (!req_ready) @(negedge clk);
    @(posedge clk); lat = 1;
    @(negedge clk); req_valid = 0;
    while (!resp_valid) begin @(negedge clk); lat++; end
    if (we) refm[a[63:6]] = d;
    else begin
      cline_t e;
      e = refm.exists(a[63:6]) ? refm[a[63:6]] : '0;
      checks++;
      if (resp_data !== e) begin failures++; $display("FAIL read %h", a); end
    end
  endtask

  initial begin
    int lat, h0;
    req_valid = 0; req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // set 0 lines: addresses k*128
    for (int k = 0; k < 16; k++) access(1, 64'(k*128), rand_line(k == 5), lat);
    access(0, 64'(3*128), '0, lat);
    checks++;
    if (lat != 2) begin failures++; $display("FAIL hit latency %0d", lat); end
    access(0, 64'(16*128), '0, lat);
    checks++;
    if (n_evp != 1) begin failures++; $display("FAIL poisoned victim not chosen"); end
    h0 = n_hit;
    for (int k = 0; k < 16; k++) if (k != 5) access(0, 64'(k*128), '0, lat);
    checks++;
    if (n_hit != h0 + 15) begin failures++; $display("FAIL live lines evicted, hits %0d", n_hit - h0); end
    access(0, 64'(5*128), '0, lat);   // poisoned line comes back from memory intact
    repeat (4000) begin
      logic [63:0] a;
      a = 64'($urandom % 96) << 6;
      if ($urandom % 2) access(1, a, rand_line(($urandom % 3) == 0), lat);
      else              access(0, a, '0, lat);
    end
    $display("events: hit=%0d miss=%0d evict_poisoned=%0d writeback=%0d", n_hit, n_miss, n_evp, n_wb);
    checks++;
    if (n_wb == 0 || n_evp < 2) begin failures++; $display("FAIL mechanism not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
