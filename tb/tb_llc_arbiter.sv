// tb_llc_arbiter: two requesters share one responder through the arbiter.
// Each requester issues a stream of reads tagged with its own address range;
// the responder echoes the address in the data after a random delay. Checks:
// each response returns to the port that asked, at most one transaction is
// in flight, and with both ports always requesting the grants alternate.
module tb_llc_arbiter;
  import poisoncap_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic up_valid [2], up_ready [2], up_resp_valid [2];
  line_req_t up_req [2]; cline_t up_resp_data;
  logic dn_valid, dn_ready, dn_resp_valid, ev_conflict; line_req_t dn_req; cline_t dn_resp_data;

  llc_arbiter #(.N(2)) dut (.clk, .rst_n, .up_valid, .up_ready, .up_req, .up_resp_valid, .up_resp_data,
    .dn_valid, .dn_ready, .dn_req, .dn_resp_valid, .dn_resp_data, .ev_conflict);

  // responder
  logic busy; int cnt; line_req_t cur; int inflight = 0;
  assign dn_ready = !busy;
  always @(posedge clk) begin
    dn_resp_valid <= 0;
    if (!rst_n) begin busy <= 0; end
    else if (!busy && dn_valid) begin busy <= 1; cur <= dn_req; cnt <= int'($urandom % 4) + 1; end
    else if (busy) begin
      if (cnt > 1) cnt <= cnt - 1;
      else begin busy <= 0; dn_resp_valid <= 1; dn_resp_data <= '0; dn_resp_data[0].data[63:0] <= cur.addr; end
    end
  end

  int cyc = 0, grants [2] = '{0, 0}, last = -1, alternations = 0, conflicts = 0;
  always @(posedge clk) begin
    cyc++;
    if (ev_conflict) conflicts++;
    if (cyc > 100000) begin
      failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  // requesters
  for (genvar p = 0; p < 2; p++) begin : g_req
    initial begin
      up_valid[p] = 0; up_req[p] = '0;
      @(posedge rst_n);
      for (int n = 0; n < 200; n++) begin
        logic [63:0] a;
        a = 64'(p) << 40 | 64'(n) << 6;
        @(negedge clk);
        up_valid[p] = 1; up_req[p] = '{we:0, addr:a, data:'0};
        while (!up_ready[p]) @(negedge clk);
        @(posedge clk);
        if (last >= 0 && last != p) alternations++;
        last = p; grants[p]++;
        @(negedge clk); up_valid[p] = 0;
        while (!up_resp_valid[p]) @(negedge clk);
        checks++;
        if (up_resp_data[0].data[63:0] !== a) begin failures++; $display("FAIL port %0d got %h exp %h", p, up_resp_data[0].data[63:0], a); end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (grants[0] == 200 && grants[1] == 200);
    repeat (10) @(posedge clk);
    checks++;
    if (alternations < 300) begin failures++; $display("FAIL grants did not alternate (%0d)", alternations); end
    checks++;
    if (conflicts == 0) begin failures++; $display("FAIL no contention seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
