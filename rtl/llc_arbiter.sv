// llc_arbiter: round-robin arbiter that lets several L1 caches share the
// last-level cache.
//
// One transaction is in flight at a time: when the LLC accepts a request the
// arbiter locks onto that port until the LLC's response pulse, which it
// routes back to the same port. When idle it grants the first requesting port
// after the one served last. The paper states only that the cores share the
// last-level cache; the arbiter, its round-robin order and the
// one-transaction lock are this design's own.
module llc_arbiter
  import poisoncap_pkg::*;
#(
  parameter int unsigned N  = 2,
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1
) (
  input  logic      clk,
  input  logic      rst_n,
  // requesters
  input  logic      up_valid [N],
  output logic      up_ready [N],
  input  line_req_t up_req   [N],
  output logic      up_resp_valid [N],
  output cline_t    up_resp_data,
  // shared cache
  output logic      dn_valid,
  input  logic      dn_ready,
  output line_req_t dn_req,
  input  logic      dn_resp_valid,
  input  cline_t    dn_resp_data,
  output logic      ev_conflict  // more than one port was waiting at a grant
);
  logic          busy_q;
  logic [NW-1:0] owner_q, last_q, pick;
  logic          any;
  int unsigned   nreq;

  always_comb begin
    any  = 1'b0;
    pick = last_q;
    nreq = 0;
    for (int i = 1; i <= N; i++) begin
      automatic int unsigned p = (32'(last_q) + 32'(i)) % N;
      if (up_valid[p]) begin
        nreq++;
        if (!any) begin
          any  = 1'b1;
          pick = NW'(p);
        end
      end
    end
  end

  assign dn_valid     = !busy_q && any;
  assign dn_req       = up_req[pick];
  assign up_resp_data = dn_resp_data;
  assign ev_conflict  = dn_valid && dn_ready && (nreq > 1);

  always_comb begin
    for (int i = 0; i < N; i++) begin
      up_ready[i]      = !busy_q && any && (pick == NW'(i)) && dn_ready;
      up_resp_valid[i] = busy_q && dn_resp_valid && (owner_q == NW'(i));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q  <= 1'b0;
      owner_q <= '0;
      last_q  <= NW'(N - 1);
    end else if (!busy_q) begin
      if (dn_valid && dn_ready) begin
        busy_q  <= 1'b1;
        owner_q <= pick;
        last_q  <= pick;
      end
    end else if (dn_resp_valid) begin
      busy_q <= 1'b0;
    end
  end

  a_resp_only_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    dn_resp_valid |-> busy_q);
endmodule
