// poison_llc: poison-aware shared last-level cache.
//
// A blocking, write-back set-associative cache of whole 64-byte lines
// (default 1 MiB, 16 ways, 1024 sets) shared by the L1 data caches through an
// arbiter. Requests are line reads (L1 fills) and line writes (L1
// write-backs). Each line keeps a "fully poisoned" bit, recomputed by
// poison_line_detect whenever a line is written (an L1 write-back, the
// last-level equivalent of a store updating the line) or filled from memory.
// On a miss poison_victim_sel prefers an invalid way, then a fully poisoned
// way, then the round-robin way, so lines of freed memory leave first and
// spare DRAM bandwidth for live data. A write miss installs the written line
// without fetching it, since it overwrites the whole line; a read miss fetches
// the line from memory.
//
// Interface: upstream and downstream both use a line request with
// valid/ready and a one-cycle response pulse that answers every request
// (reads with data, writes as an acknowledge). Timing: a hit answers two
// cycles after the request is accepted.
//
// From the paper: 16 ways, 1 MiB, shared by the cores, in front of the tag
// controller and DRAM, and a per-line poison bit that guides replacement.
// This design's own: the blocking organisation, handshakes, line size and
// the round-robin base policy.
module poison_llc
  import poisoncap_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 1048576,
  parameter int unsigned WAYS       = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  // upstream (from the arbiter)
  input  logic      req_valid,
  output logic      req_ready,
  input  line_req_t req,
  output logic      resp_valid,
  output cline_t    resp_data,
  // downstream (tag controller and DRAM)
  output logic      mreq_valid,
  input  logic      mreq_ready,
  output line_req_t mreq,
  input  logic      mresp_valid,
  input  cline_t    mresp_data,
  // event pulses
  output logic      ev_hit,
  output logic      ev_miss,
  output logic      ev_evict_poisoned,
  output logic      ev_writeback
);
  localparam int unsigned SETS  = SIZE_BYTES / (LINE_BYTES * WAYS);
  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned OFF_W = $clog2(LINE_BYTES);
  localparam int unsigned TAG_W = XLEN - IDX_W - OFF_W;
  localparam int unsigned WW    = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_WB, S_WB_WAIT, S_FILL, S_FILL_WAIT} state_e;

  logic [TAG_W-1:0] tag_q   [SETS][WAYS];
  cline_t           data_q  [SETS][WAYS];
  logic [WAYS-1:0]  valid_q [SETS];
  logic [WAYS-1:0]  dirty_q [SETS];
  logic [WAYS-1:0]  pois_q  [SETS];
  logic [WW-1:0]    rr_q    [SETS];

  state_e    state_q;
  line_req_t r_q;
  logic [WW-1:0] vict_q;

  logic [IDX_W-1:0] set_i;
  logic [TAG_W-1:0] tag_i;
  assign set_i = r_q.addr[OFF_W +: IDX_W];
  assign tag_i = r_q.addr[XLEN-1 -: TAG_W];

  logic          hit;
  logic [WW-1:0] hway;
  always_comb begin
    hit  = 1'b0;
    hway = '0;
    for (int w = 0; w < WAYS; w++)
      if (valid_q[set_i][w] && tag_q[set_i][w] == tag_i) begin
        hit  = 1'b1;
        hway = WW'(w);
      end
  end

  logic [WPL-1:0] wr_wp, fill_wp;
  logic wr_all, fill_all;
  poison_line_detect u_wr_det   (.line(r_q.data),   .word_poison(wr_wp),   .all_poison(wr_all));
  poison_line_detect u_fill_det (.line(mresp_data), .word_poison(fill_wp), .all_poison(fill_all));

  logic [WW-1:0] vsel;
  logic [1:0]    vkind;
  poison_victim_sel #(.WAYS(WAYS)) u_vsel (
    .valid(valid_q[set_i]), .poisoned(pois_q[set_i]), .rr_ptr(rr_q[set_i]),
    .victim(vsel), .kind(vkind)
  );

  // A write that misses installs its line once the victim is gone.
  logic do_wr_hit, do_wr_install, do_fill, vdirty;
  assign vdirty        = valid_q[set_i][vsel] && dirty_q[set_i][vsel];
  assign do_wr_hit     = (state_q == S_LOOKUP) && hit && r_q.we;
  assign do_wr_install = r_q.we && (((state_q == S_LOOKUP) && !hit && !vdirty) ||
                                    ((state_q == S_WB_WAIT) && mresp_valid));
  assign do_fill       = (state_q == S_FILL_WAIT) && mresp_valid;

  logic [WW-1:0] inst_way;
  assign inst_way = (state_q == S_LOOKUP) ? vsel : vict_q;

  always_ff @(posedge clk) begin
    if (do_wr_hit) data_q[set_i][hway] <= r_q.data;
    if (do_wr_install) begin
      data_q[set_i][inst_way] <= r_q.data;
      tag_q[set_i][inst_way]  <= tag_i;
    end
    if (do_fill) begin
      data_q[set_i][vict_q] <= mresp_data;
      tag_q[set_i][vict_q]  <= tag_i;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      r_q        <= '0;
      vict_q     <= '0;
      resp_valid <= 1'b0;
      resp_data  <= '0;
      for (int s = 0; s < SETS; s++) begin
        valid_q[s] <= '0;
        dirty_q[s] <= '0;
        pois_q[s]  <= '0;
        rr_q[s]    <= '0;
      end
    end else begin
      resp_valid <= 1'b0;
      unique case (state_q)
        S_IDLE: if (req_valid) begin
          r_q     <= req;
          state_q <= S_LOOKUP;
        end
        S_LOOKUP: begin
          if (hit) begin
            resp_valid <= 1'b1;
            resp_data  <= data_q[set_i][hway];
            if (r_q.we) begin
              dirty_q[set_i][hway] <= 1'b1;
              pois_q[set_i][hway]  <= wr_all;
            end
            state_q <= S_IDLE;
          end else begin
            vict_q      <= vsel;
            rr_q[set_i] <= rr_q[set_i] + 1'b1;
            if (vdirty) begin
              state_q <= S_WB;
            end else if (r_q.we) begin
              valid_q[set_i][vsel] <= 1'b1;
              dirty_q[set_i][vsel] <= 1'b1;
              pois_q[set_i][vsel]  <= wr_all;
              resp_valid <= 1'b1;
              resp_data  <= r_q.data;
              state_q    <= S_IDLE;
            end else begin
              state_q <= S_FILL;
            end
          end
        end
        S_WB:      if (mreq_ready) state_q <= S_WB_WAIT;
        S_WB_WAIT: if (mresp_valid) begin
          if (r_q.we) begin
            valid_q[set_i][vict_q] <= 1'b1;
            dirty_q[set_i][vict_q] <= 1'b1;
            pois_q[set_i][vict_q]  <= wr_all;
            resp_valid <= 1'b1;
            resp_data  <= r_q.data;
            state_q    <= S_IDLE;
          end else begin
            valid_q[set_i][vict_q] <= 1'b0;
            state_q <= S_FILL;
          end
        end
        S_FILL:      if (mreq_ready) state_q <= S_FILL_WAIT;
        S_FILL_WAIT: if (mresp_valid) begin
          valid_q[set_i][vict_q] <= 1'b1;
          dirty_q[set_i][vict_q] <= 1'b0;
          pois_q[set_i][vict_q]  <= fill_all;
          state_q <= S_LOOKUP;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign req_ready = (state_q == S_IDLE);

  always_comb begin
    mreq_valid = (state_q == S_WB) || (state_q == S_FILL);
    mreq.we    = (state_q == S_WB);
    mreq.data  = data_q[set_i][vict_q];
    if (state_q == S_WB)
      mreq.addr = {tag_q[set_i][vict_q], set_i, {OFF_W{1'b0}}};
    else
      mreq.addr = {tag_i, set_i, {OFF_W{1'b0}}};
  end

  assign ev_hit            = (state_q == S_LOOKUP) && hit;
  assign ev_miss           = (state_q == S_LOOKUP) && !hit;
  assign ev_evict_poisoned = ev_miss && (vkind == 2'd1);
  assign ev_writeback      = (state_q == S_WB) && mreq_ready;

  a_mresp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    mresp_valid |-> (state_q == S_WB_WAIT || state_q == S_FILL_WAIT));

endmodule
