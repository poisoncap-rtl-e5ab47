// poison_l1d: poison-aware L1 data cache with the poison check units.
//
// A blocking, write-back, write-allocate set-associative cache of tagged
// 16-byte words (default 32 KiB, 4 ways, 64-byte lines, 128 sets). Every
// core request names one word: a load, a byte-masked store, a poison store or
// a CGetPoison probe, each with the decoded capability it is made through.
// On a hit the word is read, passed through poison_load_check (loads and
// probes) or poison_store_check (stores and poison stores), and the result is
// written back in the same cycle. Each line carries one extra state bit,
// "fully poisoned", recomputed by poison_line_detect whenever a store updates
// the line and when a line is filled. On a miss poison_victim_sel prefers an
// invalid way, then a fully poisoned way, then the round-robin way; a dirty
// victim is written back before the fill.
//
// Interface: core side req_valid/req_ready (ready only when idle) and a
// one-cycle resp_valid pulse; memory side a line request with valid/ready and
// a one-cycle mresp_valid pulse answering every request (reads with data,
// writes as acknowledge). Timing: a hit answers two cycles after the request
// is accepted (accept, look up, respond); a miss adds the fill and, for a
// dirty victim, the write-back round trips.
//
// From the paper: the geometry (4 ways, 32 KiB), the per-line poison bit set
// when a store leaves a line with only poison capabilities, preferring
// poisoned lines for replacement, the load and store poison checks. This
// design's own: blocking operation, the handshakes, 64-byte lines,
// round-robin as the underlying policy, recomputing the poison bit on fills.
module poison_l1d
  import poisoncap_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 32768,
  parameter int unsigned WAYS       = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  poison_cfg_t cfg,
  // core side
  input  logic        req_valid,
  output logic        req_ready,
  input  core_req_t   req,
  output logic        resp_valid,
  output core_resp_t  resp,
  // next level
  output logic        mreq_valid,
  input  logic        mreq_ready,
  output line_req_t   mreq,
  input  logic        mresp_valid,
  input  cline_t      mresp_data,
  // event pulses for performance counting
  output logic        ev_hit,
  output logic        ev_miss,
  output logic        ev_evict_poisoned,
  output logic        ev_writeback,
  output logic        ev_store_cancel,
  output logic        ev_detox,
  output logic        ev_line_poisoned   // a store left its line fully poisoned
);
  localparam int unsigned SETS  = SIZE_BYTES / (LINE_BYTES * WAYS);
  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned OFF_W = $clog2(LINE_BYTES);
  localparam int unsigned TAG_W = XLEN - IDX_W - OFF_W;
  localparam int unsigned WW    = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned WI_W  = $clog2(WPL);

  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_WB, S_WB_WAIT, S_FILL, S_FILL_WAIT} state_e;

  // storage
  logic [TAG_W-1:0] tag_q   [SETS][WAYS];
  cline_t           data_q  [SETS][WAYS];
  logic [WAYS-1:0]  valid_q [SETS];
  logic [WAYS-1:0]  dirty_q [SETS];
  logic [WAYS-1:0]  pois_q  [SETS];
  logic [WW-1:0]    rr_q    [SETS];

  state_e    state_q;
  core_req_t r_q;
  logic [WW-1:0] vict_q;

  logic [IDX_W-1:0] set_i;
  logic [TAG_W-1:0] tag_i;
  logic [WI_W-1:0]  widx;
  assign set_i = r_q.addr[OFF_W +: IDX_W];
  assign tag_i = r_q.addr[XLEN-1 -: TAG_W];
  assign widx  = r_q.addr[$clog2(WORD_BYTES) +: WI_W];

  // tag match
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

  cline_t hline;
  cword_t old_word;
  assign hline    = data_q[set_i][hway];
  assign old_word = hline[widx];

  // poison checks
  cword_t ld_data;
  exc_e   ld_exc;
  logic   ld_pois, ld_priv, ld_zero;
  poison_load_check u_ldchk (
    .cap(r_q.cap), .cfg(cfg), .probe(r_q.op == OP_GETPOISON), .mem_word(old_word),
    .rdata(ld_data), .exc(ld_exc), .poisoned(ld_pois), .privileged(ld_priv), .zeroed(ld_zero)
  );

  logic   st_we, st_cancel, st_detox;
  cword_t st_word;
  poison_store_check u_stchk (
    .cap(r_q.cap), .is_poison_op(r_q.op == OP_POISON), .old_word(old_word),
    .wdata(r_q.wdata), .bmask(r_q.bmask),
    .we(st_we), .new_word(st_word), .cancelled(st_cancel), .detox(st_detox)
  );

  logic is_store;
  assign is_store = (r_q.op == OP_STORE) || (r_q.op == OP_POISON);

  // line after the store, and its poison state
  cline_t upd_line;
  logic [WPL-1:0] upd_wp;
  logic upd_all;
  always_comb begin
    upd_line = hline;
    upd_line[widx] = st_word;
  end
  poison_line_detect u_upd_det (.line(upd_line), .word_poison(upd_wp), .all_poison(upd_all));

  logic [WPL-1:0] fill_wp;
  logic fill_all;
  poison_line_detect u_fill_det (.line(mresp_data), .word_poison(fill_wp), .all_poison(fill_all));

  // victim choice
  logic [WW-1:0] vsel;
  logic [1:0]    vkind;
  poison_victim_sel #(.WAYS(WAYS)) u_vsel (
    .valid(valid_q[set_i]), .poisoned(pois_q[set_i]), .rr_ptr(rr_q[set_i]),
    .victim(vsel), .kind(vkind)
  );

  logic do_store, do_fill;
  assign do_store = (state_q == S_LOOKUP) && hit && is_store && st_we;
  assign do_fill  = (state_q == S_FILL_WAIT) && mresp_valid;

  // data and tag arrays (no reset; guarded by valid bits)
  always_ff @(posedge clk) begin
    if (do_store) data_q[set_i][hway][widx] <= st_word;
    if (do_fill) begin
      data_q[set_i][vict_q] <= mresp_data;
      tag_q[set_i][vict_q]  <= tag_i;
    end
  end

  // control state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      r_q        <= '0;
      vict_q     <= '0;
      resp_valid <= 1'b0;
      resp       <= '0;
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
            resp       <= '0;
            if (is_store) begin
              resp.store_cancelled <= st_cancel;
              if (st_we) begin
                dirty_q[set_i][hway] <= 1'b1;
                pois_q[set_i][hway]  <= upd_all;
              end
            end else begin
              resp.rdata    <= ld_data;
              resp.exc      <= ld_exc;
              resp.poisoned <= ld_pois;
            end
            state_q <= S_IDLE;
          end else begin
            vict_q  <= vsel;
            rr_q[set_i] <= rr_q[set_i] + 1'b1;
            state_q <= (valid_q[set_i][vsel] && dirty_q[set_i][vsel]) ? S_WB : S_FILL;
          end
        end
        S_WB:        if (mreq_ready) state_q <= S_WB_WAIT;
        S_WB_WAIT:   if (mresp_valid) begin
          valid_q[set_i][vict_q] <= 1'b0;
          state_q <= S_FILL;
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

  // events
  assign ev_hit            = (state_q == S_LOOKUP) && hit;
  assign ev_miss           = (state_q == S_LOOKUP) && !hit;
  assign ev_evict_poisoned = ev_miss && (vkind == 2'd1);
  assign ev_writeback      = (state_q == S_WB) && mreq_ready;
  assign ev_store_cancel   = (state_q == S_LOOKUP) && hit && is_store && st_cancel;
  assign ev_detox          = do_store && st_detox;
  assign ev_line_poisoned  = do_store && upd_all;

  // the next level answers only what was asked
  a_mresp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    mresp_valid |-> (state_q == S_WB_WAIT || state_q == S_FILL_WAIT));
  a_req_word_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    (req_valid && req_ready && req.op == OP_POISON) |-> (req.addr[3:0] == 4'd0));

endmodule
