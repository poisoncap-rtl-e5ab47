// poisoncap_mem_top: the poison-aware data memory hierarchy of a two-core
// CHERI system.
//
// Each core has its own poison_l1d (L1 data cache with the load and store
// poison checks and the per-line poison bit). The L1 caches share one
// poison_llc through llc_arbiter, and the LLC talks to the tag controller and
// DRAM through the mem_* ports, which leave the chip-level block here.
//
// Ports, per core c: core_req_valid[c]/core_req_ready[c]/core_req[c] carry a
// word request with its decoded capability; core_resp_valid[c]/core_resp[c]
// return data, a precise-exception cause for loads, the store-cancelled flag
// and the CGetPoison result. cfg selects the silent UAF mode and
// initialisation-safety trapping for all cores. Event pulses are collected in
// ev for performance counters.
//
// The structure (two cores, private 4-way 32 KiB L1 data caches, a shared
// 16-way 1 MiB last-level cache in front of the tag controller and DRAM)
// follows the paper. The paper's processor is out-of-order and its caches are
// kept coherent; the core and the coherence protocol are not part of this
// block, so two cores must not share lines here.
module poisoncap_mem_top
  import poisoncap_pkg::*;
#(
  parameter int unsigned NUM_CORES     = 2,
  parameter int unsigned L1_SIZE_BYTES = 32768,
  parameter int unsigned L1_WAYS       = 4,
  parameter int unsigned LLC_SIZE_BYTES = 1048576,
  parameter int unsigned LLC_WAYS      = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  poison_cfg_t cfg,
  input  logic        core_req_valid [NUM_CORES],
  output logic        core_req_ready [NUM_CORES],
  input  core_req_t   core_req       [NUM_CORES],
  output logic        core_resp_valid[NUM_CORES],
  output core_resp_t  core_resp      [NUM_CORES],
  // tag controller / DRAM side
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output line_req_t   mem_req,
  input  logic        mem_resp_valid,
  input  cline_t      mem_resp_data,
  // event pulses: per core L1, then LLC
  output logic [6:0]  ev_l1 [NUM_CORES], // hit, miss, evict_poisoned, writeback, store_cancel, detox, line_poisoned
  output logic [3:0]  ev_llc,            // hit, miss, evict_poisoned, writeback
  output logic        ev_arb_conflict
);
  logic      l1_mreq_valid [NUM_CORES];
  logic      l1_mreq_ready [NUM_CORES];
  line_req_t l1_mreq       [NUM_CORES];
  logic      l1_mresp_valid[NUM_CORES];
  cline_t    l1_mresp_data;

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    poison_l1d #(.SIZE_BYTES(L1_SIZE_BYTES), .WAYS(L1_WAYS)) u_l1d (
      .clk, .rst_n, .cfg,
      .req_valid (core_req_valid[c]), .req_ready(core_req_ready[c]), .req(core_req[c]),
      .resp_valid(core_resp_valid[c]), .resp(core_resp[c]),
      .mreq_valid(l1_mreq_valid[c]), .mreq_ready(l1_mreq_ready[c]), .mreq(l1_mreq[c]),
      .mresp_valid(l1_mresp_valid[c]), .mresp_data(l1_mresp_data),
      .ev_hit(ev_l1[c][0]), .ev_miss(ev_l1[c][1]), .ev_evict_poisoned(ev_l1[c][2]),
      .ev_writeback(ev_l1[c][3]), .ev_store_cancel(ev_l1[c][4]), .ev_detox(ev_l1[c][5]),
      .ev_line_poisoned(ev_l1[c][6])
    );
  end

  logic      llc_req_valid, llc_req_ready, llc_resp_valid;
  line_req_t llc_req;
  cline_t    llc_resp_data;

  llc_arbiter #(.N(NUM_CORES)) u_arb (
    .clk, .rst_n,
    .up_valid(l1_mreq_valid), .up_ready(l1_mreq_ready), .up_req(l1_mreq),
    .up_resp_valid(l1_mresp_valid), .up_resp_data(l1_mresp_data),
    .dn_valid(llc_req_valid), .dn_ready(llc_req_ready), .dn_req(llc_req),
    .dn_resp_valid(llc_resp_valid), .dn_resp_data(llc_resp_data),
    .ev_conflict(ev_arb_conflict)
  );

  poison_llc #(.SIZE_BYTES(LLC_SIZE_BYTES), .WAYS(LLC_WAYS)) u_llc (
    .clk, .rst_n,
    .req_valid(llc_req_valid), .req_ready(llc_req_ready), .req(llc_req),
    .resp_valid(llc_resp_valid), .resp_data(llc_resp_data),
    .mreq_valid(mem_req_valid), .mreq_ready(mem_req_ready), .mreq(mem_req),
    .mresp_valid(mem_resp_valid), .mresp_data(mem_resp_data),
    .ev_hit(ev_llc[0]), .ev_miss(ev_llc[1]), .ev_evict_poisoned(ev_llc[2]), .ev_writeback(ev_llc[3])
  );
endmodule
