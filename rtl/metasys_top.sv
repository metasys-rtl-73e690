// metasys_top: the metadata management hardware attached to one in-order core.
//
// Software tags physical memory at granule level with 8-bit tag IDs (MAP,
// UNMAP, MAP2D, MAP3D) and hands per-tag metadata to a chosen hardware
// optimization (CREATE). Hardware clients, triggered by the core's memory
// accesses, look up the tag of an address through a shared lookup path (TLB ->
// Metadata Mapping Cache -> Metadata Mapping Table in memory) and act on the
// metadata in their own Private Metadata Table.
//
// Blocks and wiring:
//   metasys_ctrl      executes the metadata instructions (cmd_*); writes the
//                     MMT through the memory port, updates the MMC, fills PMTs.
//   mmc               128-entry tag cache, probed/filled by the lookup unit and
//                     updated by metasys_ctrl on MAP.
//   lookup_unit       serves the two clients round robin.
//   graph_prefetcher  client 0 (ClientID 0): snoops every accepted core access.
//   safety_client     client 1 (ClientID 1): bounds checking and return-address
//                     protection; it gates the core's access (core_ready) while a
//                     force-stall check runs and raises `violation`.
//   port_arbiter x2   one shares the memory port (ctrl, lookup, prefetcher), one
//                     the TLB port (ctrl, lookup).
// The core, its TLB and main memory are outside: their signals are ports. The
// assignment of ClientIDs and the trigger handshake are this design's choices.
//
// Core access handshake: the core presents an access on core_valid/core_vaddr/
// core_store and may proceed (commit it) in a cycle where core_ready is high.
// core_done pulses when the safety check of that access is finished; with no
// check pending it pulses one cycle after acceptance.
//
// Lint note: verilator reports SYNCASYNCNET on rst_n because the assertion in
// port_arbiter samples it synchronously (disable iff) while all flops use it as
// an asynchronous reset.
module metasys_top
  import metasys_pkg::*;
#(
  parameter int unsigned GRAN_LOG2   = 9,    // 512 B tagging granularity
  parameter int unsigned MMC_ENTRIES = 128,
  parameter int unsigned PF_DEPTH    = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  // metadata instructions from the core
  input  logic         cmd_valid,
  output logic         cmd_ready,
  input  cmd_t         cmd,
  output logic         cmd_busy,
  output logic         cmd_fault,
  // configuration
  input  logic         pf_enable,
  input  lookup_mode_e pf_mode,
  input  logic         bc_en,
  input  logic         rap_en,
  // core memory accesses (triggers)
  input  logic         core_valid,
  output logic         core_ready,
  input  vaddr_t       core_vaddr,
  input  logic         core_store,
  output logic         core_stall,
  output logic         core_done,
  // interrupt to the core
  output logic         violation,
  output logic         viol_bounds,
  output vaddr_t       viol_addr,
  // prefetch requests
  output logic         pf_valid,
  output paddr_t       pf_addr,
  // TLB
  output logic         tlb_req_valid,
  input  logic         tlb_req_ready,
  output tlb_req_t     tlb_req,
  input  logic         tlb_resp_valid,
  input  tlb_resp_t    tlb_resp,
  // memory
  output logic         mem_req_valid,
  input  logic         mem_req_ready,
  output mem_req_t     mem_req,
  input  logic         mem_resp_valid,
  input  mem_resp_t    mem_resp,
  // statistics
  output logic [31:0]  st_mmc_hits,
  output logic [31:0]  st_mmc_misses,
  output logic [31:0]  st_lookups,
  output logic [31:0]  st_mmt_reads,
  output logic [31:0]  st_dropped,
  output logic [31:0]  st_mmt_writes,
  output logic [31:0]  st_creates,
  output logic [31:0]  st_pf_triggers,
  output logic [31:0]  st_prefetches,
  output logic [31:0]  st_pf_busy_drops,
  output logic [31:0]  st_checks,
  output logic [31:0]  st_violations
);
  localparam int unsigned KEY_W = PADDR_W - GRAN_LOG2;

  paddr_t mmt_base;
  logic   flush;

  // ---------------------------------------------------------------- MMC wires
  logic             mmc_lkp_valid, mmc_lkp_rvalid, mmc_lkp_hit;
  logic [KEY_W-1:0] mmc_lkp_key;
  tag_t             mmc_lkp_tag;
  logic             mmc_fill_valid, mmc_upd_valid;
  logic [KEY_W-1:0] mmc_fill_key, mmc_upd_key;
  tag_t             mmc_fill_tag, mmc_upd_tag;

  // ---------------------------------------------------------------- PMT write
  logic    pmt_wr_valid;
  client_t pmt_wr_client;
  tag_t    pmt_wr_tag;
  meta_t   pmt_wr_data;

  // ---------------------------------------------------------------- arbitrated ports
  localparam int unsigned M_CTRL = 0, M_LKP = 1, M_PF = 2;
  logic      m_req_valid [3];
  logic      m_req_ready [3];
  mem_req_t  m_req       [3];
  logic      m_resp_valid[3];
  mem_resp_t m_resp;

  localparam int unsigned T_CTRL = 0, T_LKP = 1;
  logic      t_req_valid [2];
  logic      t_req_ready [2];
  tlb_req_t  t_req       [2];
  logic      t_resp_valid[2];
  tlb_resp_t t_resp;

  // ---------------------------------------------------------------- lookup client ports
  localparam int unsigned C_PF = 0, C_SC = 1;
  logic      l_req_valid [2];
  logic      l_req_ready [2];
  lkp_req_t  l_req       [2];
  logic      l_resp_valid[2];
  lkp_resp_t l_resp;

  // ---------------------------------------------------------------- control
  metasys_ctrl #(.GRAN_LOG2(GRAN_LOG2)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd,
    .busy          (cmd_busy),
    .fault         (cmd_fault),
    .mmt_base, .flush,
    .tlb_req_valid (t_req_valid[T_CTRL]),
    .tlb_req_ready (t_req_ready[T_CTRL]),
    .tlb_req       (t_req[T_CTRL]),
    .tlb_resp_valid(t_resp_valid[T_CTRL]),
    .tlb_resp      (t_resp),
    .mem_req_valid (m_req_valid[M_CTRL]),
    .mem_req_ready (m_req_ready[M_CTRL]),
    .mem_req       (m_req[M_CTRL]),
    .mem_resp_valid(m_resp_valid[M_CTRL]),
    .mem_resp      (m_resp),
    .mmc_upd_valid, .mmc_upd_key, .mmc_upd_tag,
    .pmt_wr_valid, .pmt_wr_client, .pmt_wr_tag, .pmt_wr_data,
    .n_mmt_writes  (st_mmt_writes),
    .n_creates     (st_creates)
  );

  // ---------------------------------------------------------------- MMC
  mmc #(.ENTRIES(MMC_ENTRIES), .KEY_W(KEY_W)) u_mmc (
    .clk, .rst_n,
    .lkp_valid (mmc_lkp_valid),
    .lkp_key   (mmc_lkp_key),
    .lkp_rvalid(mmc_lkp_rvalid),
    .lkp_hit   (mmc_lkp_hit),
    .lkp_tag   (mmc_lkp_tag),
    .fill_valid(mmc_fill_valid),
    .fill_key  (mmc_fill_key),
    .fill_tag  (mmc_fill_tag),
    .upd_valid (mmc_upd_valid),
    .upd_key   (mmc_upd_key),
    .upd_tag   (mmc_upd_tag),
    .inv_all   (flush),
    .hit_count (st_mmc_hits),
    .miss_count(st_mmc_misses)
  );

  // ---------------------------------------------------------------- lookup unit
  lookup_unit #(.N_CLIENTS(2), .GRAN_LOG2(GRAN_LOG2), .KEY_W(KEY_W)) u_lkp (
    .clk, .rst_n, .mmt_base,
    .c_req_valid   (l_req_valid),
    .c_req_ready   (l_req_ready),
    .c_req         (l_req),
    .c_resp_valid  (l_resp_valid),
    .c_resp        (l_resp),
    .tlb_req_valid (t_req_valid[T_LKP]),
    .tlb_req_ready (t_req_ready[T_LKP]),
    .tlb_req       (t_req[T_LKP]),
    .tlb_resp_valid(t_resp_valid[T_LKP]),
    .tlb_resp      (t_resp),
    .mmc_lkp_valid, .mmc_lkp_key, .mmc_lkp_rvalid, .mmc_lkp_hit, .mmc_lkp_tag,
    .mmc_fill_valid, .mmc_fill_key, .mmc_fill_tag,
    .mem_req_valid (m_req_valid[M_LKP]),
    .mem_req_ready (m_req_ready[M_LKP]),
    .mem_req       (m_req[M_LKP]),
    .mem_resp_valid(m_resp_valid[M_LKP]),
    .mem_resp      (m_resp),
    .n_lookups     (st_lookups),
    .n_mmt_reads   (st_mmt_reads),
    .n_dropped     (st_dropped)
  );

  // ---------------------------------------------------------------- clients
  logic        sc_trig_ready;

  graph_prefetcher #(.CLIENT_ID(client_t'(0)), .MAX_DEPTH(PF_DEPTH)) u_pf (
    .clk, .rst_n,
    .enable        (pf_enable),
    .lkp_mode      (pf_mode),
    .flush,
    .pmt_wr_valid, .pmt_wr_client, .pmt_wr_tag, .pmt_wr_data,
    .trig_valid    (core_valid && core_ready),
    .trig_vaddr    (core_vaddr),
    .lkp_req_valid (l_req_valid[C_PF]),
    .lkp_req_ready (l_req_ready[C_PF]),
    .lkp_req       (l_req[C_PF]),
    .lkp_resp_valid(l_resp_valid[C_PF]),
    .lkp_resp      (l_resp),
    .mem_req_valid (m_req_valid[M_PF]),
    .mem_req_ready (m_req_ready[M_PF]),
    .mem_req       (m_req[M_PF]),
    .mem_resp_valid(m_resp_valid[M_PF]),
    .mem_resp      (m_resp),
    .pf_valid, .pf_addr,
    .n_triggers    (st_pf_triggers),
    .n_busy_drops  (st_pf_busy_drops),
    .n_prefetches  (st_prefetches)
  );

  safety_client #(.CLIENT_ID(client_t'(1)), .RA_TAG(tag_t'(1))) u_sc (
    .clk, .rst_n, .bc_en, .rap_en, .flush,
    .pmt_wr_valid, .pmt_wr_client, .pmt_wr_tag, .pmt_wr_data,
    .trig_valid    (core_valid),
    .trig_ready    (sc_trig_ready),
    .trig_vaddr    (core_vaddr),
    .trig_store    (core_store),
    .stall         (core_stall),
    .done          (core_done),
    .lkp_req_valid (l_req_valid[C_SC]),
    .lkp_req_ready (l_req_ready[C_SC]),
    .lkp_req       (l_req[C_SC]),
    .lkp_resp_valid(l_resp_valid[C_SC]),
    .lkp_resp      (l_resp),
    .violation, .viol_bounds, .viol_addr,
    .n_checks      (st_checks),
    .n_violations  (st_violations)
  );

  assign core_ready = sc_trig_ready;

  // ---------------------------------------------------------------- arbiters
  port_arbiter #(.N(3), .REQ_T(mem_req_t), .RESP_T(mem_resp_t)) u_mem_arb (
    .clk, .rst_n,
    .req_valid   (m_req_valid),
    .req_ready   (m_req_ready),
    .req_data    (m_req),
    .resp_valid  (m_resp_valid),
    .resp_data   (m_resp),
    .m_req_valid (mem_req_valid),
    .m_req_ready (mem_req_ready),
    .m_req_data  (mem_req),
    .m_resp_valid(mem_resp_valid),
    .m_resp_data (mem_resp)
  );

  port_arbiter #(.N(2), .REQ_T(tlb_req_t), .RESP_T(tlb_resp_t)) u_tlb_arb (
    .clk, .rst_n,
    .req_valid   (t_req_valid),
    .req_ready   (t_req_ready),
    .req_data    (t_req),
    .resp_valid  (t_resp_valid),
    .resp_data   (t_resp),
    .m_req_valid (tlb_req_valid),
    .m_req_ready (tlb_req_ready),
    .m_req_data  (tlb_req),
    .m_resp_valid(tlb_resp_valid),
    .m_resp_data (tlb_resp)
  );

endmodule
