// mmc: Metadata Mapping Cache.
//
// Caches the mapping from a physical granule number (physical address divided by
// the tagging granularity) to its tag ID, so that most metadata lookups do not
// have to read the Metadata Mapping Table in memory. Following the paper it has
// 128 entries of a 30-bit address tag plus an 8-bit tag ID (38 bits per entry)
// and uses NMRU (not-most-recently-used) replacement.
//
// Organisation (this design's choice; the paper gives neither associativity nor
// the NMRU victim rule): fully associative. The victim is the lowest-numbered
// invalid entry if there is one, otherwise the entry under a rotating pointer,
// moved one step on when it points at the most recently used entry.
//
// Interface and timing:
//   lkp_valid/lkp_key   probe; the result (lkp_rvalid, lkp_hit, lkp_tag) is
//                       registered and appears on the next cycle. A hit makes
//                       the entry the most recently used one.
//   fill_*              insert a mapping read from the MMT (overwrites the entry
//                       if the key is already present). Takes effect at the clock edge.
//   upd_*               MAP update: overwrite the tag if the key is present,
//                       otherwise do nothing. It wins over a fill of the same key
//                       in the same cycle.
//   inv_all             invalidate every entry (context switch); a probe in
//                       the same cycle is answered with a miss.
module mmc
  import metasys_pkg::*;
#(
  parameter int unsigned ENTRIES = 128,
  parameter int unsigned KEY_W   = 30
) (
  input  logic             clk,
  input  logic             rst_n,
  // probe
  input  logic             lkp_valid,
  input  logic [KEY_W-1:0] lkp_key,
  output logic             lkp_rvalid,
  output logic             lkp_hit,
  output tag_t             lkp_tag,
  // fill after an MMT read
  input  logic             fill_valid,
  input  logic [KEY_W-1:0] fill_key,
  input  tag_t             fill_tag,
  // update on MAP
  input  logic             upd_valid,
  input  logic [KEY_W-1:0] upd_key,
  input  tag_t             upd_tag,
  // flush
  input  logic             inv_all,
  // statistics
  output logic [31:0]      hit_count,
  output logic [31:0]      miss_count
);
  localparam int unsigned IDX_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  typedef struct packed {
    logic             valid;
    logic [KEY_W-1:0] key;
    tag_t             tag;
  } entry_t;

  entry_t             ent [ENTRIES];
  logic [IDX_W-1:0]   mru;
  logic [IDX_W-1:0]   rr_ptr;

  // ---------------------------------------------------------------- matching
  logic             l_hit, f_hit, u_hit;
  logic [IDX_W-1:0] l_idx, f_idx, u_idx;
  logic             have_inv;
  logic [IDX_W-1:0] inv_idx;

  always_comb begin
    l_hit = 1'b0; l_idx = '0;
    f_hit = 1'b0; f_idx = '0;
    u_hit = 1'b0; u_idx = '0;
    have_inv = 1'b0; inv_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (ent[i].valid && ent[i].key == lkp_key)  begin l_hit = 1'b1; l_idx = IDX_W'(i); end
      if (ent[i].valid && ent[i].key == fill_key) begin f_hit = 1'b1; f_idx = IDX_W'(i); end
      if (ent[i].valid && ent[i].key == upd_key)  begin u_hit = 1'b1; u_idx = IDX_W'(i); end
      if (!ent[i].valid)                          begin have_inv = 1'b1; inv_idx = IDX_W'(i); end
    end
  end

  // NMRU victim selection
  logic [IDX_W-1:0] rr_skip, victim;
  always_comb begin
    rr_skip = (rr_ptr == mru) ? IDX_W'((32'(rr_ptr) + 1) % ENTRIES) : rr_ptr;
    if (f_hit)         victim = f_idx;
    else if (have_inv) victim = inv_idx;
    else               victim = rr_skip;
  end

  wire do_fill = fill_valid && !(upd_valid && upd_key == fill_key && u_hit);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) ent[i] <= '0;
      mru        <= '0;
      rr_ptr     <= '0;
      lkp_rvalid <= 1'b0;
      lkp_hit    <= 1'b0;
      lkp_tag    <= '0;
      hit_count  <= '0;
      miss_count <= '0;
    end else if (inv_all) begin
      // a probe in the flush cycle is answered with a miss
      for (int i = 0; i < ENTRIES; i++) ent[i].valid <= 1'b0;
      lkp_rvalid <= lkp_valid;
      lkp_hit    <= 1'b0;
      lkp_tag    <= '0;
      if (lkp_valid) miss_count <= miss_count + 1;
    end else begin
      // probe
      lkp_rvalid <= lkp_valid;
      lkp_hit    <= lkp_valid && l_hit;
      lkp_tag    <= l_hit ? ent[l_idx].tag : '0;
      if (lkp_valid) begin
        if (l_hit) begin
          mru       <= l_idx;
          hit_count <= hit_count + 1;
        end else begin
          miss_count <= miss_count + 1;
        end
      end
      // fill
      if (do_fill) begin
        ent[victim] <= '{valid: 1'b1, key: fill_key, tag: fill_tag};
        mru         <= victim;
        if (!f_hit && !have_inv) rr_ptr <= IDX_W'((32'(rr_skip) + 1) % ENTRIES);
      end
      // update on MAP (applied last so that it wins)
      if (upd_valid && u_hit && !(do_fill && victim == u_idx)) ent[u_idx].tag <= upd_tag;
    end
  end

endmodule
