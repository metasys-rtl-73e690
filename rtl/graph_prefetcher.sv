// graph_prefetcher: optimization client that prefetches data-dependent accesses
// of vertex-centric graph processing (work list -> vertex list -> edge list ->
// property list).
//
// Software describes each data structure with CREATE (PMT entry per tag) and
// tags its memory with MAP. For every snooped memory request the prefetcher
// (following the paper's algorithm):
//   1. looks up the tag of the address and reads that tag's PMT entry;
//   2. if the address lies inside the described structure, prefetches ahead:
//      at the first level the element `stride` elements further on (only if
//      that element is still inside the structure, this design's choice), at
//      the following levels the computed element itself;
//   3. takes the prefetched element's value as an index into the next
//      structure (next_base + value * element size) and repeats from 1 with
//      that address, until a structure has no next structure (next_base = 0)
//      or MAX_DEPTH levels were followed.
// A structure whose entry has the range flag set (a CSR vertex list) is read as
// a pair: its element and the following one bound a range [lo, hi) of indices
// into the next structure (the vertex's edges). The prefetcher then follows the
// chain below for each index of the range in turn, at most MAX_RANGE of them,
// so that all neighbours of a vertex and their properties are prefetched. One
// range is expanded per chain (a range flag below an active range is ignored).
// The range walk follows the paper's graph example figure, which marks every
// edge between two vertex-list offsets; the flag and MAX_RANGE are this
// design's choices. The upper bound is read from the same memory word when it
// is there, otherwise with one more read of the next physical word; a pair that
// straddles a 4 KiB page is treated as a single index.
//
// PMT entry layout (this design's choice for the paper's fields, in the order
// the paper lists them), bit ranges of the 512-bit entry:
//   [63:0]    base address of the structure indexed by this one (0 = none)
//   [127:64]  base address of this structure
//   [159:128] data type: [135:128] log2 element size of this structure,
//                        [143:136] log2 element size of the next structure,
//                        [144]     range flag (see above)
//   [191:160] size of this structure in bytes
//   [197:192] prefetch stride in elements
//
// A new trigger is accepted only when idle; triggers arriving while a chain is
// being followed are dropped (counted). Lookups use the mode on `lkp_mode`
// (no-stall by default in the top). Prefetch reads go to the memory port; every
// read's address is also shown on pf_valid/pf_addr. Timing per level: one
// lookup, one PMT read (1 cycle), one translation lookup at level 0, one memory
// read.
//
// Lint notes: unused input bits are the memory response id, the lookup's
// mmc_hit flag, PMT bits beyond the fields listed above and the upper bits of the
// element-size fields (element sizes up to 8 bytes). The memory port only reads,
// so mem_req.we/wdata/wmask/id and addr[2:0] are constant.
module graph_prefetcher
  import metasys_pkg::*;
#(
  parameter client_t     CLIENT_ID = client_t'(0),
  parameter int unsigned MAX_DEPTH = 4,
  parameter int unsigned MAX_RANGE = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         enable,
  input  lookup_mode_e lkp_mode,
  input  logic         flush,
  // CREATE writes
  input  logic         pmt_wr_valid,
  input  client_t      pmt_wr_client,
  input  tag_t         pmt_wr_tag,
  input  meta_t        pmt_wr_data,
  // snooped memory requests of the core
  input  logic         trig_valid,
  input  vaddr_t       trig_vaddr,
  // lookup port
  output logic         lkp_req_valid,
  input  logic         lkp_req_ready,
  output lkp_req_t     lkp_req,
  input  logic         lkp_resp_valid,
  input  lkp_resp_t    lkp_resp,
  // memory port (prefetch reads)
  output logic         mem_req_valid,
  input  logic         mem_req_ready,
  output mem_req_t     mem_req,
  input  logic         mem_resp_valid,
  input  mem_resp_t    mem_resp,
  // prefetch notification
  output logic         pf_valid,
  output paddr_t       pf_addr,
  // statistics
  output logic [31:0]  n_triggers,
  output logic [31:0]  n_busy_drops,
  output logic [31:0]  n_prefetches
);
  typedef enum logic [3:0] {
    S_IDLE, S_LKP_REQ, S_LKP_WAIT, S_PMT, S_META, S_TGT_REQ, S_TGT_WAIT, S_PF_REQ, S_PF_WAIT,
    S_HI_REQ, S_HI_WAIT, S_NEXT
  } state_e;
  state_e state;

  localparam int unsigned DW = (MAX_DEPTH > 1) ? $clog2(MAX_DEPTH + 1) : 1;

  vaddr_t      cur;       // address being followed
  vaddr_t      tgt;       // address to prefetch
  paddr_t      cur_pa, tgt_pa;
  tag_t        cur_tag;
  logic [DW-1:0] level;
  vaddr_t      nxt_base;
  logic [7:0]  lg_this, lg_next;
  logic        is_range;  // the structure being prefetched carries the range flag

  // range being expanded
  logic          r_active;
  logic [63:0]   r_idx, r_end;
  logic [DW-1:0] r_level;
  vaddr_t        r_base;
  logic [2:0]    r_lg;
  logic [63:0]   lo_val;

  // ---------------------------------------------------------------- PMT
  logic  pmt_rd_ack, pmt_rd_valid;
  meta_t m;

  pmt u_pmt (
    .clk, .rst_n, .flush,
    .wr_en   (pmt_wr_valid && pmt_wr_client == CLIENT_ID),
    .wr_idx  (pmt_wr_tag),
    .wr_data (pmt_wr_data),
    .rd_en   (state == S_PMT),
    .rd_idx  (cur_tag),
    .rd_ack  (pmt_rd_ack),
    .rd_valid(pmt_rd_valid),
    .rd_data (m)
  );

  wire vaddr_t     m_next   = m[63:0];
  wire vaddr_t     m_base   = m[127:64];
  wire logic [7:0] m_lgthis = m[135:128];
  wire logic [7:0] m_lgnext = m[143:136];
  wire logic       m_range  = m[144];
  wire vaddr_t     m_size   = 64'(m[191:160]);
  wire logic [5:0] m_stride = m[197:192];
  wire logic       in_ds    = (cur >= m_base) && (cur < m_base + m_size);
  wire vaddr_t     ahead    = cur + (64'(m_stride) << m_lgthis[2:0]);

  // element of 2**lg bytes at byte offset off of a memory word
  function automatic logic [63:0] element(input logic [63:0] w, input logic [2:0] off,
                                          input logic [1:0] lg);
    logic [63:0] v;
    v = w >> {off, 3'b000};
    unique case (lg)
      2'd0: v = v & 64'hFF;
      2'd1: v = v & 64'hFFFF;
      2'd2: v = v & 64'hFFFF_FFFF;
      default: ;
    endcase
    return v;
  endfunction

  wire logic [3:0]  esize   = 4'd1 << lg_this[1:0];
  wire logic [3:0]  hi_off  = {1'b0, tgt_pa[2:0]} + esize;         // byte offset of the upper bound
  wire paddr_t      hi_pa   = tgt_pa + PADDR_W'(esize);
  wire logic        hi_page = (hi_pa[PAGE_LOG2-1:0] < tgt_pa[PAGE_LOG2-1:0]);  // pair straddles a page
  wire logic [63:0] value   = element(mem_resp.rdata, tgt_pa[2:0], lg_this[1:0]);
  wire logic [63:0] hi_same = element(mem_resp.rdata, hi_off[2:0], lg_this[1:0]);
  wire logic        last_lv = (nxt_base == '0) || (32'(level) + 1 >= MAX_DEPTH);

  assign lkp_req_valid = (state == S_LKP_REQ) || (state == S_TGT_REQ);
  assign lkp_req       = '{vaddr: (state == S_TGT_REQ) ? tgt : cur, is_phys: 1'b0, mode: lkp_mode};
  assign mem_req_valid = (state == S_PF_REQ) || (state == S_HI_REQ);
  assign mem_req       = '{we: 1'b0,
                           addr: (state == S_HI_REQ) ? {hi_pa[PADDR_W-1:3], 3'b000}
                                                     : {tgt_pa[PADDR_W-1:3], 3'b000},
                           wdata: '0, wmask: '0, id: '0};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      cur          <= '0; tgt <= '0; cur_pa <= '0; tgt_pa <= '0; cur_tag <= '0;
      level        <= '0;
      nxt_base     <= '0;
      lg_this      <= '0; lg_next <= '0;
      is_range     <= 1'b0;
      r_active     <= 1'b0;
      r_idx        <= '0; r_end <= '0; r_level <= '0; r_base <= '0; r_lg <= '0;
      lo_val       <= '0;
      pf_valid     <= 1'b0;
      pf_addr      <= '0;
      n_triggers   <= '0;
      n_busy_drops <= '0;
      n_prefetches <= '0;
    end else begin
      pf_valid <= 1'b0;
      if (trig_valid && enable) begin
        if (state == S_IDLE) n_triggers   <= n_triggers + 1;
        else                 n_busy_drops <= n_busy_drops + 1;
      end
      unique case (state)
        S_IDLE: if (trig_valid && enable) begin
          cur      <= trig_vaddr;
          level    <= '0;
          r_active <= 1'b0;
          state    <= S_LKP_REQ;
        end
        S_LKP_REQ:  if (lkp_req_ready) state <= S_LKP_WAIT;
        S_LKP_WAIT: if (lkp_resp_valid) begin
          cur_pa  <= lkp_resp.paddr;
          cur_tag <= lkp_resp.tag;
          state   <= (lkp_resp.dropped || lkp_resp.tag == '0) ? S_NEXT : S_PMT;
        end
        S_PMT:  state <= S_META;
        S_META: if (pmt_rd_ack) begin
          if (!pmt_rd_valid || !in_ds) begin
            state <= S_NEXT;
          end else begin
            nxt_base <= m_next;
            lg_this  <= m_lgthis;
            lg_next  <= m_lgnext;
            is_range <= m_range && !r_active;
            if (level == '0 && m_stride != '0) begin
              tgt   <= ahead;
              // the look-ahead element must still be inside the structure
              state <= (ahead < m_base + m_size) ? S_TGT_REQ : S_NEXT;
            end else begin
              tgt    <= cur;
              tgt_pa <= cur_pa;
              state  <= S_PF_REQ;
            end
          end
        end
        S_TGT_REQ:  if (lkp_req_ready) state <= S_TGT_WAIT;
        S_TGT_WAIT: if (lkp_resp_valid) begin
          tgt_pa <= lkp_resp.paddr;
          // translation failed: nothing to prefetch
          state  <= lkp_resp.fault ? S_NEXT : S_PF_REQ;
        end
        S_PF_REQ: if (mem_req_ready) begin
          pf_valid <= 1'b1;
          pf_addr  <= tgt_pa;
          state    <= S_PF_WAIT;
        end
        S_PF_WAIT: if (mem_resp_valid) begin
          n_prefetches <= n_prefetches + 1;
          lo_val       <= value;
          if (last_lv) begin
            state <= S_NEXT;
          end else if (is_range && !hi_page && hi_off < 4'd8) begin
            // upper bound in the same word: start the range
            if (hi_same > value) begin
              r_active <= 1'b1;
              r_idx    <= value;
              r_end    <= (hi_same - value > 64'(MAX_RANGE)) ? value + 64'(MAX_RANGE) : hi_same;
              r_level  <= level;
              r_base   <= nxt_base;
              r_lg     <= lg_next[2:0];
            end
            cur   <= nxt_base + (value << lg_next[2:0]);
            level <= level + 1'b1;
            state <= (hi_same > value) ? S_LKP_REQ : S_NEXT;
          end else if (is_range && !hi_page) begin
            state <= S_HI_REQ;
          end else begin
            cur   <= nxt_base + (value << lg_next[2:0]);
            level <= level + 1'b1;
            state <= S_LKP_REQ;
          end
        end
        S_HI_REQ: if (mem_req_ready) state <= S_HI_WAIT;
        S_HI_WAIT: if (mem_resp_valid) begin
          automatic logic [63:0] hi = element(mem_resp.rdata, hi_pa[2:0], lg_this[1:0]);
          if (hi > lo_val) begin
            r_active <= 1'b1;
            r_idx    <= lo_val;
            r_end    <= (hi - lo_val > 64'(MAX_RANGE)) ? lo_val + 64'(MAX_RANGE) : hi;
            r_level  <= level;
            r_base   <= nxt_base;
            r_lg     <= lg_next[2:0];
          end
          cur   <= nxt_base + (lo_val << lg_next[2:0]);
          level <= level + 1'b1;
          state <= (hi > lo_val) ? S_LKP_REQ : S_NEXT;
        end
        // a branch of the chain ended: next index of the range, or done
        S_NEXT: begin
          if (r_active && r_idx + 1 < r_end) begin
            r_idx <= r_idx + 1;
            cur   <= r_base + ((r_idx + 1) << r_lg);
            level <= r_level + 1'b1;
            state <= S_LKP_REQ;
          end else begin
            r_active <= 1'b0;
            state    <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
