// lookup_unit: Metadata Lookup Unit.
//
// Answers "which tag ID does this address carry?" for the optimization clients.
// A lookup (1) translates the client's virtual address through the TLB port,
// unless the client already supplies a physical address, (2) probes the
// Metadata Mapping Cache with the granule number paddr >> GRAN_LOG2, and (3) on
// an MMC miss reads the granule's byte of the Metadata Mapping Table in memory at
// mmt_base + granule number, fills the MMC and returns the tag. The clients then
// index their Private Metadata Table with the tag.
//
// Timing-sensitivity modes (from the paper): a best-effort lookup that misses in
// the MMC is dropped instead of going to memory; force-stall and no-stall lookups
// are always resolved (whether the core waits is decided by the client).
//
// Organisation (this design's choice): one lookup in flight at a time, clients
// served round robin. A physical-address lookup that hits the MMC answers 3
// cycles after the request handshake (probe, MMC result, response); a virtual
// one adds the TLB round trip, a miss the memory round trip. The MMT is
// addressed with physical addresses: one byte per granule.
//
// Lint notes: the memory response id is unused (one MMT read in flight), the
// force-stall/no-stall distinction does not change the lookup itself (one mode
// bit unused), and the round-robin loop variable is wider than the client index.
// The memory port only reads, so mem_req.we/wdata/wmask/id and addr[2:0] are
// constant.
module lookup_unit
  import metasys_pkg::*;
#(
  parameter int unsigned N_CLIENTS = 2,
  parameter int unsigned GRAN_LOG2 = 9,                  // 512 B tagging granularity
  parameter int unsigned KEY_W     = PADDR_W - GRAN_LOG2  // 30-bit MMC address tag
) (
  input  logic       clk,
  input  logic       rst_n,
  input  paddr_t     mmt_base,
  // clients
  input  logic       c_req_valid  [N_CLIENTS],
  output logic       c_req_ready  [N_CLIENTS],
  input  lkp_req_t   c_req        [N_CLIENTS],
  output logic       c_resp_valid [N_CLIENTS],
  output lkp_resp_t  c_resp,
  // TLB
  output logic       tlb_req_valid,
  input  logic       tlb_req_ready,
  output tlb_req_t   tlb_req,
  input  logic       tlb_resp_valid,
  input  tlb_resp_t  tlb_resp,
  // MMC
  output logic             mmc_lkp_valid,
  output logic [KEY_W-1:0] mmc_lkp_key,
  input  logic             mmc_lkp_rvalid,
  input  logic             mmc_lkp_hit,
  input  tag_t             mmc_lkp_tag,
  output logic             mmc_fill_valid,
  output logic [KEY_W-1:0] mmc_fill_key,
  output tag_t             mmc_fill_tag,
  // memory (MMT reads)
  output logic       mem_req_valid,
  input  logic       mem_req_ready,
  output mem_req_t   mem_req,
  input  logic       mem_resp_valid,
  input  mem_resp_t  mem_resp,
  // statistics
  output logic [31:0] n_lookups,
  output logic [31:0] n_mmt_reads,
  output logic [31:0] n_dropped
);
  localparam int unsigned CW = (N_CLIENTS > 1) ? $clog2(N_CLIENTS) : 1;

  typedef enum logic [2:0] {
    S_IDLE, S_TLB_REQ, S_TLB_WAIT, S_MMC, S_MMC_WAIT, S_MEM_REQ, S_MEM_WAIT, S_RESP
  } state_e;

  state_e         state;
  logic [CW-1:0]  cur, last;
  lkp_req_t       q;
  paddr_t         pa;
  lkp_resp_t      r;

  // round-robin pick of the next client
  logic          any;
  logic [CW-1:0] pick;
  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int k = 1; k <= N_CLIENTS; k++) begin
      automatic int unsigned c = (32'(last) + k) % N_CLIENTS;
      if (!any && c_req_valid[c]) begin
        any  = 1'b1;
        pick = CW'(c);
      end
    end
  end

  always_comb begin
    for (int i = 0; i < N_CLIENTS; i++) begin
      c_req_ready[i]  = (state == S_IDLE) && any && (pick == CW'(i));
      c_resp_valid[i] = (state == S_RESP) && (cur == CW'(i));
    end
  end

  wire [KEY_W-1:0] key      = KEY_W'(pa >> GRAN_LOG2);
  wire paddr_t     mmt_addr = mmt_base + PADDR_W'(key);

  assign c_resp        = r;
  assign tlb_req_valid = (state == S_TLB_REQ);
  assign tlb_req       = '{vaddr: q.vaddr};
  assign mmc_lkp_valid = (state == S_MMC);
  assign mmc_lkp_key   = key;
  assign mem_req_valid = (state == S_MEM_REQ);
  assign mem_req       = '{we: 1'b0, addr: {mmt_addr[PADDR_W-1:3], 3'b000},
                           wdata: '0, wmask: '0, id: '0};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      cur            <= '0;
      last           <= CW'(N_CLIENTS - 1);
      q              <= '0;
      pa             <= '0;
      r              <= '0;
      mmc_fill_valid <= 1'b0;
      mmc_fill_key   <= '0;
      mmc_fill_tag   <= '0;
      n_lookups      <= '0;
      n_mmt_reads    <= '0;
      n_dropped      <= '0;
    end else begin
      mmc_fill_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (any) begin
          cur       <= pick;
          last      <= pick;
          q         <= c_req[pick];
          pa        <= PADDR_W'(c_req[pick].vaddr);
          n_lookups <= n_lookups + 1;
          state     <= c_req[pick].is_phys ? S_MMC : S_TLB_REQ;
        end
        S_TLB_REQ:  if (tlb_req_ready) state <= S_TLB_WAIT;
        S_TLB_WAIT: if (tlb_resp_valid) begin
          pa <= tlb_resp.paddr;
          if (tlb_resp.fault) begin
            r         <= '{tag: '0, paddr: tlb_resp.paddr, dropped: 1'b1, fault: 1'b1, mmc_hit: 1'b0};
            n_dropped <= n_dropped + 1;
            state     <= S_RESP;
          end else begin
            state <= S_MMC;
          end
        end
        S_MMC:      state <= S_MMC_WAIT;
        S_MMC_WAIT: if (mmc_lkp_rvalid) begin
          if (mmc_lkp_hit) begin
            r     <= '{tag: mmc_lkp_tag, paddr: pa, dropped: 1'b0, fault: 1'b0, mmc_hit: 1'b1};
            state <= S_RESP;
          end else if (q.mode == MODE_BEST_EFFORT) begin
            r         <= '{tag: '0, paddr: pa, dropped: 1'b1, fault: 1'b0, mmc_hit: 1'b0};
            n_dropped <= n_dropped + 1;
            state     <= S_RESP;
          end else begin
            state <= S_MEM_REQ;
          end
        end
        S_MEM_REQ:  if (mem_req_ready) state <= S_MEM_WAIT;
        S_MEM_WAIT: if (mem_resp_valid) begin
          automatic tag_t t = word_byte(mem_resp.rdata, mmt_addr[2:0]);
          r              <= '{tag: t, paddr: pa, dropped: 1'b0, fault: 1'b0, mmc_hit: 1'b0};
          mmc_fill_valid <= 1'b1;
          mmc_fill_key   <= key;
          mmc_fill_tag   <= t;
          n_mmt_reads    <= n_mmt_reads + 1;
          state          <= S_RESP;
        end
        S_RESP:     state <= S_IDLE;
        default:    state <= S_IDLE;
      endcase
    end
  end

endmodule
