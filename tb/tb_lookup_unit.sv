// tb_lookup_unit: self-checking testbench of the Metadata Lookup Unit, wired to
// a real MMC and to memory and TLB models.
//
// The Metadata Mapping Table is preloaded in the memory model; the expected tag
// of an address is read back from it through the reference translation. Checks:
// tags returned for virtual and physical lookups, MMC miss then hit, MMT reads
// only on misses, best-effort lookups dropped on a miss without a memory access,
// translation faults, the 3-cycle latency of a physical lookup that hits, and
// two clients issuing lookups at the same time.
module tb_lookup_unit;
  import metasys_pkg::*;
  import tb_pkg::*;

  localparam int unsigned G = 9;
  localparam int unsigned KEY_W = PADDR_W - G;
  localparam paddr_t MMT = 39'h0_0100_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       c_req_valid [2];
  logic       c_req_ready [2];
  lkp_req_t   c_req       [2];
  logic       c_resp_valid[2];
  lkp_resp_t  c_resp;
  logic tlb_req_valid, tlb_req_ready, tlb_resp_valid;
  tlb_req_t tlb_req; tlb_resp_t tlb_resp;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t mem_req; mem_resp_t mem_resp;
  logic mmc_lkp_valid, mmc_lkp_rvalid, mmc_lkp_hit, mmc_fill_valid;
  logic [KEY_W-1:0] mmc_lkp_key, mmc_fill_key;
  tag_t mmc_lkp_tag, mmc_fill_tag;
  logic [31:0] n_lookups, n_mmt_reads, n_dropped, hits, misses;

  lookup_unit #(.N_CLIENTS(2), .GRAN_LOG2(G)) dut (.mmt_base(MMT), .*);

  mmc #(.ENTRIES(128), .KEY_W(KEY_W)) u_mmc (
    .clk, .rst_n,
    .lkp_valid(mmc_lkp_valid), .lkp_key(mmc_lkp_key), .lkp_rvalid(mmc_lkp_rvalid),
    .lkp_hit(mmc_lkp_hit), .lkp_tag(mmc_lkp_tag),
    .fill_valid(mmc_fill_valid), .fill_key(mmc_fill_key), .fill_tag(mmc_fill_tag),
    .upd_valid(1'b0), .upd_key('0), .upd_tag('0), .inv_all(1'b0),
    .hit_count(hits), .miss_count(misses));

  mem_model #(.LATENCY(6)) u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .resp_valid(mem_resp_valid), .resp(mem_resp));
  tlb_model #(.LATENCY(1)) u_tlb (.clk, .rst_n, .req_valid(tlb_req_valid), .req_ready(tlb_req_ready),
    .req(tlb_req), .resp_valid(tlb_resp_valid), .resp(tlb_resp));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic tag_t tag_of_pa(input paddr_t pa);
    return u_mem.peek8(MMT + PADDR_W'(pa >> G));
  endfunction

  task automatic lookup(input int c, input vaddr_t va, input bit phys, input lookup_mode_e mode,
                        output lkp_resp_t r, output int cycles);
    @(negedge clk);
    c_req_valid[c] = 1;
    c_req[c] = '{vaddr: va, is_phys: phys, mode: mode};
    do @(posedge clk); while (!c_req_ready[c]);
    cycles = 1;  // the response is valid `cycles` cycles after the handshake cycle
    @(negedge clk);
    c_req_valid[c] = 0;
    while (!c_resp_valid[c]) begin
      @(negedge clk);
      cycles++;
    end
    r = c_resp;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lkp_resp_t r; int cyc; int reads0;
    for (int c = 0; c < 2; c++) begin c_req_valid[c] = 0; c_req[c] = '0; end
    // MMT: 64 KiB of virtual space at 0x4000_0000 tagged granule by granule
    for (int g = 0; g < 128; g++) begin
      automatic vaddr_t va = 64'h4000_0000 + 64'(g) * 512;
      u_mem.poke8(MMT + PADDR_W'(xlate(va) >> G), 8'(g % 5 + 1));
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // miss then hit
    lookup(0, 64'h4000_0123, 0, MODE_NO_STALL, r, cyc);
    check(!r.dropped && !r.mmc_hit && r.tag == 8'd1 && r.paddr == xlate(64'h4000_0123), "first lookup misses, reads MMT");
    check(n_mmt_reads == 1, "one MMT read");
    lookup(1, 64'h4000_01F0, 0, MODE_FORCE_STALL, r, cyc);
    check(!r.dropped && r.mmc_hit && r.tag == 8'd1, "same granule hits the MMC");
    check(n_mmt_reads == 1, "no MMT read on a hit");

    // best effort drop
    reads0 = int'(n_mmt_reads);
    lookup(1, 64'h4000_0A00, 0, MODE_BEST_EFFORT, r, cyc);
    check(r.dropped && !r.fault && r.tag == 8'd0, "best-effort lookup dropped on MMC miss");
    check(int'(n_mmt_reads) == reads0, "dropped lookup makes no memory access");
    lookup(0, 64'h4000_0A00, 0, MODE_NO_STALL, r, cyc);
    check(!r.dropped && r.tag == tag_of_pa(xlate(64'h4000_0A00)), "no-stall lookup resolved");
    lookup(1, 64'h4000_0A08, 0, MODE_BEST_EFFORT, r, cyc);
    check(!r.dropped && r.mmc_hit && r.tag == tag_of_pa(xlate(64'h4000_0A00)), "best-effort hit");

    // physical lookup latency on a hit
    lookup(0, 64'(xlate(64'h4000_0A10)), 1, MODE_FORCE_STALL, r, cyc);
    check(r.mmc_hit && r.tag == tag_of_pa(xlate(64'h4000_0A00)), "physical lookup hit");
    check(cyc == 3, $sformatf("physical hit latency 3 cycles, got %0d", cyc));

    // translation fault
    lookup(0, 64'hFFFF_0000_0000_1000, 0, MODE_FORCE_STALL, r, cyc);
    check(r.dropped && r.fault, "translation fault reported");

    // untagged memory reads tag 0
    lookup(0, 64'h5000_0000, 0, MODE_NO_STALL, r, cyc);
    check(!r.dropped && r.tag == 8'd0, "untagged granule has tag 0");

    // two clients at once, random addresses in the tagged region
    fork
      for (int i = 0; i < 150; i++) begin
        automatic vaddr_t va = 64'h4000_0000 + 64'($urandom_range(0, 65535));
        lkp_resp_t rr; int cc;
        lookup(0, va, 0, MODE_NO_STALL, rr, cc);
        check(!rr.dropped && rr.tag == tag_of_pa(xlate(va)) && rr.paddr == xlate(va), "client 0 random lookup");
      end
      for (int i = 0; i < 150; i++) begin
        automatic vaddr_t va = 64'h4000_0000 + 64'($urandom_range(0, 65535));
        lkp_resp_t rr; int cc;
        lookup(1, va, 0, MODE_FORCE_STALL, rr, cc);
        check(!rr.dropped && rr.tag == tag_of_pa(xlate(va)), "client 1 random lookup");
      end
    join
    check(n_lookups == 32'd308, $sformatf("lookup count %0d", n_lookups));
    check(n_mmt_reads <= 32'd131 && n_mmt_reads == misses - 1, "MMT read once per needed miss");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
