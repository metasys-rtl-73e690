// tb_metasys_top: end-to-end self-checking testbench of metasys_top at its
// default (paper) parameters: 512 B granules, 128-entry MMC, 256-entry PMTs,
// prefetch depth 4. The core is played by tasks that issue metadata
// instructions and memory accesses; the TLB and main memory are behavioural
// models (tlb_model, mem_model). All data structures live in virtual memory and
// are written at their translated physical addresses.
//
// Scenario: set the MMT base; tag a CSR graph (work list, vertex, edge and
// property lists) with MAP and describe it with CREATE for the prefetcher;
// check complete prefetch chains (MMC misses then MMC hits) and the range walk
// over all edges of a vertex; best-effort drops;
// triggers dropped while the prefetcher is busy; bounds checking (in-bounds,
// out-of-bounds, after UNMAP); return-address protection on stores; MAP2D and
// MAP3D shapes and their UNMAP2D/UNMAP3D in the MMT; a MAP on an untranslatable address; FLUSH (MMC and
// PMTs invalidated). Every mechanism is recorded in `seen` and a mechanism that
// never happened counts as a failure.
module tb_metasys_top;
  import metasys_pkg::*;
  import tb_pkg::*;

  localparam paddr_t MMT = 39'h0100_0000;
  localparam vaddr_t WL = 64'h0100_0000, VL = 64'h0110_0000, EL = 64'h0120_0000, PR = 64'h0130_0000;
  localparam vaddr_t MD = 64'h0200_0000;          // metadata blocks
  localparam vaddr_t ARR = 64'h0300_0000;         // bounds-checked array
  localparam vaddr_t STK = 64'h0400_0000;         // saved return address
  localparam int NV = 24, NW = 16, NE = 80;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready, cmd_busy, cmd_fault;
  cmd_t cmd = '0;
  logic pf_enable = 0, bc_en = 0, rap_en = 0;
  lookup_mode_e pf_mode = MODE_NO_STALL;
  logic core_valid = 0, core_ready, core_store = 0, core_stall, core_done;
  vaddr_t core_vaddr = '0;
  logic violation, viol_bounds; vaddr_t viol_addr;
  logic pf_valid; paddr_t pf_addr;
  logic tlb_req_valid, tlb_req_ready, tlb_resp_valid; tlb_req_t tlb_req; tlb_resp_t tlb_resp;
  logic mem_req_valid, mem_req_ready, mem_resp_valid; mem_req_t mem_req; mem_resp_t mem_resp;
  logic [31:0] st_mmc_hits, st_mmc_misses, st_lookups, st_mmt_reads, st_dropped, st_mmt_writes,
               st_creates, st_pf_triggers, st_prefetches, st_pf_busy_drops, st_checks, st_violations;

  metasys_top dut (.*);

  tlb_model #(.LATENCY(2)) u_tlb (.clk, .rst_n, .req_valid(tlb_req_valid), .req_ready(tlb_req_ready),
    .req(tlb_req), .resp_valid(tlb_resp_valid), .resp(tlb_resp));
  mem_model #(.LATENCY(6)) u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .resp_valid(mem_resp_valid), .resp(mem_resp));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  typedef enum int {
    M_SETMMT, M_MAP, M_MAP2D, M_MAP3D, M_UNMAP, M_UNMAP2D3D, M_CREATE, M_MMC_MISS, M_MMC_HIT, M_MMT_READ,
    M_BE_DROP, M_PF_CHAIN, M_PF_RANGE, M_PF_BUSY, M_BC_OK, M_BC_VIOL, M_RAP_VIOL, M_STALL, M_XLATE_FAULT,
    M_FLUSH, M_N
  } mech_e;
  bit seen [M_N];

  // monitors
  int n_viol = 0, n_viol_bounds = 0, stall_cycles = 0, n_fault = 0;
  vaddr_t last_viol;
  paddr_t pf_log[$];
  always @(posedge clk) if (rst_n) begin
    if (violation) begin n_viol++; if (viol_bounds) n_viol_bounds++; last_viol = viol_addr; end
    if (core_stall) stall_cycles++;
    if (cmd_fault) n_fault++;
    if (pf_valid) pf_log.push_back(pf_addr);
  end

  // ------------------------------------------------------------ memory helpers
  task automatic wr8v(input vaddr_t va, input logic [7:0] d);
    u_mem.poke8(xlate(va), d);
  endtask
  task automatic wr32v(input vaddr_t va, input logic [31:0] d);
    for (int b = 0; b < 4; b++) wr8v(va + 64'(b), d[b*8 +: 8]);
  endtask
  task automatic wr64v(input vaddr_t va, input logic [63:0] d);
    for (int b = 0; b < 8; b++) wr8v(va + 64'(b), d[b*8 +: 8]);
  endtask
  function automatic tag_t mmt_tag(input vaddr_t va);
    return u_mem.peek8(MMT + PADDR_W'(xlate(va) >> 9));
  endfunction

  // ------------------------------------------------------------ core tasks
  task automatic issue(input op_e f, input logic [63:0] a, input logic [63:0] b);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd = '{funct: f, rs1: a, rs2: b};
    @(negedge clk);
    cmd_valid = 0;
    while (cmd_busy) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  task automatic access(input vaddr_t va, input logic store);
    @(negedge clk);
    core_valid = 1; core_vaddr = va; core_store = store;
    while (!core_ready) @(negedge clk);
    @(negedge clk);
    core_valid = 0;
    while (!core_done) @(negedge clk);
    @(negedge clk);                           // let the monitors see the result
  endtask

  task automatic quiesce();
    repeat (4) @(negedge clk);
    while (int'(dut.u_pf.state) != 0 || int'(dut.u_lkp.state) != 0 || int'(dut.u_sc.state) != 0)
      @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  // metadata block of the prefetcher (see graph_prefetcher for the layout)
  task automatic pf_meta(input int k, input vaddr_t nxt, input vaddr_t base, input int lg_this,
                         input int lg_next, input int size, input int stride, input bit range = 0);
    wr64v(MD + 64'(k) * 64 + 0,  nxt);
    wr64v(MD + 64'(k) * 64 + 8,  base);
    wr64v(MD + 64'(k) * 64 + 16, {32'(size), 15'd0, range, 8'(lg_next), 8'(lg_this)});
    wr64v(MD + 64'(k) * 64 + 24, 64'(stride));
    for (int w = 4; w < 8; w++) wr64v(MD + 64'(k) * 64 + 64'(w) * 8, 64'(k) * 64'h0101 + 64'(w));
  endtask

  function automatic logic [63:0] create_rs1(input int client, input int t);
    return {48'd0, 8'(client), 8'(t)};
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int wl[NW]; int vl[NV+1]; int el[NE];

  initial begin
    int h0, m0, r0, d0, v0, b0, f0;
    // ---------------------------------------------------------- data
    vl[0] = 0;
    for (int v = 0; v < NV; v++) vl[v+1] = vl[v] + $urandom_range(1, 3);
    for (int e = 0; e < NE; e++) el[e] = $urandom_range(0, NV - 1);
    for (int i = 0; i < NW; i++) wl[i] = $urandom_range(0, NV - 1);
    for (int i = 0; i < NW; i++) wr32v(WL + 64'(i) * 4, 32'(wl[i]));
    for (int v = 0; v <= NV; v++) wr32v(VL + 64'(v) * 4, 32'(vl[v]));
    for (int e = 0; e < NE; e++) wr32v(EL + 64'(e) * 4, 32'(el[e]));
    for (int v = 0; v < NV; v++) wr64v(PR + 64'(v) * 8, 64'(v) * 7);
    pf_meta(2, VL, WL, 2, 2, NW * 4, 1);
    pf_meta(3, EL, VL, 2, 2, (NV + 1) * 4, 1);
    pf_meta(4, PR, EL, 2, 3, NE * 4, 1);
    pf_meta(5, 64'd0, PR, 3, 3, NV * 8, 1);
    wr64v(MD + 64'd6 * 64, 64'd6);              // bounds metadata: expected tag 6
    for (int w = 1; w < 8; w++) wr64v(MD + 64'd6 * 64 + 64'(w) * 8, '0);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------------------------------------------------- OS setup and tagging
    issue(OP_SETMMT, 64'(MMT), 0);
    check(dut.mmt_base == MMT, "SETMMT");
    seen[M_SETMMT] = 1;
    issue(OP_MAP, WL, {56'(NW * 4), 8'd2});
    issue(OP_MAP, VL, {56'((NV + 1) * 4), 8'd3});
    issue(OP_MAP, EL, {56'(NE * 4), 8'd4});
    issue(OP_MAP, PR, {56'(NV * 8), 8'd5});
    issue(OP_MAP, ARR, {56'd1024, 8'd6});
    issue(OP_MAP, STK, {56'd8, 8'd1});
    check(mmt_tag(WL) == 2 && mmt_tag(VL) == 3 && mmt_tag(EL) == 4 && mmt_tag(PR) == 5 &&
          mmt_tag(ARR + 64'd1023) == 6 && mmt_tag(ARR + 64'd1024) == 0 && mmt_tag(STK) == 1,
          "MAP writes the MMT");
    seen[M_MAP] = (st_mmt_writes >= 32'd7);
    for (int k = 2; k <= 5; k++) issue(OP_CREATE, create_rs1(0, k), MD + 64'(k) * 64);
    check(st_creates == 32'd4, "four CREATEs");
    seen[M_CREATE] = (st_creates == 32'd4);

    // ---------------------------------------------------------- graph prefetching
    pf_enable = 1;
    for (int n = 0; n < 2; n++) begin
      h0 = int'(st_mmc_hits); m0 = int'(st_mmc_misses); r0 = int'(st_mmt_reads);
      for (int i = 0; i < NW - 1; i += 3) begin
        automatic int v = wl[i + 1];
        automatic int off = vl[v];
        automatic int u = el[off];
        pf_log.delete();
        access(WL + 64'(i) * 4, 1'b0);
        quiesce();
        check(pf_log.size() == 4, $sformatf("chain length %0d", pf_log.size()));
        if (pf_log.size() == 4) begin
          check(pf_log[0] == xlate(WL + 64'(i + 1) * 4), "prefetch: work list look-ahead");
          check(pf_log[1] == xlate(VL + 64'(v) * 4),     "prefetch: vertex");
          check(pf_log[2] == xlate(EL + 64'(off) * 4),   "prefetch: edge");
          check(pf_log[3] == xlate(PR + 64'(u) * 8),     "prefetch: property");
          seen[M_PF_CHAIN] = 1;
        end
      end
      if (n == 0) begin
        check(int'(st_mmc_misses) > m0 && int'(st_mmt_reads) > r0, "first pass misses the MMC and reads the MMT");
        seen[M_MMC_MISS] = int'(st_mmc_misses) > m0;
        seen[M_MMT_READ] = int'(st_mmt_reads) > r0;
      end else begin
        check(int'(st_mmc_hits) > h0 && int'(st_mmt_reads) == r0, "second pass hits the MMC only");
        seen[M_MMC_HIT] = int'(st_mmc_hits) > h0 && int'(st_mmt_reads) == r0;
      end
    end

    // range walk: vertex list marked as a range, all edges of the vertex followed
    pf_meta(3, EL, VL, 2, 2, (NV + 1) * 4, 1, 1'b1);
    issue(OP_CREATE, create_rs1(0, 3), MD + 64'd3 * 64);
    for (int i = 0; i < 4; i++) begin
      automatic int v = wl[i + 1];
      automatic int lo = vl[v], hi = vl[v + 1];
      automatic bit ok = 1;
      pf_log.delete();
      access(WL + 64'(i) * 4, 1'b0);
      quiesce();
      ok = (pf_log.size() == 2 + 2 * (hi - lo));
      for (int e = lo; ok && e < hi; e++)
        ok = (pf_log[2 + 2 * (e - lo)] == xlate(EL + 64'(e) * 4)) &&
             (pf_log[3 + 2 * (e - lo)] == xlate(PR + 64'(el[e]) * 8));
      check(ok, $sformatf("range walk over the %0d edges of vertex %0d", hi - lo, v));
      if (ok && hi - lo > 1) seen[M_PF_RANGE] = 1;
    end
    pf_meta(3, EL, VL, 2, 2, (NV + 1) * 4, 1);
    issue(OP_CREATE, create_rs1(0, 3), MD + 64'd3 * 64);

    // triggers while busy are dropped
    b0 = int'(st_pf_busy_drops);
    access(WL, 1'b0);
    access(WL + 64'd4, 1'b0);
    quiesce();
    check(int'(st_pf_busy_drops) > b0, "busy prefetcher drops triggers");
    seen[M_PF_BUSY] = int'(st_pf_busy_drops) > b0;

    // best effort: a granule not in the MMC is dropped, not read from the MMT
    pf_mode = MODE_BEST_EFFORT;
    d0 = int'(st_dropped); r0 = int'(st_mmt_reads);
    pf_log.delete();
    access(ARR + 64'd512, 1'b0);
    quiesce();
    check(int'(st_dropped) == d0 + 1 && int'(st_mmt_reads) == r0 && pf_log.size() == 0,
          "best-effort lookup dropped on an MMC miss");
    seen[M_BE_DROP] = int'(st_dropped) == d0 + 1;
    pf_mode = MODE_NO_STALL;
    pf_enable = 0;

    // ---------------------------------------------------------- bounds checking
    bc_en = 1;
    v0 = n_viol;
    issue(OP_CREATE, create_rs1(1, 6), MD + 64'd6 * 64);
    stall_cycles = 0;
    access(ARR + 64'd100, 1'b0);
    check(n_viol == v0, "in-bounds access accepted");
    check(stall_cycles > 0, "core stalled during the check");
    seen[M_BC_OK] = (n_viol == v0);
    seen[M_STALL] = stall_cycles > 0;
    access(ARR + 64'd2048, 1'b0);              // not armed: no check, no violation
    check(n_viol == v0, "access without CREATE is not checked");
    issue(OP_CREATE, create_rs1(1, 6), MD + 64'd6 * 64);
    access(ARR + 64'd2048, 1'b1);
    check(n_viol == v0 + 1 && n_viol_bounds == 1 && last_viol == ARR + 64'd2048, "out-of-bounds access detected");
    seen[M_BC_VIOL] = (n_viol_bounds == 1);
    // UNMAP: the MMC copy is updated too, so the old array is out of bounds
    issue(OP_UNMAP, ARR, 64'd1024);
    check(mmt_tag(ARR) == 0 && mmt_tag(ARR + 64'd600) == 0, "UNMAP clears the MMT");
    seen[M_UNMAP] = mmt_tag(ARR) == 0;
    issue(OP_CREATE, create_rs1(1, 6), MD + 64'd6 * 64);
    access(ARR + 64'd100, 1'b0);
    check(n_viol == v0 + 2, "access to an unmapped array detected");
    bc_en = 0;

    // ---------------------------------------------------------- return address protection
    rap_en = 1;
    v0 = n_viol;
    access(STK, 1'b0);
    check(n_viol == v0, "loading the return address is allowed");
    access(STK + 64'd512, 1'b1);
    check(n_viol == v0, "store to the next granule is allowed");
    access(STK, 1'b1);
    check(n_viol == v0 + 1 && !viol_bounds && last_viol == STK, "return address overwrite detected");
    seen[M_RAP_VIOL] = (n_viol == v0 + 1);
    rap_en = 0;

    // ---------------------------------------------------------- MAP2D / MAP3D
    issue(OP_MAPARGS, {32'd0, 32'd8192}, {16'd0, 16'd3, 32'd1536});
    issue(OP_MAP2D, 64'h0500_0000, 64'd7);
    for (int y = 0; y < 3; y++) begin
      check(mmt_tag(64'h0500_0000 + 64'(y) * 8192) == 7 && mmt_tag(64'h0500_0400 + 64'(y) * 8192) == 7,
            "MAP2D row tagged");
      check(mmt_tag(64'h0500_0600 + 64'(y) * 8192) == 0, "MAP2D leaves the rest of the row");
    end
    check(mmt_tag(64'h0500_0000 + 64'd3 * 8192) == 0, "MAP2D stops after sizeY rows");
    seen[M_MAP2D] = mmt_tag(64'h0500_0000 + 64'd8192) == 7;
    issue(OP_MAPARGS, {32'd4, 32'd4096}, {16'd2, 16'd2, 32'd512});
    issue(OP_MAP3D, 64'h0600_0000, 64'd8);
    for (int z = 0; z < 2; z++)
      for (int y = 0; y < 2; y++)
        check(mmt_tag(64'h0600_0000 + 64'(z) * 16384 + 64'(y) * 4096) == 8, "MAP3D element tagged");
    check(mmt_tag(64'h0600_0000 + 64'd2 * 4096) == 0 && mmt_tag(64'h0600_0000 + 64'd16384 + 64'd512) == 0,
          "MAP3D leaves the rest");
    seen[M_MAP3D] = mmt_tag(64'h0600_0000 + 64'd16384 + 64'd4096) == 8;
    // UNMAP3D with the same shape clears it; UNMAP2D clears the first two rows of the 2D map
    issue(OP_UNMAP3D, 64'h0600_0000, 64'd0);
    check(mmt_tag(64'h0600_0000) == 0 && mmt_tag(64'h0600_0000 + 64'd16384 + 64'd4096) == 0, "UNMAP3D clears");
    issue(OP_MAPARGS, {32'd0, 32'd8192}, {16'd0, 16'd2, 32'd1536});
    issue(OP_UNMAP2D, 64'h0500_0000, 64'd0);
    check(mmt_tag(64'h0500_0000) == 0 && mmt_tag(64'h0500_0000 + 64'd8192) == 0 &&
          mmt_tag(64'h0500_0000 + 64'd16384) == 7, "UNMAP2D clears sizeY rows only");
    seen[M_UNMAP2D3D] = mmt_tag(64'h0500_0000 + 64'd16384) == 7 && mmt_tag(64'h0600_0000) == 0;

    // ---------------------------------------------------------- translation fault
    f0 = n_fault;
    issue(OP_MAP, 64'h0000_2000_0000_0000, {56'd512, 8'd9});
    check(n_fault == f0 + 1, "MAP of an untranslatable address faults");
    seen[M_XLATE_FAULT] = n_fault == f0 + 1;

    // ---------------------------------------------------------- FLUSH
    issue(OP_FLUSH, 0, 0);
    pf_enable = 1;
    m0 = int'(st_mmc_misses);
    pf_log.delete();
    access(WL, 1'b0);
    quiesce();
    check(int'(st_mmc_misses) == m0 + 1, "MMC invalidated by FLUSH");
    check(pf_log.size() == 0, "prefetcher PMT invalidated by FLUSH");
    seen[M_FLUSH] = int'(st_mmc_misses) == m0 + 1 && pf_log.size() == 0;
    pf_enable = 0;

    check(st_violations == 32'd3 && st_lookups == st_mmc_hits + st_mmc_misses,
          "statistics consistent");

    for (int k = 0; k < M_N; k++)
      if (!seen[k]) begin
        failures++;
        $display("FAIL: mechanism %s never happened", mech_e'(k));
      end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
