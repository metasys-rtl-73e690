// tb_workloads: workload-style runs of metasys_top at its default parameters.
//
// The core is played by tasks; TLB and memory are behavioural models. Four
// scaled-down workloads of the kinds the metadata system is evaluated with:
//   stream       every 64 B of a 256 KiB tagged array is read once; with a
//                lookup per access the MMC must miss exactly once per 512 B
//                granule (512 misses, 3584 hits), since 512 granules exceed its
//                128 entries and the stream never returns.
//   random       random accesses to a 128 KiB tagged array, twice the 64 KiB
//                the MMC covers: the hit fraction must lie near one half.
//   graph        a breadth-first-search style traversal of a random CSR graph
//                (work list, vertex list, edge list, property list) with the
//                prefetcher on and the vertex list marked as a range: every prefetch must fall on an element of one
//                of the structures, and some must be used later by the core.
//   linked list  a bounds-checked pointer chase over nodes scattered in memory
//                that all carry one tag (CREATE before every access): no
//                violation until a node pointer is corrupted to point into
//                another structure, which must be caught.
// Lookups in the two microbenchmarks come from the prefetcher: their tag has no
// PMT entry, so each access costs exactly one lookup and nothing else.
module tb_workloads;
  import metasys_pkg::*;
  import tb_pkg::*;

  localparam paddr_t MMT = 39'h0100_0000;
  localparam vaddr_t STR = 64'h0800_0000, RND = 64'h0900_0000;
  localparam vaddr_t WL = 64'h0A00_0000, VL = 64'h0A10_0000, EL = 64'h0A20_0000, PR = 64'h0A30_0000;
  localparam vaddr_t MD = 64'h0B00_0000, NODES = 64'h0C00_0000;
  localparam int NV = 48, MAXE = 160, NNODE = 24;

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

  int n_viol = 0;
  paddr_t pf_log[$];
  always @(posedge clk) if (rst_n) begin
    if (violation) n_viol++;
    if (pf_valid) pf_log.push_back(pf_addr);
  end

  task automatic wr8v(input vaddr_t va, input logic [7:0] d);
    u_mem.poke8(xlate(va), d);
  endtask
  task automatic wr32v(input vaddr_t va, input logic [31:0] d);
    for (int b = 0; b < 4; b++) wr8v(va + 64'(b), d[b*8 +: 8]);
  endtask
  task automatic wr64v(input vaddr_t va, input logic [63:0] d);
    for (int b = 0; b < 8; b++) wr8v(va + 64'(b), d[b*8 +: 8]);
  endtask

  task automatic issue(input op_e f, input logic [63:0] a, input logic [63:0] b);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd = '{funct: f, rs1: a, rs2: b};
    @(negedge clk);
    cmd_valid = 0;
    while (cmd_busy) @(negedge clk);
    @(negedge clk);
  endtask

  task automatic access(input vaddr_t va, input logic store);
    @(negedge clk);
    core_valid = 1; core_vaddr = va; core_store = store;
    while (!core_ready) @(negedge clk);
    @(negedge clk);
    core_valid = 0;
    while (!core_done) @(negedge clk);
    @(negedge clk);
  endtask

  task automatic quiesce();
    repeat (2) @(negedge clk);
    while (int'(dut.u_pf.state) != 0 || int'(dut.u_lkp.state) != 0 || int'(dut.u_sc.state) != 0)
      @(negedge clk);
  endtask

  task automatic pf_meta(input int k, input vaddr_t nxt, input vaddr_t base, input int lg_this,
                         input int lg_next, input int size, input int stride, input bit range = 0);
    wr64v(MD + 64'(k) * 64 + 0,  nxt);
    wr64v(MD + 64'(k) * 64 + 8,  base);
    wr64v(MD + 64'(k) * 64 + 16, {32'(size), 15'd0, range, 8'(lg_next), 8'(lg_this)});
    wr64v(MD + 64'(k) * 64 + 24, 64'(stride));
    for (int w = 4; w < 8; w++) wr64v(MD + 64'(k) * 64 + 64'(w) * 8, '0);
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int vl[NV+1]; int el[MAXE]; int order[$]; bit visited[NV];
  vaddr_t node_va[NNODE];

  initial begin
    int h0, m0, ne;
    repeat (3) @(posedge clk);
    rst_n = 1;
    issue(OP_SETMMT, 64'(MMT), 0);

    // ---------------------------------------------------------- stream
    pf_enable = 1;
    issue(OP_MAP, STR, {56'h4_0000, 8'd20});
    h0 = int'(st_mmc_hits); m0 = int'(st_mmc_misses);
    for (int a = 0; a < 32'h4_0000; a += 64) begin
      access(STR + 64'(a), 1'b0);
      quiesce();
    end
    check(int'(st_mmc_misses) - m0 == 512 && int'(st_mmc_hits) - h0 == 3584,
          $sformatf("stream: %0d misses, %0d hits (expected 512, 3584)",
                    int'(st_mmc_misses) - m0, int'(st_mmc_hits) - h0));

    // ---------------------------------------------------------- random access
    issue(OP_MAP, RND, {56'h2_0000, 8'd21});
    h0 = int'(st_mmc_hits); m0 = int'(st_mmc_misses);
    for (int n = 0; n < 2000; n++) begin
      access(RND + 64'($urandom_range(0, 32'h1_FFFF) & ~32'h7), 1'b0);
      quiesce();
    end
    begin
      automatic real hf = real'(int'(st_mmc_hits) - h0) / 2000.0;
      $display("random access: MMC hit fraction %0.3f", hf);
      check(int'(st_mmc_hits) - h0 + int'(st_mmc_misses) - m0 == 2000, "random: one lookup per access");
      check(hf > 0.35 && hf < 0.65, $sformatf("random: hit fraction %0.3f near 0.5", hf));
    end

    // ---------------------------------------------------------- graph traversal
    vl[0] = 0;
    for (int v = 0; v < NV; v++) vl[v+1] = vl[v] + $urandom_range(1, 3);
    ne = vl[NV];
    for (int e = 0; e < ne; e++) el[e] = $urandom_range(0, NV - 1);
    // BFS order from vertex 0 (unreached vertices appended), the work list
    for (int v = 0; v < NV; v++) visited[v] = 0;
    order.push_back(0); visited[0] = 1;
    for (int i = 0; i < NV; i++) begin
      if (i >= order.size())
        for (int v = 0; v < NV; v++) if (!visited[v]) begin order.push_back(v); visited[v] = 1; break; end
      for (int e = vl[order[i]]; e < vl[order[i] + 1]; e++)
        if (!visited[el[e]]) begin visited[el[e]] = 1; order.push_back(el[e]); end
    end
    for (int i = 0; i < NV; i++) wr32v(WL + 64'(i) * 4, 32'(order[i]));
    for (int v = 0; v <= NV; v++) wr32v(VL + 64'(v) * 4, 32'(vl[v]));
    for (int e = 0; e < ne; e++) wr32v(EL + 64'(e) * 4, 32'(el[e]));
    for (int v = 0; v < NV; v++) wr64v(PR + 64'(v) * 8, 64'(v));
    pf_meta(2, VL, WL, 2, 2, NV * 4, 1);
    pf_meta(3, EL, VL, 2, 2, (NV + 1) * 4, 1, 1'b1);
    pf_meta(4, PR, EL, 2, 3, ne * 4, 1);
    pf_meta(5, 64'd0, PR, 3, 3, NV * 8, 1);
    issue(OP_MAP, WL, {56'(NV * 4), 8'd2});
    issue(OP_MAP, VL, {56'((NV + 1) * 4), 8'd3});
    issue(OP_MAP, EL, {56'(ne * 4), 8'd4});
    issue(OP_MAP, PR, {56'(NV * 8), 8'd5});
    for (int k = 2; k <= 5; k++) issue(OP_CREATE, {48'd0, 8'd0, 8'(k)}, MD + 64'(k) * 64);
    pf_log.delete();
    begin
      paddr_t core_log[$];
      int n_inside = 0, useful = 0;
      for (int i = 0; i < NV; i++) begin
        automatic int v = order[i];
        access(WL + 64'(i) * 4, 1'b0);         core_log.push_back(xlate(WL + 64'(i) * 4));
        access(VL + 64'(v) * 4, 1'b0);         core_log.push_back(xlate(VL + 64'(v) * 4));
        for (int e = vl[v]; e < vl[v + 1]; e++) begin
          access(EL + 64'(e) * 4, 1'b0);       core_log.push_back(xlate(EL + 64'(e) * 4));
          access(PR + 64'(el[e]) * 8, 1'b0);   core_log.push_back(xlate(PR + 64'(el[e]) * 8));
        end
      end
      quiesce();
      foreach (pf_log[p]) begin
        automatic bit ok = 0;
        for (int i = 0; i < NV; i++)  if (pf_log[p] == xlate(WL + 64'(i) * 4)) ok = 1;
        for (int v = 0; v <= NV; v++) if (pf_log[p] == xlate(VL + 64'(v) * 4)) ok = 1;
        for (int e = 0; e < ne; e++)  if (pf_log[p] == xlate(EL + 64'(e) * 4)) ok = 1;
        for (int v = 0; v < NV; v++)  if (pf_log[p] == xlate(PR + 64'(v) * 8)) ok = 1;
        if (ok) n_inside++;
        foreach (core_log[c]) if (core_log[c] == pf_log[p]) begin useful++; break; end
      end
      $display("graph: %0d core accesses, %0d prefetches, %0d to addresses the traversal reads, %0d busy drops",
               core_log.size(), pf_log.size(), useful, int'(st_pf_busy_drops));
      check(pf_log.size() > 0, "graph: prefetches issued");
      check(n_inside == pf_log.size(), "graph: every prefetch lies on an element of a structure");
      check(useful > 0, "graph: prefetched addresses are read by the traversal");
    end
    pf_enable = 0;

    // ---------------------------------------------------------- bounds-checked linked list
    bc_en = 1;
    for (int n = 0; n < NNODE; n++) begin
      node_va[n] = NODES + 64'(n) * 64'h3000 + 64'($urandom_range(0, 7)) * 64;
      issue(OP_MAP, node_va[n], {56'd16, 8'd10});
    end
    wr64v(MD + 64'd10 * 64, 64'd10);
    for (int w = 1; w < 8; w++) wr64v(MD + 64'd10 * 64 + 64'(w) * 8, '0);
    begin
      automatic int v0 = n_viol;
      for (int n = 0; n < NNODE; n++) begin
        issue(OP_CREATE, {48'd0, 8'd1, 8'd10}, MD + 64'd10 * 64);
        access(node_va[n] + 64'd8, 1'b0);      // load node->next
      end
      check(n_viol == v0, "linked list: no violation on a correct traversal");
      // a corrupted next pointer into the graph's edge list
      issue(OP_CREATE, {48'd0, 8'd1, 8'd10}, MD + 64'd10 * 64);
      access(EL + 64'd8, 1'b0);
      check(n_viol == v0 + 1, "linked list: corrupted pointer caught");
    end
    bc_en = 0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
