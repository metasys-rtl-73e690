// tb_graph_prefetcher: self-checking testbench of the graph prefetcher client.
//
// Builds a small CSR graph in the memory model (work list, vertex list, edge
// list, property list; 4-byte ids and offsets, 8-byte properties), describes
// each structure in the client's PMT and answers lookups from a testbench
// responder that tags each structure's 4 KiB region (identity translation).
// For random work-list accesses the expected chain, computed from the graph in
// the testbench, is work list[i+stride] -> vertex list[v] -> edge list[off] ->
// property[u]; the prefetch addresses must follow it exactly. Also checks that
// untagged and out-of-structure accesses prefetch nothing, that a structure
// without a next structure stops the chain, the stride, that triggers
// arriving while busy are dropped and counted, and the range walk: with the
// vertex list marked as a range every edge of the vertex (upper bound in the
// same or in the next memory word) and its property are prefetched.
module tb_graph_prefetcher;
  import metasys_pkg::*;

  localparam vaddr_t WL = 64'h1_0000, VL = 64'h2_0000, EL = 64'h3_0000, PR = 64'h4_0000;
  localparam int NV = 24, NW = 16, NE = 80;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic enable = 1, flush = 0;
  lookup_mode_e lkp_mode = MODE_NO_STALL;
  logic pmt_wr_valid = 0; client_t pmt_wr_client = '0; tag_t pmt_wr_tag = '0; meta_t pmt_wr_data = '0;
  logic trig_valid = 0; vaddr_t trig_vaddr = '0;
  logic lkp_req_valid, lkp_req_ready, lkp_resp_valid;
  lkp_req_t lkp_req; lkp_resp_t lkp_resp;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t mem_req; mem_resp_t mem_resp;
  logic pf_valid; paddr_t pf_addr;
  logic [31:0] n_triggers, n_busy_drops, n_prefetches;

  graph_prefetcher #(.CLIENT_ID(client_t'(0)), .MAX_DEPTH(4)) dut (.*);

  mem_model #(.LATENCY(5)) u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .resp_valid(mem_resp_valid), .resp(mem_resp));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic tag_t ref_tag(input vaddr_t va);
    if (va >= WL && va < PR + 64'h1000 && va[11:0] < 12'hFFF) return tag_t'(va[19:16]);
    return '0;
  endfunction

  // lookup responder: 3 cycles, identity translation
  int cnt = -1; vaddr_t lva;
  assign lkp_req_ready = (cnt < 0);
  always @(posedge clk) begin
    lkp_resp_valid <= 1'b0;
    if (rst_n) begin
      if (cnt < 0 && lkp_req_valid) begin cnt <= 2; lva <= lkp_req.vaddr; end
      else if (cnt == 0) begin
        lkp_resp_valid <= 1'b1;
        lkp_resp <= '{tag: ref_tag(lva), paddr: PADDR_W'(lva), dropped: 1'b0, fault: 1'b0, mmc_hit: 1'b1};
        cnt <= -1;
      end else if (cnt > 0) cnt <= cnt - 1;
    end
  end

  paddr_t pf_log[$];
  always @(posedge clk) if (rst_n && pf_valid) pf_log.push_back(pf_addr);

  // graph
  int wl[NW]; int vl[NV+1]; int el[NE];

  function automatic logic [31:0] rd32(input vaddr_t a);
    logic [63:0] w;
    w = u_mem.peek64(PADDR_W'(a));
    return a[2] ? w[63:32] : w[31:0];
  endfunction

  task automatic wr32(input vaddr_t a, input logic [31:0] d);
    for (int b = 0; b < 4; b++) u_mem.poke8(PADDR_W'(a) + PADDR_W'(b), d[b*8 +: 8]);
  endtask

  task automatic create(input tag_t t, input vaddr_t nxt, input vaddr_t base, input int lg_this,
                        input int lg_next, input int size, input int stride, input bit range = 0);
    meta_t m;
    m = '0;
    m[63:0] = nxt; m[127:64] = base; m[135:128] = 8'(lg_this); m[143:136] = 8'(lg_next);
    m[144] = range;
    m[191:160] = 32'(size); m[197:192] = 6'(stride);
    @(negedge clk);
    pmt_wr_valid = 1; pmt_wr_client = 8'd0; pmt_wr_tag = t; pmt_wr_data = m;
    @(negedge clk);
    pmt_wr_valid = 0;
  endtask

  task automatic trigger(input vaddr_t va);
    @(negedge clk); trig_valid = 1; trig_vaddr = va;
    @(negedge clk); trig_valid = 0;
  endtask

  task automatic wait_idle();
    repeat (3) @(negedge clk);
    while (int'(dut.state) != 0) @(negedge clk);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int stride;
    // random CSR graph
    vl[0] = 0;
    for (int v = 0; v < NV; v++) vl[v+1] = vl[v] + $urandom_range(1, 3);
    for (int e = 0; e < NE; e++) el[e] = $urandom_range(0, NV - 1);
    for (int i = 0; i < NW; i++) wl[i] = $urandom_range(0, NV - 1);
    for (int i = 0; i < NW; i++) wr32(WL + 64'(i) * 4, 32'(wl[i]));
    for (int v = 0; v <= NV; v++) wr32(VL + 64'(v) * 4, 32'(vl[v]));
    for (int e = 0; e < NE; e++) wr32(EL + 64'(e) * 4, 32'(el[e]));
    for (int v = 0; v < NV; v++) u_mem.poke64(PADDR_W'(PR + 64'(v) * 8), 64'(v) * 1000);
    repeat (3) @(posedge clk);
    rst_n = 1;

    stride = 1;
    create(8'd1, VL, WL, 2, 2, NW * 4, stride);
    create(8'd2, EL, VL, 2, 2, (NV + 1) * 4, 1);
    create(8'd3, PR, EL, 2, 3, NE * 4, 1);
    create(8'd4, 64'd0, PR, 3, 3, NV * 8, 1);

    // chains from random work-list positions
    for (int n = 0; n < 12; n++) begin
      automatic int i = $urandom_range(0, NW - 1 - stride);
      automatic int v = wl[i + stride];
      automatic int off = vl[v];
      automatic int u = el[off];
      pf_log.delete();
      trigger(WL + 64'(i) * 4);
      wait_idle();
      check(pf_log.size() == 4, $sformatf("chain length %0d", pf_log.size()));
      if (pf_log.size() == 4) begin
        check(pf_log[0] == PADDR_W'(WL + 64'(i + stride) * 4), "work list look-ahead");
        check(pf_log[1] == PADDR_W'(VL + 64'(v) * 4), "vertex list element");
        check(pf_log[2] == PADDR_W'(EL + 64'(off) * 4), "edge list element");
        check(pf_log[3] == PADDR_W'(PR + 64'(u) * 8), "property element");
      end
    end

    // an edge-list access starts the chain at that level
    pf_log.delete();
    trigger(EL + 64'd8);
    wait_idle();
    check(pf_log.size() == 2 && pf_log[0] == PADDR_W'(EL + 64'd12) && pf_log[1] == PADDR_W'(PR + 64'(el[3]) * 8),
          "edge list access: stride look-ahead then property");

    // untagged address, and a tagged address outside the structure
    pf_log.delete();
    trigger(64'h9_0000);
    wait_idle();
    trigger(WL + 64'h800);
    wait_idle();
    check(pf_log.size() == 0, "no prefetch outside described structures");

    // the look-ahead of the last work-list element would leave the structure
    pf_log.delete();
    trigger(WL + 64'(NW - 1) * 4);
    wait_idle();
    check(pf_log.size() == 0, "no look-ahead past the end of a structure");

    // property list has no next structure: one stride prefetch only
    pf_log.delete();
    trigger(PR + 64'd16);
    wait_idle();
    check(pf_log.size() == 1 && pf_log[0] == PADDR_W'(PR + 64'd24), "last structure: stride prefetch only");

    // busy: a second trigger during a chain is dropped
    begin
      automatic int d0 = int'(n_busy_drops);
      trigger(WL);
      trigger(WL + 64'd4);
      wait_idle();
      check(int'(n_busy_drops) == d0 + 1, "trigger while busy dropped");
    end

    // disabled: nothing happens
    enable = 0;
    pf_log.delete();
    trigger(WL);
    wait_idle();
    check(pf_log.size() == 0, "disabled prefetcher is quiet");
    check(n_prefetches == 32'd55, $sformatf("prefetch count %0d", n_prefetches));

    // range walk: the vertex list marked as a range, every edge of the vertex
    // (at most MAX_RANGE = 8) and its property are prefetched
    enable = 1;
    create(8'd2, EL, VL, 2, 2, (NV + 1) * 4, 1, 1'b1);
    for (int n = 0; n < 10; n++) begin
      automatic int i = (n < 2) ? n : $urandom_range(0, NW - 2);
      automatic int v = wl[i + 1];
      automatic int lo = vl[v];
      automatic int hi = (vl[v + 1] - vl[v] > 8) ? vl[v] + 8 : vl[v + 1];
      automatic int k = 2;
      pf_log.delete();
      trigger(WL + 64'(i) * 4);
      wait_idle();
      check(pf_log.size() == 2 + 2 * (hi - lo), $sformatf("range walk length %0d, expected %0d",
            pf_log.size(), 2 + 2 * (hi - lo)));
      if (pf_log.size() == 2 + 2 * (hi - lo)) begin
        check(pf_log[0] == PADDR_W'(WL + 64'(i + 1) * 4) && pf_log[1] == PADDR_W'(VL + 64'(v) * 4),
              "range walk: work list and vertex");
        for (int e = lo; e < hi; e++) begin
          check(pf_log[k] == PADDR_W'(EL + 64'(e) * 4), $sformatf("range walk: edge %0d", e));
          check(pf_log[k + 1] == PADDR_W'(PR + 64'(el[e]) * 8), "range walk: property of the edge");
          k += 2;
        end
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
