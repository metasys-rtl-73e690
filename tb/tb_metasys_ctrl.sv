// tb_metasys_ctrl: self-checking testbench of the Mapping Management Unit and
// command control, wired to a real MMC and to memory and TLB models.
//
// Issues SETMMT, MAP (inside a page and across a page boundary), UNMAP, MAP2D,
// MAP3D, CREATE, FLUSH and a MAP that faults, then checks the Metadata Mapping
// Table bytes in memory granule by granule against the reference translation,
// the bytes next to each range left alone, the number of MMT writes, the MMC
// updated in place on MAP, the PMT write of CREATE (client, tag, 64 bytes) and
// the flush of the MMC.
module tb_metasys_ctrl;
  import metasys_pkg::*;
  import tb_pkg::*;

  localparam int unsigned G = 9;
  localparam int unsigned KEY_W = PADDR_W - G;
  localparam paddr_t MMT = 39'h0_0200_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready, busy, fault, flush;
  cmd_t cmd = '0;
  paddr_t mmt_base;
  logic tlb_req_valid, tlb_req_ready, tlb_resp_valid;
  tlb_req_t tlb_req; tlb_resp_t tlb_resp;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t mem_req; mem_resp_t mem_resp;
  logic mmc_upd_valid; logic [KEY_W-1:0] mmc_upd_key; tag_t mmc_upd_tag;
  logic pmt_wr_valid; client_t pmt_wr_client; tag_t pmt_wr_tag; meta_t pmt_wr_data;
  logic [31:0] n_mmt_writes, n_creates;

  metasys_ctrl #(.GRAN_LOG2(G)) dut (.*);

  // MMC probed by the testbench
  logic lkp_valid = 0, lkp_rvalid, lkp_hit, fill_valid = 0;
  logic [KEY_W-1:0] lkp_key = '0, fill_key = '0;
  tag_t lkp_tag, fill_tag = '0;
  logic [31:0] hits, misses;
  mmc #(.ENTRIES(128), .KEY_W(KEY_W)) u_mmc (.clk, .rst_n, .lkp_valid, .lkp_key, .lkp_rvalid,
    .lkp_hit, .lkp_tag, .fill_valid, .fill_key, .fill_tag, .upd_valid(mmc_upd_valid),
    .upd_key(mmc_upd_key), .upd_tag(mmc_upd_tag), .inv_all(flush), .hit_count(hits), .miss_count(misses));

  mem_model #(.LATENCY(3)) u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .resp_valid(mem_resp_valid), .resp(mem_resp));
  tlb_model #(.LATENCY(2)) u_tlb (.clk, .rst_n, .req_valid(tlb_req_valid), .req_ready(tlb_req_ready),
    .req(tlb_req), .resp_valid(tlb_resp_valid), .resp(tlb_resp));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // capture PMT writes and faults
  int n_pmt_wr = 0, n_fault = 0, n_flush = 0;
  client_t cap_client; tag_t cap_tag; meta_t cap_data;
  always @(posedge clk) if (rst_n) begin
    if (pmt_wr_valid) begin n_pmt_wr++; cap_client = pmt_wr_client; cap_tag = pmt_wr_tag; cap_data = pmt_wr_data; end
    if (fault) n_fault++;
    if (flush) n_flush++;
  end

  task automatic issue(input op_e f, input logic [63:0] a, input logic [63:0] b);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd = '{funct: f, rs1: a, rs2: b};
    @(negedge clk);
    cmd_valid = 0;
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  function automatic tag_t mmt_tag(input vaddr_t va);
    return u_mem.peek8(MMT + PADDR_W'(xlate(va) >> G));
  endfunction

  task automatic probe(input vaddr_t va, output logic h, output tag_t t);
    @(negedge clk); lkp_valid = 1; lkp_key = KEY_W'(xlate(va) >> G);
    @(negedge clk); lkp_valid = 0; h = lkp_hit; t = lkp_tag;
  endtask

  // expect every granule overlapping [va, va+len) to carry tag t
  task automatic expect_range(input vaddr_t va, input longint len, input tag_t t, input string what);
    for (vaddr_t g = va & ~64'h1FF; g < va + 64'(len); g += 512)
      check(mmt_tag(g) == t, $sformatf("%s: granule %h tag %0d, expected %0d", what, g, mmt_tag(g), t));
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic h; tag_t t; int w0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    issue(OP_SETMMT, 64'(MMT), 0);
    check(mmt_base == MMT, "SETMMT sets the MMT base");

    // MAP within one page: 0x4000_0100 + 3000 bytes -> 7 granules
    w0 = int'(n_mmt_writes);
    issue(OP_MAP, 64'h4000_0100, {56'd3000, 8'd7});
    expect_range(64'h4000_0100, 3000, 8'd7, "MAP");
    check(mmt_tag(64'h4000_0E00) == 0 && mmt_tag(64'h3FFF_FE00) == 0, "MAP leaves neighbours");
    check(int'(n_mmt_writes) - w0 == 7, $sformatf("MAP writes 7 granules, wrote %0d", int'(n_mmt_writes) - w0));
    check(u_tlb.n_xlates == 1, "one translation for one page");

    // MAP across a page boundary; MMC entry inside updated in place
    fill_key = KEY_W'(xlate(64'h4100_1000) >> G); fill_tag = 8'd3;
    @(negedge clk); fill_valid = 1; @(negedge clk); fill_valid = 0;
    issue(OP_MAP, 64'h4100_0F00, {56'h400, 8'd9});
    expect_range(64'h4100_0F00, 64'h400, 8'd9, "MAP across pages");
    probe(64'h4100_1000, h, t);
    check(h && t == 8'd9, "MAP updates the cached mapping");

    // UNMAP part of the first range
    issue(OP_UNMAP, 64'h4000_0200, 64'h400);
    expect_range(64'h4000_0200, 64'h400, 8'd0, "UNMAP");
    check(mmt_tag(64'h4000_0000) == 7 && mmt_tag(64'h4000_0600) == 7, "UNMAP leaves the rest");

    // MAP2D: 3 rows of 1 KiB, rows 4 KiB apart
    issue(OP_MAPARGS, {32'd0, 32'd4096}, {16'd0, 16'd3, 32'd1024});
    issue(OP_MAP2D, 64'h5000_0000, 64'd4);
    for (int y = 0; y < 3; y++) begin
      expect_range(64'h5000_0000 + 64'(y) * 4096, 1024, 8'd4, "MAP2D row");
      check(mmt_tag(64'h5000_0400 + 64'(y) * 4096) == 0, "MAP2D leaves the rest of the row");
    end
    check(mmt_tag(64'h5000_3000) == 0, "MAP2D stops after sizeY rows");

    // MAP3D: 2 planes of 2 rows of 512 B; rows 1 KiB apart, planes 4 rows apart
    issue(OP_MAPARGS, {32'd4, 32'd1024}, {16'd2, 16'd2, 32'd512});
    issue(OP_MAP3D, 64'h6000_0000, 64'd5);
    for (int z = 0; z < 2; z++)
      for (int y = 0; y < 2; y++)
        expect_range(64'h6000_0000 + 64'(z) * 4096 + 64'(y) * 1024, 512, 8'd5, "MAP3D row");
    check(mmt_tag(64'h6000_0800) == 0 && mmt_tag(64'h6000_1800) == 0 && mmt_tag(64'h6000_2000) == 0,
          "MAP3D leaves the gaps");

    // CREATE: 64 B metadata block in memory -> PMT write
    for (int i = 0; i < 8; i++)
      u_mem.poke64(xlate(64'h7000_0040 + 64'(i) * 8), {32'hC0DE_0000 + 32'(i), 32'(i * 3 + 1)});
    issue(OP_CREATE, {48'd0, 8'd2, 8'h33}, 64'h7000_0040);
    check(n_pmt_wr == 1 && cap_client == 8'd2 && cap_tag == 8'h33, "CREATE writes PMT of client 2, tag 0x33");
    for (int i = 0; i < 8; i++)
      check(cap_data[i*64 +: 64] == {32'hC0DE_0000 + 32'(i), 32'(i * 3 + 1)}, $sformatf("CREATE word %0d", i));
    check(n_creates == 1, "CREATE counted");

    // faulting MAP
    issue(OP_MAP, 64'hFFFF_0000_0000_0000, {56'd512, 8'd1});
    check(n_fault == 1, "translation fault aborts MAP");

    // FLUSH
    probe(64'h4100_1000, h, t);
    check(h, "mapping cached before flush");
    issue(OP_FLUSH, 0, 0);
    probe(64'h4100_1000, h, t);
    check(n_flush == 1 && !h, $sformatf("FLUSH invalidates the MMC (%0d flushes, hit %0d)", n_flush, h));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
