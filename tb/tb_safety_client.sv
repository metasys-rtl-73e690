// tb_safety_client: self-checking testbench of the memory-safety client.
//
// A lookup responder in the testbench answers after a fixed latency with the
// tag of a small reference memory map (0x1000-0x1FFF tag 1 = return addresses,
// 0x2000-0x2FFF tag 2, 0x3000-0x3FFF tag 3). Checks bounds checking after
// CREATE (match, mismatch, one access only, other client's CREATE ignored,
// flush), return-address protection (stores blocked, loads not), the enables,
// the violation kind and address, and that the core is stalled exactly while a
// check runs (lookup latency plus 3 cycles).
module tb_safety_client;
  import metasys_pkg::*;

  localparam int LKP_LAT = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic bc_en = 1, rap_en = 1, flush = 0;
  logic pmt_wr_valid = 0; client_t pmt_wr_client = '0; tag_t pmt_wr_tag = '0; meta_t pmt_wr_data = '0;
  logic trig_valid = 0, trig_ready, trig_store = 0, stall, done;
  vaddr_t trig_vaddr = '0;
  logic lkp_req_valid, lkp_req_ready, lkp_resp_valid;
  lkp_req_t lkp_req; lkp_resp_t lkp_resp;
  logic violation, viol_bounds; vaddr_t viol_addr;
  logic [31:0] n_checks, n_violations;

  safety_client #(.CLIENT_ID(client_t'(1)), .RA_TAG(tag_t'(1))) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic tag_t ref_tag(input vaddr_t va);
    if (va >= 64'h1000 && va < 64'h4000) return tag_t'(va[15:12]);
    return '0;
  endfunction

  // lookup responder
  int cnt = -1; vaddr_t lva; int n_lkp = 0;
  assign lkp_req_ready = (cnt < 0);
  always @(posedge clk) begin
    lkp_resp_valid <= 1'b0;
    if (rst_n) begin
      if (cnt < 0 && lkp_req_valid) begin
        cnt <= LKP_LAT - 1; lva <= lkp_req.vaddr; n_lkp++;
        check(lkp_req.mode == MODE_FORCE_STALL, "safety lookups force a stall");
      end else if (cnt == 0) begin
        lkp_resp_valid <= 1'b1;
        lkp_resp <= '{tag: ref_tag(lva), paddr: PADDR_W'(lva), dropped: 1'b0, fault: 1'b0, mmc_hit: 1'b1};
        cnt <= -1;
      end else if (cnt > 0) cnt <= cnt - 1;
    end
  end

  int n_viol = 0; logic last_kind; vaddr_t last_addr;
  always @(posedge clk) if (rst_n && violation) begin n_viol++; last_kind = viol_bounds; last_addr = viol_addr; end

  task automatic create(input client_t c, input tag_t t, input logic [7:0] meta);
    @(negedge clk);
    pmt_wr_valid = 1; pmt_wr_client = c; pmt_wr_tag = t; pmt_wr_data = META_W'(meta);
    @(negedge clk);
    pmt_wr_valid = 0;
  endtask

  // one access; returns the number of cycles the core was stalled
  task automatic access(input vaddr_t va, input bit st, output int stalled);
    @(negedge clk);
    trig_valid = 1; trig_vaddr = va; trig_store = st;
    do @(posedge clk); while (!trig_ready);
    @(negedge clk);
    trig_valid = 0;
    stalled = 0;
    while (stall) begin stalled++; @(negedge clk); end
    @(negedge clk);
  endtask

  task automatic expect_access(input vaddr_t va, input bit st, input bit checked, input bit viol,
                               input bit bounds, input string what);
    int v0, c0, s;
    v0 = n_viol; c0 = int'(n_checks);
    access(va, st, s);
    check((int'(n_checks) - c0) == int'(checked), {what, ": checked"});
    check((n_viol - v0) == int'(viol), {what, ": violation"});
    if (viol) check(last_kind == bounds && last_addr == va, {what, ": violation kind and address"});
    if (checked) check(s == LKP_LAT + 4, $sformatf("%s: stalled %0d cycles, expected %0d", what, s, LKP_LAT + 4));
    else         check(s == 0, {what, ": no stall"});
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    expect_access(64'h2000, 0, 0, 0, 0, "load without CREATE");
    create(8'd1, 8'd2, 8'd2);
    expect_access(64'h2010, 0, 1, 0, 0, "load in bounds");
    create(8'd1, 8'd2, 8'd2);
    expect_access(64'h3000, 0, 1, 1, 1, "load out of bounds");
    expect_access(64'h1008, 1, 1, 1, 0, "store to return address");
    expect_access(64'h1008, 0, 0, 0, 0, "load of return address");
    expect_access(64'h2008, 1, 1, 0, 0, "store elsewhere");
    create(8'd0, 8'd2, 8'd2);
    expect_access(64'h3000, 0, 0, 0, 0, "CREATE for another client");
    create(8'd1, 8'd3, 8'd3);
    expect_access(64'h1000, 1, 1, 1, 1, "store to RA after CREATE of tag 3");
    create(8'd1, 8'd2, 8'd2);
    expect_access(64'h2000, 0, 1, 0, 0, "armed access");
    expect_access(64'h3000, 0, 0, 0, 0, "CREATE covers one access only");
    // metadata value, not only the tag index, is compared
    create(8'd1, 8'd4, 8'd3);
    expect_access(64'h3F00, 0, 1, 0, 0, "PMT value 3 matches tag 3");
    create(8'd1, 8'd2, 8'd2);
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    expect_access(64'h3000, 0, 0, 0, 0, "flush disarms");
    rap_en = 0;
    expect_access(64'h1000, 1, 0, 0, 0, "RA protection off");
    bc_en = 0; rap_en = 1;
    create(8'd1, 8'd2, 8'd2);
    expect_access(64'h3000, 0, 0, 0, 0, "bounds checking off");
    check(n_violations == 32'(n_viol), "violation counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
