// tb_mmc: self-checking testbench of the Metadata Mapping Cache.
//
// Checks against a reference map in the testbench: one-cycle probe latency,
// hit tags, capacity (exactly ENTRIES distinct mappings survive), the NMRU rule
// (the most recently used entry is never the victim of the next fill), update
// in place on MAP (and no allocation for an absent key), refill of a present key
// without duplication, flush, and the hit/miss counters.
module tb_mmc;
  import metasys_pkg::*;

  localparam int unsigned ENTRIES = 128;
  localparam int unsigned KEY_W   = 30;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             lkp_valid = 0, fill_valid = 0, upd_valid = 0, inv_all = 0;
  logic [KEY_W-1:0] lkp_key = '0, fill_key = '0, upd_key = '0;
  tag_t             fill_tag = '0, upd_tag = '0;
  logic             lkp_rvalid, lkp_hit;
  tag_t             lkp_tag;
  logic [31:0]      hit_count, miss_count;

  mmc #(.ENTRIES(ENTRIES), .KEY_W(KEY_W)) dut (.*);

  int checks = 0, failures = 0;
  int exp_hits = 0, exp_misses = 0;
  tag_t ref_tag [logic [KEY_W-1:0]];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic probe(input logic [KEY_W-1:0] k, output logic hit, output tag_t t);
    @(negedge clk);
    lkp_valid = 1; lkp_key = k;
    @(negedge clk);
    lkp_valid = 0;
    check(lkp_rvalid, "probe answered after one cycle");
    hit = lkp_hit; t = lkp_tag;
    if (hit) exp_hits++; else exp_misses++;
  endtask

  task automatic fill(input logic [KEY_W-1:0] k, input tag_t t);
    @(negedge clk);
    fill_valid = 1; fill_key = k; fill_tag = t;
    @(negedge clk);
    fill_valid = 0;
    ref_tag[k] = t;
  endtask

  task automatic upd(input logic [KEY_W-1:0] k, input tag_t t);
    @(negedge clk);
    upd_valid = 1; upd_key = k; upd_tag = t;
    @(negedge clk);
    upd_valid = 0;
    if (ref_tag.exists(k)) ref_tag[k] = t;
  endtask

  function automatic logic [KEY_W-1:0] key_of(input int i);
    return KEY_W'(i * 977 + 12345);
  endfunction

  // count the reference keys that hit, and check their tags
  task automatic count_present(output int n);
    logic h; tag_t t;
    n = 0;
    foreach (ref_tag[k]) begin
      probe(k, h, t);
      if (h) begin
        n++;
        check(t == ref_tag[k], $sformatf("tag of key %0h", k));
      end
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic h; tag_t t; int n;
    repeat (3) @(posedge clk);
    rst_n = 1;

    probe(key_of(0), h, t);
    check(!h, "empty cache misses");

    // fill to capacity, then every mapping hits with its tag
    for (int i = 0; i < ENTRIES; i++) fill(key_of(i), tag_t'(i + 1));
    for (int i = 0; i < ENTRIES; i++) begin
      probe(key_of(i), h, t);
      check(h && t == tag_t'(i + 1), $sformatf("hit after fill %0d", i));
    end

    // NMRU: the entry just used survives the next replacement
    for (int j = 0; j < 300; j++) begin
      automatic int pick = $urandom_range(0, ENTRIES + j - 1);
      automatic logic [KEY_W-1:0] k = key_of(pick);
      logic h2; tag_t t2;
      probe(k, h, t);
      if (h) begin
        fill(key_of(ENTRIES + j), tag_t'($urandom));
        probe(k, h2, t2);
        check(h2 && t2 == ref_tag[k], $sformatf("MRU key %0h kept by NMRU", k));
      end else begin
        fill(key_of(ENTRIES + j), tag_t'($urandom));
      end
    end
    count_present(n);
    check(n == ENTRIES, $sformatf("capacity %0d mappings, found %0d", ENTRIES, n));

    // update in place; no allocation for an absent key
    begin
      automatic logic [KEY_W-1:0] present = '0;
      foreach (ref_tag[k]) begin
        logic hh; tag_t tt;
        probe(k, hh, tt);
        if (hh) present = k;
      end
      upd(present, 8'hA5);
      probe(present, h, t);
      check(h && t == 8'hA5, "MAP update overwrites the cached tag");
      upd(KEY_W'(30'h3FFF_FFF0), 8'h11);
      probe(KEY_W'(30'h3FFF_FFF0), h, t);
      check(!h, "MAP update of an absent key allocates nothing");
      // refill of a present key replaces, never duplicates
      fill(present, 8'h5A);
      probe(present, h, t);
      check(h && t == 8'h5A, "refill of a present key");
      count_present(n);
      check(n == ENTRIES, "no duplicate after refill");
    end

    // counters
    @(negedge clk);
    check(hit_count == 32'(exp_hits) && miss_count == 32'(exp_misses),
          $sformatf("counters %0d/%0d expected %0d/%0d", hit_count, miss_count, exp_hits, exp_misses));

    // flush
    @(negedge clk); inv_all = 1;
    @(negedge clk); inv_all = 0;
    count_present(n);
    check(n == 0, "flush invalidates every entry");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
