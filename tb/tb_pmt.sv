// tb_pmt: self-checking testbench of the Private Metadata Table.
//
// Random whole-entry writes and reads against a reference array: one-cycle read
// latency, data and valid of written entries, never-written entries read as
// invalid zero, old data on a same-cycle write and read, and flush.
module tb_pmt;
  import metasys_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        flush = 0, wr_en = 0, rd_en = 0;
  logic [7:0]  wr_idx = '0, rd_idx = '0;
  meta_t       wr_data = '0;
  logic        rd_ack, rd_valid;
  meta_t       rd_data;

  pmt dut (.*);

  int checks = 0, failures = 0;
  meta_t ref_d [256];
  bit    ref_v [256];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic meta_t rnd_meta();
    meta_t m;
    for (int i = 0; i < META_W / 32; i++) m[i*32 +: 32] = $urandom;
    return m;
  endfunction

  task automatic do_read(input logic [7:0] idx);
    @(negedge clk); rd_en = 1; rd_idx = idx;
    @(negedge clk); rd_en = 0;
    check(rd_ack, "read acknowledged after one cycle");
    check(rd_valid == ref_v[idx], $sformatf("valid of entry %0d", idx));
    check(rd_data == (ref_v[idx] ? ref_d[idx] : '0), $sformatf("data of entry %0d", idx));
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (ref_v[i]) ref_v[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    do_read(8'd17);
    for (int n = 0; n < 600; n++) begin
      if ($urandom_range(0, 1) == 0) begin
        automatic logic [7:0] i = 8'($urandom);
        automatic meta_t d = rnd_meta();
        @(negedge clk); wr_en = 1; wr_idx = i; wr_data = d;
        @(negedge clk); wr_en = 0;
        ref_d[i] = d; ref_v[i] = 1;
      end else begin
        do_read(8'($urandom));
      end
    end
    // same-cycle write and read of one entry returns the old contents
    begin
      automatic meta_t old_d = ref_d[8'd5];
      automatic bit    old_v = ref_v[8'd5];
      automatic meta_t d = rnd_meta();
      @(negedge clk); wr_en = 1; wr_idx = 8'd5; wr_data = d; rd_en = 1; rd_idx = 8'd5;
      @(negedge clk); wr_en = 0; rd_en = 0;
      check(rd_valid == old_v && rd_data == (old_v ? old_d : '0), "read during write gives old data");
      ref_d[5] = d; ref_v[5] = 1;
      do_read(8'd5);
    end
    // flush
    @(negedge clk); flush = 1;
    @(negedge clk); flush = 0;
    foreach (ref_v[i]) ref_v[i] = 0;
    for (int i = 0; i < 256; i += 15) do_read(8'(i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
