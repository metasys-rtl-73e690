// tb_port_arbiter: self-checking testbench of the shared-port arbiter.
//
// Three requesters issue tagged requests through the arbiter to a slave with
// random ready and latency that answers each request with a function of it.
// Checks: every requester gets exactly its own responses, in order; only one
// transaction is in flight at the slave; with all three requesting all the time
// the grants rotate round robin.
module tb_port_arbiter;
  localparam int N = 3;
  typedef logic [31:0] word_t;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  req_valid [N];
  logic  req_ready [N];
  word_t req_data  [N];
  logic  resp_valid[N];
  word_t resp_data;
  logic  m_req_valid, m_req_ready, m_resp_valid;
  word_t m_req_data, m_resp_data;

  port_arbiter #(.N(N), .REQ_T(word_t), .RESP_T(word_t)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------------- slave
  int     in_flight = 0;
  int     lat = 0;
  word_t  held;
  logic   rnd_ready;
  int     grant_log[$];
  always_ff @(posedge clk) rnd_ready <= ($urandom_range(0, 3) != 0);
  assign m_req_ready = rnd_ready && in_flight == 0;
  always @(posedge clk) begin
    m_resp_valid <= 1'b0;
    if (rst_n) begin
      if (m_req_valid && m_req_ready) begin
        in_flight <= in_flight + 1;
        held      <= m_req_data;
        lat       <= $urandom_range(0, 4);
        grant_log.push_back(int'(m_req_data[31:24]));
      end else if (in_flight > 0) begin
        if (lat == 0) begin
          m_resp_valid <= 1'b1;
          m_resp_data  <= held ^ 32'h00FF_FFFF;
          in_flight    <= in_flight - 1;
        end else lat <= lat - 1;
      end
    end
  end
  always @(posedge clk) if (rst_n) check(in_flight <= 1, "one transaction in flight");

  // ---------------------------------------------------------------- requesters
  localparam int PER = 60;
  int done_cnt[N];

  for (genvar g = 0; g < N; g++) begin : gen_req
    initial begin
      req_valid[g] = 0;
      req_data[g]  = '0;
      done_cnt[g]  = 0;
      wait (rst_n);
      for (int s = 0; s < PER; s++) begin
        automatic word_t r = {8'(g), 24'(s * 31 + g)};
        @(negedge clk);
        req_valid[g] = 1; req_data[g] = r;
        do @(posedge clk); while (!req_ready[g]);
        @(negedge clk);
        req_valid[g] = 0;
        do @(posedge clk); while (!resp_valid[g]);
        check(resp_data == (r ^ 32'h00FF_FFFF), $sformatf("requester %0d response %0d", g, s));
        done_cnt[g]++;
        // requesters 0..2 all keep requesting in the first phase
        if (s >= PER / 2) repeat ($urandom_range(0, 3)) @(negedge clk);
      end
    end
  end

  // a response reaches only the granted requester
  always @(posedge clk) begin
    int n;
    n = 0;
    for (int i = 0; i < N; i++) n += int'(resp_valid[i]);
    if (rst_n) check(n <= 1, "response routed to one requester");
    if (rst_n && m_resp_valid) check(n == 1, "response routed");
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done_cnt[0] == PER && done_cnt[1] == PER && done_cnt[2] == PER);
    // round robin while all three always requested: grants 0,1,2,0,1,2...
    for (int k = 3; k < 60; k++)
      check(grant_log[k] == (grant_log[k-1] + 1) % N, $sformatf("round robin at grant %0d", k));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
