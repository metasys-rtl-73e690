// port_arbiter: shares one request/response port among N requesters.
//
// The metadata hardware has one memory port and one address-translation port,
// but several units use each: the MAP/CREATE control (MMT writes, metadata
// fetches), the lookup unit (MMT reads on MMC misses) and the prefetcher
// (prefetch reads). This arbiter grants one requester at a time, round robin,
// passes its request on, and holds the grant until the single response comes
// back, which it returns to that requester only. At most one transaction is in
// flight; this keeps responses in order without ids and is this design's
// choice (the paper names the shared access logic but not its organisation).
//
// Handshake: valid/ready on requests (a request is taken in a cycle where both
// are high); responses are a one-cycle valid pulse with data. Every request,
// reads and writes alike, gets exactly one response.
//
// Lint notes: the round-robin loop variable is wider than the index; the
// assertion samples rst_n synchronously (disable iff) while the state flops use
// it as an asynchronous reset, which verilator reports as SYNCASYNCNET. resp_data
// is the shared response passed through unchanged (only resp_valid is steered).
module port_arbiter #(
  parameter int unsigned N      = 2,
  parameter type         REQ_T  = logic [31:0],
  parameter type         RESP_T = logic [31:0]
) (
  input  logic         clk,
  input  logic         rst_n,
  // requesters
  input  logic         req_valid  [N],
  output logic         req_ready  [N],
  input  REQ_T         req_data   [N],
  output logic         resp_valid [N],
  output RESP_T        resp_data,
  // shared port
  output logic         m_req_valid,
  input  logic         m_req_ready,
  output REQ_T         m_req_data,
  input  logic         m_resp_valid,
  input  RESP_T        m_resp_data
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT} state_e;
  state_e        state;
  logic [IW-1:0] grant, last;

  // round-robin choice, starting after the last grant
  logic          any;
  logic [IW-1:0] pick;
  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int k = 1; k <= N; k++) begin
      automatic int unsigned c = (32'(last) + k) % N;
      if (!any && req_valid[c]) begin
        any  = 1'b1;
        pick = IW'(c);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      grant <= '0;
      last  <= IW'(N - 1);
    end else begin
      unique case (state)
        S_IDLE: if (any) begin
          grant <= pick;
          last  <= pick;
          state <= S_REQ;
        end
        S_REQ:  if (m_req_ready) state <= S_WAIT;
        S_WAIT: if (m_resp_valid) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign m_req_valid = (state == S_REQ);
  assign m_req_data  = req_data[grant];
  assign resp_data   = m_resp_data;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      req_ready[i]  = (state == S_REQ) && m_req_ready && (grant == IW'(i));
      resp_valid[i] = (state == S_WAIT) && m_resp_valid && (grant == IW'(i));
    end
  end

  // a response may only arrive for the one request in flight
  a_resp_in_flight: assert property (@(posedge clk) disable iff (!rst_n)
                                     m_resp_valid |-> state == S_WAIT);

endmodule
