// mem_model: behavioural model of main memory for the testbenches (not
// synthesizable). One request is taken at a time (valid/ready, ready whenever
// idle); the response follows LATENCY cycles later. Writes honour the byte
// mask and also get a response. Storage is a sparse array of 64-bit words that
// reads as zero where never written. Testbenches preload and inspect it with
// the poke/peek tasks.
module mem_model
  import metasys_pkg::*;
#(
  parameter int unsigned LATENCY = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  mem_req_t  req,
  output logic      resp_valid,
  output mem_resp_t resp
);
  logic [63:0] words [logic [PADDR_W-4:0]];
  int unsigned cnt;
  logic        busy;
  mem_req_t    q;
  int unsigned n_reads, n_writes;

  function automatic logic [63:0] peek64(input paddr_t a);
    if (words.exists(a[PADDR_W-1:3])) return words[a[PADDR_W-1:3]];
    return '0;
  endfunction

  function automatic logic [7:0] peek8(input paddr_t a);
    logic [63:0] w;
    w = peek64(a);
    return w[a[2:0]*8 +: 8];
  endfunction

  task automatic poke64(input paddr_t a, input logic [63:0] d);
    words[a[PADDR_W-1:3]] = d;
  endtask

  task automatic poke8(input paddr_t a, input logic [7:0] d);
    logic [63:0] w;
    w = peek64(a);
    w[a[2:0]*8 +: 8] = d;
    words[a[PADDR_W-1:3]] = w;
  endtask

  assign req_ready = rst_n && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      cnt        <= 0;
      resp_valid <= 1'b0;
      resp       <= '0;
      q          <= '0;
      n_reads    <= 0;
      n_writes   <= 0;
    end else begin
      resp_valid <= 1'b0;
      if (!busy && req_valid) begin
        busy <= 1'b1;
        q    <= req;
        cnt  <= (LATENCY > 1) ? LATENCY - 1 : 0;
      end else if (busy) begin
        if (cnt == 0) begin
          automatic logic [63:0] w = peek64(q.addr);
          if (q.we) begin
            for (int b = 0; b < 8; b++) if (q.wmask[b]) w[b*8 +: 8] = q.wdata[b*8 +: 8];
            words[q.addr[PADDR_W-1:3]] = w;
            n_writes <= n_writes + 1;
          end else begin
            n_reads <= n_reads + 1;
          end
          resp_valid <= 1'b1;
          resp       <= '{rdata: w, id: q.id};
          busy       <= 1'b0;
        end else begin
          cnt <= cnt - 1;
        end
      end
    end
  end
endmodule
