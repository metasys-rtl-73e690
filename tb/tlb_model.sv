// tlb_model: behavioural model of the core's TLB as seen by the metadata
// hardware (not synthesizable). One translation at a time; the response comes
// LATENCY cycles after the request with tb_pkg::xlate() of the address, or a
// fault for an address without translation.
module tlb_model
  import metasys_pkg::*;
  import tb_pkg::*;
#(
  parameter int unsigned LATENCY = 1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  tlb_req_t  req,
  output logic      resp_valid,
  output tlb_resp_t resp
);
  int unsigned cnt;
  logic        busy;
  vaddr_t      va;
  int unsigned n_xlates;

  assign req_ready = rst_n && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      cnt        <= 0;
      va         <= '0;
      resp_valid <= 1'b0;
      resp       <= '0;
      n_xlates   <= 0;
    end else begin
      resp_valid <= 1'b0;
      if (!busy && req_valid) begin
        busy <= 1'b1;
        va   <= req.vaddr;
        cnt  <= (LATENCY > 1) ? LATENCY - 1 : 0;
      end else if (busy) begin
        if (cnt == 0) begin
          resp_valid <= 1'b1;
          resp       <= '{paddr: xlate(va), fault: xlate_fault(va)};
          busy       <= 1'b0;
          n_xlates   <= n_xlates + 1;
        end else begin
          cnt <= cnt - 1;
        end
      end
    end
  end
endmodule
