// safety_client: optimization client for memory-safety checks.
//
// Implements the two protection techniques built on the metadata system in one
// client, as the paper does:
//   Bounds checking    Software issues CREATE(ClientID, TagID, metadata) right
//                      before a load or store to a protected data structure. The
//                      client remembers that TagID and arms itself; on the next
//                      load/store it looks up the tag of the access address and
//                      compares it with the value CREATE stored in its PMT at
//                      that TagID. A mismatch is an out-of-bounds access.
//   Return-address     Every store is looked up; a store to a granule tagged with
//   protection         RA_TAG (1) targets a saved return address and is refused.
// Either violation raises `violation` for one cycle (the interrupt that lets the
// OS terminate the program) with the address and the kind.
//
// Both checks use force-stall lookups: `stall` is high from the accepted trigger
// until `done`, so the triggering instruction cannot commit before the check
// completes. An access that needs no check (no CREATE pending and not a store,
// or the check disabled) is accepted and finished in the same cycle. Enables,
// RA_TAG and CLIENT_ID as parameters/ports and the handshake are this design's
// choices; the checks themselves follow the paper.
//
// Lint notes: only the tag field of the lookup response and the low byte of
// the PMT entry (the expected TagID) are used.
module safety_client
  import metasys_pkg::*;
#(
  parameter client_t CLIENT_ID = client_t'(1),
  parameter tag_t    RA_TAG    = tag_t'(1)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       bc_en,     // bounds checking on
  input  logic       rap_en,    // return address protection on
  input  logic       flush,
  // CREATE writes
  input  logic       pmt_wr_valid,
  input  client_t    pmt_wr_client,
  input  tag_t       pmt_wr_tag,
  input  meta_t      pmt_wr_data,
  // trigger: a committed load/store from the core
  input  logic       trig_valid,
  output logic       trig_ready,
  input  vaddr_t     trig_vaddr,
  input  logic       trig_store,
  output logic       stall,
  output logic       done,        // check finished (pulse)
  // lookup port
  output logic       lkp_req_valid,
  input  logic       lkp_req_ready,
  output lkp_req_t   lkp_req,
  input  logic       lkp_resp_valid,
  input  lkp_resp_t  lkp_resp,
  // interrupt to the core
  output logic       violation,
  output logic       viol_bounds,  // 1: bounds check failed, 0: return address overwrite
  output vaddr_t     viol_addr,
  // statistics
  output logic [31:0] n_checks,
  output logic [31:0] n_violations
);
  typedef enum logic [2:0] {S_IDLE, S_LKP_REQ, S_LKP_WAIT, S_PMT, S_CHECK} state_e;
  state_e state;

  logic   armed;       // a CREATE for this client precedes the next access
  tag_t   create_tag;  // TagIDRegister
  logic   do_bc, do_rap;
  vaddr_t a_va;
  tag_t   got_tag;
  logic   got_drop;

  // ---------------------------------------------------------------- PMT
  logic  pmt_rd_ack, pmt_rd_valid;
  meta_t pmt_rd_data;
  wire   my_create = pmt_wr_valid && (pmt_wr_client == CLIENT_ID);

  pmt u_pmt (
    .clk, .rst_n, .flush,
    .wr_en   (my_create),
    .wr_idx  (pmt_wr_tag),
    .wr_data (pmt_wr_data),
    .rd_en   (state == S_PMT),
    .rd_idx  (create_tag),
    .rd_ack  (pmt_rd_ack),
    .rd_valid(pmt_rd_valid),
    .rd_data (pmt_rd_data)
  );

  wire need_bc  = bc_en && armed;
  wire need_rap = rap_en && trig_store;

  assign trig_ready    = (state == S_IDLE);
  assign stall         = (state != S_IDLE);
  assign lkp_req_valid = (state == S_LKP_REQ);
  assign lkp_req       = '{vaddr: a_va, is_phys: 1'b0, mode: MODE_FORCE_STALL};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      armed        <= 1'b0;
      create_tag   <= '0;
      do_bc        <= 1'b0;
      do_rap       <= 1'b0;
      a_va         <= '0;
      got_tag      <= '0;
      got_drop     <= 1'b0;
      done         <= 1'b0;
      violation    <= 1'b0;
      viol_bounds  <= 1'b0;
      viol_addr    <= '0;
      n_checks     <= '0;
      n_violations <= '0;
    end else begin
      done      <= 1'b0;
      violation <= 1'b0;
      if (flush) armed <= 1'b0;
      if (my_create) begin
        armed      <= 1'b1;
        create_tag <= pmt_wr_tag;
      end
      unique case (state)
        S_IDLE: if (trig_valid) begin
          a_va   <= trig_vaddr;
          do_bc  <= need_bc;
          do_rap <= need_rap;
          if (need_bc && !my_create) armed <= 1'b0;  // the CREATE applies to this access only
          if (need_bc || need_rap) begin
            n_checks <= n_checks + 1;
            state    <= S_LKP_REQ;
          end else begin
            done <= 1'b1;
          end
        end
        S_LKP_REQ:  if (lkp_req_ready) state <= S_LKP_WAIT;
        S_LKP_WAIT: if (lkp_resp_valid) begin
          got_tag  <= lkp_resp.tag;
          got_drop <= lkp_resp.dropped;
          state    <= S_PMT;
        end
        S_PMT:   state <= S_CHECK;   // PMT read of create_tag in flight
        S_CHECK: if (pmt_rd_ack) begin
          automatic logic bad_bc  = do_bc && !got_drop &&
                                    (got_tag != (pmt_rd_valid ? pmt_rd_data[7:0] : create_tag));
          automatic logic bad_rap = do_rap && !got_drop && (got_tag == RA_TAG);
          if (bad_bc || bad_rap) begin
            violation    <= 1'b1;
            viol_bounds  <= bad_bc;
            viol_addr    <= a_va;
            n_violations <= n_violations + 1;
          end
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
