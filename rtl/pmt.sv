// pmt: Private Metadata Table of one optimization client.
//
// Holds the metadata that software attached to each tag ID with CREATE, in a
// form the client interprets directly. As in the paper it has one entry per
// 8-bit tag ID (256 entries) of 64 bytes each, 16 KiB in all. Only CREATE writes
// it (a whole entry at a time); the owning client reads it with the tag ID a
// lookup returned. A flush (on a context switch) clears every entry's valid bit.
//
// Timing (this design's choice): synchronous write; synchronous read with one
// cycle latency. rd_valid is low for an entry never written since the last
// flush, and rd_data then reads as zero. A write and a read of the same entry in
// one cycle return the old contents.
module pmt
  import metasys_pkg::*;
#(
  parameter int unsigned ENTRIES = 256,      // 2**TAG_W
  parameter int unsigned WIDTH   = META_W    // 512 bits = 64 B
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       flush,
  // CREATE write port
  input  logic                       wr_en,
  input  logic [$clog2(ENTRIES)-1:0] wr_idx,
  input  logic [WIDTH-1:0]           wr_data,
  // client read port
  input  logic                       rd_en,
  input  logic [$clog2(ENTRIES)-1:0] rd_idx,
  output logic                       rd_ack,    // one cycle after rd_en
  output logic                       rd_valid,  // entry holds metadata
  output logic [WIDTH-1:0]           rd_data
);
  logic [WIDTH-1:0]   mem   [ENTRIES];
  logic [ENTRIES-1:0] valid;
  logic [WIDTH-1:0]   rd_q;
  logic               rd_v_q;

  // storage array: no reset, so it maps onto an SRAM
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_idx] <= wr_data;
    if (rd_en) rd_q <= mem[rd_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid  <= '0;
      rd_ack <= 1'b0;
      rd_v_q <= 1'b0;
    end else begin
      rd_ack <= rd_en;
      if (rd_en) rd_v_q <= valid[rd_idx] && !flush;
      if (flush)      valid <= '0;
      else if (wr_en) valid[wr_idx] <= 1'b1;
    end
  end

  assign rd_valid = rd_v_q;
  assign rd_data  = rd_v_q ? rd_q : '0;

endmodule
