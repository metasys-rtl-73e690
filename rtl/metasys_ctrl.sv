// metasys_ctrl: Mapping Management Unit and command control.
//
// Executes the metadata instructions that the core hands over (one at a time,
// valid/ready):
//   MAP / UNMAP     tag every granule that overlaps [start, start+size) with
//                   TagID (UNMAP writes tag 0): for each granule the virtual
//                   address is translated (once per 4 KiB page), the granule's
//                   byte in the Metadata Mapping Table at mmt_base + (paddr >>
//                   GRAN_LOG2) is written, and a copy of the mapping in the MMC
//                   is updated in place.
//   (UN)MAP2D/3D    the same over a 2- or 3-dimensional sub-array: sizeY rows of
//                   sizeX bytes, lenX bytes apart, repeated for sizeZ planes
//                   lenX*lenY bytes apart. The shape is staged beforehand with
//                   MAPARGS, because a custom instruction carries two registers.
//   CREATE          read the 64-byte metadata block from memory (its address is
//                   translated first) and write it into entry TagID of the PMT
//                   of client ClientID.
//   SETMMT / FLUSH  OS operations: set the physical base of the MMT; invalidate
//                   all PMTs and the MMC on a context switch.
// The instruction set (CREATE, (UN)MAP, (UN)MAP2D, (UN)MAP3D plus two OS operations)
// follows the paper; the operand packing, the MAPARGS staging instruction, the
// meaning of lenX/lenY/sizeX/sizeY/sizeZ and the granule-at-a-time sequencing are
// this design's choices. A translation fault aborts the command and raises
// `fault` for one cycle.
//
// Timing: cmd_ready is high only when idle. Each granule costs one memory
// write round trip (plus a translation round trip at each new page); CREATE
// costs one translation and 8 word reads.
//
// Lint note: the memory response id is unused (one request in flight).
module metasys_ctrl
  import metasys_pkg::*;
#(
  parameter int unsigned GRAN_LOG2 = 9,
  parameter int unsigned KEY_W     = PADDR_W - GRAN_LOG2
) (
  input  logic        clk,
  input  logic        rst_n,
  // command from the core
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  cmd_t        cmd,
  output logic        busy,
  output logic        fault,
  // OS state
  output paddr_t      mmt_base,
  output logic        flush,
  // TLB
  output logic        tlb_req_valid,
  input  logic        tlb_req_ready,
  output tlb_req_t    tlb_req,
  input  logic        tlb_resp_valid,
  input  tlb_resp_t   tlb_resp,
  // memory
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output mem_req_t    mem_req,
  input  logic        mem_resp_valid,
  input  mem_resp_t   mem_resp,
  // MMC update on MAP
  output logic             mmc_upd_valid,
  output logic [KEY_W-1:0] mmc_upd_key,
  output tag_t             mmc_upd_tag,
  // PMT write on CREATE
  output logic        pmt_wr_valid,
  output client_t     pmt_wr_client,
  output tag_t        pmt_wr_tag,
  output meta_t       pmt_wr_data,
  // statistics
  output logic [31:0] n_mmt_writes,
  output logic [31:0] n_creates
);
  localparam int unsigned GRAN = 1 << GRAN_LOG2;

  typedef enum logic [3:0] {
    S_IDLE, S_XLATE_REQ, S_XLATE_WAIT, S_GRAN, S_WR_REQ, S_WR_WAIT, S_NEXT,
    S_CR_XLATE_REQ, S_CR_XLATE_WAIT, S_CR_RD_REQ, S_CR_RD_WAIT, S_CR_WRITE
  } state_e;

  state_e state;

  // staged shape for MAP2D / MAP3D
  logic [31:0] a_lenx, a_leny, a_sizex;
  logic [15:0] a_sizey, a_sizez;

  // MAP walk state
  tag_t        m_tag;
  vaddr_t      m_plane, m_row, m_rowend, m_ga;
  logic [63:0] m_lenx, m_pitch;
  logic [63:0] m_sizex;
  logic [15:0] m_y, m_z, m_sizey, m_sizez;
  logic        pg_valid;
  vaddr_t      pg_vpn;   // virtual page number of the cached translation
  paddr_t      pg_ppa;   // physical page base

  // CREATE state
  client_t     c_client;
  tag_t        c_tag;
  vaddr_t      c_va;
  paddr_t      c_pa;
  logic [2:0]  c_word;
  meta_t       c_data;

  wire vaddr_t ga_vpn = m_ga >> PAGE_LOG2;
  wire paddr_t g_pa   = pg_ppa | PADDR_W'(m_ga[PAGE_LOG2-1:0]);
  wire [KEY_W-1:0] g_key = KEY_W'(g_pa >> GRAN_LOG2);
  wire paddr_t mmt_a  = mmt_base + PADDR_W'(g_key);

  assign cmd_ready     = (state == S_IDLE);
  assign busy          = (state != S_IDLE);
  assign tlb_req_valid = (state == S_XLATE_REQ) || (state == S_CR_XLATE_REQ);
  assign tlb_req       = '{vaddr: (state == S_CR_XLATE_REQ) ? c_va : m_ga};
  assign mem_req_valid = (state == S_WR_REQ) || (state == S_CR_RD_REQ);

  always_comb begin
    if (state == S_CR_RD_REQ)
      mem_req = '{we: 1'b0, addr: c_pa + PADDR_W'({c_word, 3'b000}),
                  wdata: '0, wmask: '0, id: '0};
    else
      mem_req = '{we: 1'b1, addr: {mmt_a[PADDR_W-1:3], 3'b000},
                  wdata: {8{m_tag}}, wmask: 8'(1) << mmt_a[2:0], id: '0};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      fault         <= 1'b0;
      mmt_base      <= '0;
      flush         <= 1'b0;
      a_lenx        <= '0; a_leny <= '0; a_sizex <= '0; a_sizey <= '0; a_sizez <= '0;
      m_tag         <= '0; m_plane <= '0; m_row <= '0; m_rowend <= '0; m_ga <= '0;
      m_lenx        <= '0; m_pitch <= '0; m_sizex <= '0;
      m_y           <= '0; m_z <= '0; m_sizey <= '0; m_sizez <= '0;
      pg_valid      <= 1'b0; pg_vpn <= '0; pg_ppa <= '0;
      c_client      <= '0; c_tag <= '0; c_va <= '0; c_pa <= '0; c_word <= '0; c_data <= '0;
      mmc_upd_valid <= 1'b0; mmc_upd_key <= '0; mmc_upd_tag <= '0;
      pmt_wr_valid  <= 1'b0; pmt_wr_client <= '0; pmt_wr_tag <= '0; pmt_wr_data <= '0;
      n_mmt_writes  <= '0;
      n_creates     <= '0;
    end else begin
      fault         <= 1'b0;
      flush         <= 1'b0;
      mmc_upd_valid <= 1'b0;
      pmt_wr_valid  <= 1'b0;
      unique case (state)
        // ------------------------------------------------------------ decode
        S_IDLE: if (cmd_valid) begin
          pg_valid <= 1'b0;
          m_y      <= '0;
          m_z      <= '0;
          m_plane  <= cmd.rs1;
          m_row    <= cmd.rs1;
          m_ga     <= cmd.rs1 & ~(vaddr_t'(GRAN) - 1);
          unique case (cmd.funct)
            OP_MAP, OP_UNMAP: begin
              m_tag    <= (cmd.funct == OP_MAP) ? cmd.rs2[7:0] : '0;
              m_sizex  <= (cmd.funct == OP_MAP) ? {8'd0, cmd.rs2[63:8]} : cmd.rs2;
              m_rowend <= cmd.rs1 + ((cmd.funct == OP_MAP) ? {8'd0, cmd.rs2[63:8]} : cmd.rs2);
              m_sizey  <= 16'd1;
              m_sizez  <= 16'd1;
              m_lenx   <= '0;
              m_pitch  <= '0;
              state    <= (((cmd.funct == OP_MAP) ? {8'd0, cmd.rs2[63:8]} : cmd.rs2) == 0)
                          ? S_IDLE : S_GRAN;
            end
            OP_MAP2D, OP_MAP3D, OP_UNMAP2D, OP_UNMAP3D: begin
              automatic logic is3d = (cmd.funct == OP_MAP3D) || (cmd.funct == OP_UNMAP3D);
              m_tag    <= (cmd.funct == OP_MAP2D || cmd.funct == OP_MAP3D) ? cmd.rs2[7:0] : '0;
              m_sizex  <= 64'(a_sizex);
              m_rowend <= cmd.rs1 + 64'(a_sizex);
              m_sizey  <= a_sizey;
              m_sizez  <= is3d ? a_sizez : 16'd1;
              m_lenx   <= 64'(a_lenx);
              m_pitch  <= 64'(a_lenx) * 64'(a_leny);
              state    <= (a_sizex == 0 || a_sizey == 0 ||
                           (is3d && a_sizez == 0)) ? S_IDLE : S_GRAN;
            end
            OP_MAPARGS: begin
              a_lenx  <= cmd.rs1[31:0];
              a_leny  <= cmd.rs1[63:32];
              a_sizex <= cmd.rs2[31:0];
              a_sizey <= cmd.rs2[47:32];
              a_sizez <= cmd.rs2[63:48];
            end
            OP_CREATE: begin
              c_tag    <= cmd.rs1[7:0];
              c_client <= cmd.rs1[15:8];
              c_va     <= cmd.rs2;
              c_word   <= '0;
              state    <= S_CR_XLATE_REQ;
            end
            OP_SETMMT: mmt_base <= PADDR_W'(cmd.rs1);
            OP_FLUSH:  flush    <= 1'b1;
            default: ;
          endcase
        end
        // ------------------------------------------------------------ MAP walk
        S_GRAN: state <= (pg_valid && pg_vpn == ga_vpn) ? S_WR_REQ : S_XLATE_REQ;
        S_XLATE_REQ:  if (tlb_req_ready) state <= S_XLATE_WAIT;
        S_XLATE_WAIT: if (tlb_resp_valid) begin
          if (tlb_resp.fault) begin
            fault <= 1'b1;
            state <= S_IDLE;
          end else begin
            pg_valid <= 1'b1;
            pg_vpn   <= ga_vpn;
            pg_ppa   <= tlb_resp.paddr & ~paddr_t'((1 << PAGE_LOG2) - 1);
            state    <= S_WR_REQ;
          end
        end
        S_WR_REQ:  if (mem_req_ready) state <= S_WR_WAIT;
        S_WR_WAIT: if (mem_resp_valid) begin
          mmc_upd_valid <= 1'b1;
          mmc_upd_key   <= g_key;
          mmc_upd_tag   <= m_tag;
          n_mmt_writes  <= n_mmt_writes + 1;
          state         <= S_NEXT;
        end
        S_NEXT: begin
          if (m_ga + vaddr_t'(GRAN) < m_rowend) begin
            m_ga  <= m_ga + vaddr_t'(GRAN);
            state <= S_GRAN;
          end else if (m_y + 16'd1 < m_sizey) begin
            m_y      <= m_y + 16'd1;
            m_row    <= m_row + m_lenx;
            m_rowend <= m_row + m_lenx + m_sizex;
            m_ga     <= (m_row + m_lenx) & ~(vaddr_t'(GRAN) - 1);
            state    <= S_GRAN;
          end else if (m_z + 16'd1 < m_sizez) begin
            m_z      <= m_z + 16'd1;
            m_y      <= '0;
            m_plane  <= m_plane + m_pitch;
            m_row    <= m_plane + m_pitch;
            m_rowend <= m_plane + m_pitch + m_sizex;
            m_ga     <= (m_plane + m_pitch) & ~(vaddr_t'(GRAN) - 1);
            state    <= S_GRAN;
          end else begin
            state <= S_IDLE;
          end
        end
        // ------------------------------------------------------------ CREATE
        S_CR_XLATE_REQ:  if (tlb_req_ready) state <= S_CR_XLATE_WAIT;
        S_CR_XLATE_WAIT: if (tlb_resp_valid) begin
          if (tlb_resp.fault) begin
            fault <= 1'b1;
            state <= S_IDLE;
          end else begin
            c_pa  <= {tlb_resp.paddr[PADDR_W-1:6], 6'd0};  // 64 B aligned block
            state <= S_CR_RD_REQ;
          end
        end
        S_CR_RD_REQ:  if (mem_req_ready) state <= S_CR_RD_WAIT;
        S_CR_RD_WAIT: if (mem_resp_valid) begin
          c_data[c_word*64 +: 64] <= mem_resp.rdata;
          c_word                  <= c_word + 3'd1;
          state                   <= (c_word == 3'd7) ? S_CR_WRITE : S_CR_RD_REQ;
        end
        S_CR_WRITE: begin
          pmt_wr_valid  <= 1'b1;
          pmt_wr_client <= c_client;
          pmt_wr_tag    <= c_tag;
          pmt_wr_data   <= c_data;
          n_creates     <= n_creates + 1;
          state         <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
