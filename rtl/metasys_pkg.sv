// metasys_pkg: types and constants shared by the metadata-management hardware.
//
// The metadata system tags every physical memory granule with a small tag ID
// (8 bits by default). A per-process Metadata Mapping Table (MMT) in memory holds
// one byte per granule; the Metadata Mapping Cache (MMC) caches these bytes, and
// each optimization client keeps a Private Metadata Table (PMT) of 64-byte
// entries indexed by tag ID.
//
// The widths that follow the paper: 8-bit tag IDs and client IDs, a 512 B
// tagging granularity, a 30-bit MMC address tag, 64 B PMT entries. The physical
// address width (39 bits, chosen so that a 512 B granule number is exactly the
// 30-bit MMC tag), the command encodings and the request/response structures are
// choices of this implementation.
//
// PAGE_LOG2 is used by metasys_ctrl; compiled on its own the package reports it
// as unused.
package metasys_pkg;

  // ---------------------------------------------------------------- widths
  localparam int unsigned XLEN       = 64;  // core register / memory word width
  localparam int unsigned TAG_W      = 8;   // tag ID width
  localparam int unsigned CLIENT_W   = 8;   // client (module) ID width
  localparam int unsigned PADDR_W    = 39;  // physical address width
  localparam int unsigned VADDR_W    = 64;  // virtual address width as seen in registers
  localparam int unsigned PAGE_LOG2  = 12;  // 4 KiB pages for translation
  localparam int unsigned META_BYTES = 64;  // one PMT entry
  localparam int unsigned META_W     = META_BYTES * 8;
  localparam int unsigned MEM_ID_W   = 4;   // request id carried through the memory port

  typedef logic [TAG_W-1:0]    tag_t;
  typedef logic [CLIENT_W-1:0] client_t;
  typedef logic [PADDR_W-1:0]  paddr_t;
  typedef logic [VADDR_W-1:0]  vaddr_t;
  typedef logic [META_W-1:0]   meta_t;

  // ---------------------------------------------------------------- commands
  // Custom-instruction function codes (RoCC funct7 field).
  typedef enum logic [6:0] {
    OP_CREATE   = 7'd0,  // rs1[7:0]=TagID rs1[15:8]=ClientID, rs2=address of 64 B metadata
    OP_MAP      = 7'd1,  // rs1=start vaddr, rs2[7:0]=TagID rs2[63:8]=size in bytes
    OP_MAP2D    = 7'd2,  // rs1=start vaddr, rs2[7:0]=TagID, shape from OP_MAPARGS
    OP_MAP3D    = 7'd3,  // rs1=start vaddr, rs2[7:0]=TagID, shape from OP_MAPARGS
    OP_UNMAP    = 7'd4,  // rs1=start vaddr, rs2=size in bytes (tag 0 written)
    OP_MAPARGS  = 7'd5,  // rs1={lenY[31:0],lenX[31:0]} rs2={sizeZ[15:0],sizeY[15:0],sizeX[31:0]}
    OP_SETMMT   = 7'd6,  // OS: rs1 = physical base address of the MMT
    OP_FLUSH    = 7'd7,  // OS: invalidate all PMT entries and the MMC (context switch)
    OP_UNMAP2D  = 7'd8,  // rs1=start vaddr, shape from OP_MAPARGS (tag 0 written)
    OP_UNMAP3D  = 7'd9   // rs1=start vaddr, shape from OP_MAPARGS (tag 0 written)
  } op_e;

  typedef struct packed {
    op_e              funct;
    logic [XLEN-1:0]  rs1;
    logic [XLEN-1:0]  rs2;
  } cmd_t;

  // Timing-sensitivity mode of a metadata lookup.
  typedef enum logic [1:0] {
    MODE_FORCE_STALL = 2'd0,  // triggering instruction waits for the result
    MODE_NO_STALL    = 2'd1,  // core continues, lookup always resolved
    MODE_BEST_EFFORT = 2'd2   // lookup dropped on an MMC miss
  } lookup_mode_e;

  // ---------------------------------------------------------------- memory port
  typedef struct packed {
    logic                 we;
    paddr_t               addr;   // byte address; data word is addr[PADDR_W-1:3]
    logic [XLEN-1:0]      wdata;
    logic [XLEN/8-1:0]    wmask;  // byte enables for a write
    logic [MEM_ID_W-1:0]  id;
  } mem_req_t;

  typedef struct packed {
    logic [XLEN-1:0]      rdata;  // whole 8-byte aligned word
    logic [MEM_ID_W-1:0]  id;
  } mem_resp_t;

  // ---------------------------------------------------------------- TLB port
  typedef struct packed {
    vaddr_t vaddr;
  } tlb_req_t;

  typedef struct packed {
    paddr_t paddr;
    logic   fault;   // no valid translation
  } tlb_resp_t;

  // ---------------------------------------------------------------- lookup port
  typedef struct packed {
    vaddr_t       vaddr;    // address to look up
    logic         is_phys;  // vaddr already holds a physical address: skip translation
    lookup_mode_e mode;
  } lkp_req_t;

  typedef struct packed {
    tag_t   tag;      // tag ID of the granule (0 = untagged)
    paddr_t paddr;    // translated address
    logic   dropped;  // best-effort lookup dropped on MMC miss, or translation fault
    logic   fault;    // translation fault (paddr not valid)
    logic   mmc_hit;
  } lkp_resp_t;

  // Byte lane select of a byte address within a 64-bit word.
  function automatic logic [7:0] word_byte(input logic [XLEN-1:0] w, input logic [2:0] sel);
    return w[sel*8 +: 8];
  endfunction

endpackage
