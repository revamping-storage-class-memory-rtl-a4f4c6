// hams_pkg -- types and constants shared by the HAMS controller blocks.
//
// HAMS folds an NVDIMM (used as a direct-mapped, inclusive page cache) and
// an ultra-low-latency flash SSD (ULL-Flash) into one byte-addressable
// memory-over-storage (MoS) space. This package holds what several blocks
// agree on: the 64-byte line request that travels to the DDR4 memory
// controller, the NVMe command fields and their packing into the 64-byte
// NVMe submission entry, the layout of a tag-array entry, and the NVDIMM
// address map of the pinned (MMU-invisible) region.
//
// Follows the paper: 64-bit MoS address, 64 B cache line with an 8 B
// metadata word holding tag/B/V/D/ECC, 64 B NVMe command with PRP = NVDIMM
// address, LBA = SSD address and length = one page, journal tag kept in a
// reserved field of the command, SQ ring of 32 KB and CQ ring of 8 KB in
// the pinned region, 8 GB NVDIMM. Own choices: the exact bit positions of the
// metadata fields, the reserved dwords used for the journal tag and frame
// number, the pinned-region offsets, and the place of the tag entries (a
// metadata region of the NVDIMM instead of the DIMM's ECC lanes).
package hams_pkg;

  // ---- bus and memory geometry -------------------------------------------
  localparam int unsigned MOS_AW     = 64;      // MoS (MMU) byte address
  localparam int unsigned NV_AW      = 33;      // 8 GB NVDIMM byte address
  localparam int unsigned LINE_BYTES = 64;      // one DDR4 burst of 8 x 8 B
  localparam int unsigned LINE_BITS  = LINE_BYTES * 8;
  localparam int unsigned BEATS      = 8;       // burst length
  localparam int unsigned DQ_W       = 64;      // D[63:0]
  localparam int unsigned ID_W       = 8;       // MMU request tag
  localparam int unsigned LBA_BYTES  = 4096;    // NVMe logical block

  // ---- NVDIMM map (byte addresses) ---------------------------------------
  // [0, 4 GB)             cache frames
  // [4 GB, 4 GB + 8 MB)   tag-array entries, 8 B per frame
  // [7.5 GB, 8 GB)        pinned region: SQ, CQ, MSI table, PRP pool
  localparam logic [NV_AW-1:0] META_BASE   = 33'h1_0000_0000;
  localparam logic [NV_AW-1:0] PINNED_BASE = 33'h1_E000_0000;
  localparam logic [NV_AW-1:0] SQ_BASE     = PINNED_BASE;               // 32 KB
  localparam logic [NV_AW-1:0] CQ_BASE     = PINNED_BASE + 33'h8000;    // 8 KB
  localparam logic [NV_AW-1:0] MSI_BASE    = PINNED_BASE + 33'hA000;    // >1 KB
  localparam logic [NV_AW-1:0] PRP_BASE    = PINNED_BASE + 33'h10_0000; // PRP pool

  // ---- NVMe ---------------------------------------------------------------
  localparam logic [7:0] NVME_OP_WRITE = 8'h01;  // NVDIMM -> flash (evict)
  localparam logic [7:0] NVME_OP_READ  = 8'h02;  // flash -> NVDIMM (fill)

  typedef struct packed {
    logic [7:0]  opcode;
    logic [15:0] cid;      // command identifier = SQ slot
    logic [63:0] prp1;     // NVDIMM address of the page
    logic [63:0] slba;     // start LBA on the SSD
    logic [15:0] nlb;      // number of LBAs, zero based
    logic        fua;      // force unit access (persist mode)
    logic        journal;  // journal tag, reserved dword 2 bit 0
    logic [31:0] frame;    // cache frame index, reserved dword 3
  } nvme_cmd_t;

  // 64 B submission-queue entry, dword k at bits [32k+31:32k].
  function automatic logic [LINE_BITS-1:0] nvme_pack(nvme_cmd_t c);
    logic [LINE_BITS-1:0] e;
    e = '0;
    e[7:0]     = c.opcode;
    e[31:16]   = c.cid;
    e[32*1 +: 32] = 32'd1;            // NSID 1
    e[32*2]    = c.journal;
    e[32*3 +: 32] = c.frame;
    e[32*6 +: 64] = c.prp1;
    e[32*10 +: 64] = c.slba;
    e[32*12 +: 16] = c.nlb;
    e[32*12 + 30]  = c.fua;
    return e;
  endfunction

  function automatic nvme_cmd_t nvme_unpack(logic [LINE_BITS-1:0] e);
    nvme_cmd_t c;
    c.opcode  = e[7:0];
    c.cid     = e[31:16];
    c.journal = e[32*2];
    c.frame   = e[32*3 +: 32];
    c.prp1    = e[32*6 +: 64];
    c.slba    = e[32*10 +: 64];
    c.nlb     = e[32*12 +: 16];
    c.fua     = e[32*12 + 30];
    return c;
  endfunction

  // ---- line request to the memory controller -----------------------------
  typedef struct packed {
    logic                  we;     // 1 = write
    logic                  ull;    // 1 = 64 B register write to ULL-Flash
    logic [NV_AW-1:0]      addr;   // NVDIMM byte address, 64 B aligned
    logic [LINE_BITS-1:0]  wdata;
    logic [LINE_BYTES-1:0] wstrb;  // byte enables of a write
  } mem_req_t;

  // ---- I/O request from the address manager to the NVMe engine -----------
  typedef struct packed {
    logic             fill;   // 1 = read from flash into NVDIMM, 0 = evict
    logic [NV_AW-1:0] nv_addr;
    logic [63:0]      page;   // MoS page number
    logic [31:0]      frame;
  } io_req_t;

  // ---- MMU request --------------------------------------------------------
  typedef struct packed {
    logic [ID_W-1:0]   id;
    logic              we;
    logic [MOS_AW-1:0] addr;   // 8 B aligned
    logic [63:0]       wdata;
    logic [7:0]        wstrb;
  } mmu_req_t;

  // ---- tag-array entry (8 B metadata word) --------------------------------
  localparam int unsigned META_TAG_W = 48;
  localparam int unsigned META_D = 48, META_V = 49, META_B = 50;
  localparam int unsigned META_E = 51;   // evict of the old page in flight

  // ---- DDR4 command encodings on RAS#/CAS#/WE# ---------------------------
  typedef enum logic [2:0] {          // {ras_n, cas_n, we_n}
    DDR_ACT = 3'b011,
    DDR_RD  = 3'b101,
    DDR_WR  = 3'b100,
    DDR_PRE = 3'b010,
    DDR_NOP = 3'b111
  } ddr_cmd_e;

endpackage
