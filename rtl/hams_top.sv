// hams_top -- advanced HAMS controller (memory-over-storage in the MCH).
//
// The controller presents the MMU with one flat, byte-addressable space
// whose size is the ULL-Flash capacity. The NVDIMM is a direct-mapped page
// cache of that space, and the ULL-Flash shares the NVDIMM's DDR4 bus
// ("advanced" or tightly integrated HAMS). Inside:
//   hams_addr_manager  tag check, hits, misses, PRP cloning, wait queue
//   nvme_queue_engine  SQ/CQ, outstanding limit, journal tags, recovery
//   ssd_cmd_gen        64 B NVMe command into the SQ and into the ULL-Flash
//   mem_arb            shares the memory controller among those three
//   ddr_mem_ctrl       DDR4 command sequences on the shared bus
//   lock_register      hands the bus to the ULL-Flash for its page DMA
// The ULL-Flash receives commands as 64 B register writes (CS# of the NVDIMM
// high, its own CS# low), works on them, asks for the bus (ull_lock_req),
// moves the page directly to or from the NVDIMM while the lock is set,
// releases the lock through its lock pin, and signals completion with an
// interrupt carrying the command id.
//
// persist = 1 selects persist mode (one outstanding NVMe command, FUA on
// every command); persist = 0 selects extend mode (up to MAX_OUT commands).
// After a power failure, recover_start (one cycle, after reset) reissues all
// journaled commands; recover_busy is high meanwhile.
//
// The DDR4 PHY, the NVDIMM, the ULL-Flash and the CPU are outside: their
// signals are this module's ports. The data pins are split into dq_out/
// dq_oe/dq_in; the board-level bus resolves them.
module hams_top
  import hams_pkg::*;
#(
  parameter int unsigned PAGE_BYTES = 4096,
  parameter int unsigned INDEX_BITS = 20,
  parameter int unsigned SQ_DEPTH   = 512,
  parameter int unsigned MAX_OUT    = 16,
  parameter int unsigned WQ_DEPTH   = 16,
  parameter int unsigned T_RCD      = 15,
  parameter int unsigned T_CL       = 15,
  parameter int unsigned T_CWL      = 11,
  parameter int unsigned T_RP       = 15
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            persist,
  // MMU
  input  logic            mmu_valid,
  output logic            mmu_ready,
  input  mmu_req_t        mmu_req,
  output logic            rsp_valid,
  output logic [ID_W-1:0] rsp_id,
  output logic [63:0]     rsp_rdata,
  // DDR4 bus (through the PHY)
  output logic            cs_n_nv,
  output logic            cs_n_ull,
  output logic            ras_n,
  output logic            cas_n,
  output logic            we_n,
  output logic [3:0]      ba,
  output logic [15:0]     a,
  output logic [DQ_W-1:0] dq_out,
  output logic            dq_oe,
  output logic [7:0]      dm,
  input  logic [DQ_W-1:0] dq_in,
  // ULL-Flash side-band
  input  logic            ull_lock_req,
  input  logic            ull_lock_release,   // lock pin
  output logic            lock,
  input  logic            irq_valid,          // MSI
  input  logic [15:0]     irq_cid,
  // power-up recovery
  input  logic            recover_start,
  output logic            recover_busy,
  output logic [15:0]     recovered,
  // events for monitoring
  output logic            ev_hit,
  output logic            ev_miss,
  output logic            ev_park,
  output logic            ev_evict,
  output logic            ev_replay,
  output logic            ev_limit_stall,
  output logic            ev_lock_grant
);
  // line port clients: 0 address manager, 1 NVMe engine, 2 command generator
  logic [2:0]           c_valid, c_ready, c_done;
  mem_req_t             c_req [3];
  logic                 m_valid, m_ready, m_done, mc_idle;
  mem_req_t             m_req;
  logic [LINE_BITS-1:0] m_rdata;

  io_req_t     io, gen_io;
  logic        io_valid, io_ready, slot_free;
  logic [15:0] next_slot, gen_slot;
  logic        gen_valid, gen_ready, gen_done;
  logic        cpl_valid, cpl_fill;
  logic [31:0] cpl_frame;
  logic [$clog2(MAX_OUT+1)-1:0] outstanding;

  hams_addr_manager #(
    .PAGE_BYTES(PAGE_BYTES), .INDEX_BITS(INDEX_BITS), .WQ_DEPTH(WQ_DEPTH),
    .CPLQ_DEPTH(2 * MAX_OUT)
  ) u_am (
    .clk, .rst_n,
    .mmu_valid, .mmu_ready, .mmu_req, .rsp_valid, .rsp_id, .rsp_rdata,
    .mem_valid(c_valid[0]), .mem_ready(c_ready[0]), .mem_req(c_req[0]),
    .mem_done(c_done[0]), .mem_rdata(m_rdata),
    .io_valid, .io_ready, .io, .slot_free, .next_slot,
    .cpl_valid, .cpl_frame, .cpl_fill,
    .ev_hit, .ev_miss, .ev_park, .ev_evict, .ev_replay);

  nvme_queue_engine #(
    .SQ_DEPTH(SQ_DEPTH), .MAX_OUT(MAX_OUT), .PAGE_BYTES(PAGE_BYTES)
  ) u_eng (
    .clk, .rst_n, .persist,
    .io_valid, .io_ready, .io, .slot_free, .next_slot,
    .gen_valid, .gen_ready, .gen_io, .gen_slot, .gen_done,
    .irq_valid, .irq_cid,
    .cpl_valid, .cpl_frame, .cpl_fill,
    .mem_valid(c_valid[1]), .mem_ready(c_ready[1]), .mem_req(c_req[1]),
    .mem_done(c_done[1]), .mem_rdata(m_rdata),
    .recover_start, .recover_busy, .recovered,
    .outstanding, .limit_stall(ev_limit_stall));

  ssd_cmd_gen #(.PAGE_BYTES(PAGE_BYTES)) u_gen (
    .clk, .rst_n,
    .cmd_valid(gen_valid), .cmd_ready(gen_ready), .io(gen_io), .slot(gen_slot),
    .persist, .cmd_done(gen_done),
    .mem_valid(c_valid[2]), .mem_ready(c_ready[2]), .mem_req(c_req[2]),
    .mem_done(c_done[2]));

  mem_arb #(.N(3)) u_arb (
    .clk, .rst_n, .c_valid, .c_ready, .c_req, .c_done,
    .m_valid, .m_ready, .m_req, .m_done);

  logic hold;
  assign hold = lock || ull_lock_req;

  ddr_mem_ctrl #(.T_RCD(T_RCD), .T_CL(T_CL), .T_CWL(T_CWL), .T_RP(T_RP)) u_mc (
    .clk, .rst_n,
    .req_valid(m_valid), .req_ready(m_ready), .req(m_req), .done(m_done),
    .rdata(m_rdata), .hold, .idle(mc_idle),
    .cs_n_nv, .cs_n_ull, .ras_n, .cas_n, .we_n, .ba, .a,
    .dq_out, .dq_oe, .dm, .dq_in);

  lock_register u_lock (
    .clk, .rst_n, .ull_req(ull_lock_req), .bus_idle(mc_idle),
    .ull_release(ull_lock_release), .lock, .grant_pulse(ev_lock_grant));

  // HAMS leaves the bus alone while the ULL-Flash owns it.
  a_quiet_when_locked: assert property (@(posedge clk) disable iff (!rst_n)
    lock |-> (cs_n_nv && cs_n_ull && !dq_oe));
endmodule
