// ssd_cmd_gen -- SSD command generator of advanced HAMS.
//
// Given an I/O request (evict a page to flash or fill a page from flash) and
// the SQ slot the NVMe queue engine assigned to it, it composes the 64-byte
// NVMe command: opcode write (evict) or read (fill), PRP1 = NVDIMM address of
// the page, SLBA = SSD address of the page, NLB = one page, FUA in persist
// mode, journal tag = 1, and the cache frame in a reserved dword. It then
// makes two 64 B line writes through the memory controller: first the entry
// into the submission-queue ring in the pinned NVDIMM region (SQ_BASE +
// slot*64), so a power failure cannot lose it, then the same 64 B into the
// data-buffer registers of the ULL-Flash (register-based interface, which
// replaces the doorbell). cmd_done pulses when both writes are finished.
//
// Follows the paper: the command fields and their sources, the journal tag
// set when the command is sent, transfer of the command as a 64 B burst to
// the ULL-Flash. Own choice: writing the SQ copy before the register write,
// and LBA = page number x (page size / 4 KB).
//
// Interface: cmd_valid/cmd_ready accept a request; mem_valid/mem_ready/
// mem_done is the line port to the memory controller.
module ssd_cmd_gen
  import hams_pkg::*;
#(
  parameter int unsigned PAGE_BYTES = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  io_req_t     io,
  input  logic [15:0] slot,
  input  logic        persist,
  output logic        cmd_done,
  output logic        mem_valid,
  input  logic        mem_ready,
  output mem_req_t    mem_req,
  input  logic        mem_done
);
  localparam int unsigned LBAS = (PAGE_BYTES >= LBA_BYTES) ? PAGE_BYTES / LBA_BYTES : 1;

  typedef enum logic [2:0] {G_IDLE, G_SQ, G_SQ_WAIT, G_ULL, G_ULL_WAIT, G_DONE} gstate_e;
  gstate_e state;
  logic [LINE_BITS-1:0] entry;
  logic [15:0] cur_slot;

  function automatic logic [LINE_BITS-1:0] compose(io_req_t r, logic [15:0] s, logic fua);
    nvme_cmd_t c;
    c.opcode  = r.fill ? NVME_OP_READ : NVME_OP_WRITE;
    c.cid     = s;
    c.prp1    = 64'(r.nv_addr);
    c.slba    = r.page * 64'(LBAS);
    c.nlb     = 16'(LBAS - 1);
    c.fua     = fua;
    c.journal = 1'b1;
    c.frame   = r.frame;
    return nvme_pack(c);
  endfunction

  assign cmd_ready = (state == G_IDLE);
  assign cmd_done  = (state == G_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= G_IDLE;
      entry    <= '0;
      cur_slot <= '0;
    end else begin
      case (state)
        G_IDLE: if (cmd_valid) begin
          entry    <= compose(io, slot, persist);
          cur_slot <= slot;
          state    <= G_SQ;
        end
        G_SQ:       if (mem_ready) state <= G_SQ_WAIT;
        G_SQ_WAIT:  if (mem_done)  state <= G_ULL;
        G_ULL:      if (mem_ready) state <= G_ULL_WAIT;
        G_ULL_WAIT: if (mem_done)  state <= G_DONE;
        G_DONE:     state <= G_IDLE;
        default:    state <= G_IDLE;
      endcase
    end
  end

  always_comb begin
    mem_valid     = (state == G_SQ) || (state == G_ULL);
    mem_req.we    = 1'b1;
    mem_req.ull   = (state == G_ULL);
    mem_req.addr  = (state == G_ULL) ? '0 : SQ_BASE + NV_AW'(cur_slot) * NV_AW'(LINE_BYTES);
    mem_req.wdata = entry;
    mem_req.wstrb = '1;
  end
endmodule
