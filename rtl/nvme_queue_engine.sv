// nvme_queue_engine -- hardware NVMe queue management of HAMS.
//
// The engine owns the NVMe submission queue (SQ) and completion queue (CQ).
// The SQ ring lives in the pinned, MMU-invisible region of the NVDIMM; the
// engine keeps its tail pointer and a small shadow of each outstanding
// command (frame, fill/evict) on chip. Its four jobs:
//  * Issue. An I/O request from the address manager gets the SQ slot at the
//    tail as its command id; the SSD command generator writes the command
//    (journal tag 1) into that SQ slot and sends it to the ULL-Flash. At most
//    MAX_OUT commands are outstanding in extend mode and one in persist mode
//    (which also sets FUA on every command). slot_free tells the address
//    manager that the next request would be accepted at once; it uses the
//    same slot number for its PRP-pool page.
//  * Completion. Each interrupt (MSI) from the ULL-Flash carries a command
//    id and is appended to the CQ ring. The engine takes CQ entries in order,
//    clears the journal tag of the command's SQ entry in the NVDIMM (a masked
//    write of dword 2), frees the slot, advances the CQ head and reports the
//    finished command (frame, fill) to the address manager.
//  * Recovery. After a power failure, recover_start makes the engine scan
//    all SQ_DEPTH entries of the old SQ in the NVDIMM. It restarts with a
//    fresh, empty SQ/CQ pair and reinserts every command whose journal tag is
//    still 1 at the new tail, re-sending it to the ULL-Flash (the register
//    write plays the doorbell). The old copy's journal tag is cleared when
//    the command moved to another slot.
//
// Follows the paper: SQ/CQ rings of 32 KB / 8 KB (512 x 64 B and 512 x 16 B),
// journal tag set on issue and cleared on completion, CQ head update frees
// the busy bit, reissue of journaled commands on power-up, one outstanding
// request in persist mode, 16 outstanding requests for the ULL-Flash.
// Own choices: the CQ ring holds only the command id and is kept on chip,
// completions are processed before new issues, recovery ignores the
// outstanding limit (the journal can hold at most MAX_OUT entries).
//
// Interfaces: valid/ready for I/O requests; cpl_valid is a one-cycle pulse;
// mem_* is a line port to the memory controller (done pulses per request).
module nvme_queue_engine
  import hams_pkg::*;
#(
  parameter int unsigned SQ_DEPTH   = 512,
  parameter int unsigned MAX_OUT    = 16,
  parameter int unsigned PAGE_BYTES = 4096
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 persist,
  // from the address manager
  input  logic                 io_valid,
  output logic                 io_ready,
  input  io_req_t              io,
  output logic                 slot_free,
  output logic [15:0]          next_slot,
  // to the SSD command generator
  output logic                 gen_valid,
  input  logic                 gen_ready,
  output io_req_t              gen_io,
  output logic [15:0]          gen_slot,
  input  logic                 gen_done,
  // MSI from the ULL-Flash
  input  logic                 irq_valid,
  input  logic [15:0]          irq_cid,
  // completion report to the address manager
  output logic                 cpl_valid,
  output logic [31:0]          cpl_frame,
  output logic                 cpl_fill,
  // line port for SQ updates and the recovery scan
  output logic                 mem_valid,
  input  logic                 mem_ready,
  output mem_req_t             mem_req,
  input  logic                 mem_done,
  input  logic [LINE_BITS-1:0] mem_rdata,
  // power-up recovery
  input  logic                 recover_start,
  output logic                 recover_busy,
  output logic [15:0]          recovered,
  // status
  output logic [$clog2(MAX_OUT+1)-1:0] outstanding,
  output logic                 limit_stall   // request waiting only for the outstanding limit
);
  localparam int unsigned SW   = $clog2(SQ_DEPTH);
  localparam int unsigned OW   = $clog2(MAX_OUT + 1);
  localparam int unsigned LBAS = (PAGE_BYTES >= LBA_BYTES) ? PAGE_BYTES / LBA_BYTES : 1;

  typedef enum logic [3:0] {
    E_IDLE, E_ISSUE, E_ISSUE_WAIT, E_CPL_CLR, E_CPL_WAIT, E_CPL_REPORT,
    E_REC_RD, E_REC_RD_WAIT, E_REC_ISSUE, E_REC_ISSUE_WAIT, E_REC_CLR, E_REC_CLR_WAIT
  } estate_e;
  estate_e state;

  logic [SW-1:0] sq_tail, cq_head, cq_tail;
  logic [SW:0]   scan;            // recovery scan index
  logic [SQ_DEPTH-1:0] slot_busy;
  logic [31:0]   sh_frame [SQ_DEPTH];
  logic          sh_fill  [SQ_DEPTH];
  logic [SW-1:0] cq_mem   [SQ_DEPTH];
  logic [SW-1:0] cur_cid;
  io_req_t       cur_io;
  logic [SW-1:0] old_slot;

  logic [OW-1:0] limit;
  assign limit       = persist ? OW'(1) : OW'(MAX_OUT);
  assign slot_free   = !slot_busy[sq_tail] && (outstanding < limit) && !recover_busy;
  assign next_slot   = 16'(sq_tail);
  assign limit_stall = io_valid && !(outstanding < limit);
  assign recover_busy = (state == E_REC_RD) || (state == E_REC_RD_WAIT) ||
                        (state == E_REC_ISSUE) || (state == E_REC_ISSUE_WAIT) ||
                        (state == E_REC_CLR) || (state == E_REC_CLR_WAIT);

  function automatic logic [SW-1:0] nxt(logic [SW-1:0] p);
    return (p == SW'(SQ_DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  // CQ ring: the interrupt pushes the command id.
  always_ff @(posedge clk) begin
    if (irq_valid) cq_mem[cq_tail] <= SW'(irq_cid);
  end

  // Shadow of outstanding commands.
  always_ff @(posedge clk) begin
    if ((state == E_ISSUE_WAIT || state == E_REC_ISSUE_WAIT) && gen_done) begin
      sh_frame[sq_tail] <= cur_io.frame;
      sh_fill[sq_tail]  <= cur_io.fill;
    end
  end

  nvme_cmd_t rc;
  assign rc = nvme_unpack(mem_rdata);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= E_IDLE;
      sq_tail     <= '0;
      cq_head     <= '0;
      cq_tail     <= '0;
      slot_busy   <= '0;
      outstanding <= '0;
      scan        <= '0;
      cur_cid     <= '0;
      cur_io      <= '0;
      old_slot    <= '0;
      recovered   <= '0;
    end else begin
      if (irq_valid) cq_tail <= nxt(cq_tail);
      case (state)
        E_IDLE: begin
          if (recover_start) begin
            sq_tail   <= '0;           // fresh SQ/CQ pair
            cq_head   <= '0;
            cq_tail   <= '0;
            slot_busy <= '0;
            outstanding <= '0;
            scan      <= '0;
            recovered <= '0;
            state     <= E_REC_RD;
          end else if (cq_head != cq_tail) begin
            cur_cid <= cq_mem[cq_head];
            state   <= E_CPL_CLR;
          end else if (io_valid && slot_free) begin
            cur_io <= io;
            state  <= E_ISSUE;
          end
        end
        E_ISSUE:      if (gen_ready) state <= E_ISSUE_WAIT;
        E_ISSUE_WAIT: if (gen_done) begin
          slot_busy[sq_tail] <= 1'b1;
          sq_tail     <= nxt(sq_tail);
          outstanding <= outstanding + 1'b1;
          state       <= E_IDLE;
        end
        E_CPL_CLR:  if (mem_ready) state <= E_CPL_WAIT;
        E_CPL_WAIT: if (mem_done) begin
          slot_busy[cur_cid] <= 1'b0;
          outstanding <= outstanding - 1'b1;
          cq_head     <= nxt(cq_head);
          state       <= E_CPL_REPORT;
        end
        E_CPL_REPORT: state <= E_IDLE;
        // ---- recovery ----
        E_REC_RD:      if (mem_ready) state <= E_REC_RD_WAIT;
        E_REC_RD_WAIT: if (mem_done) begin
          if (rc.journal && (rc.opcode == NVME_OP_READ || rc.opcode == NVME_OP_WRITE)) begin
            cur_io.fill    <= (rc.opcode == NVME_OP_READ);
            cur_io.nv_addr <= NV_AW'(rc.prp1);
            cur_io.page    <= rc.slba / 64'(LBAS);
            cur_io.frame   <= rc.frame;
            old_slot       <= SW'(scan);
            state          <= E_REC_ISSUE;
          end else if (scan == (SW+1)'(SQ_DEPTH - 1)) begin
            state <= E_IDLE;
          end else begin
            scan  <= scan + 1'b1;
            state <= E_REC_RD;
          end
        end
        E_REC_ISSUE:      if (gen_ready) state <= E_REC_ISSUE_WAIT;
        E_REC_ISSUE_WAIT: if (gen_done) begin
          slot_busy[sq_tail] <= 1'b1;
          sq_tail     <= nxt(sq_tail);
          outstanding <= outstanding + 1'b1;
          recovered   <= recovered + 1'b1;
          if (old_slot != sq_tail) state <= E_REC_CLR;
          else if (scan == (SW+1)'(SQ_DEPTH - 1)) state <= E_IDLE;
          else begin scan <= scan + 1'b1; state <= E_REC_RD; end
        end
        E_REC_CLR:      if (mem_ready) state <= E_REC_CLR_WAIT;
        E_REC_CLR_WAIT: if (mem_done) begin
          if (scan == (SW+1)'(SQ_DEPTH - 1)) state <= E_IDLE;
          else begin scan <= scan + 1'b1; state <= E_REC_RD; end
        end
        default: state <= E_IDLE;
      endcase
    end
  end

  assign io_ready  = (state == E_ISSUE_WAIT) && gen_done;
  assign gen_valid = (state == E_ISSUE) || (state == E_REC_ISSUE);
  assign gen_io    = cur_io;
  assign gen_slot  = 16'(sq_tail);
  assign cpl_valid = (state == E_CPL_REPORT);
  assign cpl_frame = sh_frame[cur_cid];
  assign cpl_fill  = sh_fill[cur_cid];

  always_comb begin
    mem_valid     = (state == E_CPL_CLR) || (state == E_REC_RD) || (state == E_REC_CLR);
    mem_req       = '0;
    mem_req.we    = (state != E_REC_RD);
    mem_req.addr  = SQ_BASE + NV_AW'((state == E_CPL_CLR) ? cur_cid :
                                     (state == E_REC_CLR) ? old_slot : SW'(scan)) * NV_AW'(LINE_BYTES);
    mem_req.wstrb = (state == E_REC_RD) ? '0 : 64'h0000_0000_0000_0F00;  // dword 2 = journal tag
    mem_req.wdata = '0;
  end

  a_irq_for_issued: assert property (@(posedge clk) disable iff (!rst_n)
    irq_valid |-> slot_busy[SW'(irq_cid)]);
  a_limit: assert property (@(posedge clk) disable iff (!rst_n)
    outstanding <= OW'(MAX_OUT));
endmodule
