// hams_addr_manager -- address manager and cache logic of HAMS.
//
// The NVDIMM serves as a direct-mapped, inclusive page cache of the
// ULL-Flash. A 64-bit MoS address from the MMU splits into tag | index |
// offset: the index picks one cache frame (one page of the NVDIMM), the
// offset the byte in it. The frame's tag-array entry is an 8-byte metadata
// word stored in the NVDIMM itself (tag, dirty D, valid V, busy B split
// into fill-pending B and evict-pending E, spare ECC byte), so the controller holds no SRAM tag array. Per request:
//  1. read the metadata line and compare the stored tag (the "=" of the
//     tag check);
//  2. busy (B or E set): the frame is being filled or evicted, so the request is
//     parked in the wait queue (no second eviction is started);
//  3. hit: read the 64 B line and return the 8 B word, or write the word
//     with a byte mask and set the dirty bit;
//  4. miss: if the victim is valid and dirty, copy the victim page line by
//     line into the PRP-pool page of the SQ slot the evict command will
//     get and send an evict (NVMe write) pointing at that copy; write the new
//     tag with V=1, D=0, B=1 and E=1 if an evict was sent; send a fill
//     (NVMe read) into the frame; park the request in the wait queue.
// When the NVMe engine reports a finished fill (evict), B (E) of the
// frame is cleared and every request then in the wait queue is looked up
// again, in order. Requests still blocked go back into the queue. The frame
// stays busy until both commands have finished, so the evicted page cannot
// be fetched back from flash before its write-back is done.
//
// Follows the paper: direct mapping, tag/index/offset split, metadata with
// tag/B/V/D/ECC kept with the NVDIMM data, eviction + fill NVMe commands on a
// miss, cloning the page into the PRP pool before the evict (no eviction
// hazard), busy bit + wait queue (no redundant eviction), busy cleared when
// the engine completes the request. Own choices: metadata words in a separate
// NVDIMM region (8 B per frame), a fill also on a write miss (the page is
// needed for a partial write), clean victims dropped without an evict, 8 B
// MMU accesses, a page size of 4 KB (the paper's NVMe length; its simulated
// system uses 128 KB, set PAGE_BYTES for that), 2^20 frames = 4 GB of cache,
// the busy bit kept as two bits (one per command), request ids for
// out-of-order responses.
//
// Interfaces: mmu valid/ready in, rsp_valid pulse out (id, rdata); line port
// mem_* to the memory controller; io_* valid/ready to the NVMe engine;
// cpl_valid pulses from the engine are always accepted (buffered).
module hams_addr_manager
  import hams_pkg::*;
#(
  parameter int unsigned PAGE_BYTES = 4096,
  parameter int unsigned INDEX_BITS = 20,
  parameter int unsigned WQ_DEPTH   = 16,
  parameter int unsigned CPLQ_DEPTH = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // MMU
  input  logic                 mmu_valid,
  output logic                 mmu_ready,
  input  mmu_req_t             mmu_req,
  output logic                 rsp_valid,
  output logic [ID_W-1:0]      rsp_id,
  output logic [63:0]          rsp_rdata,
  // line port to the memory controller
  output logic                 mem_valid,
  input  logic                 mem_ready,
  output mem_req_t             mem_req,
  input  logic                 mem_done,
  input  logic [LINE_BITS-1:0] mem_rdata,
  // NVMe engine
  output logic                 io_valid,
  input  logic                 io_ready,
  output io_req_t              io,
  input  logic                 slot_free,
  input  logic [15:0]          next_slot,
  input  logic                 cpl_valid,
  input  logic [31:0]          cpl_frame,
  input  logic                 cpl_fill,
  // events, one-cycle pulses
  output logic                 ev_hit,
  output logic                 ev_miss,
  output logic                 ev_park,
  output logic                 ev_evict,
  output logic                 ev_replay
);
  localparam int unsigned OB    = $clog2(PAGE_BYTES);
  localparam int unsigned TAG_W = MOS_AW - OB - INDEX_BITS;
  localparam int unsigned LINES = PAGE_BYTES / LINE_BYTES;
  localparam int unsigned LW    = (LINES > 1) ? $clog2(LINES) : 1;
  localparam int unsigned MR_W  = $bits(mmu_req_t);

  typedef enum logic [4:0] {
    A_IDLE, A_META_RD, A_META_WAIT, A_DECIDE, A_RD_DATA, A_RD_WAIT,
    A_WR_DATA, A_WR_WAIT, A_DIRTY, A_DIRTY_WAIT, A_WAIT_SLOT,
    A_CL_RD, A_CL_RD_WAIT, A_CL_WR, A_CL_WR_WAIT, A_EVICT, A_SETMETA,
    A_SETMETA_WAIT, A_FILL, A_PARK, A_CPL_RD, A_CPL_RD_WAIT, A_CPL_WR,
    A_CPL_WR_WAIT
  } astate_e;
  astate_e state;

  mmu_req_t             cur;
  logic [63:0]          meta;        // metadata word of the frame
  logic [LINE_BITS-1:0] line;        // last line read
  logic [LW-1:0]        k;           // line counter of the page copy
  logic [15:0]          slot;
  logic [31:0]          cfr;         // frame of a completion
  logic [$clog2(WQ_DEPTH+1)-1:0] replay_cnt;

  // ---- address fields ----------------------------------------------------
  logic [INDEX_BITS-1:0] idx;
  logic [TAG_W-1:0]      tag;
  logic [NV_AW-1:0]      frame_base, meta_addr, cfr_meta_addr, prp_addr;
  logic [2:0]            meta_word, cfr_meta_word, data_word;
  assign idx   = cur.addr[OB +: INDEX_BITS];
  assign tag   = cur.addr[MOS_AW-1 -: TAG_W];
  assign frame_base    = NV_AW'(idx) << OB;
  assign meta_addr     = META_BASE + ((NV_AW'(idx) << 3) & ~NV_AW'(LINE_BYTES - 1));
  assign meta_word     = idx[2:0];
  assign cfr_meta_addr = META_BASE + ((NV_AW'(cfr[INDEX_BITS-1:0]) << 3) & ~NV_AW'(LINE_BYTES - 1));
  assign cfr_meta_word = cfr[2:0];
  assign data_word     = cur.addr[5:3];
  assign prp_addr      = PRP_BASE + (NV_AW'(slot) << OB);

  logic m_b, m_v, m_d, hit;
  logic cfill;                       // completion being handled is a fill
  logic [TAG_W-1:0] m_tag;
  assign m_b   = meta[META_B] || meta[META_E];   // frame busy
  assign m_v   = meta[META_V];
  assign m_d   = meta[META_D];
  assign m_tag = meta[TAG_W-1:0];
  assign hit   = m_v && (m_tag == tag);

  function automatic logic [63:0] mk_meta(logic [TAG_W-1:0] t, logic b, logic e, logic v, logic d);
    logic [63:0] w;
    w = '0;
    w[TAG_W-1:0] = t;
    w[META_B] = b;
    w[META_E] = e;
    w[META_V] = v;
    w[META_D] = d;
    return w;
  endfunction

  // ---- wait queue and completion buffer -----------------------------------
  logic wq_push, wq_pop, wq_empty, wq_full;
  logic [MR_W-1:0] wq_head;
  logic [$clog2(WQ_DEPTH+1)-1:0] wq_count;
  wait_queue #(.WIDTH(MR_W), .DEPTH(WQ_DEPTH)) u_wq (
    .clk, .rst_n, .push(wq_push), .din(cur), .pop(wq_pop),
    .head(wq_head), .empty(wq_empty), .full(wq_full), .count(wq_count));

  logic cq_pop, cq_empty, cq_full;
  logic [32:0] cq_head;
  logic [$clog2(CPLQ_DEPTH+1)-1:0] cq_count;
  wait_queue #(.WIDTH(33), .DEPTH(CPLQ_DEPTH)) u_cplq (
    .clk, .rst_n, .push(cpl_valid), .din({cpl_fill, cpl_frame}), .pop(cq_pop),
    .head(cq_head), .empty(cq_empty), .full(cq_full), .count(cq_count));

  logic take_cpl, take_replay, take_mmu;
  always_comb begin
    take_cpl    = (state == A_IDLE) && !cq_empty;
    take_replay = (state == A_IDLE) && cq_empty && (replay_cnt != 0) && !wq_empty;
    take_mmu    = (state == A_IDLE) && cq_empty && !take_replay && !wq_full && mmu_valid;
  end
  assign cq_pop    = take_cpl;
  assign wq_pop    = take_replay;
  assign mmu_ready = take_mmu;
  assign wq_push   = (state == A_PARK) || (state == A_DECIDE && m_b);

  // ---- control -------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= A_IDLE;
      cur        <= '0;
      meta       <= '0;
      line       <= '0;
      k          <= '0;
      slot       <= '0;
      cfr        <= '0;
      cfill      <= 1'b0;
      replay_cnt <= '0;
    end else begin
      case (state)
        A_IDLE: begin
          if (take_cpl) begin
            cfr   <= cq_head[31:0];
            cfill <= cq_head[32];
            state <= A_CPL_RD;
          end else if (take_replay) begin
            cur        <= mmu_req_t'(wq_head);
            replay_cnt <= replay_cnt - 1'b1;
            state      <= A_META_RD;
          end else if (take_mmu) begin
            cur   <= mmu_req;
            state <= A_META_RD;
          end
        end
        A_META_RD:   if (mem_ready) state <= A_META_WAIT;
        A_META_WAIT: if (mem_done) begin
          meta  <= mem_rdata[meta_word * 64 +: 64];
          state <= A_DECIDE;
        end
        A_DECIDE: begin
          if (m_b)              state <= A_IDLE;                 // parked
          else if (hit)         state <= cur.we ? A_WR_DATA : A_RD_DATA;
          else if (m_v && m_d)  state <= A_WAIT_SLOT;
          else                  state <= A_SETMETA;
        end
        A_RD_DATA: if (mem_ready) state <= A_RD_WAIT;
        A_RD_WAIT: if (mem_done)  state <= A_IDLE;
        A_WR_DATA: if (mem_ready) state <= A_WR_WAIT;
        A_WR_WAIT: if (mem_done)  state <= m_d ? A_IDLE : A_DIRTY;
        A_DIRTY:      if (mem_ready) state <= A_DIRTY_WAIT;
        A_DIRTY_WAIT: if (mem_done)  state <= A_IDLE;
        A_WAIT_SLOT: if (slot_free) begin
          slot  <= next_slot;
          k     <= '0;
          state <= A_CL_RD;
        end
        A_CL_RD:      if (mem_ready) state <= A_CL_RD_WAIT;
        A_CL_RD_WAIT: if (mem_done) begin line <= mem_rdata; state <= A_CL_WR; end
        A_CL_WR:      if (mem_ready) state <= A_CL_WR_WAIT;
        A_CL_WR_WAIT: if (mem_done) begin
          if (k == LW'(LINES - 1)) state <= A_EVICT;
          else begin k <= k + 1'b1; state <= A_CL_RD; end
        end
        A_EVICT:        if (io_ready)  state <= A_SETMETA;
        A_SETMETA:      if (mem_ready) state <= A_SETMETA_WAIT;
        A_SETMETA_WAIT: if (mem_done)  state <= A_FILL;
        A_FILL:         if (io_ready)  state <= A_PARK;
        A_PARK:         state <= A_IDLE;
        A_CPL_RD:      if (mem_ready) state <= A_CPL_RD_WAIT;
        A_CPL_RD_WAIT: if (mem_done) begin
          meta  <= mem_rdata[cfr_meta_word * 64 +: 64];
          state <= A_CPL_WR;
        end
        A_CPL_WR:      if (mem_ready) state <= A_CPL_WR_WAIT;
        A_CPL_WR_WAIT: if (mem_done) begin
          replay_cnt <= wq_count;
          state      <= A_IDLE;
        end
        default: state <= A_IDLE;
      endcase
    end
  end

  // ---- line requests -------------------------------------------------------
  always_comb begin
    mem_valid = 1'b0;
    mem_req   = '0;
    case (state)
      A_META_RD: begin mem_valid = 1'b1; mem_req.addr = meta_addr; end
      A_RD_DATA: begin mem_valid = 1'b1; mem_req.addr = frame_base | NV_AW'(cur.addr[OB-1:0] & ~(OB)'(LINE_BYTES - 1)); end
      A_WR_DATA: begin
        mem_valid     = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = frame_base | NV_AW'(cur.addr[OB-1:0] & ~(OB)'(LINE_BYTES - 1));
        mem_req.wdata = {8{cur.wdata}};
        mem_req.wstrb = LINE_BYTES'(cur.wstrb) << (data_word * 8);
      end
      A_DIRTY: begin
        mem_valid     = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = meta_addr;
        mem_req.wdata = {8{mk_meta(tag, 1'b0, 1'b0, 1'b1, 1'b1)}};
        mem_req.wstrb = LINE_BYTES'(8'hFF) << (meta_word * 8);
      end
      A_CL_RD: begin mem_valid = 1'b1; mem_req.addr = frame_base + (NV_AW'(k) << 6); end
      A_CL_WR: begin
        mem_valid     = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = prp_addr + (NV_AW'(k) << 6);
        mem_req.wdata = line;
        mem_req.wstrb = '1;
      end
      A_SETMETA: begin
        mem_valid     = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = meta_addr;
        mem_req.wdata = {8{mk_meta(tag, 1'b1, m_v && m_d, 1'b1, 1'b0)}};
        mem_req.wstrb = LINE_BYTES'(8'hFF) << (meta_word * 8);
      end
      A_CPL_RD: begin mem_valid = 1'b1; mem_req.addr = cfr_meta_addr; end
      A_CPL_WR: begin
        mem_valid     = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = cfr_meta_addr;
        mem_req.wdata = {8{meta & ~(64'd1 << (cfill ? META_B : META_E))}};
        mem_req.wstrb = LINE_BYTES'(8'hFF) << (cfr_meta_word * 8);
      end
      default: ;
    endcase
  end

  // ---- NVMe requests and responses ----------------------------------------
  always_comb begin
    io_valid = (state == A_EVICT) || (state == A_FILL);
    io       = '0;
    io.frame = 32'(idx);
    if (state == A_EVICT) begin
      io.fill    = 1'b0;
      io.nv_addr = prp_addr;
      io.page    = 64'({m_tag, idx});
    end else begin
      io.fill    = 1'b1;
      io.nv_addr = frame_base;
      io.page    = 64'({tag, idx});
    end
  end

  assign rsp_valid = ((state == A_RD_WAIT) || (state == A_WR_WAIT && m_d) ||
                      (state == A_DIRTY_WAIT)) && mem_done;
  assign rsp_id    = cur.id;
  assign rsp_rdata = (state == A_RD_WAIT) ? mem_rdata[data_word * 64 +: 64] : '0;

  assign ev_hit    = (state == A_DECIDE) && !m_b && hit;
  assign ev_miss   = (state == A_DECIDE) && !m_b && !hit;
  assign ev_park   = wq_push && (state == A_DECIDE);
  assign ev_evict  = (state == A_EVICT) && io_ready;
  assign ev_replay = take_replay;

  a_cplq_room: assert property (@(posedge clk) disable iff (!rst_n) cpl_valid |-> !cq_full);
  a_tag_fits:  assert property (@(posedge clk) TAG_W <= META_TAG_W);
  a_cache_fits: assert property (@(posedge clk)   // frames end below the metadata region
    (longint'(PAGE_BYTES) << INDEX_BITS) <= longint'(META_BASE));
endmodule
