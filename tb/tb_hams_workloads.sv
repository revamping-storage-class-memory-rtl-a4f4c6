// tb_hams_workloads -- the evaluated workloads' access patterns, scaled down.
//
// The twelve workloads of the evaluation (MMF microbenchmarks seqRd, rndRd,
// seqWr, rndWr; SQLite seqSel, rndSel, seqIns, rndIns, Update; Rodinia BFS,
// KMN, NN) are run through hams_top as address streams. Their sizes follow
// the evaluation's ratio of data set to NVDIMM capacity (16, 11, 9, 5 and
// 7 GB against 8 GB), applied to a 64 KB cache (256 frames of 256 B):
// 512, 352, 288, 160 and 224 pages. The microbenchmarks only read or only
// write; the others store with probability store/(load+store) from their
// instruction mix (SQLite about 0.44, BFS 0.16, KMN 0.10, NN 0.24). Names
// starting with "seq", and KMN and NN (streaming over their data), walk
// their footprint one 64-byte line at a time; the rest pick random words.
// These pattern choices are this testbench's own, as are the small sizes.
//
// One request is in flight at a time, so the controller's behaviour is
// exactly predictable: an independent direct-mapped tag model (tag, valid,
// dirty per frame) gives the expected number of misses and of dirty
// evictions for every workload, and these must equal the controller's event
// counts; every missed request must be replayed. All read data
// are checked against a reference memory. The microbenchmarks run again in
// persist mode, where at most one NVMe command may be pending and every
// command must carry FUA. The hit rate of each workload is printed.
module tb_hams_workloads;
  import hams_pkg::*;
  import tb_hams_pkg::*;

  localparam int unsigned PAGE  = 256;
  localparam int unsigned IDXB  = 8;
  localparam int unsigned T_RCD = 2, T_CL = 3, T_CWL = 2, T_RP = 2;
  localparam int unsigned NOPS  = 2000;

  logic clk = 0, rst_n = 0, persist = 0, pfail = 0, recover_start = 0;
  always #5 clk = ~clk;

  logic mmu_valid = 0, mmu_ready, rsp_valid;
  mmu_req_t mmu_req = '0;
  logic [ID_W-1:0] rsp_id;
  logic [63:0] rsp_rdata;
  logic cs_n_nv, cs_n_ull, ras_n, cas_n, we_n, dq_oe;
  logic [3:0] ba; logic [15:0] a; logic [63:0] dq_out, dq_in; logic [7:0] dm;
  logic lock, lock_req, lock_release, irq, recover_busy;
  logic [15:0] irq_cid, recovered;
  logic ev_hit, ev_miss, ev_park, ev_evict, ev_replay, ev_limit, ev_grant;
  logic dma_valid, dma_we; logic [32:0] dma_addr; logic [511:0] dma_wdata, dma_rdata;
  int viol, n_act, n_cmd, n_fua, n_done, max_pending, n_ooo;

  hams_top #(.PAGE_BYTES(PAGE), .INDEX_BITS(IDXB), .SQ_DEPTH(16), .MAX_OUT(4),
             .WQ_DEPTH(8), .T_RCD(T_RCD), .T_CL(T_CL), .T_CWL(T_CWL), .T_RP(T_RP)) dut (
    .clk, .rst_n, .persist, .mmu_valid, .mmu_ready, .mmu_req, .rsp_valid, .rsp_id,
    .rsp_rdata, .cs_n_nv, .cs_n_ull, .ras_n, .cas_n, .we_n, .ba, .a, .dq_out, .dq_oe,
    .dm, .dq_in, .ull_lock_req(lock_req), .ull_lock_release(lock_release), .lock,
    .irq_valid(irq), .irq_cid, .recover_start, .recover_busy, .recovered,
    .ev_hit, .ev_miss, .ev_park, .ev_evict, .ev_replay, .ev_limit_stall(ev_limit),
    .ev_lock_grant(ev_grant));

  nvdimm_model #(.T_CL(T_CL), .T_CWL(T_CWL)) nv (
    .clk, .cs_n(cs_n_nv), .ras_n, .cas_n, .we_n, .ba, .a, .dq_w(dq_out), .dm,
    .dq_r(dq_in), .lock, .dma_we, .dma_valid, .dma_addr, .dma_wdata, .dma_rdata,
    .viol, .n_act);

  ull_flash_model #(.PAGE_BYTES(PAGE), .LAT_MIN(30), .LAT_MAX(120)) ull (
    .clk, .pfail, .cs_n(cs_n_ull), .ras_n, .cas_n, .we_n, .dq_w(dq_out), .lock,
    .lock_req, .lock_release, .irq, .irq_cid, .dma_valid, .dma_we, .dma_addr,
    .dma_wdata, .dma_rdata, .n_cmd, .n_fua, .n_done, .max_pending, .n_ooo);

  int checks = 0, failures = 0;
  int c_hit, c_miss, c_park, c_evict, c_replay, c_limit, c_grant;

  // Reference memory and outstanding requests.
  logic [63:0] ref_mem [logic [63:0]];
  logic [63:0] exp_data [logic [ID_W-1:0]];
  logic        exp_rd   [logic [ID_W-1:0]];
  logic [63:0] out_addr [logic [ID_W-1:0]];
  logic [ID_W-1:0] next_id = 0;

  function automatic logic [63:0] ref_rd(logic [63:0] ad);
    return ref_mem.exists(ad) ? ref_mem[ad] : flash_word(ad);
  endfunction

  function automatic logic busy_addr(logic [63:0] ad);
    foreach (out_addr[i]) if (out_addr[i] == ad) return 1;
    return 0;
  endfunction

  always @(posedge clk) begin
    if (ev_hit) c_hit++;
    if (ev_miss) c_miss++;
    if (ev_park) c_park++;
    if (ev_evict) c_evict++;
    if (ev_replay) c_replay++;
    if (ev_limit) c_limit++;
    if (ev_grant) c_grant++;
    if (rsp_valid) begin
      checks++;
      if (!out_addr.exists(rsp_id)) begin
        failures++; $display("ERROR unexpected response id %0d", rsp_id);
      end else begin
        if (exp_rd[rsp_id] && rsp_rdata !== exp_data[rsp_id]) begin
          failures++;
          $display("ERROR read id %0d addr %h got %h exp %h", rsp_id, out_addr[rsp_id],
                   rsp_rdata, exp_data[rsp_id]);
        end
        out_addr.delete(rsp_id);
        exp_rd.delete(rsp_id);
        exp_data.delete(rsp_id);
      end
    end
  end

  // Address of word w of page (tag t, index i).
  function automatic logic [63:0] mk_addr(int t, int i, int w);
    return (64'(t) << (IDXB + 8)) | (64'(i) << 8) | (64'(w) << 3);
  endfunction

  task automatic issue(input logic we, input logic [63:0] ad, input logic [63:0] wd,
                       input logic [7:0] strb, input int max_out);
    while (busy_addr(ad) || out_addr.size() >= max_out || out_addr.exists(next_id)) @(posedge clk);
    @(negedge clk);
    mmu_req.id    = next_id;
    mmu_req.we    = we;
    mmu_req.addr  = ad;
    mmu_req.wdata = wd;
    mmu_req.wstrb = strb;
    mmu_valid     = 1;
    out_addr[next_id] = ad;
    exp_rd[next_id]   = !we;
    exp_data[next_id] = ref_rd(ad);
    if (we) begin
      logic [63:0] v;
      v = ref_rd(ad);
      for (int b = 0; b < 8; b++) if (strb[b]) v[b*8 +: 8] = wd[b*8 +: 8];
      ref_mem[ad] = v;
    end
    next_id++;
    #1;
    while (!mmu_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 mmu_valid = 0;
  endtask

  task automatic drain();
    while (out_addr.size() != 0) @(posedge clk);
  endtask

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("ERROR %s", what); end
  endtask

  // Independent direct-mapped tag model.
  logic [63:0] m_tag [int];
  bit          m_dirty [int];
  int exp_miss, exp_evict;
  function automatic void model(logic [63:0] ad, bit we);
    logic [63:0] pg; int ix;
    pg = ad / PAGE; ix = int'(pg % (1 << IDXB));
    if (m_tag.exists(ix) && m_tag[ix] == pg / (1 << IDXB)) begin
      if (we) m_dirty[ix] = 1;
    end else begin
      exp_miss++;
      if (m_tag.exists(ix) && m_dirty[ix]) exp_evict++;
      m_tag[ix] = pg / (1 << IDXB);
      m_dirty[ix] = we;
    end
  endfunction

  typedef struct { string name; int pages; int store_pm; bit seq; } wl_t;
  wl_t wls [12] = '{
    '{"seqRd", 512, 0, 1},    '{"rndRd", 512, 0, 0},
    '{"seqWr", 512, 1000, 1}, '{"rndWr", 512, 1000, 0},
    '{"seqSel", 352, 435, 1}, '{"rndSel", 352, 435, 0},
    '{"seqIns", 352, 457, 1}, '{"rndIns", 352, 457, 0},
    '{"Update", 352, 435, 0}, '{"BFS", 288, 160, 0},
    '{"KMN", 160, 100, 1},    '{"NN", 224, 238, 1}};

  task automatic run_wl(input wl_t w, input int region, input int nops);
    int m0, e0, h0, p0, r0, em0, ee0;
    logic [63:0] base;
    base = 64'(region) << 20;          // each workload has its own pages
    m0 = c_miss; e0 = c_evict; h0 = c_hit; p0 = c_park; r0 = c_replay;
    em0 = exp_miss; ee0 = exp_evict;
    for (int k = 0; k < nops; k++) begin
      logic [63:0] ad; bit we;
      if (w.seq) ad = base + 64'((k * 64) % (w.pages * PAGE));
      else       ad = base + 64'(($urandom % (w.pages * PAGE / 8)) * 8);
      we = ($urandom % 1000) < w.store_pm;
      model(ad, we);
      issue(we, ad, {$urandom, $urandom}, we ? 8'hFF : 8'h00, 1);
      drain();
    end
    repeat (20) @(posedge clk);
    check(c_miss - m0 == exp_miss - em0,
          $sformatf("%s: %0d misses, model %0d", w.name, c_miss - m0, exp_miss - em0));
    check(c_evict - e0 == exp_evict - ee0,
          $sformatf("%s: %0d evictions, model %0d", w.name, c_evict - e0, exp_evict - ee0));
    check(c_replay - r0 >= c_miss - m0,
          $sformatf("%s: every miss replayed", w.name));
    $display("%-7s %s pages=%0d ops=%0d hit rate %0d%% misses=%0d evictions=%0d", w.name,
             persist ? "persist" : "extend ", w.pages, nops,
             (100 * (nops - (c_miss - m0))) / nops, c_miss - m0, c_evict - e0);
  endtask

  initial begin
    int base_cmd, base_fua;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    foreach (wls[i]) run_wl(wls[i], i + 1, NOPS);
    // persist mode (hams-TP) for the microbenchmarks
    persist = 1; base_cmd = n_cmd; base_fua = n_fua; ull.max_pending = 0;
    for (int i = 0; i < 4; i++) run_wl(wls[i], i + 20, NOPS / 4);
    check(ull.max_pending <= 1, "persist mode kept one command pending");
    check(n_cmd > base_cmd && n_fua - base_fua == n_cmd - base_cmd, "persist commands carry FUA");
    persist = 0;
    check(viol == 0, "no bus access against the lock");
    check(c_evict > 0 && c_grant > 0, "evictions and lock hand-overs happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
