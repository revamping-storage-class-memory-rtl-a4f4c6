// tb_hams_page128k -- hams_top with the 128 KB pages of the evaluated system.
//
// The evaluated system used 128 KB pages on an 8 GB NVDIMM. With
// PAGE_BYTES = 131072 the cache index shrinks to 15 bits (2^15 frames x
// 128 KB = 4 GB, the same cache as at 4 KB pages) and each NVMe command
// moves 32 logical blocks of 4 KB. Everything else, including the DDR4
// timing, stays at its default. The sequence is the one of tb_hams_full:
// cold miss, hits, a write, a dirty eviction (a 2048-line copy into the
// PRP pool) with the page coming back from flash, several requests on one
// frame, persist mode and a read-back of every written word.
module tb_hams_page128k;
  import hams_pkg::*;
  import tb_hams_pkg::*;

  localparam int unsigned PAGE = 131072;
  localparam int unsigned IDXB = 15;

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

  hams_top #(.PAGE_BYTES(PAGE), .INDEX_BITS(IDXB)) dut (
    .clk, .rst_n, .persist, .mmu_valid, .mmu_ready, .mmu_req, .rsp_valid, .rsp_id,
    .rsp_rdata, .cs_n_nv, .cs_n_ull, .ras_n, .cas_n, .we_n, .ba, .a, .dq_out, .dq_oe,
    .dm, .dq_in, .ull_lock_req(lock_req), .ull_lock_release(lock_release), .lock,
    .irq_valid(irq), .irq_cid, .recover_start, .recover_busy, .recovered,
    .ev_hit, .ev_miss, .ev_park, .ev_evict, .ev_replay, .ev_limit_stall(ev_limit),
    .ev_lock_grant(ev_grant));

  nvdimm_model nv (
    .clk, .cs_n(cs_n_nv), .ras_n, .cas_n, .we_n, .ba, .a, .dq_w(dq_out), .dm,
    .dq_r(dq_in), .lock, .dma_we, .dma_valid, .dma_addr, .dma_wdata, .dma_rdata,
    .viol, .n_act);

  ull_flash_model #(.PAGE_BYTES(PAGE)) ull (
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
  function automatic logic [63:0] mk_addr(logic [63:0] t, logic [63:0] i, logic [63:0] w);
    return (t << (IDXB + 17)) | (i << 17) | (w << 3);
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

  initial begin
    int base_cmd, base_fua;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    // cold miss, then hits
    issue(0, mk_addr(3, 7, 0), '0, 8'hFF, 1); drain();
    issue(0, mk_addr(3, 7, 511), '0, 8'hFF, 1); drain();
    issue(1, mk_addr(3, 7, 100), 64'h1122_3344_5566_7788, 8'hFF, 1); drain();
    issue(1, mk_addr(3, 7, 101), 64'hFFFF_FFFF_FFFF_FFFF, 8'h0F, 1); drain();
    issue(0, mk_addr(3, 7, 100), '0, 8'hFF, 1); drain();
    // last frame, highest tag bits
    issue(1, mk_addr(32'h03FF_FFFF, (1 << IDXB) - 1, 5), 64'hA5A5_5A5A_0F0F_F0F0, 8'hFF, 1); drain();
    // conflicting tag: dirty eviction of (3,7), then it comes back from flash
    issue(0, mk_addr(9, 7, 1), '0, 8'hFF, 1); drain();
    issue(0, mk_addr(3, 7, 100), '0, 8'hFF, 1); drain();
    check(ull.peek(mk_addr(3, 7, 100)) == 64'h1122_3344_5566_7788, "evicted word reached flash");
    // several requests in flight on one frame
    for (int k = 0; k < 6; k++) issue(k % 2, mk_addr(k % 3 + 20, 42, k), {$urandom, $urandom}, 8'hFF, 8);
    drain();
    // persist mode
    persist = 1; base_cmd = n_cmd; base_fua = n_fua; ull.max_pending = 0;
    issue(1, mk_addr(4, 7, 2), 64'h0BAD_CAFE, 8'hFF, 1); drain();
    issue(0, mk_addr(3, 7, 101), '0, 8'hFF, 1); drain();
    check(ull.max_pending <= 1, "persist mode kept one command pending");
    check(n_fua - base_fua == n_cmd - base_cmd && n_cmd > base_cmd, "persist commands carry FUA");
    persist = 0;
    // read back
    foreach (ref_mem[ad]) issue(0, ad, '0, 8'hFF, 4);
    drain();

    check(viol == 0, $sformatf("%0d bus accesses against the lock", viol));
    check(c_hit > 0, "no hit");           check(c_miss > 0, "no miss");
    check(c_evict > 0, "no dirty eviction"); check(c_park > 0, "no request parked on a busy frame");
    check(c_replay > 0, "no wait-queue replay"); check(c_grant > 0, "no lock hand-over");
    $display("mechanisms: hit=%0d miss=%0d evict=%0d park=%0d replay=%0d lock=%0d cmds=%0d",
             c_hit, c_miss, c_evict, c_park, c_replay, c_grant, n_cmd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
