// tb_hams_top -- end-to-end test of the advanced HAMS controller.
//
// hams_top sits between an MMU driver and behavioural models of the NVDIMM
// and the ULL-Flash on one DDR4 bus. Pages are small (256 B) and a few pages
// compete for the same frames, so misses, dirty evictions, busy-frame parking
// and wait-queue replays happen often. A reference memory, built only from
// what the driver wrote and from the flash models' initial pattern, predicts
// every read. Phases:
//   1. extend mode, random 8-byte reads/writes with several requests in
//      flight (different words);
//   2. persist mode, checking that at most one NVMe command is outstanding
//      and that every command carries FUA;
//   3. power failure while an evict and a fill are outstanding: reset HAMS,
//      drop the flash model's pending commands, run recovery, and check that
//      both commands are reissued and the evicted data reaches flash;
//   4. extend mode again, then every written word is read back.
// Each mechanism (hit, miss, dirty eviction, park, replay, limit stall, lock
// hand-over, out-of-order completion, recovery, FUA) must occur.
module tb_hams_top;
  import hams_pkg::*;
  import tb_hams_pkg::*;

  localparam int unsigned PAGE  = 256;
  localparam int unsigned IDXB  = 8;
  localparam int unsigned T_RCD = 2, T_CL = 3, T_CWL = 2, T_RP = 2;
  localparam int unsigned NOPS  = 1500;

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

  task automatic random_ops(int n, int max_out);
    for (int k = 0; k < n; k++) begin
      int t, i, w;
      t = $urandom % 4; i = $urandom % 3; w = $urandom % (PAGE / 8);
      if ($urandom % 2)
        issue(1, mk_addr(t, i, w), {$urandom, $urandom}, 8'($urandom | 1), max_out);
      else
        issue(0, mk_addr(t, i, w), '0, 8'hFF, max_out);
    end
    drain();
  endtask

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("ERROR %s", what); end
  endtask

  initial begin
    int base_cmd, base_fua, base_max, base_rec;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    // ---- phase 1: extend mode ----
    random_ops(NOPS, 4);
    check(max_pending > 1, "extend mode never had more than one command pending");

    // ---- phase 2: persist mode ----
    persist  = 1;
    base_cmd = n_cmd; base_fua = n_fua;
    ull.max_pending = 0;
    random_ops(200, 4);
    check(ull.max_pending <= 1, $sformatf("persist mode had %0d commands pending", ull.max_pending));
    check(n_cmd > base_cmd, "persist mode sent no command");
    check(n_fua - base_fua == n_cmd - base_cmd, "persist command without FUA");
    persist = 0;

    // ---- phase 3: power failure with an evict and a fill in flight ----
    issue(0, mk_addr(5, 9, 0), '0, 8'hFF, 1); drain();         // page (5,9) present
    issue(1, mk_addr(5, 9, 3), 64'hDEAD_BEEF_0BAD_F00D, 8'hFF, 1); drain();  // dirty
    base_cmd = n_cmd;
    issue(0, mk_addr(6, 9, 0), '0, 8'hFF, 1);                  // miss: evict (5,9), fill (6,9)
    while (n_cmd < base_cmd + 2) @(posedge clk);
    while (lock) @(posedge clk);
    check(n_done == n_cmd - 2 || n_done < n_cmd, "commands already done before power failure");
    pfail = 1; rst_n = 0;
    out_addr.delete(); exp_rd.delete(); exp_data.delete();  // MMU state is lost too
    repeat (5) @(posedge clk);
    rst_n = 1; pfail = 0;
    @(posedge clk);
    base_rec = n_cmd;
    recover_start <= 1; @(posedge clk); recover_start <= 0;
    @(posedge clk);
    while (recover_busy) @(posedge clk);
    check(recovered == 2, $sformatf("recovery reissued %0d commands, expected 2", recovered));
    repeat (400) @(posedge clk);
    check(n_cmd == base_rec + 2, "reissued commands did not reach the ULL-Flash");
    check(ull.peek(mk_addr(5, 9, 3)) == 64'hDEAD_BEEF_0BAD_F00D, "evicted data lost across power failure");
    issue(0, mk_addr(5, 9, 3), '0, 8'hFF, 1); drain();        // comes back from flash

    // ---- phase 4: extend mode again and full read-back ----
    random_ops(400, 4);
    foreach (ref_mem[ad]) issue(0, ad, '0, 8'hFF, 4);
    drain();

    check(viol == 0, $sformatf("%0d bus accesses against the lock", viol));
    check(c_hit > 0, "no hit");           check(c_miss > 0, "no miss");
    check(c_evict > 0, "no dirty eviction"); check(c_park > 0, "no request parked on a busy frame");
    check(c_replay > 0, "no wait-queue replay"); check(c_limit > 0, "no outstanding-limit stall");
    check(c_grant > 0, "no lock hand-over"); check(n_ooo > 0, "no out-of-order completion");
    $display("mechanisms: hit=%0d miss=%0d evict=%0d park=%0d replay=%0d limit_stall=%0d lock=%0d ooo=%0d fua=%0d recovered=%0d",
             c_hit, c_miss, c_evict, c_park, c_replay, c_limit, c_grant, n_ooo, n_fua, recovered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("ERROR watchdog: manager in %s, engine in %s, %0d requests outstanding",
             dut.u_am.state.name(), dut.u_eng.state.name(), out_addr.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
