// tb_hams_addr_manager -- the address manager with a fake NVMe engine.
//
// The testbench surrounds the address manager with a sparse NVDIMM line
// model (random ready/done delays) and a fake NVMe engine with a flash page
// store: an evict command copies the PRP-pool page it points at into the
// flash store when it is accepted; a fill command copies the flash page into
// the cache frame after a random delay and then reports a completion; evict
// completions are reported too. Untouched flash words hold
// tb_hams_pkg::flash_word(address).
// A random mix of 8-byte reads and masked writes (several in flight with
// different ids, never two on the same word) goes to 4 tags x 8 frames, so
// hits, misses, dirty evictions, parking on busy frames and replays all
// occur. Checked: each read returns the reference value, every request is
// answered exactly once, no frame has two fills in flight (no redundant
// eviction), no page is fetched while its evict is in flight, each evict
// carries the victim page's current data (words with a write still in
// flight are skipped there), and every event output fires at least once.
// A final read-back checks all words that were written.
module tb_hams_addr_manager;
  import hams_pkg::*;
  import tb_hams_pkg::*;
  localparam int unsigned PAGE = 256, IDXB = 8, WQD = 4, CPLD = 8;
  localparam int unsigned LINES = PAGE / 64;

  logic clk = 0, rst_n = 0;
  logic mmu_valid = 0, mmu_ready; mmu_req_t mmu_req = '0;
  logic rsp_valid; logic [ID_W-1:0] rsp_id; logic [63:0] rsp_rdata;
  logic mem_valid, mem_ready = 0, mem_done = 0; mem_req_t mem_req; logic [511:0] mem_rdata = 0;
  logic io_valid, io_ready = 0, slot_free = 0; io_req_t io; logic [15:0] next_slot = 0;
  logic cpl_valid = 0, cpl_fill = 0; logic [31:0] cpl_frame = 0;
  logic ev_hit, ev_miss, ev_park, ev_evict, ev_replay;
  always #5 clk = ~clk;

  hams_addr_manager #(.PAGE_BYTES(PAGE), .INDEX_BITS(IDXB), .WQ_DEPTH(WQD), .CPLQ_DEPTH(CPLD)) dut (
    .clk, .rst_n, .mmu_valid, .mmu_ready, .mmu_req, .rsp_valid, .rsp_id, .rsp_rdata,
    .mem_valid, .mem_ready, .mem_req, .mem_done, .mem_rdata,
    .io_valid, .io_ready, .io, .slot_free, .next_slot, .cpl_valid, .cpl_frame, .cpl_fill,
    .ev_hit, .ev_miss, .ev_park, .ev_evict, .ev_replay);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("ERROR %s (t=%0t)", msg, $time); end
  endtask

  // ---- NVDIMM -------------------------------------------------------------
  logic [511:0] nv [logic [32:0]];
  function automatic logic [511:0] nrd(logic [32:0] a);
    return nv.exists(a) ? nv[a] : '0;
  endfunction
  initial forever begin
    mem_req_t r; logic [511:0] d;
    @(negedge clk);
    if (mem_valid) begin
      repeat ($urandom % 3) @(negedge clk);
      r = mem_req; mem_ready = 1;
      @(negedge clk); mem_ready = 0;
      repeat ($urandom % 4) @(negedge clk);
      d = nrd(r.addr);
      if (r.we) begin
        for (int b = 0; b < 64; b++) if (r.wstrb[b]) d[b*8 +: 8] = r.wdata[b*8 +: 8];
        nv[r.addr] = d;
      end
      mem_rdata = d; mem_done = 1;
      @(negedge clk); mem_done = 0;
    end
  end

  // ---- reference of the MoS space -----------------------------------------
  logic [63:0] ref_w [logic [63:0]];
  function automatic logic [63:0] ref_rd(logic [63:0] a);
    return ref_w.exists(a) ? ref_w[a] : flash_word(a);
  endfunction

  // ---- flash page store + fake NVMe engine ----------------------------------
  logic [511:0] fl [logic [63:0]];      // key: page*LINES + line
  function automatic logic [511:0] frd(logic [63:0] page, int l);
    logic [511:0] d;
    if (fl.exists(page * LINES + l)) return fl[page * LINES + l];
    for (int w = 0; w < 8; w++) d[w*64 +: 64] = flash_word(page * PAGE + l * 64 + w * 8);
    return d;
  endfunction
  bit fill_busy [int];
  bit evict_pending [logic [63:0]];   // pages whose write-back is in flight
  int n_fill_io = 0, n_evict_io = 0;
  always @(negedge clk) slot_free = ($urandom % 4) != 0;
  initial forever begin
    io_req_t r;
    @(negedge clk);
    if (io_valid && ($urandom % 3 == 0)) begin
      r = io; io_ready = 1;
      next_slot = (next_slot + 1) % 8;
      @(negedge clk); io_ready = 0;
      if (!r.fill) begin
        n_evict_io++;
        for (int l = 0; l < LINES; l++) begin
          logic [511:0] d; d = nrd(r.nv_addr + l * 64);
          for (int w = 0; w < 8; w++)
            if (!write_pending(r.page * PAGE + l * 64 + w * 8)) chk(d[w*64 +: 64] == ref_rd(r.page * PAGE + l * 64 + w * 8), "evicted data is current");
          fl[r.page * LINES + l] = d;
        end
        evict_pending[r.page] = 1;
        fork begin
          automatic logic [31:0] f = r.frame;
          automatic logic [63:0] pg = r.page;
          repeat (20 + $urandom % 200) @(negedge clk);
          evict_pending.delete(pg);
          do_cpl(f, 0);
        end join_none
      end else begin
        n_fill_io++;
        chk(!fill_busy.exists(r.frame), "one fill per frame in flight");
        chk(!evict_pending.exists(r.page), "no fill of a page whose evict is in flight");
        fill_busy[r.frame] = 1;
        fork begin
          automatic io_req_t fr = r;
          repeat (10 + $urandom % 60) @(negedge clk);
          for (int l = 0; l < LINES; l++) nv[fr.nv_addr + l * 64] = frd(fr.page, l);
          fill_busy.delete(fr.frame);
          do_cpl(fr.frame, 1);
        end join_none
      end
    end
  end
  semaphore cpl_sem = new(1);
  task automatic do_cpl(input logic [31:0] f, input logic fill);
    cpl_sem.get(1);
    cpl_frame = f; cpl_fill = fill; cpl_valid = 1;
    @(negedge clk); cpl_valid = 0;
    cpl_sem.put(1);
  endtask

  // ---- event counters --------------------------------------------------------
  int n_hit = 0, n_miss = 0, n_park = 0, n_evict = 0, n_replay = 0;
  always @(posedge clk) begin
    n_hit += ev_hit; n_miss += ev_miss; n_park += ev_park;
    n_evict += ev_evict; n_replay += ev_replay;
  end

  // ---- requester / checker -----------------------------------------------------
  logic [63:0] out_addr [int];     // id -> address of the outstanding request
  logic        out_we   [int];
  logic [63:0] out_exp  [int];
  int answered = 0, sent = 0;
  always @(posedge clk) if (rsp_valid) begin
    chk(out_addr.exists(rsp_id), "response for an outstanding id");
    if (out_addr.exists(rsp_id)) begin
      if (!out_we[rsp_id]) chk(rsp_rdata == out_exp[rsp_id], $sformatf("read data @%h", out_addr[rsp_id]));
      out_addr.delete(rsp_id);
    end
    answered++;
  end

  function automatic logic [63:0] rnd_addr();
    return {48'($urandom % 4), 5'd0, 3'($urandom % 8), 8'(($urandom % 32) * 8)};
  endfunction
  function automatic bit addr_busy(logic [63:0] a);
    foreach (out_addr[i]) if (out_addr[i] == a) return 1;
    return 0;
  endfunction

  // a write still in flight may legally land after the eviction
  function automatic bit write_pending(logic [63:0] a);
    foreach (out_addr[i]) if (out_addr[i] == a && out_we[i]) return 1;
    return 0;
  endfunction

  task automatic issue(input logic [63:0] a, input bit we, input int id);
    mmu_req_t r;
    r.id = ID_W'(id); r.we = we; r.addr = a; r.wdata = {$urandom, $urandom};
    r.wstrb = we ? 8'($urandom) : 8'h00;
    if (we) begin
      logic [63:0] d; d = ref_rd(a);
      for (int b = 0; b < 8; b++) if (r.wstrb[b]) d[b*8 +: 8] = r.wdata[b*8 +: 8];
      ref_w[a] = d;
    end
    out_addr[id] = a; out_we[id] = we; out_exp[id] = ref_rd(a);
    @(negedge clk); mmu_req = r; mmu_valid = 1; #1;
    while (!mmu_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 mmu_valid = 0;
    sent++;
  endtask

  initial begin
    int id;
    repeat (3) @(posedge clk);
    rst_n = 1;
    id = 0;
    for (int i = 0; i < 1500; i++) begin
      logic [63:0] a;
      do a = rnd_addr(); while (addr_busy(a));
      while (out_addr.exists(id) || out_addr.size() >= 6) @(posedge clk);
      issue(a, $urandom % 3 == 0, id);
      id = (id + 1) % 16;
    end
    while (out_addr.size() > 0) @(posedge clk);
    // read back every written word
    foreach (ref_w[a]) begin
      while (out_addr.exists(id) || out_addr.size() >= 6) @(posedge clk);
      issue(a, 0, id);
      id = (id + 1) % 16;
    end
    while (out_addr.size() > 0) @(posedge clk);
    chk(answered == sent, "every request answered once");
    chk(n_hit > 0 && n_miss > 0 && n_park > 0 && n_evict > 0 && n_replay > 0, "all events seen");
    chk(n_evict == n_evict_io && n_fill_io > 0, "event counts match NVMe traffic");
    $display("hit=%0d miss=%0d park=%0d evict=%0d replay=%0d fills=%0d", n_hit, n_miss, n_park, n_evict, n_replay, n_fill_io);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("ERROR watchdog: sent=%0d answered=%0d manager in %s", sent, answered, dut.state.name());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
