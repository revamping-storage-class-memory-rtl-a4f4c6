// tb_nvme_queue_engine -- the NVMe queue engine with fake neighbours.
//
// The testbench plays the SSD command generator (it writes the journaled
// SQ entry into a sparse NVDIMM line model and then pulses gen_done), the
// ULL-Flash (it completes outstanding commands in random order through
// irq_valid/irq_cid) and the memory controller (random ready/done delays).
// Checked:
//  * every accepted request is issued once, in the slot advertised by
//    next_slot, and the count of outstanding commands never passes MAX_OUT
//    in extend mode or 1 in persist mode; the limit is actually reached;
//  * every interrupt produces one completion report, in interrupt order,
//    carrying the frame and fill flag of that command;
//  * the journal tag of the command's SQ entry is 0 when it is reported;
//  * recovery: after a reset with commands still in flight, recover_start
//    re-issues exactly the journaled commands (same fill/frame/page), the
//    old copies of moved commands lose their journal tag, recovered counts
//    them, and their completions are reported afterwards.
module tb_nvme_queue_engine;
  import hams_pkg::*;
  localparam int unsigned SQ_DEPTH = 16, MAX_OUT = 4, PAGE_BYTES = 4096;

  logic clk = 0, rst_n = 0, persist = 0;
  logic io_valid = 0, io_ready, slot_free; io_req_t io = '0; logic [15:0] next_slot;
  logic gen_valid, gen_ready = 0, gen_done = 0; io_req_t gen_io; logic [15:0] gen_slot;
  logic irq_valid = 0; logic [15:0] irq_cid = 0;
  logic cpl_valid, cpl_fill; logic [31:0] cpl_frame;
  logic mem_valid, mem_ready = 0, mem_done = 0; mem_req_t mem_req; logic [511:0] mem_rdata = 0;
  logic recover_start = 0, recover_busy; logic [15:0] recovered;
  logic [$clog2(MAX_OUT+1)-1:0] outstanding; logic limit_stall;
  always #5 clk = ~clk;

  nvme_queue_engine #(.SQ_DEPTH(SQ_DEPTH), .MAX_OUT(MAX_OUT), .PAGE_BYTES(PAGE_BYTES)) dut (
    .clk, .rst_n, .persist, .io_valid, .io_ready, .io, .slot_free, .next_slot,
    .gen_valid, .gen_ready, .gen_io, .gen_slot, .gen_done, .irq_valid, .irq_cid,
    .cpl_valid, .cpl_frame, .cpl_fill, .mem_valid, .mem_ready, .mem_req, .mem_done,
    .mem_rdata, .recover_start, .recover_busy, .recovered, .outstanding, .limit_stall);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("ERROR %s (t=%0t)", msg, $time); end
  endtask

  // ---- NVDIMM line model --------------------------------------------------
  logic [511:0] mem [logic [32:0]];
  function automatic logic [511:0] rd(logic [32:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction
  initial forever begin
    mem_req_t r; logic [511:0] d;
    @(negedge clk);
    if (mem_valid) begin
      repeat ($urandom % 3) @(negedge clk);
      r = mem_req; mem_ready = 1;
      @(negedge clk); mem_ready = 0;
      repeat ($urandom % 4) @(negedge clk);
      d = rd(r.addr);
      if (r.we) begin
        for (int b = 0; b < 64; b++) if (r.wstrb[b]) d[b*8 +: 8] = r.wdata[b*8 +: 8];
        mem[r.addr] = d;
      end
      mem_rdata = d; mem_done = 1;
      @(negedge clk); mem_done = 0;
    end
  end

  // ---- fake command generator + ULL-Flash ----------------------------------
  io_req_t cmd_of [int];          // cid -> command in flight
  int pending [$];                // cids the SSD has not completed
  int expect_cpl [$];             // cids in interrupt order
  int issued = 0, max_out_seen = 0, stall_seen = 0;
  bit ssd_on = 1;
  logic [15:0] slot_at_accept;
  initial forever begin
    io_req_t g; logic [15:0] s; nvme_cmd_t c;
    @(negedge clk);
    if (gen_valid) begin
      g = gen_io; s = gen_slot; gen_ready = 1;
      @(negedge clk); gen_ready = 0;
      repeat ($urandom % 5) @(negedge clk);
      c = '0; c.opcode = g.fill ? NVME_OP_READ : NVME_OP_WRITE; c.cid = s;
      c.prp1 = 64'(g.nv_addr); c.slba = g.page; c.nlb = 0; c.fua = persist;
      c.journal = 1; c.frame = g.frame;
      mem[SQ_BASE + 33'(s) * 64] = nvme_pack(c);
      chk(!cmd_of.exists(s), "slot reused while busy");
      cmd_of[s] = g; issued++;
      gen_done = 1;
      @(negedge clk); gen_done = 0;
      pending.push_back(s);
    end
  end
  initial forever begin
    @(negedge clk);
    irq_valid = 0;
    if (ssd_on && pending.size() > 0 && $urandom % 6 == 0) begin
      int k; k = $urandom % pending.size();
      irq_cid = 16'(pending[k]); irq_valid = 1;
      expect_cpl.push_back(pending[k]);
      pending.delete(k);
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (outstanding > max_out_seen) max_out_seen = outstanding;
    if (limit_stall) stall_seen++;
    chk(outstanding <= (persist ? 1 : MAX_OUT), "outstanding over limit");
    if (cpl_valid) begin
      int c; io_req_t g;
      chk(expect_cpl.size() > 0, "completion without interrupt");
      if (expect_cpl.size() > 0) begin
        c = expect_cpl.pop_front();
        g = cmd_of[c];
        chk(cpl_frame == g.frame && cpl_fill == g.fill, "completion frame/fill");
        chk(rd(SQ_BASE + 33'(c) * 64)[64] == 1'b0, "journal tag cleared before report");
        cmd_of.delete(c);
      end
    end
  end

  // ---- requester -----------------------------------------------------------
  io_req_t sent [$];
  task automatic send(input io_req_t r);
    @(negedge clk); io = r; io_valid = 1; #1;
    while (!io_ready) begin @(negedge clk); #1; end
    slot_at_accept = next_slot;
    @(posedge clk); #1 io_valid = 0;
    sent.push_back(r);
  endtask
  function automatic io_req_t rnd_io();
    io_req_t r;
    r.fill = $urandom % 2; r.nv_addr = 33'($urandom) << 6; r.page = 64'($urandom);
    r.frame = $urandom;
    return r;
  endfunction
  task automatic drain();
    while (cmd_of.size() > 0 || expect_cpl.size() > 0) @(posedge clk);
    repeat (20) @(posedge clk);
  endtask

  initial begin
    io_req_t keep [int];
    int n_before;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // extend mode
    for (int i = 0; i < 300; i++) send(rnd_io());
    drain();
    chk(max_out_seen == MAX_OUT, "extend mode reaches MAX_OUT outstanding");
    chk(stall_seen > 0, "limit stall seen");
    chk(issued == 300, "every request issued once");
    // persist mode
    persist = 1; max_out_seen = 0;
    for (int i = 0; i < 60; i++) send(rnd_io());
    drain();
    chk(max_out_seen == 1, "persist mode keeps one command outstanding");
    persist = 0;
    // power failure with commands in flight
    ssd_on = 0;
    for (int i = 0; i < 3; i++) send(rnd_io());
    repeat (30) @(posedge clk);
    foreach (cmd_of[c]) keep[c] = cmd_of[c];
    chk(keep.size() == 3, "three commands in flight at power failure");
    @(negedge clk); rst_n = 0;
    cmd_of.delete(); pending.delete(); expect_cpl.delete();
    repeat (3) @(negedge clk); rst_n = 1;
    n_before = issued;
    @(negedge clk); recover_start = 1; @(negedge clk); recover_start = 0;
    #1;
    chk(recover_busy, "recovery running");
    while (recover_busy) @(posedge clk);
    chk(recovered == 3 && issued == n_before + 3, "recovered the three journaled commands");
    // re-issued commands are the journaled ones; moved old copies lost their tag
    begin
      int matched; matched = 0;
      foreach (keep[oc]) begin
        bit found; found = 0;
        foreach (cmd_of[nc]) if (cmd_of[nc] == '{keep[oc].fill, keep[oc].nv_addr, keep[oc].page, keep[oc].frame}) found = 1;
        if (found) matched++;
        if (!cmd_of.exists(oc)) chk(rd(SQ_BASE + 33'(oc) * 64)[64] == 1'b0, "old copy journal cleared");
      end
      chk(matched == 3, "re-issued commands match the journal");
    end
    ssd_on = 1;
    drain();
    chk(cmd_of.size() == 0 && outstanding == 0, "recovered commands completed");
    // normal operation continues after recovery
    for (int i = 0; i < 30; i++) send(rnd_io());
    drain();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
