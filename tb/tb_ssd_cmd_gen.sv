// tb_ssd_cmd_gen -- the SSD command generator against a fake memory port.
//
// For random evict/fill requests, slots and persist settings the testbench
// checks, with byte offsets written out independently of the RTL packing
// function, that the generator first writes one 64-byte NVMe command to
// SQ_BASE + slot*64 in the NVDIMM (opcode, cid, NSID, journal tag, frame,
// PRP1, SLBA, NLB, FUA), then sends the same 64 bytes to the ULL-Flash
// register interface, and only then raises cmd_done for one cycle. The fake
// memory port adds a random delay before ready and before done.
module tb_ssd_cmd_gen;
  import hams_pkg::*;
  localparam int unsigned PAGE_BYTES = 4096;
  localparam int unsigned LBAS = PAGE_BYTES / LBA_BYTES;

  logic clk = 0, rst_n = 0, cmd_valid = 0, persist = 0;
  logic cmd_ready, cmd_done, mem_valid, mem_ready = 0, mem_done = 0;
  io_req_t io = '0; logic [15:0] slot = '0;
  mem_req_t mem_req;
  always #5 clk = ~clk;

  ssd_cmd_gen #(.PAGE_BYTES(PAGE_BYTES)) dut (.clk, .rst_n, .cmd_valid, .cmd_ready,
    .io, .slot, .persist, .cmd_done, .mem_valid, .mem_ready, .mem_req, .mem_done);

  int checks = 0, failures = 0;
  mem_req_t seen [$];
  int done_pulses = 0;

  // fake memory: random delays, records each accepted request
  initial begin
    forever begin
      @(negedge clk);
      if (mem_valid) begin
        repeat ($urandom % 4) @(negedge clk);
        mem_ready = 1;
        seen.push_back(mem_req);
        @(negedge clk); mem_ready = 0;
        repeat ($urandom % 6) @(negedge clk);
        mem_done = 1;
        @(negedge clk); mem_done = 0;
      end
    end
  end
  always @(posedge clk) if (cmd_done) done_pulses++;

  function automatic logic [7:0] byte_at(logic [511:0] e, int b);
    return e[b*8 +: 8];
  endfunction

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("ERROR %s", msg); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      logic [511:0] e; logic [63:0] slba; int d0;
      io.fill = $urandom % 2;
      io.nv_addr = {$urandom, 1'b0} & 33'h1_FFFF_F000;
      io.page = {32'($urandom % 4), 32'($urandom)};
      io.frame = $urandom;
      slot = 16'($urandom % 512);
      persist = $urandom % 2;
      seen.delete();
      d0 = done_pulses;
      @(negedge clk); cmd_valid = 1; #1;
      while (!cmd_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1 cmd_valid = 0; io = 'x; slot = 'x; persist = 'x;
      while (done_pulses == d0) @(posedge clk);
      chk(seen.size() == 2, "expected exactly two memory writes before cmd_done");
      if (seen.size() != 2) continue;
      e = seen[0].wdata;
      chk(seen[0].we && !seen[0].ull && seen[0].addr == SQ_BASE + 33'(slot_q(i)) * 64 && seen[0].wstrb == '1,
          "SQ write address/strobe");
      chk(seen[1].we && seen[1].ull && seen[1].wdata == e, "ULL register write carries the entry");
      chk(byte_at(e, 0) == (fill_q(i) ? 8'h02 : 8'h01), "opcode");
      chk({byte_at(e, 3), byte_at(e, 2)} == slot_q(i), "cid");
      chk({byte_at(e, 7), byte_at(e, 6), byte_at(e, 5), byte_at(e, 4)} == 32'd1, "nsid");
      chk(byte_at(e, 8) == 8'h01, "journal tag set");
      chk({byte_at(e, 15), byte_at(e, 14), byte_at(e, 13), byte_at(e, 12)} == frame_q(i), "frame");
      chk(e[24*8 +: 64] == 64'(nv_q(i)), "prp1");
      slba = page_q(i) * LBAS;
      chk(e[40*8 +: 64] == slba, "slba");
      chk({byte_at(e, 49), byte_at(e, 48)} == 16'(LBAS - 1), "nlb");
      chk(e[51*8 + 6] == pers_q(i), "fua follows persist mode");
      @(posedge clk);
      chk(done_pulses == d0 + 1, "cmd_done is one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // remember what was sent for iteration i (inputs are X'd after accept)
  logic [15:0] s_slot [int]; logic s_fill [int]; logic [31:0] s_frame [int];
  logic [32:0] s_nv [int]; logic [63:0] s_page [int]; logic s_pers [int];
  int it = 0;
  always @(posedge clk) if (cmd_valid && cmd_ready) begin
    s_slot[it] = slot; s_fill[it] = io.fill; s_frame[it] = io.frame;
    s_nv[it] = io.nv_addr; s_page[it] = io.page; s_pers[it] = persist; it++;
  end
  function automatic logic [15:0] slot_q(int i); return s_slot[i]; endfunction
  function automatic logic fill_q(int i); return s_fill[i]; endfunction
  function automatic logic [31:0] frame_q(int i); return s_frame[i]; endfunction
  function automatic logic [32:0] nv_q(int i); return s_nv[i]; endfunction
  function automatic logic [63:0] page_q(int i); return s_page[i]; endfunction
  function automatic logic pers_q(int i); return s_pers[i]; endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
