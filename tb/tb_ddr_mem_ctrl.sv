// tb_ddr_mem_ctrl -- the memory controller against the behavioural NVDIMM.
//
// Random 64-byte line writes with random byte enables and line reads to
// random addresses are checked against a reference array. Every read must
// finish exactly T_RCD + T_CL + T_RP + 9 cycles after it was accepted
// (ACT, tRCD, RD, CL + 8-beat burst, PRE, tRP, done). ULL-Flash register
// writes are checked at the pins: a cycle with both chip selects high, then
// WR (RAS# high, CAS# low, WE# low) with the ULL-Flash selected and A = 0,
// then the 8 beats of the packet in the following cycles. The controller
// must not start while hold is high.
module tb_ddr_mem_ctrl;
  import hams_pkg::*;
  localparam int unsigned T_RCD = 15, T_CL = 15, T_CWL = 11, T_RP = 15;

  logic clk = 0, rst_n = 0, req_valid = 0, hold = 0;
  logic req_ready, done, idle;
  mem_req_t req = '0;
  logic [LINE_BITS-1:0] rdata;
  logic cs_n_nv, cs_n_ull, ras_n, cas_n, we_n, dq_oe;
  logic [3:0] ba; logic [15:0] a; logic [63:0] dq_out, dq_in; logic [7:0] dm;
  int viol, n_act;
  logic [511:0] dma_rdata;
  always #5 clk = ~clk;

  ddr_mem_ctrl #(.T_RCD(T_RCD), .T_CL(T_CL), .T_CWL(T_CWL), .T_RP(T_RP)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req, .done, .rdata, .hold, .idle,
    .cs_n_nv, .cs_n_ull, .ras_n, .cas_n, .we_n, .ba, .a, .dq_out, .dq_oe, .dm, .dq_in);

  nvdimm_model #(.T_CL(T_CL), .T_CWL(T_CWL)) nv (
    .clk, .cs_n(cs_n_nv), .ras_n, .cas_n, .we_n, .ba, .a, .dq_w(dq_out), .dm,
    .dq_r(dq_in), .lock(1'b0), .dma_we(1'b0), .dma_valid(1'b0), .dma_addr('0),
    .dma_wdata('0), .dma_rdata, .viol, .n_act);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;
  logic [511:0] ref_mem [logic [26:0]];

  // ULL-Flash pin monitor
  logic [511:0] ull_pkt; int ull_pkts = 0; logic prev_desel = 0;
  always @(posedge clk) begin
    if (!cs_n_ull && {ras_n, cas_n, we_n} == 3'b100) begin
      checks++;
      if (!prev_desel || !cs_n_nv || a != 0) begin
        failures++; $display("ERROR ULL write command framing");
      end
      fork begin
        for (int k = 0; k < 8; k++) begin
          @(posedge clk);
          if (!dq_oe) begin failures++; $display("ERROR ULL beat %0d without dq_oe", k); end
          ull_pkt[k*64 +: 64] = dq_out;
        end
        ull_pkts++;
      end join_none
    end
    prev_desel = cs_n_nv && cs_n_ull && {ras_n, cas_n, we_n} == 3'b111;
  end

  task automatic do_req(input mem_req_t r, output int lat);
    int t0;
    @(negedge clk);
    req = r; req_valid = 1;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(posedge clk); t0 = cyc;
    #1 req_valid = 0;
    while (!done) begin @(negedge clk); end
    lat = cyc - t0;
  endtask

  initial begin
    mem_req_t r;
    int lat;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 60; i++) begin
      logic [26:0] l;
      l = (i < 30) ? 27'($urandom) : 27'($urandom % 40);
      r = '0;
      r.addr = {l, 6'd0};
      if ($urandom % 2) begin
        logic [511:0] d;
        r.we = 1;
        for (int w = 0; w < 16; w++) r.wdata[w*32 +: 32] = $urandom;
        r.wstrb = {$urandom, $urandom};
        d = ref_mem.exists(l) ? ref_mem[l] : '0;
        for (int b = 0; b < 64; b++) if (r.wstrb[b]) d[b*8 +: 8] = r.wdata[b*8 +: 8];
        ref_mem[l] = d;
        do_req(r, lat);
      end else begin
        do_req(r, lat);
        checks += 2;
        if (rdata !== (ref_mem.exists(l) ? ref_mem[l] : '0)) begin
          failures++; $display("ERROR read line %h", l);
        end
        if (lat != int'(T_RCD + T_CL + T_RP + 9)) begin
          failures++; $display("ERROR read latency %0d", lat);
        end
      end
    end
    // ULL-Flash register write
    r = '0; r.we = 1; r.ull = 1; r.wstrb = '1;
    for (int w = 0; w < 16; w++) r.wdata[w*32 +: 32] = $urandom;
    do_req(r, lat);
    repeat (3) @(posedge clk);
    checks += 2;
    if (ull_pkts != 1 || ull_pkt !== r.wdata) begin failures++; $display("ERROR ULL packet"); end
    if (lat != 11) begin failures++; $display("ERROR ULL write took %0d cycles", lat); end
    // hold blocks a new request
    @(negedge clk); hold = 1; req = '0; req_valid = 1;
    repeat (10) begin @(negedge clk); checks++; if (req_ready || !idle) begin failures++; $display("ERROR started under hold"); end end
    hold = 0; #1;
    checks++; if (!req_ready) begin failures++; $display("ERROR not ready after hold"); end
    @(posedge clk); #1 req_valid = 0;
    while (!done) @(negedge clk);
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
