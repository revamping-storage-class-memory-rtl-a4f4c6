// ull_flash_model -- behavioural model of the ULL-Flash with the
// register-based DDR4 interface (not synthesizable; for simulation only).
//
// It captures a 64-byte NVMe command when its chip select is low with a
// write command and the following 8 data beats, keeps it pending for a
// random latency (LAT_MIN..LAT_MAX cycles), and then, picking any ready
// command so that completions come out of order, raises lock_req. When the
// lock is granted it copies the page line by line between its flash store
// and the NVDIMM (fill: flash -> NVDIMM at PRP1, evict: NVDIMM at PRP1 ->
// flash), releases the lock through lock_release, and one cycle later
// raises irq with the command id. Flash pages never written read as
// tb_hams_pkg::flash_word. pfail drops every command not yet completed.
module ull_flash_model
  import tb_hams_pkg::*;
#(
  parameter int unsigned PAGE_BYTES = 4096,
  parameter int unsigned LAT_MIN    = 20,
  parameter int unsigned LAT_MAX    = 60
) (
  input  logic         clk,
  input  logic         pfail,
  input  logic         cs_n,
  input  logic         ras_n,
  input  logic         cas_n,
  input  logic         we_n,
  input  logic [63:0]  dq_w,
  input  logic         lock,
  output logic         lock_req,
  output logic         lock_release,
  output logic         irq,
  output logic [15:0]  irq_cid,
  output logic         dma_valid,
  output logic         dma_we,
  output logic [32:0]  dma_addr,
  output logic [511:0] dma_wdata,
  input  logic [511:0] dma_rdata,
  output int           n_cmd,
  output int           n_fua,
  output int           n_done,
  output int           max_pending,
  output int           n_ooo
);
  localparam int unsigned LINES = PAGE_BYTES / 64;
  localparam int unsigned LBAS  = (PAGE_BYTES >= 4096) ? PAGE_BYTES / 4096 : 1;

  typedef struct {
    logic [7:0]  opcode;
    logic [15:0] cid;
    logic [63:0] prp;
    logic [63:0] page;
    int          ready_at;
    int          seq;
  } cmd_t;

  cmd_t pend[$];
  logic [511:0] flash [logic [63:0]];   // key: page * LINES + line
  int cyc, seq_no, last_done_seq;

  function automatic logic [511:0] flash_line(logic [63:0] page, int l);
    logic [63:0] key;
    logic [511:0] d;
    key = page * LINES + 64'(l);
    if (flash.exists(key)) return flash[key];
    for (int w = 0; w < 8; w++)
      d[w*64 +: 64] = flash_word(page * PAGE_BYTES + 64'(l * 64 + w * 8));
    return d;
  endfunction

  // Backdoor read of one 8-byte word, for end-of-test checks.
  function automatic logic [63:0] peek(logic [63:0] byte_addr);
    logic [511:0] d;
    d = flash_line(byte_addr / PAGE_BYTES, int'((byte_addr % PAGE_BYTES) / 64));
    return d[((byte_addr % 64) / 8) * 64 +: 64];
  endfunction

  initial begin
    lock_req = 0; lock_release = 0; irq = 0; irq_cid = 0;
    dma_valid = 0; dma_we = 0; dma_addr = 0; dma_wdata = 0;
    n_cmd = 0; n_fua = 0; n_done = 0; max_pending = 0; n_ooo = 0;
    cyc = 0; seq_no = 0; last_done_seq = -1;
  end

  always @(posedge clk) cyc++;

  // Command capture.
  always @(posedge clk) begin
    if (!cs_n && {ras_n, cas_n, we_n} == 3'b100) begin
      fork
        begin
          logic [511:0] e;
          cmd_t c;
          for (int k = 0; k < 8; k++) begin
            @(posedge clk);
            e[k*64 +: 64] = dq_w;
          end
          c.opcode   = e[7:0];
          c.cid      = e[31:16];
          c.prp      = e[32*6 +: 64];
          c.page     = e[32*10 +: 64] / LBAS;
          c.ready_at = cyc + int'(LAT_MIN + ($urandom % (LAT_MAX - LAT_MIN + 1)));
          c.seq      = seq_no;
          seq_no     = seq_no + 1;
          if (e[32*12 + 30]) n_fua = n_fua + 1;
          if (!pfail) begin
            pend.push_back(c);
            n_cmd++;
            if (pend.size() > max_pending) max_pending = pend.size();
          end
        end
      join_none
    end
  end

  // Service loop.
  initial begin
    forever begin
      @(posedge clk);
      if (pfail) begin
        pend.delete();
        lock_req <= 0;
        continue;
      end
      begin
        int pick;
        pick = -1;
        foreach (pend[i])
          if (pend[i].ready_at <= cyc && (pick < 0 || ($urandom % 2) == 1)) pick = i;
        if (pick >= 0) begin
          cmd_t c;
          c = pend[pick];
          lock_req <= 1;
          do @(posedge clk); while (!lock && !pfail);
          if (pfail) begin lock_req <= 0; continue; end
          for (int l = 0; l < LINES; l++) begin
            dma_valid <= 1;
            dma_addr  <= 33'(c.prp + 64'(l * 64));
            if (c.opcode == 8'h02) begin
              dma_we    <= 1;
              dma_wdata <= flash_line(c.page, l);
            end else begin
              dma_we    <= 0;
            end
            @(posedge clk);
            if (c.opcode != 8'h02) flash[c.page * LINES + 64'(l)] = dma_rdata;
          end
          dma_valid    <= 0;
          dma_we       <= 0;
          lock_req     <= 0;
          lock_release <= 1;
          @(posedge clk);
          lock_release <= 0;
          irq          <= 1;
          irq_cid      <= c.cid;
          foreach (pend[i]) if (pend[i].seq == c.seq) begin pend.delete(i); break; end
          if (c.seq < last_done_seq) n_ooo++;
          if (c.seq > last_done_seq) last_done_seq = c.seq;
          n_done++;
          @(posedge clk);
          irq <= 0;
        end
      end
    end
  end
endmodule
