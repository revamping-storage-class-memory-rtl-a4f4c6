// wait_queue -- FIFO that parks requests the cache logic cannot serve yet.
//
// When an MMU request maps to a cache frame whose busy bit is set (a fill or
// eviction of that frame is still in flight), the address manager pushes the
// request here instead of starting a second, redundant eviction. When a fill
// completes and clears a busy bit, the address manager pops the parked
// requests again and re-looks each one up; those still blocked are pushed
// back. The same FIFO is also used, with a narrower WIDTH, to buffer
// completion notices.
//
// Follows the paper: a wait queue for requests that meet a busy frame,
// replayed after the busy bit clears. Own choices: it sits in on-chip
// registers rather than in the pinned NVDIMM region, DEPTH entries, first in
// first out.
//
// Timing: push and pop take effect at the clock edge; head is the oldest
// entry, valid while !empty. A push and a pop in the same cycle are allowed,
// also when the queue is full.
module wait_queue #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] head,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;

  assign empty = (count == 0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign head  = mem[rd_ptr];

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  logic do_push, do_pop;
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= inc(wr_ptr);
      if (do_pop)  rd_ptr <= inc(rd_ptr);
      if (do_push && !do_pop)      count <= count + 1'b1;
      else if (do_pop && !do_push) count <= count - 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> !empty);
endmodule
