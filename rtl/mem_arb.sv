// mem_arb -- round-robin arbiter for the memory controller's line port.
//
// Three clients share the single memory controller of HAMS: the address
// manager (cache lines and metadata), the NVMe queue engine (SQ updates and
// the recovery scan) and the SSD command generator (SQ entries and ULL-Flash
// register writes). A client holds valid until ready; the arbiter grants one
// client, forwards its request, and routes the done pulse and read data back
// to it. The next grant starts after that done, in round-robin order from
// the last winner. This block is glue of this design; the paper names only
// the memory controller.
module mem_arb
  import hams_pkg::*;
#(
  parameter int unsigned N = 3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         c_valid,
  output logic [N-1:0]         c_ready,
  input  mem_req_t             c_req [N],
  output logic [N-1:0]         c_done,
  output logic                 m_valid,
  input  logic                 m_ready,
  output mem_req_t             m_req,
  input  logic                 m_done
);
  localparam int unsigned GW = (N > 1) ? $clog2(N) : 1;
  logic [GW-1:0] last, sel, owner;
  logic          busy, found;

  always_comb begin
    sel   = last;
    found = 1'b0;
    for (int unsigned i = 1; i <= N; i++) begin
      logic [GW-1:0] c;
      c = GW'((32'(last) + i) % N);
      if (!found && c_valid[c]) begin
        sel   = c;
        found = 1'b1;
      end
    end
  end

  assign m_valid = !busy && found;
  assign m_req   = c_req[sel];

  always_comb begin
    c_ready = '0;
    c_done  = '0;
    if (!busy && found && m_ready) c_ready[sel] = 1'b1;
    if (busy && m_done)            c_done[owner] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      last  <= GW'(N - 1);
      owner <= '0;
    end else if (!busy) begin
      if (found && m_ready) begin
        busy  <= 1'b1;
        owner <= sel;
        last  <= sel;
      end
    end else if (m_done) begin
      busy <= 1'b0;
    end
  end
endmodule
