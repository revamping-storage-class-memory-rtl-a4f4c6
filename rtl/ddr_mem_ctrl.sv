// ddr_mem_ctrl -- the HAMS memory controller on the shared DDR4 bus.
//
// It accepts one 64-byte line request at a time (valid/ready) and plays it
// on the DDR4 pins. For the NVDIMM it uses a closed-page sequence: ACT with
// row and bank, T_RCD later a RD or WR with the column, a burst of 8 beats of
// D[63:0] (read data T_CL cycles after RD, write data T_CWL cycles after WR,
// byte mask dm for partial writes), then PRE and T_RP cycles of precharge.
// For a register write to the ULL-Flash (req.ull) it follows the paper's
// register-based interface: one cycle with the NVDIMM deselected (CS# high),
// then a write command (WE# low, CAS# low, RAS# high) with the ULL-Flash
// selected, then the 64 B packet in an 8-cycle burst; A[15:0] carry nothing.
// The controller starts no request while hold is high (the lock register is
// set or about to be), so it never drives the bus while the ULL-Flash does.
// done pulses once per request, with rdata valid for a read.
//
// Follows the paper: the write-command encoding and the 8-beat transfer of a
// 64 B command to the ULL-Flash, D[63:0] and A[15:0], lock-based exclusion.
// Own choices: the closed-page policy, the address split (column = addr[12:3],
// bank = addr[16:13], row = addr[32:17]), separate in/out data pins instead
// of a tristate bus, and DDR4-2133-like default timings.
//
// Pin timing: every pin is decoded from registered state. A command is on the
// pins for one cycle; write beat k is on dq_out T_CWL+k cycles after the
// cycle of the WR command, read beat k is expected on dq_in T_CL+k cycles
// after the RD command's cycle.
module ddr_mem_ctrl
  import hams_pkg::*;
#(
  parameter int unsigned T_RCD = 15,
  parameter int unsigned T_CL  = 15,
  parameter int unsigned T_CWL = 11,
  parameter int unsigned T_RP  = 15
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // line request
  input  logic                 req_valid,
  output logic                 req_ready,
  input  mem_req_t             req,
  output logic                 done,
  output logic [LINE_BITS-1:0] rdata,
  input  logic                 hold,     // bus handed (or being handed) to ULL-Flash
  output logic                 idle,
  // DDR4 pins
  output logic                 cs_n_nv,  // NVDIMM chip select
  output logic                 cs_n_ull, // ULL-Flash chip select
  output logic                 ras_n,
  output logic                 cas_n,
  output logic                 we_n,
  output logic [3:0]           ba,
  output logic [15:0]          a,
  output logic [DQ_W-1:0]      dq_out,
  output logic                 dq_oe,
  output logic [7:0]           dm,       // 1 = byte not written
  input  logic [DQ_W-1:0]      dq_in
);
  typedef enum logic [3:0] {
    S_IDLE, S_ACT, S_TRCD, S_CMD, S_RD, S_WR, S_PRE, S_TRP,
    S_U_DESEL, S_U_CMD, S_U_DATA, S_DONE
  } state_e;

  state_e   state;
  mem_req_t cur;
  logic [7:0] cnt;

  assign idle      = (state == S_IDLE);
  assign req_ready = (state == S_IDLE) && !hold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      cur   <= '0;
      rdata <= '0;
    end else begin
      case (state)
        S_IDLE: if (req_valid && req_ready) begin
          cur   <= req;
          cnt   <= '0;
          state <= req.ull ? S_U_DESEL : S_ACT;
        end
        S_ACT:  begin cnt <= '0; state <= (T_RCD > 1) ? S_TRCD : S_CMD; end
        S_TRCD: begin
          cnt <= cnt + 1'b1;
          if (cnt == 8'(T_RCD - 2)) state <= S_CMD;
        end
        S_CMD:  begin cnt <= '0; state <= cur.we ? S_WR : S_RD; end
        S_RD: begin
          cnt <= cnt + 1'b1;
          if (cnt >= 8'(T_CL - 1) && cnt < 8'(T_CL + 7))
            rdata[(cnt - 8'(T_CL - 1)) * DQ_W +: DQ_W] <= dq_in;
          if (cnt == 8'(T_CL + 6)) state <= S_PRE;
        end
        S_WR: begin
          cnt <= cnt + 1'b1;
          if (cnt == 8'(T_CWL + 6)) state <= S_PRE;
        end
        S_PRE: begin cnt <= '0; state <= (T_RP > 1) ? S_TRP : S_DONE; end
        S_TRP: begin
          cnt <= cnt + 1'b1;
          if (cnt == 8'(T_RP - 2)) state <= S_DONE;
        end
        S_U_DESEL: state <= S_U_CMD;
        S_U_CMD:   begin cnt <= '0; state <= S_U_DATA; end
        S_U_DATA: begin
          cnt <= cnt + 1'b1;
          if (cnt == 8'd7) state <= S_DONE;
        end
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign done = (state == S_DONE);

  // Pin decode.
  logic [2:0] beat;
  logic       wr_beat;
  always_comb begin
    cs_n_nv  = 1'b1;
    cs_n_ull = 1'b1;
    {ras_n, cas_n, we_n} = DDR_NOP;
    ba       = cur.addr[16:13];
    a        = '0;
    dq_oe    = 1'b0;
    beat     = '0;
    wr_beat  = 1'b0;
    case (state)
      S_ACT: begin
        cs_n_nv = 1'b0; {ras_n, cas_n, we_n} = DDR_ACT; a = cur.addr[32:17];
      end
      S_CMD: begin
        cs_n_nv = 1'b0;
        {ras_n, cas_n, we_n} = cur.we ? DDR_WR : DDR_RD;
        a = {6'd0, cur.addr[12:3]};
      end
      S_WR: begin
        wr_beat = (cnt >= 8'(T_CWL - 1)) && (cnt < 8'(T_CWL + 7));
        beat    = 3'(cnt - 8'(T_CWL - 1));
      end
      S_PRE: begin
        cs_n_nv = 1'b0; {ras_n, cas_n, we_n} = DDR_PRE;
      end
      S_U_CMD: begin
        cs_n_ull = 1'b0; {ras_n, cas_n, we_n} = DDR_WR;
      end
      S_U_DATA: begin
        wr_beat = 1'b1;
        beat    = cnt[2:0];
      end
      default: ;
    endcase
    dq_oe  = wr_beat;
    dq_out = wr_beat ? cur.wdata[beat * DQ_W +: DQ_W] : '0;
    dm     = wr_beat ? ~cur.wstrb[beat * 8 +: 8] : 8'hFF;
  end

  a_no_start_under_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && hold) |=> (state == S_IDLE));
endmodule
