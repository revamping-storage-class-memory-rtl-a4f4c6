// nvdimm_model -- behavioural model of an NVDIMM-N rank on the DDR4 bus
// (not synthesizable; for simulation only).
//
// It decodes the commands HAMS puts on CS#/RAS#/CAS#/WE#/BA/A: ACT opens a
// row in a bank, RD returns a burst of 8 beats starting T_CL-1 cycles after
// the cycle it saw the command, WR takes 8 beats from T_CWL cycles after the
// command honouring the byte mask dm. Contents are kept in a sparse array of
// 64-byte lines and read as zero until written, so they survive a reset of
// HAMS (a power failure, as the NVDIMM's own backup would). A second,
// untimed line port serves the ULL-Flash model's page DMA while the lock is
// set. viol counts HAMS commands seen while the lock was set.
module nvdimm_model #(
  parameter int unsigned T_CL  = 15,
  parameter int unsigned T_CWL = 11
) (
  input  logic         clk,
  input  logic         cs_n,
  input  logic         ras_n,
  input  logic         cas_n,
  input  logic         we_n,
  input  logic [3:0]   ba,
  input  logic [15:0]  a,
  input  logic [63:0]  dq_w,
  input  logic [7:0]   dm,
  output logic [63:0]  dq_r,
  input  logic         lock,
  // DMA line port of the ULL-Flash model
  input  logic         dma_we,
  input  logic         dma_valid,
  input  logic [32:0]  dma_addr,
  input  logic [511:0] dma_wdata,
  output logic [511:0] dma_rdata,
  output int           viol,
  output int           n_act
);
  logic [511:0] mem [logic [26:0]];
  logic [15:0]  row [16];

  function automatic logic [511:0] rd_line(logic [26:0] l);
    return mem.exists(l) ? mem[l] : '0;
  endfunction

  assign dma_rdata = rd_line(dma_addr[32:6]);

  initial begin
    viol  = 0;
    n_act = 0;
    dq_r  = '0;
    foreach (row[i]) row[i] = '0;
  end

  always @(posedge clk) begin
    if (dma_valid && dma_we) mem[dma_addr[32:6]] = dma_wdata;
    if (dma_valid && !lock) viol++;
  end

  always @(posedge clk) begin
    if (!cs_n) begin
      if (lock) viol++;
      case ({ras_n, cas_n, we_n})
        3'b011: begin row[ba] = a; n_act++; end
        3'b101: begin
          automatic logic [26:0] l = {row[ba], ba, a[9:3]};
          automatic logic [511:0] d = rd_line(l);
          fork
            begin
              repeat (T_CL - 1) @(posedge clk);
              for (int k = 0; k < 8; k++) begin
                dq_r <= d[k*64 +: 64];
                @(posedge clk);
              end
            end
          join_none
        end
        3'b100: begin
          automatic logic [26:0] l = {row[ba], ba, a[9:3]};
          fork
            begin
              logic [511:0] d;
              repeat (T_CWL) @(posedge clk);
              d = rd_line(l);
              for (int k = 0; k < 8; k++) begin
                for (int b = 0; b < 8; b++)
                  if (!dm[b]) d[k*64 + b*8 +: 8] = dq_w[b*8 +: 8];
                if (k < 7) @(posedge clk);
              end
              mem[l] = d;
            end
          join_none
        end
        default: ;
      endcase
    end
  end
endmodule
