// lock_register -- ownership flag of the DDR4 bus shared by HAMS, the NVDIMM
// and the ULL-Flash (advanced HAMS).
//
// The bus has two possible masters. While the lock is 0, HAMS (its memory
// controller) is master and drives CS#, RAS#/CAS#/WE#, A and D. When the
// ULL-Flash has a page to move between its NAND and the NVDIMM it raises
// ull_req. HAMS sets the lock to 1 once its memory controller is idle
// (bus_idle); from the next cycle on the NVMe controller of the ULL-Flash is
// master and the NVDIMM its slave, and HAMS keeps its own pins quiet. After
// the DMA the NVMe controller clears the lock through its lock pin
// (ull_release), handing the bus back.
//
// Follows the paper: lock set by HAMS, cleared by the NVMe controller, the
// owner decides who is master (X = HAMS, U = ULL-Flash). Own choices: the
// ULL-Flash asks for the lock with a request pin (the paper only says HAMS
// sets it "after a given number of cycles"), the lock resets to 0, and a
// release has priority over a new grant in the same cycle.
//
// Timing: grant one cycle after ull_req && bus_idle; release one cycle after
// ull_release.
module lock_register (
  input  logic clk,
  input  logic rst_n,
  input  logic ull_req,      // ULL-Flash wants the bus
  input  logic bus_idle,     // HAMS memory controller has no burst in flight
  input  logic ull_release,  // lock pin: NVMe controller gives the bus back
  output logic lock,         // 1 = ULL-Flash is bus master
  output logic grant_pulse   // one-cycle pulse when the lock is set
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         lock <= 1'b0;
    else if (lock && ull_release)       lock <= 1'b0;
    else if (!lock && ull_req && bus_idle) lock <= 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) grant_pulse <= 1'b0;
    else        grant_pulse <= !lock && ull_req && bus_idle;
  end

  // The NVMe controller may only release a lock it holds.
  a_release_when_locked: assert property (@(posedge clk) disable iff (!rst_n)
    ull_release |-> lock);
endmodule
