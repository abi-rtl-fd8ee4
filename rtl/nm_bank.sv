// nm_bank: one memory sub-bank (a slice of the VRF, the L1 or the L2 cache)
// whose read feeds the bank's compute engine.
//
// A DEPTH x DWID array with one write port and one read port.  The read is
// pipelined over RD_LAT clock edges: the address is registered on the edge the
// read is requested, and the word appears RD_LAT edges later and stays until the
// next read completes.  The latency models where the bank sits: 1 cycle next to
// the register file, more for L1 and L2, chosen so that a fused operation takes
// 2 cycles near the register file and 4 to 10 near the caches, the figures the
// paper gives.  Bank depths follow the memory sizes of the GPU the paper builds
// on (256 KB VRF and 128 KB L1 per CU, 4 MB L2) split over 16 sub-banks of 16-bit
// words; the paper does not give the sub-bank organisation.
// The paper notes the bitcell can be SRAM, flip-flops or a non-volatile memory;
// here it is an array that synthesis maps to memory.
module nm_bank #(
  parameter int unsigned DEPTH  = 8192,
  parameter int unsigned DWID   = 16,
  parameter int unsigned RD_LAT = 1
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [DWID-1:0]          wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [DWID-1:0]          rdata
);

  logic [DWID-1:0] mem [DEPTH];
  logic [DWID-1:0] pipe [RD_LAT];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  // first stage: the array read; further stages: delay
  always_ff @(posedge clk) begin
    if (re) pipe[0] <= mem[raddr];
    for (int i = 1; i < RD_LAT; i++) pipe[i] <= pipe[i-1];
  end

  assign rdata = pipe[RD_LAT-1];

endmodule
