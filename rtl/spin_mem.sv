// spin_mem: the global solution, one bit per spin, with parallel read ports.
//
// The memory is DEPTH x 1 bit and is replicated into NRD independent banks.
// All banks take the same write, so every bank holds the full solution and
// each bank serves one read port: NRD random reads per cycle with a fixed
// one-cycle latency. A read port with re low keeps its last output, which
// lets a stalled pipeline hold the data it already read. In the decomposer
// ports 0..P-1 serve the P clamping lanes, port P the spin of the row being
// summed and port P+1 the host read-back of the solution.
// The paper asks for an N-entry spin BRAM and banked on-chip memory with
// parallel read ports; replication as the way to bank it is this design's.
module spin_mem #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned NRD   = 10
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic                     wdata,
  input  logic [NRD-1:0]           re,
  input  logic [$clog2(DEPTH)-1:0] raddr [NRD],
  output logic [NRD-1:0]           rdata
);
  for (genvar b = 0; b < NRD; b++) begin : g_bank
    logic mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we) mem[waddr] <= wdata;
    end
    always_ff @(posedge clk) begin
      if (re[b]) rdata[b] <= mem[raddr[b]];
    end
  end
endmodule
