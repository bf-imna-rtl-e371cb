// ap_icache: instruction store of an associative processor.
//
// A DEPTH-entry memory of ap_instr_t. It is written one instruction per clock
// by the host (through the cluster) and read by the controller with one clock
// of latency (synchronous read: rdata holds mem[raddr] of the previous clock).
// The paper only names the block; its depth and the single-cycle synchronous
// read are this design's choice. The array is not reset.
module ap_icache
  import bf_pkg::*;
#(
  parameter int unsigned DEPTH = IMEM_DEPTH
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  ap_instr_t                wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output ap_instr_t                rdata
);

  ap_instr_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
