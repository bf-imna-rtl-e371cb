// bf_imna: top level of the bit-fluid in-memory neural-network accelerator.
//
// The chip is an X x Y array of clusters behind an off-chip interconnect.
// Each cluster holds one memory AP (MAP) and an 8x8 array of computation APs
// (CAPs) joined by an on-chip mesh; every AP is a CAM-based associative
// processor computing bit-serially and word-parallel, so the precision of
// every operation is simply the number of bit steps the program runs
// (1..8 bits here) - no reconfiguration between precisions.
//
// Interface: the host (which performs im2col and holds off-chip memory)
// issues host_cmd_t commands with host_valid/host_ready: word writes/reads of
// MAP rows, instruction writes into the CAPs of a cluster, MAP<->CAP transfers
// and program runs (see cluster). MAP reads return on rsp_valid/rsp_data. busy
// is high while any cluster executes a command; err is the OR of the APs'
// error flags (a vertical operation issued to a 1D AP).
//
// The default parameters are the paper's limited-resources configuration:
// 8x8 clusters, 8x8 CAPs and one MAP per cluster, APs of 4800 rows x 16
// columns, 1024-bit mesh transfers.
//
// Lint note: the reset is reported as used both synchronously and
// asynchronously: registers use it asynchronously and the clusters'
// assertions sample it in their disable conditions. It is one active-low
// reset.
module bf_imna
  import bf_pkg::*;
#(
  parameter int unsigned CX    = CHIP_X,
  parameter int unsigned CY    = CHIP_Y,
  parameter int unsigned X     = CL_X,
  parameter int unsigned Y     = CL_Y,
  parameter int unsigned ROWS  = AP_ROWS,
  parameter int unsigned COLS  = AP_COLS,
  parameter int unsigned DEPTH = IMEM_DEPTH
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            host_valid,
  output logic            host_ready,
  input  host_cmd_t       host_cmd,
  output logic            rsp_valid,
  output logic [COLS-1:0] rsp_data,
  output logic            busy,
  output logic            err
);

  localparam int unsigned NCL = CX * CY;

  logic [NCL-1:0]  cl_valid, cl_ready, cl_rsp_valid, cl_busy, cl_err;
  host_cmd_t       cl_cmd;
  logic [COLS-1:0] cl_rsp_data [NCL];

  offchip_ic #(.NCL(NCL), .COLS(COLS)) u_ic (
    .clk, .rst_n, .host_valid, .host_ready, .host_cmd, .rsp_valid, .rsp_data, .busy,
    .cl_valid, .cl_ready, .cl_cmd, .cl_rsp_valid, .cl_rsp_data, .cl_busy);

  for (genvar c = 0; c < NCL; c++) begin : g_cl
    cluster #(.X(X), .Y(Y), .ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH)) u_cl (
      .clk, .rst_n, .cmd_valid(cl_valid[c]), .cmd_ready(cl_ready[c]), .cmd(cl_cmd),
      .rsp_valid(cl_rsp_valid[c]), .rsp_data(cl_rsp_data[c]), .busy(cl_busy[c]), .err(cl_err[c]));
  end

  assign err = |cl_err;

endmodule
