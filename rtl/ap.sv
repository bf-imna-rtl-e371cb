// ap: one associative processor (AP) - the building block of the accelerator.
//
// An AP is a CAM with its key and mask registers, tag registers, controller,
// instruction cache and interconnection interface. The CAM is processed
// bit-serially and word-parallel: an operation is a sequence of compare and
// write stages that follow the operation's LUT, applied to all lanes at once.
// With TWO_D=1 it is a 2D AP used as a computation AP (CAP): search, write
// and all operations work along rows (horizontal mode) or along columns
// (vertical mode). With TWO_D=0 it is a 1D AP used as the cluster's memory AP
// (MAP): only horizontal-mode operations, plus word reads and writes.
//
// Interfaces:
//   imem_*      host writes into the instruction cache (one per clock)
//   start/...   run the program from start_pc until OP_HALT (done pulse)
//   rx_*/tx_*   mesh packets (see ap_ifc); wr_done pulses when a received
//               data packet has been written
//   ext_*       direct word port (valid/ready, ack): used for the MAP's host
//               accesses; the interface has priority over it.
// Timing: see ap_ctrl (operations) and ap_ifc (transfers).
//
// Lint notes: the row tags of the CAM are not read here - they are consumed
// inside the CAM by the tag write-back micro-operation, and only the column
// tags leave the AP (word-sequential reading). The reset is used
// asynchronously by the registers and sampled on the clock by the assertions'
// disable conditions, which a lint run reports as a net used both ways. The
// CAM storage itself has no reset (cell contents are undefined at power-up).
module ap
  import bf_pkg::*;
#(
  parameter int unsigned ROWS  = AP_ROWS,
  parameter int unsigned COLS  = AP_COLS,
  parameter int unsigned DEPTH = IMEM_DEPTH,
  parameter bit          TWO_D = 1'b1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     imem_we,
  input  logic [$clog2(DEPTH)-1:0] imem_waddr,
  input  ap_instr_t                imem_wdata,
  input  logic                     start,
  input  logic [$clog2(DEPTH)-1:0] start_pc,
  output logic                     idle,
  output logic                     busy,
  output logic                     done,
  output logic                     err,
  input  logic                     rx_valid,
  output logic                     rx_ready,
  input  pkt_t                     rx_pkt,
  output logic                     tx_valid,
  input  logic                     tx_ready,
  output pkt_t                     tx_pkt,
  output logic                     wr_done,
  input  logic                     ext_req,
  input  logic                     ext_we,
  input  logic [IDX_W-1:0]         ext_row,
  input  logic [COLS-1:0]          ext_wdata,
  output logic                     ext_rdy,
  output logic                     ext_ack,
  output logic [COLS-1:0]          ext_rdata
);

  ap_instr_t        ic_rdata;
  logic [$clog2(DEPTH)-1:0] ic_raddr;
  km_cmd_t          km;
  cam_op_e          cam_op;
  lane_sel_e        cam_sel;
  logic [COLS-1:0]  cam_ext, hkey, hmask, ctag;
  logic [ROWS-1:0]  vkey, vmask, rtag;

  // word port arbitration between the interface and the external port
  logic             i_req, i_we, i_ack, w_rdy, w_ack, owner_ifc;
  logic [IDX_W-1:0] i_row;
  logic [COLS-1:0]  i_wdata, w_rdata;
  logic             sel_ifc;

  assign sel_ifc = i_req;
  assign ext_rdy = w_rdy && !i_req;
  assign i_ack   = w_ack && owner_ifc;
  assign ext_ack = w_ack && !owner_ifc;
  assign ext_rdata = w_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) owner_ifc <= 1'b0;
    else if (w_rdy && (i_req || ext_req)) owner_ifc <= sel_ifc;
  end

  ap_icache #(.DEPTH(DEPTH)) u_icache (
    .clk, .we(imem_we), .waddr(imem_waddr), .wdata(imem_wdata),
    .raddr(ic_raddr), .rdata(ic_rdata));

  ap_ctrl #(.COLS(COLS), .DEPTH(DEPTH), .TWO_D(TWO_D)) u_ctrl (
    .clk, .rst_n, .start, .start_pc, .idle, .busy, .done, .err,
    .ic_raddr, .ic_rdata, .km, .cam_op, .cam_sel, .cam_ext, .ctag,
    .wio_req(i_req || ext_req), .wio_we(sel_ifc ? i_we : ext_we),
    .wio_row(sel_ifc ? i_row : ext_row), .wio_wdata(sel_ifc ? i_wdata : ext_wdata),
    .wio_rdy(w_rdy), .wio_ack(w_ack), .wio_rdata(w_rdata));

  ap_keymask #(.ROWS(ROWS), .COLS(COLS)) u_km (
    .clk, .rst_n, .cmd(km), .hkey, .hmask, .vkey, .vmask);

  ap_cam #(.ROWS(ROWS), .COLS(COLS), .TWO_D(TWO_D)) u_cam (
    .clk, .rst_n, .op(cam_op), .sel(cam_sel), .ext_sel(cam_ext),
    .hkey, .hmask, .vkey, .vmask, .rtag, .ctag);

  ap_ifc #(.COLS(COLS)) u_ifc (
    .clk, .rst_n, .rx_valid, .rx_ready, .rx_pkt, .tx_valid, .tx_ready, .tx_pkt,
    .wr_done, .wio_req(i_req), .wio_we(i_we), .wio_row(i_row), .wio_wdata(i_wdata),
    .wio_rdy(w_rdy), .wio_ack(i_ack), .wio_rdata(w_rdata));

endmodule
