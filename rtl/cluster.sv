// cluster: one cluster of the accelerator - a memory AP (MAP), X*Y
// computation APs (CAPs), the on-chip mesh that joins them and the transfer
// engine that moves data between MAP and CAPs.
//
// Host commands arrive one at a time (cmd_valid/cmd_ready, host_cmd_t):
//   HC_MAP_WR / HC_MAP_RD  word write / read of one MAP row (read data is
//                          returned with rsp_valid)
//   HC_IMEM_WR             one instruction written into every CAP's cache
//                          (all CAPs of a cluster run the same program, SIMD)
//   HC_XFER                one MAP<->CAP transfer (the Read and Write stages
//                          of a step)
//   HC_RUN                 all CAPs start at addr and the command completes
//                          when every CAP has reached OP_HALT (Compute stage)
// A weight-stationary step is therefore: XFER (MAP -> CAPs, broadcast or
// unicast), RUN, XFER (CAP -> MAP) for each output. busy is high while a
// command executes. err is the OR of the APs' error flags.
//
// From the paper: one MAP and 8x8 CAPs per cluster, joined by a mesh, with the
// MAP as the cluster's storage through which inputs are broadcast and outputs
// are rearranged. The command set and the one-command-at-a-time sequencing are
// this design's own.
//
// Lint notes: the held command's cluster number, broadcast flag and transfer
// descriptor are not read from the register (the first two were used by the
// off-chip interconnect, the descriptor is handed to the transfer engine
// directly), and the CAPs' busy outputs are not needed (completion is taken
// from done). The mesh's last hop count and the transfer engine's busy are
// observation outputs that the command sequencing does not need (the engine's
// done is used), and the MAP's idle, busy and done are unused because the MAP
// never runs a program in a cluster (it serves transfers only). The CAPs' external word ports are not used in a cluster (CAPs are
// reached through the mesh only), so their outputs are left unconnected. The
// reset is reported as used both synchronously and asynchronously: registers
// use it asynchronously and the assertion's disable condition samples it.
module cluster
  import bf_pkg::*;
#(
  parameter int unsigned X     = CL_X,
  parameter int unsigned Y     = CL_Y,
  parameter int unsigned ROWS  = AP_ROWS,
  parameter int unsigned COLS  = AP_COLS,
  parameter int unsigned DEPTH = IMEM_DEPTH
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  host_cmd_t       cmd,
  output logic            rsp_valid,
  output logic [COLS-1:0] rsp_data,
  output logic            busy,
  output logic            err
);

  localparam int unsigned NCAP = X * Y;
  localparam int unsigned N    = NCAP + 1;
  localparam int unsigned AW   = $clog2(DEPTH);

  host_cmd_t cmd_q;   // command being executed

  // ---------------------------------------------------------------- mesh
  logic [N-1:0] inj_valid, inj_ready, ej_valid, ej_ready;
  pkt_t         inj_pkt [N];
  pkt_t         ej_pkt;
  logic [15:0]  hops_last;

  cluster_mesh #(.X(X), .Y(Y)) u_mesh (
    .clk, .rst_n, .inj_valid, .inj_ready, .inj_pkt, .ej_valid, .ej_ready, .ej_pkt, .hops_last);

  // ---------------------------------------------------------------- engine
  logic       eng_cmd_valid, eng_cmd_ready, eng_done, eng_busy;
  logic       eng_map_valid, eng_map_ready, eng_inj_valid, eng_inj_ready;
  pkt_t       eng_map_pkt, eng_inj_pkt;
  logic [NCAP-1:0] cap_wr_done;
  logic       map_wr_done;

  xfer_engine #(.NCAP(NCAP)) u_eng (
    .clk, .rst_n, .cmd_valid(eng_cmd_valid), .cmd_ready(eng_cmd_ready), .cmd(cmd.xfer),
    .done(eng_done), .busy(eng_busy),
    .map_req_valid(eng_map_valid), .map_req_ready(eng_map_ready), .map_req_pkt(eng_map_pkt),
    .inj_valid(eng_inj_valid), .inj_ready(eng_inj_ready), .inj_pkt(eng_inj_pkt),
    .cap_wr_done, .map_wr_done);

  // ---------------------------------------------------------------- MAP
  logic       map_rx_valid, map_rx_ready, map_tx_valid, map_tx_ready;
  pkt_t       map_rx_pkt, map_tx_pkt;
  logic       map_ext_req, map_ext_we, map_ext_rdy, map_ext_ack;
  logic [COLS-1:0] map_ext_rdata;
  logic       map_idle, map_busy, map_done, map_err;

  // MAP receive: mesh deliveries first, then the engine's local requests
  assign map_rx_valid  = ej_valid[0] || eng_map_valid;
  assign map_rx_pkt    = ej_valid[0] ? ej_pkt : eng_map_pkt;
  assign ej_ready[0]   = map_rx_ready;
  assign eng_map_ready = map_rx_ready && !ej_valid[0];
  // MAP injection: the MAP's own data first, then the engine's requests
  assign inj_valid[0]  = map_tx_valid || eng_inj_valid;
  assign inj_pkt[0]    = map_tx_valid ? map_tx_pkt : eng_inj_pkt;
  assign map_tx_ready  = inj_ready[0];
  assign eng_inj_ready = inj_ready[0] && !map_tx_valid;

  ap #(.ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH), .TWO_D(1'b0)) u_map (
    .clk, .rst_n, .imem_we(1'b0), .imem_waddr('0), .imem_wdata('0),
    .start(1'b0), .start_pc('0), .idle(map_idle), .busy(map_busy), .done(map_done), .err(map_err),
    .rx_valid(map_rx_valid), .rx_ready(map_rx_ready), .rx_pkt(map_rx_pkt),
    .tx_valid(map_tx_valid), .tx_ready(map_tx_ready), .tx_pkt(map_tx_pkt), .wr_done(map_wr_done),
    .ext_req(map_ext_req), .ext_we(map_ext_we), .ext_row(cmd_q.addr), .ext_wdata(cmd_q.wdata),
    .ext_rdy(map_ext_rdy), .ext_ack(map_ext_ack), .ext_rdata(map_ext_rdata));

  // ---------------------------------------------------------------- CAPs
  logic            imem_we, cap_start;
  logic [NCAP-1:0] cap_idle, cap_busy, cap_done, cap_err;

  for (genvar k = 0; k < NCAP; k++) begin : g_cap
    ap #(.ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH), .TWO_D(1'b1)) u_cap (
      .clk, .rst_n, .imem_we, .imem_waddr(cmd_q.addr[AW-1:0]), .imem_wdata(cmd_q.instr),
      .start(cap_start), .start_pc(cmd_q.addr[AW-1:0]),
      .idle(cap_idle[k]), .busy(cap_busy[k]), .done(cap_done[k]), .err(cap_err[k]),
      .rx_valid(ej_valid[k+1]), .rx_ready(ej_ready[k+1]), .rx_pkt(ej_pkt),
      .tx_valid(inj_valid[k+1]), .tx_ready(inj_ready[k+1]), .tx_pkt(inj_pkt[k+1]),
      .wr_done(cap_wr_done[k]),
      .ext_req(1'b0), .ext_we(1'b0), .ext_row('0), .ext_wdata('0),
      .ext_rdy(), .ext_ack(), .ext_rdata());
  end

  assign err = map_err || (|cap_err);

  // ---------------------------------------------------------------- commands
  typedef enum logic [2:0] {C_IDLE, C_MAPREQ, C_MAPACK, C_XFER, C_RUNWAIT, C_RUN} cstate_e;
  cstate_e         st;
  logic [NCAP-1:0] seen_done;

  assign cmd_ready     = (st == C_IDLE);
  assign busy          = (st != C_IDLE);
  assign map_ext_req   = (st == C_MAPREQ);
  assign map_ext_we    = (cmd_q.kind == HC_MAP_WR);
  assign eng_cmd_valid = (st == C_IDLE) && cmd_valid && (cmd.kind == HC_XFER);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; cmd_q <= '0; imem_we <= 1'b0; cap_start <= 1'b0; seen_done <= '0;
      rsp_valid <= 1'b0; rsp_data <= '0;
    end else begin
      imem_we <= 1'b0; cap_start <= 1'b0; rsp_valid <= 1'b0;
      unique case (st)
        C_IDLE: if (cmd_valid) begin
          cmd_q <= cmd;
          unique case (cmd.kind)
            HC_MAP_WR, HC_MAP_RD: st <= C_MAPREQ;
            HC_IMEM_WR:           imem_we <= 1'b1;
            HC_XFER:              st <= C_XFER;     // engine took it this clock
            HC_RUN:               st <= C_RUNWAIT;
            default: ;
          endcase
        end
        C_MAPREQ: if (map_ext_rdy) st <= C_MAPACK;
        C_MAPACK: if (map_ext_ack) begin
          if (cmd_q.kind == HC_MAP_RD) begin rsp_valid <= 1'b1; rsp_data <= map_ext_rdata; end
          st <= C_IDLE;
        end
        C_XFER: if (eng_done) st <= C_IDLE;
        C_RUNWAIT: if (&cap_idle) begin
          cap_start <= 1'b1; seen_done <= '0; st <= C_RUN;
        end
        C_RUN: begin
          seen_done <= seen_done | cap_done;
          if ((seen_done | cap_done) == '1) st <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  a_eng_ready: assert property (@(posedge clk) disable iff (!rst_n)
    eng_cmd_valid |-> eng_cmd_ready);

endmodule
