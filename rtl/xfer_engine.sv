// xfer_engine: data-movement sequencer of a cluster.
//
// It executes one transfer descriptor at a time (cmd_valid/cmd_ready) and
// pulses done when the data has been written at its destination:
//   to_cap=1 (Read stage): the MAP reads nwords consecutive rows from map_row
//     and sends them over the mesh to CAP `cap` at cap_row, or to every CAP
//     of the cluster when bcast is set. The request is handed to the MAP's
//     interface directly (the engine sits beside the MAP); completion is the
//     destination CAP's wr_done, or the wr_done of every CAP for a broadcast.
//   to_cap=0 (Write stage): a read request travels over the mesh to CAP
//     `cap`, which reads nwords rows from cap_row and sends them to the MAP at
//     map_row; completion is the MAP's wr_done.
// The paper describes these movements (inputs and weights read from the MAP
// and broadcast to the CAPs; CAP outputs read word-sequentially, moved over
// the mesh and written into consecutive MAP rows); that a separate engine
// sequences them, and its descriptor format, are this design's own choices.
module xfer_engine
  import bf_pkg::*;
#(
  parameter int unsigned NCAP = CL_X * CL_Y
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  xfer_desc_t      cmd,
  output logic            done,
  output logic            busy,
  // request to the MAP's interface (local)
  output logic            map_req_valid,
  input  logic            map_req_ready,
  output pkt_t            map_req_pkt,
  // injection into the mesh at the MAP's router
  output logic            inj_valid,
  input  logic            inj_ready,
  output pkt_t            inj_pkt,
  // completions
  input  logic [NCAP-1:0] cap_wr_done,
  input  logic            map_wr_done
);

  typedef enum logic [1:0] {X_IDLE, X_REQ, X_WAIT} xstate_e;

  xstate_e          st;
  xfer_desc_t       d;
  logic [NCAP-1:0]  seen;
  pkt_t             req;

  assign cmd_ready = (st == X_IDLE);
  assign busy      = (st != X_IDLE);

  always_comb begin
    req = '0;
    req.kind   = PK_RDREQ;
    req.nwords = d.nwords;
    if (d.to_cap) begin
      req.dst        = '0;
      req.row        = d.map_row;
      req.bcast      = d.bcast;
      req.reply_node = d.cap;
      req.reply_row  = d.cap_row;
    end else begin
      req.dst        = d.cap;
      req.row        = d.cap_row;
      req.reply_node = '0;
      req.reply_row  = d.map_row;
    end
  end

  assign map_req_pkt   = req;
  assign inj_pkt       = req;
  assign map_req_valid = (st == X_REQ) &&  d.to_cap;
  assign inj_valid     = (st == X_REQ) && !d.to_cap;

  logic [NCAP-1:0] need;
  always_comb begin
    need = '0;
    if (d.bcast) need = '1;
    else if (d.cap != '0 && int'(d.cap) <= NCAP) need[int'(d.cap) - 1] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= X_IDLE; d <= '0; seen <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        X_IDLE: if (cmd_valid) begin
          d <= cmd; seen <= '0; st <= X_REQ;
        end
        X_REQ: begin
          if ((d.to_cap && map_req_ready) || (!d.to_cap && inj_ready)) st <= X_WAIT;
        end
        X_WAIT: begin
          if (d.to_cap) begin
            seen <= seen | cap_wr_done;
            if (((seen | cap_wr_done) & need) == need) begin done <= 1'b1; st <= X_IDLE; end
          end else if (map_wr_done) begin
            done <= 1'b1; st <= X_IDLE;
          end
        end
        default: st <= X_IDLE;
      endcase
    end
  end

endmodule
