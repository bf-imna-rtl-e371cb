// offchip_ic: off-chip interconnect - joins the host / off-chip memory side
// to the clusters (to each cluster's MAP and command port).
//
// One host command is accepted at a time (host_valid/host_ready) and
// registered; it is then offered to the addressed cluster, or to every
// cluster when bcast is set, until each has taken it. A MAP read waits for
// the addressed cluster's response, which is returned on rsp_valid/rsp_data.
// The interconnect is then free for the next command. Clusters run
// independently and in parallel: a command to one cluster does not wait for
// commands still executing in others (busy reports whether any cluster is
// executing). Latency: one clock to register the command, then the clusters'
// acceptance.
//
// The paper only names this interconnect and says its cost is left out; the
// single-command, broadcast-capable routing is this design's own.
module offchip_ic
  import bf_pkg::*;
#(
  parameter int unsigned NCL  = CHIP_X * CHIP_Y,
  parameter int unsigned COLS = AP_COLS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            host_valid,
  output logic            host_ready,
  input  host_cmd_t       host_cmd,
  output logic            rsp_valid,
  output logic [COLS-1:0] rsp_data,
  output logic            busy,
  // cluster side
  output logic [NCL-1:0]  cl_valid,
  input  logic [NCL-1:0]  cl_ready,
  output host_cmd_t       cl_cmd,
  input  logic [NCL-1:0]  cl_rsp_valid,
  input  logic [COLS-1:0] cl_rsp_data [NCL],
  input  logic [NCL-1:0]  cl_busy
);

  typedef enum logic [1:0] {O_IDLE, O_SEND, O_RSP} ostate_e;
  ostate_e        st;
  logic [NCL-1:0] pend;

  assign host_ready = (st == O_IDLE);
  assign cl_valid   = (st == O_SEND) ? pend : '0;
  assign busy       = (st != O_IDLE) || (|cl_busy);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= O_IDLE; pend <= '0; cl_cmd <= '0; rsp_valid <= 1'b0; rsp_data <= '0;
    end else begin
      rsp_valid <= 1'b0;
      unique case (st)
        O_IDLE: if (host_valid) begin
          cl_cmd <= host_cmd;
          pend   <= '0;
          if (host_cmd.bcast) pend <= '1;
          else if (int'(host_cmd.cluster) < NCL) pend[int'(host_cmd.cluster)] <= 1'b1;
          st <= O_SEND;
        end
        O_SEND: begin
          pend <= pend & ~cl_ready;
          if ((pend & ~cl_ready) == '0)
            st <= (cl_cmd.kind == HC_MAP_RD && !cl_cmd.bcast) ? O_RSP : O_IDLE;
        end
        O_RSP: if (cl_rsp_valid[int'(cl_cmd.cluster)]) begin
          rsp_valid <= 1'b1;
          rsp_data  <= cl_rsp_data[int'(cl_cmd.cluster)];
          st <= O_IDLE;
        end
        default: st <= O_IDLE;
      endcase
    end
  end

endmodule
