// cluster_mesh: on-chip interconnect of one cluster, joining the MAP (node 0)
// and the X*Y CAPs (nodes 1..X*Y, CAP n at grid point ((n-1)%X, (n-1)/X)).
//
// Every node has an injection port (valid/ready, one packet) and an ejection
// port (valid with the destination's ready). The mesh carries one 1024-bit
// transfer at a time: a round-robin arbiter picks an injecting node, the
// packet travels for 2 clocks per hop (links run at half the AP clock, one
// transfer per link clock), with the hop count the Manhattan distance between
// the two grid points (the MAP sits on the router of point (X/2, Y/2); a hop
// count of 0 is raised to 1), and is then offered to its destination, or to
// every CAP when bcast is set, until each has taken it. A broadcast takes the
// latency of the farthest CAP.
//
// The paper gives a mesh with 1024 bits per transfer at half the AP clock and
// an average hop count; router microarchitecture, flow control and the MAP's
// position are not given. This block models the mesh as a single shared
// transfer path with hop-dependent latency, which is this design's own
// simplification: transfers are not pipelined across different links.
//
// Lint note: the reset is reported as used both synchronously and
// asynchronously: the registers use it asynchronously, and the assertion's
// disable condition samples it on the clock. Both are the one active-low reset.
module cluster_mesh
  import bf_pkg::*;
#(
  parameter int unsigned X = CL_X,
  parameter int unsigned Y = CL_Y,
  localparam int unsigned N = X * Y + 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] inj_valid,
  output logic [N-1:0] inj_ready,
  input  pkt_t         inj_pkt [N],
  output logic [N-1:0] ej_valid,
  input  logic [N-1:0] ej_ready,
  output pkt_t         ej_pkt,
  output logic [15:0]  hops_last    // hop count of the last transfer
);

  function automatic int unsigned px(int unsigned n);
    return (n == 0) ? X / 2 : (n - 1) % X;
  endfunction
  function automatic int unsigned py(int unsigned n);
    return (n == 0) ? Y / 2 : (n - 1) / X;
  endfunction
  function automatic int unsigned hops(int unsigned a, int unsigned b);
    int unsigned dx, dy;
    dx = (px(a) > px(b)) ? px(a) - px(b) : px(b) - px(a);
    dy = (py(a) > py(b)) ? py(a) - py(b) : py(b) - py(a);
    return (dx + dy == 0) ? 1 : dx + dy;
  endfunction

  typedef enum logic [1:0] {M_IDLE, M_FLY, M_EJECT} mstate_e;

  mstate_e       st;
  logic [$clog2(N)-1:0] rr;      // round-robin pointer
  logic [15:0]   cnt;
  logic [N-1:0]  pend;

  // arbitration
  logic                 gnt_v;
  logic [$clog2(N)-1:0] gnt;
  always_comb begin
    gnt_v = 1'b0; gnt = '0;
    for (int k = 0; k < N; k++) begin
      logic [$clog2(N)-1:0] n;
      n = ($clog2(N))'((int'(rr) + k) % N);
      if (!gnt_v && inj_valid[n]) begin gnt_v = 1'b1; gnt = n; end
    end
  end

  always_comb begin
    inj_ready = '0;
    if (st == M_IDLE && gnt_v) inj_ready[gnt] = 1'b1;
  end

  assign ej_valid = (st == M_EJECT) ? pend : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; rr <= '0; cnt <= '0; pend <= '0; ej_pkt <= '0; hops_last <= '0;
    end else begin
      unique case (st)
        M_IDLE: if (gnt_v) begin
          int unsigned h;
          ej_pkt <= inj_pkt[gnt];
          rr     <= ($clog2(N))'((int'(gnt) + 1) % N);
          pend   <= '0;
          h = 0;
          if (inj_pkt[gnt].bcast) begin
            for (int n = 1; n < N; n++) if (hops(int'(gnt), n) > h) h = hops(int'(gnt), n);
            pend[N-1:1] <= '1;
          end else begin
            h = hops(int'(gnt), int'(inj_pkt[gnt].dst) % N);
            pend[int'(inj_pkt[gnt].dst) % N] <= 1'b1;
          end
          cnt       <= 16'(2 * h - 1);
          hops_last <= 16'(h);
          st        <= M_FLY;
        end
        M_FLY: begin
          if (cnt == 16'd1) st <= M_EJECT;
          cnt <= cnt - 16'd1;
        end
        M_EJECT: begin
          pend <= pend & ~ej_ready;
          if ((pend & ~ej_ready) == '0) st <= M_IDLE;
        end
        default: st <= M_IDLE;
      endcase
    end
  end

  a_dst_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    (st == M_IDLE && gnt_v && !inj_pkt[gnt].bcast) |-> (int'(inj_pkt[gnt].dst) < N));

endmodule
