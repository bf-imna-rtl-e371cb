// tb_cluster_mesh: self-checking testbench of the cluster mesh model at
// 4 x 4 CAPs (17 nodes). Checks that unicast packets reach exactly their
// destination with the payload intact and a latency of 2 clocks per hop
// from the accepting edge to the delivering edge (Manhattan distance, MAP at grid point (X/2, Y/2), minimum 1 hop), that a
// broadcast reaches every CAP and not the MAP, that a stalled destination
// holds the packet, and that contending injectors are all served.
module tb_cluster_mesh;
  import bf_pkg::*;
  localparam int X = 4, Y = 4, N = X * Y + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] inj_valid = '0, inj_ready, ej_valid, ej_ready = '1;
  pkt_t inj_pkt [N]; pkt_t ej_pkt; logic [15:0] hops_last;
  cluster_mesh #(.X(X), .Y(Y)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #5_000_000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  function automatic int xy_hops(int a, int b);
    int ax, ay, bx, by, h;
    ax = a == 0 ? X / 2 : (a - 1) % X; ay = a == 0 ? Y / 2 : (a - 1) / X;
    bx = b == 0 ? X / 2 : (b - 1) % X; by = b == 0 ? Y / 2 : (b - 1) / X;
    h = (ax > bx ? ax - bx : bx - ax) + (ay > by ? ay - by : by - ay);
    return h == 0 ? 1 : h;
  endfunction

  initial begin
    for (int k = 0; k < N; k++) inj_pkt[k] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // unicast from random sources to random destinations; measure latency
    for (int it = 0; it < 60; it++) begin
      int s, d, t0, lat; logic [31:0] tag;
      s = $urandom % N; d = $urandom % N; tag = $urandom;
      @(negedge clk);
      inj_pkt[s] = '0; inj_pkt[s].dst = NODE_W'(d); inj_pkt[s].data[31:0] = tag; inj_valid[s] = 1;
      t0 = 0;
      while (!inj_ready[s]) begin @(posedge clk); #1; end
      @(posedge clk); #1; inj_valid[s] = 0; lat = 0;
      while (ej_valid == '0) begin @(posedge clk); #1; lat++; end
      check(ej_valid == (N'(1) << d), $sformatf("unicast %0d->%0d dest mask", s, d));
      check(ej_pkt.data[31:0] == tag, "unicast payload");
      // delivered on the next edge: accept edge to delivery edge = lat + 1
      check(lat + 1 == 2 * xy_hops(s, d), $sformatf("latency %0d->%0d: %0d clocks, %0d hops", s, d, lat, xy_hops(s, d)));
      check(hops_last == 16'(xy_hops(s, d)), "hops_last");
      @(negedge clk);
    end
    // broadcast from the MAP with two CAPs stalling for a while
    @(negedge clk);
    inj_pkt[0] = '0; inj_pkt[0].bcast = 1; inj_pkt[0].data[7:0] = 8'hA5; inj_valid[0] = 1;
    ej_ready[3] = 0; ej_ready[9] = 0;
    @(posedge clk); #1; inj_valid[0] = 0;
    while (ej_valid == '0) begin @(posedge clk); #1; end
    check(ej_valid == {{(N-1){1'b1}}, 1'b0}, "broadcast reaches every CAP only");
    @(posedge clk); #1; check(ej_valid == ((N'(1) << 3) | (N'(1) << 9)), "stalled CAPs still pending");
    repeat (5) @(posedge clk); #1;
    check(ej_valid[3] && ej_valid[9], "held while stalled");
    ej_ready = '1;
    @(posedge clk); #1; check(ej_valid == '0, "broadcast complete");
    // all nodes inject at once: each must be delivered once
    begin
      int got [N];
      for (int k = 0; k < N; k++) begin got[k] = 0; inj_pkt[k] = '0; inj_pkt[k].dst = NODE_W'((k + 1) % N);
        inj_pkt[k].data[7:0] = 8'(k); end
      @(negedge clk); inj_valid = '1;
      fork
        begin
          for (int c = 0; c < 2000; c++) begin
            @(posedge clk); #1;
            for (int k = 0; k < N; k++) if (inj_ready[k]) ;
          end
        end
      join_none
      for (int served = 0; served < N; ) begin
        @(posedge clk);
        for (int k = 0; k < N; k++) if (inj_valid[k] && inj_ready[k]) begin
          served++; #1 inj_valid[k] = 0; got[k]++;
        end
      end
      disable fork;
      for (int k = 0; k < N; k++) check(got[k] == 1, $sformatf("node %0d served once", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
