// tb_xfer_engine: self-checking testbench of the cluster transfer engine
// with 6 CAPs. For MAP->CAP transfers (unicast and broadcast) it checks the
// read request handed to the MAP and that done waits for the write
// completions of exactly the needed CAPs; for CAP->MAP transfers it checks
// the request injected into the mesh and that done follows the MAP's
// completion. Ready signals are random.
module tb_xfer_engine;
  import bf_pkg::*;
  localparam int NCAP = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid = 0, cmd_ready, done, busy;
  xfer_desc_t cmd = '0;
  logic map_req_valid, map_req_ready = 0, inj_valid, inj_ready = 0, map_wr_done = 0;
  pkt_t map_req_pkt, inj_pkt;
  logic [NCAP-1:0] cap_wr_done = '0;
  xfer_engine #(.NCAP(NCAP)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #2_000_000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  always @(negedge clk) begin map_req_ready = $urandom % 2; inj_ready = $urandom % 2; end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      xfer_desc_t d; logic [NCAP-1:0] need, got;
      d = '0; d.to_cap = $urandom % 2; d.bcast = d.to_cap && ($urandom % 3 == 0);
      d.cap = NODE_W'(1 + $urandom % NCAP); d.map_row = IDX_W'($urandom); d.cap_row = IDX_W'($urandom);
      d.nwords = 7'(1 + $urandom % 64);
      @(negedge clk); cmd_valid = 1; cmd = d;
      while (!cmd_ready) @(negedge clk);
      @(negedge clk); cmd_valid = 0;
      check(busy, "busy after accept");
      if (d.to_cap) begin
        do @(posedge clk); while (!(map_req_valid && map_req_ready));
        check(!inj_valid, "no mesh injection for MAP->CAP");
        check(map_req_pkt.kind == PK_RDREQ && map_req_pkt.row == d.map_row && map_req_pkt.nwords == d.nwords
              && map_req_pkt.bcast == d.bcast && map_req_pkt.reply_node == d.cap
              && map_req_pkt.reply_row == d.cap_row, "MAP request");
        need = d.bcast ? '1 : NCAP'(1) << (int'(d.cap) - 1);
        got = '0;
        @(negedge clk);
        // completions arrive in random order, some from CAPs not addressed
        while (got != need) begin
          logic [NCAP-1:0] p;
          p = NCAP'($urandom) & ~got;
          cap_wr_done = p; got |= p & need;
          @(negedge clk); cap_wr_done = '0;
          if (got != need) check(!done, "done not before every needed CAP");
        end
        check(done, "done one clock after the last CAP");
      end else begin
        do @(posedge clk); while (!(inj_valid && inj_ready));
        check(inj_pkt.kind == PK_RDREQ && inj_pkt.dst == d.cap && inj_pkt.row == d.cap_row
              && inj_pkt.reply_node == 0 && inj_pkt.reply_row == d.map_row && inj_pkt.nwords == d.nwords,
              "mesh request");
        @(negedge clk);
        repeat ($urandom % 5) begin @(negedge clk); check(!done && busy, "waiting for MAP"); end
        map_wr_done = 1; @(negedge clk); map_wr_done = 0;
        check(done, "done after MAP write");
      end
      @(negedge clk); check(!busy && cmd_ready, "idle again");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
