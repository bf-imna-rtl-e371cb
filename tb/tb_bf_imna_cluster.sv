// tb_bf_imna_cluster: self-checking testbench of the accelerator top with
// one cluster at full size (8 x 8 CAPs and a MAP, APs of 4800 rows x 16
// columns, 64-entry instruction caches); only the number of clusters is
// reduced, from 8 x 8 to 1. It runs one short step on the cluster: two
// operand words written into the MAP, sent by unicast to the last CAP, a one-instruction program (ADD of two 8-bit
// fields, horizontal mode) broadcast to every CAP and started, the
// result gathered back to the MAP and read. The sum and the absence of
// errors are checked.
module tb_bf_imna_cluster;
  import bf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic host_valid = 0, host_ready, rsp_valid, busy, err;
  host_cmd_t host_cmd = '0;
  logic [15:0] rsp_data;
  bf_imna #(.CX(1), .CY(1)) dut (.*);

  localparam int LASTCL  = 0;
  localparam int LASTCAP = CL_X * CL_Y;
  int checks = 0, failures = 0;
  logic [15:0] last_rsp;
  always @(posedge clk) if (rsp_valid) last_rsp <= rsp_data;
  initial begin
    #50_000_000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  task automatic issue(input host_cmd_t c);
    @(negedge clk); host_valid = 1; host_cmd = c;
    while (!host_ready) @(negedge clk);
    @(negedge clk); host_valid = 0;
    while (busy || !host_ready) @(negedge clk);
  endtask

  host_cmd_t c;
  logic [7:0] a0, b0, a1, b1;
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    a0 = 8'($urandom); b0 = 8'($urandom); a1 = 8'($urandom); b1 = 8'($urandom);
    c = '0; c.kind = HC_MAP_WR; c.cluster = 12'(LASTCL); c.addr = 4000; c.wdata = {b0, a0}; issue(c);
    c.addr = 4001; c.wdata = {b1, a1}; issue(c);
    c = '0; c.kind = HC_MAP_RD; c.cluster = 12'(LASTCL); c.addr = 4001; issue(c);
    @(negedge clk); check(last_rsp == {b1, a1}, "MAP word round trip");
    // program: ADD m=7 (A cols 0..6, B cols 8..14, carry col 15), HALT
    c = '0; c.kind = HC_IMEM_WR; c.bcast = 1; c.addr = 0;
    c.instr.op = OP_ADD; c.instr.m = 7; c.instr.a = 0; c.instr.b = 8; c.instr.c = 15; issue(c);
    c.addr = 1; c.instr = '0; c.instr.op = OP_HALT; issue(c);
    // Read stage: MAP rows 4000..4001 -> last CAP rows 4700..4701
    c = '0; c.kind = HC_XFER; c.cluster = 12'(LASTCL);
    c.xfer.to_cap = 1; c.xfer.cap = NODE_W'(LASTCAP); c.xfer.map_row = 4000; c.xfer.cap_row = 4700;
    c.xfer.nwords = 2; issue(c);
    // Compute stage in every cluster
    c = '0; c.kind = HC_RUN; c.bcast = 1; c.addr = 0; issue(c);
    // Write stage: back to MAP rows 4100..4101
    c = '0; c.kind = HC_XFER; c.cluster = 12'(LASTCL);
    c.xfer.to_cap = 0; c.xfer.cap = NODE_W'(LASTCAP); c.xfer.map_row = 4100; c.xfer.cap_row = 4700;
    c.xfer.nwords = 2; issue(c);
    for (int k = 0; k < 2; k++) begin
      logic [7:0] a, b, s;
      a = k ? a1 : a0; b = k ? b1 : b0;
      s = {1'b0, a[6:0]} + {1'b0, b[6:0]};
      c = '0; c.kind = HC_MAP_RD; c.cluster = 12'(LASTCL); c.addr = IDX_W'(4100 + k); issue(c);
      @(negedge clk);
      check(last_rsp[15:8] == s && last_rsp[7:0] == a, $sformatf("sum %0d: got %h exp %h", k, last_rsp, s));
    end
    check(!err, "no AP error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
