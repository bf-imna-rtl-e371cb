// tb_cluster: self-checking testbench of one cluster (2 x 2 CAPs, APs of
// 256 rows, 32-entry instruction caches), run as one small convolution-like
// step in the paper's Read / Compute / Write order:
//   Read:    16 input words x[r] written into the MAP by the host and
//            broadcast to rows 0..15 of every CAP; each CAP's own weights
//            w[k][r] sent by unicast to its rows 16..31.
//   Compute: one program on all CAPs: 16 MOVEs align each weight with its
//            input, MUL (3 x 3 bits), ReLU (6 bits), 8 MOVEs + one ADD reduce
//            row pairs, COPY, and MAX (2 bits) on the result.
//   Write:   rows 0..15 of every CAP gathered back into the MAP and read
//            by the host.
// Every result is compared with values computed here. It also checks the
// MAP's word-port round trip and that no AP raised err.
module tb_cluster;
  import bf_pkg::*;
  localparam int X = 2, Y = 2, NC = X * Y, R = 256, D = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid = 0, cmd_ready, rsp_valid, busy, err;
  host_cmd_t cmd = '0;
  logic [15:0] rsp_data;
  cluster #(.X(X), .Y(Y), .ROWS(R), .COLS(16), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] last_rsp;
  always @(posedge clk) if (rsp_valid) last_rsp <= rsp_data;
  initial begin
    #20_000_000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic issue(input host_cmd_t c);
    @(negedge clk); cmd_valid = 1; cmd = c;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk); cmd_valid = 0;
    while (busy) @(negedge clk);
  endtask
  task automatic map_wr(input int row, input logic [15:0] v);
    host_cmd_t c; c = '0; c.kind = HC_MAP_WR; c.addr = IDX_W'(row); c.wdata = v; issue(c);
  endtask
  task automatic map_rd(input int row, output logic [15:0] v);
    host_cmd_t c; c = '0; c.kind = HC_MAP_RD; c.addr = IDX_W'(row); issue(c);
    @(negedge clk); v = last_rsp;
  endtask
  task automatic imem(input int a, input ap_instr_t t);
    host_cmd_t c; c = '0; c.kind = HC_IMEM_WR; c.addr = IDX_W'(a); c.instr = t; issue(c);
  endtask
  task automatic xfer(input bit to_cap, input bit bc, input int cap, input int mrow, input int crow, input int n);
    host_cmd_t c; c = '0; c.kind = HC_XFER; c.xfer.to_cap = to_cap; c.xfer.bcast = bc;
    c.xfer.cap = NODE_W'(cap); c.xfer.map_row = IDX_W'(mrow); c.xfer.cap_row = IDX_W'(crow);
    c.xfer.nwords = 7'(n); issue(c);
  endtask
  function automatic ap_instr_t mk(ap_opcode_e op, bit dir, int m, int a, int b, int c, int d);
    ap_instr_t t; t.op = op; t.dir = dir; t.m = 4'(m);
    t.a = IDX_W'(a); t.b = IDX_W'(b); t.c = IDX_W'(c); t.d = IDX_W'(d); return t;
  endfunction

  logic [2:0] xv [16];
  logic [2:0] wv [NC][16];
  logic [15:0] v;
  int pc;

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // MAP round trip
    map_wr(250, 16'hBEEF); map_rd(250, v); check(v == 16'hBEEF, "MAP word round trip");
    // operands: x at cols 0..2 of MAP rows 0..15, w of CAP k at cols 3..5 of rows 16+16k..
    for (int r = 0; r < 16; r++) begin xv[r] = 3'($urandom); map_wr(r, {13'd0, xv[r]}); end
    for (int k = 0; k < NC; k++) for (int r = 0; r < 16; r++) begin
      wv[k][r] = 3'($urandom); map_wr(16 + 16 * k + r, {10'd0, wv[k][r], 3'd0});
    end
    // program
    pc = 0;
    for (int r = 0; r < 16; r++) begin imem(pc, mk(OP_MOVE, 1, 3, 16 + r, 3, r, 3)); pc++; end
    imem(pc++, mk(OP_MUL, 0, 3, 0, 3, 6, 12));
    imem(pc++, mk(OP_RELU, 0, 6, 6, 0, 12, 0));
    for (int j = 0; j < 8; j++) begin imem(pc, mk(OP_MOVE, 1, 6, 2 * j + 1, 6, 2 * j, 0)); pc++; end
    imem(pc++, mk(OP_ADD, 0, 6, 0, 6, 12, 0));
    imem(pc++, mk(OP_COPY, 0, 3, 6, 13, 0, 0));
    imem(pc++, mk(OP_MAX, 0, 2, 13, 0, 3, 0));
    imem(pc++, mk(OP_HALT, 0, 0, 0, 0, 0, 0));
    // Read stage
    xfer(1, 1, 1, 0, 0, 16);
    for (int k = 0; k < NC; k++) xfer(1, 0, k + 1, 16 + 16 * k, 16, 16);
    // Compute stage
    begin host_cmd_t c; c = '0; c.kind = HC_RUN; c.addr = 0; issue(c); end
    // Write stage
    for (int k = 0; k < NC; k++) xfer(0, 0, k + 1, 100 + 16 * k, 0, 16);
    for (int k = 0; k < NC; k++) for (int j = 0; j < 8; j++) begin
      logic [5:0] p0, p1; logic [6:0] s; logic [1:0] mx;
      p0 = 6'(xv[2*j]) * 6'(wv[k][2*j]);     if (p0[5]) p0 = 0;
      p1 = 6'(xv[2*j+1]) * 6'(wv[k][2*j+1]); if (p1[5]) p1 = 0;
      s = 7'(p0) + 7'(p1);
      mx = (s[1:0] > p1[1:0]) ? s[1:0] : p1[1:0];
      map_rd(100 + 16 * k + 2 * j, v);
      check(v[12:6] == s && v[15:13] == s[2:0] && v[1:0] == mx,
            $sformatf("CAP %0d pair %0d: got %h sum exp %0d got %0d", k, j, v, s, v[12:6]));
    end
    check(!err, "no AP error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
