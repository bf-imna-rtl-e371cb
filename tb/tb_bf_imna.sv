// tb_bf_imna: end-to-end self-checking testbench of the accelerator top at
// reduced size (2 x 1 clusters of 2 x 2 CAPs, APs of 256 rows, 32-entry
// instruction caches). The host runs one convolution-like step on both
// clusters at once, in the paper's Read / Compute / Write order:
//   Read:    per-cluster inputs x[c][r] and weights w[c][k][r] written into
//            each cluster's MAP; inputs broadcast from the MAP to rows 0..15
//            of every CAP, each CAP's weights sent by unicast to rows 16..31.
//   Compute: the same program broadcast into every CAP of every cluster and
//            started by one broadcast RUN: 16 MOVEs align weights with
//            inputs, MUL (3 x 3 bits), ReLU (6 bits), 8 MOVEs + one ADD
//            reduce row pairs, COPY, MAX (2 bits).
//   Write:   rows 0..15 of every CAP gathered back into its MAP and read by
//            the host.
// Results are compared with values computed here. Each mechanism is counted
// where it happens inside the design (host broadcast command, MAP word write
// and read, instruction write, mesh broadcast, mesh unicast, MAP->CAP and
// CAP->MAP transfers, program start, and execution of each opcode); a
// mechanism that never occurs counts as a failure. A MAP read round trip is
// also timed: the word read takes its CAM compare, the AP's read latency and
// the interconnect registers, and must finish within 12 clocks.
module tb_bf_imna;
  import bf_pkg::*;
  localparam int CX = 2, CY = 1, NCL = CX * CY, X = 2, Y = 2, NC = X * Y, R = 256, D = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic host_valid = 0, host_ready, rsp_valid, busy, err;
  host_cmd_t host_cmd = '0;
  logic [15:0] rsp_data;
  bf_imna #(.CX(CX), .CY(CY), .X(X), .Y(Y), .ROWS(R), .COLS(16), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  int rd_lat, rd_t;
  always @(posedge clk) begin
    if (host_valid && host_ready && host_cmd.kind == HC_MAP_RD) rd_t = 0; else rd_t++;
    if (rsp_valid) rd_lat = rd_t;
  end

  // mechanism counters, observed inside the design
  typedef enum int {M_HOST_BCAST, M_MAP_WR, M_MAP_RD, M_IMEM_WR, M_MESH_BCAST, M_MESH_UNI,
                    M_XFER_TO_CAP, M_XFER_TO_MAP, M_RUN, M_ADD, M_MUL, M_RELU, M_MAX, M_COPY,
                    M_MOVE, M_NUM} mech_e;
  int mech [M_NUM];
  initial foreach (mech[i]) mech[i] = 0;
  always @(posedge clk) begin
    if (dut.u_ic.cl_valid == '1 && dut.u_ic.cl_cmd.bcast && dut.u_ic.cl_ready == '1) mech[M_HOST_BCAST]++;
    if (dut.g_cl[0].u_cl.map_ext_ack &&  dut.g_cl[0].u_cl.map_ext_we) mech[M_MAP_WR]++;
    if (dut.g_cl[0].u_cl.map_ext_ack && !dut.g_cl[0].u_cl.map_ext_we) mech[M_MAP_RD]++;
    if (dut.g_cl[1].u_cl.imem_we) mech[M_IMEM_WR]++;
    if (dut.g_cl[0].u_cl.u_mesh.ej_valid != '0 && dut.g_cl[0].u_cl.u_mesh.ej_pkt.bcast
        && dut.g_cl[0].u_cl.u_mesh.ej_ready == '1) mech[M_MESH_BCAST]++;
    if (dut.g_cl[1].u_cl.u_mesh.ej_valid != '0 && !dut.g_cl[1].u_cl.u_mesh.ej_pkt.bcast
        && (dut.g_cl[1].u_cl.u_mesh.ej_valid & dut.g_cl[1].u_cl.u_mesh.ej_ready) != '0) mech[M_MESH_UNI]++;
    if (dut.g_cl[0].u_cl.eng_done &&  dut.g_cl[0].u_cl.u_eng.d.to_cap) mech[M_XFER_TO_CAP]++;
    if (dut.g_cl[0].u_cl.eng_done && !dut.g_cl[0].u_cl.u_eng.d.to_cap) mech[M_XFER_TO_MAP]++;
    if (dut.g_cl[1].u_cl.cap_start) mech[M_RUN]++;
    if (dut.g_cl[1].u_cl.g_cap[3].u_cap.u_ctrl.state == 3'd2)
      case (dut.g_cl[1].u_cl.g_cap[3].u_cap.u_ctrl.ic_rdata.op)
        OP_ADD: mech[M_ADD]++;  OP_MUL: mech[M_MUL]++;   OP_RELU: mech[M_RELU]++;
        OP_MAX: mech[M_MAX]++;  OP_COPY: mech[M_COPY]++; OP_MOVE: mech[M_MOVE]++;
        default: ;
      endcase
  end
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
    @(negedge clk); host_valid = 1; host_cmd = c;
    while (!host_ready) @(negedge clk);
    @(negedge clk); host_valid = 0;
    while (busy || !host_ready) @(negedge clk);
  endtask
  task automatic map_wr(input int cl, input int row, input logic [15:0] v);
    host_cmd_t c; c = '0; c.cluster = 12'(cl); c.kind = HC_MAP_WR; c.addr = IDX_W'(row); c.wdata = v; issue(c);
  endtask
  task automatic map_rd(input int cl, input int row, output logic [15:0] v);
    host_cmd_t c; c = '0; c.cluster = 12'(cl); c.kind = HC_MAP_RD; c.addr = IDX_W'(row); issue(c);
    @(negedge clk); v = last_rsp;
  endtask
  task automatic imem(input int a, input ap_instr_t t);
    host_cmd_t c; c = '0; c.bcast = 1; c.kind = HC_IMEM_WR; c.addr = IDX_W'(a); c.instr = t; issue(c);
  endtask
  task automatic xfer(input bit to_cap, input bit bc, input int cap, input int mrow, input int crow, input int n);
    host_cmd_t c; c = '0; c.bcast = 1; c.kind = HC_XFER; c.xfer.to_cap = to_cap; c.xfer.bcast = bc;
    c.xfer.cap = NODE_W'(cap); c.xfer.map_row = IDX_W'(mrow); c.xfer.cap_row = IDX_W'(crow);
    c.xfer.nwords = 7'(n); issue(c);
  endtask
  function automatic ap_instr_t mk(ap_opcode_e op, bit dir, int m, int a, int b, int c, int d);
    ap_instr_t t; t.op = op; t.dir = dir; t.m = 4'(m);
    t.a = IDX_W'(a); t.b = IDX_W'(b); t.c = IDX_W'(c); t.d = IDX_W'(d); return t;
  endfunction

  logic [2:0] xv [NCL][16];
  logic [2:0] wv [NCL][NC][16];
  logic [15:0] v;
  int pc;

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // MAP round trip
    for (int cl = 0; cl < NCL; cl++) begin
      map_wr(cl, 250, 16'hBEE0 + 16'(cl)); map_rd(cl, 250, v);
      check(v == 16'hBEE0 + 16'(cl), "MAP word round trip");
      check(rd_lat > 0 && rd_lat <= 12, $sformatf("MAP read latency %0d clocks", rd_lat));
    end
    // operands: x at cols 0..2 of MAP rows 0..15, w of CAP k at cols 3..5 of rows 16+16k..
    for (int cl = 0; cl < NCL; cl++) begin
      for (int r = 0; r < 16; r++) begin xv[cl][r] = 3'($urandom); map_wr(cl, r, {13'd0, xv[cl][r]}); end
      for (int k = 0; k < NC; k++) for (int r = 0; r < 16; r++) begin
        wv[cl][k][r] = 3'($urandom); map_wr(cl, 16 + 16 * k + r, {10'd0, wv[cl][k][r], 3'd0});
      end
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
    begin host_cmd_t c; c = '0; c.bcast = 1; c.kind = HC_RUN; c.addr = 0; issue(c); end
    // Write stage
    for (int k = 0; k < NC; k++) xfer(0, 0, k + 1, 100 + 16 * k, 0, 16);
    for (int cl = 0; cl < NCL; cl++) for (int k = 0; k < NC; k++) for (int j = 0; j < 8; j++) begin
      logic [5:0] p0, p1; logic [6:0] s; logic [1:0] mx;
      p0 = 6'(xv[cl][2*j]) * 6'(wv[cl][k][2*j]);     if (p0[5]) p0 = 0;
      p1 = 6'(xv[cl][2*j+1]) * 6'(wv[cl][k][2*j+1]); if (p1[5]) p1 = 0;
      s = 7'(p0) + 7'(p1);
      mx = (s[1:0] > p1[1:0]) ? s[1:0] : p1[1:0];
      map_rd(cl, 100 + 16 * k + 2 * j, v);
      check(v[12:6] == s && v[15:13] == s[2:0] && v[1:0] == mx,
            $sformatf("cluster %0d CAP %0d pair %0d: got %h sum exp %0d got %0d", cl, k, j, v, s, v[12:6]));
    end
    check(!err, "no AP error");
    for (int i = 0; i < M_NUM; i++) begin
      mech_e e; e = mech_e'(i);
      $display("mechanism %-14s %0d", e.name(), mech[i]);
      check(mech[i] > 0, $sformatf("mechanism %s never occurred", e.name()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
