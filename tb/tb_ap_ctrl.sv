// tb_ap_ctrl: self-checking testbench of the AP controller.
//
// The controller is connected to an instruction cache, key/mask registers and
// a 1D CAM (TWO_D=0, as in a memory AP), all of 12 rows. The testbench
// writes rows through the word port (two write clocks per row), runs programs
// and checks: the results of a horizontal ADD and COPY, the number of CAM
// micro-operations of every instruction type (ADD 1+8m, MUL 1+8m^2+2m,
// RELU 3+2(m-1), MAX 1+8m, COPY 2m, MOVE 3), that a program of several
// instructions runs to OP_HALT, that a vertical arithmetic instruction on a
// 1D AP is skipped and raises err, and that a word request is refused
// (wio_rdy low) while a program runs.
module tb_ap_ctrl;
  import bf_pkg::*;
  localparam int R = 12, C = 16, D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0; logic [3:0] start_pc = 0;
  logic idle, busy, done, err;
  logic [3:0] ic_raddr; ap_instr_t ic_rdata;
  km_cmd_t km; cam_op_e cam_op; lane_sel_e cam_sel;
  logic [C-1:0] cam_ext, ctag, hkey, hmask;
  logic [R-1:0] vkey, vmask, rtag;
  logic wio_req = 0, wio_we = 0, wio_rdy, wio_ack;
  logic [IDX_W-1:0] wio_row = 0; logic [C-1:0] wio_wdata = 0, wio_rdata;
  logic imem_we = 0; logic [3:0] imem_waddr = 0; ap_instr_t imem_wdata = '0;

  ap_icache #(.DEPTH(D)) u_ic (.clk, .we(imem_we), .waddr(imem_waddr), .wdata(imem_wdata),
                               .raddr(ic_raddr), .rdata(ic_rdata));
  ap_ctrl #(.COLS(C), .DEPTH(D), .TWO_D(1'b0)) dut (.*);
  ap_keymask #(.ROWS(R), .COLS(C)) u_km (.clk, .rst_n, .cmd(km), .hkey, .hmask, .vkey, .vmask);
  ap_cam #(.ROWS(R), .COLS(C), .TWO_D(1'b0)) u_cam (.clk, .rst_n, .op(cam_op), .sel(cam_sel),
     .ext_sel(cam_ext), .hkey, .hmask, .vkey, .vmask, .rtag, .ctag);

  int checks = 0, failures = 0, ops = 0, wr_clk = 0;
  always @(posedge clk) begin
    if (cam_op != CAM_NOP) ops++;
    if (cam_op == CAM_WR_V) wr_clk++;
  end

  initial begin
    #1_000_000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic word(input bit we, input int r, input logic [15:0] wd, output logic [15:0] rd);
    @(negedge clk); wio_req = 1; wio_we = we; wio_row = IDX_W'(r); wio_wdata = wd;
    do @(posedge clk); while (!wio_rdy);
    @(negedge clk); wio_req = 0;
    while (!wio_ack) @(posedge clk);
    rd = wio_rdata;
    @(negedge clk);
  endtask

  function automatic ap_instr_t mk(ap_opcode_e op, bit dir, int m, int a, int b, int c, int d);
    ap_instr_t t;
    t.op = op; t.dir = dir; t.m = 4'(m);
    t.a = IDX_W'(a); t.b = IDX_W'(b); t.c = IDX_W'(c); t.d = IDX_W'(d);
    return t;
  endfunction

  task automatic prog(input ap_instr_t p [$]);
    foreach (p[k]) begin
      @(negedge clk); imem_we = 1; imem_waddr = 4'(k); imem_wdata = p[k];
    end
    @(negedge clk); imem_we = 1; imem_waddr = 4'(p.size()); imem_wdata = mk(OP_HALT, 0, 0, 0, 0, 0, 0);
    @(negedge clk); imem_we = 0;
  endtask

  task automatic run(output int n);
    @(negedge clk); start = 1; start_pc = 0; ops = 0; @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    repeat (2) @(posedge clk);
    n = ops;
    @(negedge clk);
  endtask

  logic [15:0] img [R], v;
  int n;

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    check(idle && !busy, "idle after reset");
    // word writes: two clocks of CAM writes per row
    wr_clk = 0;
    for (int r = 0; r < R; r++) begin img[r] = 16'($urandom); word(1, r, img[r], v); end
    check(wr_clk == 2 * R, $sformatf("write clocks %0d", wr_clk));
    for (int r = 0; r < R; r++) begin word(0, r, 0, v); check(v == img[r], $sformatf("read row %0d", r)); end

    // ADD m=7: A 0..6, B 7..13, carry 14
    prog('{mk(OP_ADD, 0, 7, 0, 7, 14, 0)}); run(n);
    check(n == 1 + 8 * 7, $sformatf("ADD ops %0d", n));
    for (int r = 0; r < R; r++) begin
      logic [7:0] s; s = 8'(img[r][6:0]) + 8'(img[r][13:7]);
      word(0, r, 0, v);
      check(v[14:7] == s && v[6:0] == img[r][6:0] && v[15] == img[r][15], $sformatf("ADD row %0d", r));
      img[r] = v;
    end
    // COPY 4 bits 0..3 -> 8..11
    prog('{mk(OP_COPY, 0, 4, 0, 8, 0, 0)}); run(n);
    check(n == 8, $sformatf("COPY ops %0d", n));
    for (int r = 0; r < R; r++) begin
      word(0, r, 0, v); check(v == {img[r][15:12], img[r][3:0], img[r][7:0]}, $sformatf("COPY row %0d", r));
    end
    // micro-op counts
    for (int m = 1; m <= 8; m++) begin
      prog('{mk(OP_RELU, 0, m, 0, 0, 15, 0)}); run(n); check(n == 3 + 2 * (m - 1), $sformatf("RELU m=%0d ops %0d", m, n));
      prog('{mk(OP_MAX, 0, m, 0, 0, 14, 0)});  run(n); check(n == 1 + 8 * m, $sformatf("MAX m=%0d ops %0d", m, n));
      prog('{mk(OP_MUL, 0, m, 0, 0, 0, 15)});  run(n); check(n == 1 + 8 * m * m + 2 * m, $sformatf("MUL m=%0d ops %0d", m, n));
    end
    prog('{mk(OP_MOVE, 1, 8, 1, 0, 2, 8)}); run(n); check(n == 3, $sformatf("MOVE ops %0d", n));
    // multi-instruction program
    prog('{mk(OP_COPY, 0, 2, 0, 2, 0, 0), mk(OP_COPY, 0, 3, 0, 4, 0, 0), mk(OP_ADD, 0, 2, 0, 4, 8, 0)}); run(n);
    check(n == 4 + 6 + 17, $sformatf("3-instr ops %0d", n));
    check(!err, "no err yet");
    // vertical ADD on a 1D AP: skipped, err set
    prog('{mk(OP_ADD, 1, 4, 0, 4, 8, 0)}); run(n);
    check(n == 0 && err, $sformatf("vertical op on 1D: ops %0d err %0d", n, err));
    // word port refused while running
    prog('{mk(OP_MUL, 0, 8, 0, 0, 0, 15)});
    @(negedge clk); start = 1; @(negedge clk); start = 0; wio_req = 1; wio_we = 0;
    repeat (20) begin @(posedge clk); check(!wio_rdy && busy, "wio_rdy low while busy"); end
    @(negedge clk); wio_req = 0;
    while (!done) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
