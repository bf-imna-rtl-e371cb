// tb_cap: self-checking testbench of a computation AP (2D AP).
//
// Fills a 40-row AP with random words through the word port, runs programs
// of ADD, MUL, RELU, MAX, COPY and MOVE in horizontal mode and ADD, MAX and
// 8-bit MUL in vertical mode, reads every row back and compares with results computed here
// from the same random operands. It also counts the CAM micro-operations of
// each instruction and checks them against the expected pass counts
// (ADD 1+8m, MUL 1+8m^2+2m, RELU 3+2(m-1), MAX 1+8m, COPY 2m, MOVE 3).
module tb_cap;
  import bf_pkg::*;

  localparam int ROWS = 40;
  localparam int COLS = 16;
  localparam int DEPTH = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic imem_we = 0; logic [3:0] imem_waddr = 0; ap_instr_t imem_wdata = '0;
  logic start = 0; logic [3:0] start_pc = 0;
  logic idle, busy, done, err;
  logic tx_valid, rx_ready, wr_done; pkt_t tx_pkt;
  logic ext_req = 0, ext_we = 0, ext_rdy, ext_ack;
  logic [IDX_W-1:0] ext_row = 0; logic [COLS-1:0] ext_wdata = 0, ext_rdata;

  ap #(.ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH), .TWO_D(1'b1)) dut (
    .clk, .rst_n, .imem_we, .imem_waddr, .imem_wdata, .start, .start_pc,
    .idle, .busy, .done, .err, .rx_valid(1'b0), .rx_ready, .rx_pkt('0),
    .tx_valid, .tx_ready(1'b1), .tx_pkt, .wr_done,
    .ext_req, .ext_we, .ext_row, .ext_wdata, .ext_rdy, .ext_ack, .ext_rdata);

  int checks = 0, failures = 0;
  int ops;   // CAM micro-ops since the last program start
  always @(posedge clk) if (dut.cam_op != CAM_NOP) ops++;

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr_row(input int r, input logic [15:0] v);
    @(negedge clk); ext_req = 1; ext_we = 1; ext_row = IDX_W'(r); ext_wdata = v;
    do @(posedge clk); while (!ext_rdy);
    @(negedge clk); ext_req = 0;
    while (!ext_ack) @(posedge clk);
    @(negedge clk);
  endtask

  task automatic rd_row(input int r, output logic [15:0] v);
    @(negedge clk); ext_req = 1; ext_we = 0; ext_row = IDX_W'(r);
    do @(posedge clk); while (!ext_rdy);
    @(negedge clk); ext_req = 0;
    while (!ext_ack) @(posedge clk);
    v = ext_rdata;
    @(negedge clk);
  endtask

  function automatic ap_instr_t mk(ap_opcode_e op, bit dir, int m, int a, int b, int c, int d);
    ap_instr_t t;
    t.op = op; t.dir = dir; t.m = 4'(m);
    t.a = IDX_W'(a); t.b = IDX_W'(b); t.c = IDX_W'(c); t.d = IDX_W'(d);
    return t;
  endfunction

  // run a one-instruction program, return its micro-op count
  task automatic run1(input ap_instr_t t, output int n);
    @(negedge clk);
    imem_we = 1; imem_waddr = 0; imem_wdata = t; @(negedge clk);
    imem_waddr = 1; imem_wdata = mk(OP_HALT, 0, 0, 0, 0, 0, 0); @(negedge clk);
    imem_we = 0;
    start = 1; start_pc = 0; ops = 0; @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    repeat (3) @(posedge clk);
    n = ops;
    @(negedge clk);
  endtask

  logic [15:0] img [ROWS];
  logic [15:0] v;
  int n;

  task automatic load_random();
    for (int r = 0; r < ROWS; r++) begin
      img[r] = 16'($urandom);
      wr_row(r, img[r]);
    end
  endtask

  task automatic read_all(output logic [15:0] o [ROWS]);
    for (int r = 0; r < ROWS; r++) rd_row(r, o[r]);
  endtask

  logic [15:0] got [ROWS];

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- word write / read
    load_random();
    read_all(got);
    for (int r = 0; r < ROWS; r++) check(got[r] == img[r], $sformatf("word rw row %0d exp %h got %h", r, img[r], got[r]));

    // ---- ADD horizontal: A=cols 0..7, B=cols 8..15 ... need carry column:
    //      use m=6: A 0..5, B 6..11, carry 12
    for (int rep = 0; rep < 2; rep++) begin
      load_random();
      run1(mk(OP_ADD, 0, 6, 0, 6, 12, 0), n);
      check(n == 1 + 8 * 6, $sformatf("ADD ops %0d", n));
      read_all(got);
      for (int r = 0; r < ROWS; r++) begin
        logic [6:0] s;
        s = 7'(img[r][5:0]) + 7'(img[r][11:6]);
        check(got[r][11:6] == s[5:0] && got[r][12] == s[6] && got[r][5:0] == img[r][5:0]
              && got[r][15:13] == img[r][15:13],
              $sformatf("ADD row %0d %h+%h got %h", r, img[r][5:0], img[r][11:6], got[r]));
      end
    end

    // ---- MUL horizontal m=3: A 0..2, B 3..5, C 6..11, carry 12
    load_random();
    run1(mk(OP_MUL, 0, 3, 0, 3, 6, 12), n);
    check(n == 1 + 8 * 9 + 2 * 3, $sformatf("MUL ops %0d", n));
    read_all(got);
    for (int r = 0; r < ROWS; r++)
      check(got[r][11:6] == 6'(img[r][2:0]) * 6'(img[r][5:3]) && got[r][5:0] == img[r][5:0],
            $sformatf("MUL row %0d %0d*%0d got %0d", r, img[r][2:0], img[r][5:3], got[r][11:6]));

    // ---- RELU horizontal m=8 on cols 0..7, flag col 8
    load_random();
    run1(mk(OP_RELU, 0, 8, 0, 0, 8, 0), n);
    check(n == 3 + 2 * 7, $sformatf("RELU ops %0d", n));
    read_all(got);
    for (int r = 0; r < ROWS; r++)
      check(got[r][7:0] == (img[r][7] ? 8'd0 : img[r][7:0]) && got[r][15:9] == img[r][15:9],
            $sformatf("RELU row %0d %h got %h", r, img[r][7:0], got[r][7:0]));

    // ---- MAX horizontal m=7: A 0..6, B 7..13, flags 14,15
    load_random();
    run1(mk(OP_MAX, 0, 7, 0, 7, 14, 0), n);
    check(n == 1 + 8 * 7, $sformatf("MAX ops %0d", n));
    read_all(got);
    for (int r = 0; r < ROWS; r++) begin
      logic [6:0] a, b;
      a = img[r][6:0]; b = img[r][13:7];
      check(got[r][13:7] == ((a > b) ? a : b) && got[r][6:0] == a,
            $sformatf("MAX row %0d %0d %0d got %0d", r, a, b, got[r][13:7]));
    end

    // ---- COPY cols 0..4 -> 8..12
    load_random();
    run1(mk(OP_COPY, 0, 5, 0, 8, 0, 0), n);
    check(n == 10, $sformatf("COPY ops %0d", n));
    read_all(got);
    for (int r = 0; r < ROWS; r++)
      check(got[r][12:8] == img[r][4:0] && got[r][7:0] == img[r][7:0] && got[r][15:13] == img[r][15:13],
            $sformatf("COPY row %0d", r));

    // ---- MOVE row 3 field [0+:8] -> row 9 field [8+:8]
    load_random();
    run1(mk(OP_MOVE, 1, 8, 3, 0, 9, 8), n);
    check(n == 3, $sformatf("MOVE ops %0d", n));
    read_all(got);
    for (int r = 0; r < ROWS; r++)
      check(got[r] == ((r == 9) ? {img[3][7:0], img[9][7:0]} : img[r]), $sformatf("MOVE row %0d", r));

    // ---- ADD vertical m=5: A rows 0..4, B rows 5..9, carry row 10; lanes = columns
    load_random();
    run1(mk(OP_ADD, 1, 5, 0, 5, 10, 0), n);
    check(n == 1 + 8 * 5, $sformatf("ADD-V ops %0d", n));
    read_all(got);
    for (int c = 0; c < COLS; c++) begin
      logic [5:0] a, b, s, g;
      for (int k = 0; k < 5; k++) begin a[k] = img[k][c]; b[k] = img[5+k][c]; g[k] = got[5+k][c]; end
      a[5] = 0; b[5] = 0; g[5] = got[10][c];
      s = a + b;
      check(g == s, $sformatf("ADD-V col %0d %0d+%0d got %0d", c, a, b, g));
    end

    // ---- MAX vertical m=4: A rows 0..3, B rows 4..7, flags rows 8,9
    load_random();
    run1(mk(OP_MAX, 1, 4, 0, 4, 8, 0), n);
    read_all(got);
    for (int c = 0; c < COLS; c++) begin
      logic [3:0] a, b, g;
      for (int k = 0; k < 4; k++) begin a[k] = img[k][c]; b[k] = img[4+k][c]; g[k] = got[4+k][c]; end
      check(g == ((a > b) ? a : b), $sformatf("MAX-V col %0d", c));
    end
    // ---- MUL vertical m=8: A rows 0..7, B rows 8..15, C rows 16..31, carry row 32
    load_random();
    run1(mk(OP_MUL, 1, 8, 0, 8, 16, 32), n);
    check(n == 1 + 8 * 64 + 2 * 8, $sformatf("MUL-V ops %0d", n));
    read_all(got);
    for (int c = 0; c < COLS; c++) begin
      logic [7:0] a, b; logic [15:0] g;
      for (int k = 0; k < 8; k++) begin a[k] = img[k][c]; b[k] = img[8+k][c]; end
      for (int k = 0; k < 16; k++) g[k] = got[16+k][c];
      check(g == 16'(a) * 16'(b), $sformatf("MUL-V col %0d %0d*%0d got %0d", c, a, b, g));
    end
    check(!err, "no error flag");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
