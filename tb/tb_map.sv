// tb_map: self-checking testbench of a memory AP (1D AP, TWO_D=0).
//
// A 64-row MAP is filled through mesh data packets (PK_WDATA, wr_done once
// per packet), read back through read-request packets (the reply must carry
// the rows to the requested node and row) and through the direct word port,
// runs a horizontal-mode MAX (pooling kernel) over all rows and checks it,
// and checks that a vertical-mode instruction is refused with err.
module tb_map;
  import bf_pkg::*;
  localparam int R = 64, C = 16, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic imem_we = 0; logic [2:0] imem_waddr = 0; ap_instr_t imem_wdata = '0;
  logic start = 0; logic idle, busy, done, err;
  logic rx_valid = 0, rx_ready, tx_valid, tx_ready = 1, wr_done;
  pkt_t rx_pkt = '0, tx_pkt;
  logic ext_req = 0, ext_we = 0, ext_rdy, ext_ack;
  logic [IDX_W-1:0] ext_row = 0; logic [C-1:0] ext_wdata = 0, ext_rdata;

  ap #(.ROWS(R), .COLS(C), .DEPTH(D), .TWO_D(1'b0)) dut (
    .clk, .rst_n, .imem_we, .imem_waddr, .imem_wdata, .start, .start_pc(3'd0),
    .idle, .busy, .done, .err, .rx_valid, .rx_ready, .rx_pkt, .tx_valid, .tx_ready, .tx_pkt,
    .wr_done, .ext_req, .ext_we, .ext_row, .ext_wdata, .ext_rdy, .ext_ack, .ext_rdata);

  int checks = 0, failures = 0, nwd = 0;
  always @(posedge clk) if (wr_done) nwd++;
  initial begin
    #5_000_000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  task automatic send(input pkt_t p);
    @(negedge clk); rx_valid = 1; rx_pkt = p;
    do @(posedge clk); while (!rx_ready);
    @(negedge clk); rx_valid = 0;
  endtask
  task automatic rd(input int r, output logic [15:0] v);
    @(negedge clk); ext_req = 1; ext_we = 0; ext_row = IDX_W'(r);
    do @(posedge clk); while (!ext_rdy);
    @(negedge clk); ext_req = 0;
    while (!ext_ack) @(posedge clk);
    v = ext_rdata; @(negedge clk);
  endtask
  function automatic ap_instr_t mk(ap_opcode_e op, bit dir, int m, int a, int b, int c);
    ap_instr_t t; t = '0; t.op = op; t.dir = dir; t.m = 4'(m);
    t.a = IDX_W'(a); t.b = IDX_W'(b); t.c = IDX_W'(c); return t;
  endfunction
  task automatic run1(input ap_instr_t t);
    @(negedge clk); imem_we = 1; imem_waddr = 0; imem_wdata = t;
    @(negedge clk); imem_waddr = 1; imem_wdata = mk(OP_HALT, 0, 0, 0, 0, 0);
    @(negedge clk); imem_we = 0; start = 1; @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
  endtask

  logic [15:0] img [R], v;
  pkt_t p;
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // fill by one 64-word packet
    p = '0; p.kind = PK_WDATA; p.row = 0; p.nwords = 7'(R);
    for (int r = 0; r < R; r++) begin img[r] = 16'($urandom); p.data[r*C +: C] = img[r]; end
    send(p);
    while (!idle || !rx_ready || nwd == 0) @(posedge clk);
    check(nwd == 1, "one wr_done per packet");
    for (int r = 0; r < R; r++) begin rd(r, v); check(v == img[r], $sformatf("row %0d", r)); end
    // read request: rows 10..29 to node 5 row 100
    p = '0; p.kind = PK_RDREQ; p.row = 10; p.nwords = 20; p.reply_node = 5; p.reply_row = 100;
    send(p);
    do @(posedge clk); while (!tx_valid);
    check(tx_pkt.kind == PK_WDATA && tx_pkt.dst == 5 && tx_pkt.row == 100 && tx_pkt.nwords == 20, "reply header");
    for (int k = 0; k < 20; k++) check(tx_pkt.data[k*C +: C] == img[10 + k], $sformatf("reply word %0d", k));
    // horizontal MAX of two 7-bit fields: B(7..13) = max(A(0..6), B)
    run1(mk(OP_MAX, 0, 7, 0, 7, 14));
    for (int r = 0; r < R; r++) begin
      logic [6:0] a, b;
      a = img[r][6:0]; b = img[r][13:7];
      rd(r, v);
      check(v[13:7] == (a > b ? a : b) && v[6:0] == a, $sformatf("MAX row %0d", r));
    end
    check(!err, "no err after horizontal op");
    // vertical op on the 1D MAP is refused
    run1(mk(OP_ADD, 1, 4, 0, 4, 8));
    check(err, "err after vertical op");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
