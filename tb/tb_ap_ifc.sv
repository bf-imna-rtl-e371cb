// tb_ap_ifc: self-checking testbench of the AP interconnection interface.
//
// A word-port model here stands for the AP (random ready delay, reply one
// clock after acceptance). The testbench sends PK_WDATA packets and checks
// that each word lands in the right row and that wr_done pulses once; it
// sends PK_RDREQ packets and checks the reply packet's header and data, with
// the transmitter held back by a random tx_ready.
module tb_ap_ifc;
  import bf_pkg::*;
  localparam int C = 16, R = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rx_valid = 0, rx_ready, tx_valid, tx_ready = 0, wr_done;
  pkt_t rx_pkt = '0, tx_pkt;
  logic wio_req, wio_we, wio_rdy = 0, wio_ack = 0;
  logic [IDX_W-1:0] wio_row; logic [C-1:0] wio_wdata, wio_rdata = 0;
  ap_ifc #(.COLS(C)) dut (.*);

  logic [C-1:0] mem [R];
  int checks = 0, failures = 0, wrd = 0;
  // word-port model
  always @(negedge clk) wio_rdy = ($urandom % 3) != 0;
  always @(posedge clk) begin
    wio_ack <= 0;
    if (wr_done) wrd++;
    if (wio_req && wio_rdy) begin
      wio_ack <= 1;
      if (wio_we) mem[wio_row] <= wio_wdata; else wio_rdata <= mem[wio_row];
    end
  end
  always @(negedge clk) tx_ready = ($urandom % 2);

  initial begin
    #1_000_000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic send(input pkt_t p);
    @(negedge clk); rx_valid = 1; rx_pkt = p;
    do @(posedge clk); while (!rx_ready);
    @(negedge clk); rx_valid = 0;
  endtask

  initial begin
    for (int r = 0; r < R; r++) mem[r] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 12; it++) begin
      pkt_t p; int nw, row; logic [C-1:0] old [R];
      nw = 1 + $urandom % 64; row = $urandom % (R - 64);
      p = '0; p.kind = PK_WDATA; p.row = IDX_W'(row); p.nwords = 7'(nw);
      for (int k = 0; k < 32; k++) p.data[k*32 +: 32] = $urandom;
      old = mem; wrd = 0;
      send(p);
      while (!rx_ready) @(posedge clk);
      repeat (2) @(posedge clk);
      checks++; if (wrd != 1) begin failures++; $display("FAIL wr_done count %0d", wrd); end
      for (int r = 0; r < R; r++) begin
        logic [C-1:0] e;
        e = (r >= row && r < row + nw) ? p.data[(r-row)*C +: C] : old[r];
        checks++; if (mem[r] !== e) begin failures++; $display("FAIL it %0d row %0d", it, r); end
      end
      // read back a window as a reply packet
      p = '0; p.kind = PK_RDREQ; p.row = IDX_W'(row); p.nwords = 7'(nw);
      p.reply_node = NODE_W'(1 + $urandom % 64); p.reply_row = IDX_W'($urandom); p.bcast = 1'($urandom);
      send(p);
      do @(posedge clk); while (!(tx_valid && tx_ready));
      checks++;
      if (tx_pkt.kind != PK_WDATA || tx_pkt.dst != p.reply_node || tx_pkt.row != p.reply_row
          || tx_pkt.nwords != p.nwords || tx_pkt.bcast != p.bcast) begin failures++; $display("FAIL reply header"); end
      for (int k = 0; k < nw; k++) begin
        checks++; if (tx_pkt.data[k*C +: C] !== mem[row + k]) begin failures++; $display("FAIL reply word %0d", k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
