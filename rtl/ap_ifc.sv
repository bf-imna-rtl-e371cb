// ap_ifc: interconnection interface between an associative processor and the
// cluster's on-chip mesh.
//
// It takes one packet at a time from the mesh (rx_valid/rx_ready):
//   PK_WDATA  the packet's nwords 16-bit words (word w in data[16w +: 16]) are
//             written word-sequentially into rows row .. row+nwords-1 through
//             the controller's word port; wr_done pulses when the last is in.
//   PK_RDREQ  rows row .. row+nwords-1 are read word-sequentially into a
//             transfer buffer, which is then sent (tx_valid/tx_ready) as a
//             PK_WDATA packet to reply_node at reply_row, as a broadcast if the
//             request was one.
// A transfer carries up to FLIT_W/COLS words (64 words = 1024 bits). Each word
// costs the controller's word-access time (2 clocks to write, 3 to read) plus
// one clock of handshake. The paper names this block and the word-sequential
// read/transfer/write steps it serves; the packet format and buffering are this
// design's own.
//
// Lint notes: the destination field of a held packet is not read here (the
// mesh has already used it to route the packet). The reset is reported as used both synchronously and
// asynchronously: the registers use it asynchronously, and the assertion's
// disable condition samples it on the clock. Both are the one active-low reset.
module ap_ifc
  import bf_pkg::*;
#(
  parameter int unsigned COLS = AP_COLS
) (
  input  logic             clk,
  input  logic             rst_n,
  // mesh side
  input  logic             rx_valid,
  output logic             rx_ready,
  input  pkt_t             rx_pkt,
  output logic             tx_valid,
  input  logic             tx_ready,
  output pkt_t             tx_pkt,
  output logic             wr_done,
  // controller word port
  output logic             wio_req,
  output logic             wio_we,
  output logic [IDX_W-1:0] wio_row,
  output logic [COLS-1:0]  wio_wdata,
  input  logic             wio_rdy,
  input  logic             wio_ack,
  input  logic [COLS-1:0]  wio_rdata
);

  localparam int unsigned WPF = FLIT_W / COLS;

  typedef enum logic [1:0] {I_IDLE, I_WORD, I_WAIT, I_SEND} istate_e;

  istate_e          st;
  pkt_t             cur;
  logic [6:0]       w;        // current word

  assign rx_ready  = (st == I_IDLE);
  assign wio_we    = (cur.kind == PK_WDATA);
  assign wio_row   = cur.row + IDX_W'(w);
  assign wio_wdata = cur.data[w[5:0]*COLS +: COLS];
  assign wio_req   = (st == I_WORD);
  assign tx_valid  = (st == I_SEND);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= I_IDLE; cur <= '0; w <= '0; wr_done <= 1'b0; tx_pkt <= '0;
    end else begin
      wr_done <= 1'b0;
      unique case (st)
        I_IDLE: if (rx_valid) begin
          cur <= rx_pkt; w <= '0;
          tx_pkt <= '0;
          st <= (rx_pkt.nwords == '0) ? I_IDLE : I_WORD;
        end
        I_WORD: if (wio_rdy) st <= I_WAIT;
        I_WAIT: if (wio_ack) begin
          if (cur.kind == PK_RDREQ) tx_pkt.data[w[5:0]*COLS +: COLS] <= wio_rdata;
          if (w + 7'd1 == cur.nwords || w + 7'd1 == 7'(WPF)) begin
            if (cur.kind == PK_WDATA) begin
              wr_done <= 1'b1; st <= I_IDLE;
            end else begin
              tx_pkt.kind       <= PK_WDATA;
              tx_pkt.bcast      <= cur.bcast;
              tx_pkt.dst        <= cur.reply_node;
              tx_pkt.row        <= cur.reply_row;
              tx_pkt.nwords     <= cur.nwords;
              st <= I_SEND;
            end
          end else begin
            w <= w + 7'd1; st <= I_WORD;
          end
        end
        I_SEND: if (tx_ready) st <= I_IDLE;
        default: st <= I_IDLE;
      endcase
    end
  end

  a_tx_stable: assert property (@(posedge clk) disable iff (!rst_n)
    tx_valid && !tx_ready |=> tx_valid && $stable(tx_pkt));

endmodule
