// ap_ctrl: controller of an associative processor.
//
// It fetches instructions from the instruction cache and turns each one into
// a stream of CAM micro-operations, one per clock, following the operation's
// look-up table (LUT): for every bit (column pair in horizontal mode, row pair
// in vertical mode) each LUT pass is one compare followed by one write into
// the matching lanes. For each micro-operation it loads the key/mask registers
// (combinationally, loaded at the clock edge) and registers the CAM opcode,
// so the CAM executes it in the next clock with the new key and mask.
//
// Operations and their CAM micro-operation counts (m = precision):
//   OP_ADD  B += A in place, carry column c becomes bit m of the result.
//           1 clear + 4 passes x m bits (4m compares + 4m writes).
//   OP_MUL  C = A*B out of place, 2m-bit result from c, carry scratch d.
//           1 clear + m x (4m passes + 1 carry-flush pass) = 1 + 8m^2 + 2m.
//   OP_RELU MSB copied to flag c through the tags, MSB cleared (1 read,
//           2 writes), then one pass per remaining bit: 3 + 2(m-1).
//   OP_MAX  B = max(A,B) unsigned, flags c,c+1: 1 clear + 4 passes x m bits,
//           scanned from the MSB.
//   OP_COPY B = A through the tags: 2m.
//   OP_MOVE word transfer (row a, field at b -> row c, field at d): one
//           word-sequential read, one idle clock, a two-clock word write.
// dir selects horizontal mode (rows are lanes, a..d are columns) or vertical
// mode (columns are lanes, a..d are rows); vertical mode needs TWO_D.
//
// Word port (wio_*, valid/ready on wio_req/wio_rdy): when no program runs, a request reads one row (ack with
// rdata after 3 clocks) or writes one row in two clocks (set the 1s, then the
// 0s), as the paper's word-sequential modes. A program is started with start /
// start_pc; busy stays high until OP_HALT is reached (done pulses then).
//
// From the paper: the compare/write execution model, the key/mask/tag roles,
// the ReLU and max-pooling LUTs (its Tables III and IV), the pass counts of
// add and multiply. This design's own: the instruction set and encoding, the
// in-place add LUT pass order (110, 100, 001, 011 on A,B,carry), the extra
// carry-flush pass per multiplier bit, the clear of carry/flag/result fields
// before an operation, and the word-transfer sequence.
module ap_ctrl
  import bf_pkg::*;
#(
  parameter int unsigned COLS  = AP_COLS,
  parameter int unsigned DEPTH = IMEM_DEPTH,
  parameter bit          TWO_D = 1'b1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // program control
  input  logic                     start,
  input  logic [$clog2(DEPTH)-1:0] start_pc,
  output logic                     idle,      // start is accepted only when idle
  output logic                     busy,
  output logic                     done,
  output logic                     err,       // sticky: vertical op on a 1D AP
  // instruction cache
  output logic [$clog2(DEPTH)-1:0] ic_raddr,
  input  ap_instr_t                ic_rdata,
  // key/mask registers and CAM
  output km_cmd_t                  km,
  output cam_op_e                  cam_op,
  output lane_sel_e                cam_sel,
  output logic [COLS-1:0]          cam_ext,
  input  logic [COLS-1:0]          ctag,
  // word port
  input  logic                     wio_req,
  input  logic                     wio_we,
  input  logic [IDX_W-1:0]         wio_row,
  input  logic [COLS-1:0]          wio_wdata,
  output logic                     wio_rdy,   // request accepted when wio_req && wio_rdy
  output logic                     wio_ack,
  output logic [COLS-1:0]          wio_rdata
);

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_DECODE, S_RUN, S_WIO} state_e;

  typedef struct packed {
    logic [3:0] ck;   // compare key per role
    logic [3:0] ce;   // roles taking part in the compare
    logic [3:0] wk;   // written value per role
    logic [3:0] we;   // roles written
  } pass_t;

  // LUT passes. Roles: ADD (A, B, carry, -); MUL (A_j, C_i+j, carry, B_i);
  // MAX (A_k, B_k, F1, F2), role bit 0 is the first role.
  function automatic pass_t lut(ap_opcode_e op, logic [1:0] p);
    pass_t t;
    t = '0;
    unique case (op)
      OP_ADD, OP_MUL: begin
        t.ce = (op == OP_MUL) ? 4'b1111 : 4'b0111;
        t.ck[3] = 1'b1;
        unique case (p)
          2'd0: begin t.ck[2:0] = 3'b011; t.we = 4'b0110; t.wk = 4'b0100; end // A1 B1 C0 -> B0 C1
          2'd1: begin t.ck[2:0] = 3'b001; t.we = 4'b0010; t.wk = 4'b0010; end // A1 B0 C0 -> B1
          2'd2: begin t.ck[2:0] = 3'b100; t.we = 4'b0110; t.wk = 4'b0010; end // A0 B0 C1 -> B1 C0
          2'd3: begin t.ck[2:0] = 3'b110; t.we = 4'b0010; t.wk = 4'b0000; end // A0 B1 C1 -> B0
        endcase
      end
      OP_MAX: begin
        t.ce = 4'b1111;
        unique case (p)
          2'd0: begin t.ck = 4'b0001; t.we = 4'b1010; t.wk = 4'b1010; end // 1000 -> B1 F2=1
          2'd1: begin t.ck = 4'b0010; t.we = 4'b1100; t.wk = 4'b1100; end // 0100 -> F1=1 F2=1
          2'd2: begin t.ck = 4'b1001; t.we = 4'b0010; t.wk = 4'b0010; end // 1001 -> B1
          2'd3: begin t.ck = 4'b1010; t.we = 4'b0010; t.wk = 4'b0000; end // 0101 -> B0
        endcase
      end
      default: ;
    endcase
    return t;
  endfunction

  state_e                   state;
  ap_instr_t                ins;
  logic [$clog2(DEPTH)-1:0] pc;
  logic [1:0]               pro;     // prologue step
  logic [3:0]               i, j;    // outer / inner bit counters
  logic [1:0]               p;       // LUT pass
  logic                     ph;      // 0 compare, 1 write
  logic                     fl;      // MUL carry-flush pass
  logic [1:0]               ws;      // word-port / move step
  logic                     w_we;
  logic [IDX_W-1:0]         w_row;
  logic [COLS-1:0]          w_data;

  logic [3:0]               mm;
  assign mm = (ins.m == 4'd0) ? 4'd8 : ins.m;

  // --- micro-operation of the current step (combinational) ---------------
  cam_op_e          u_op;
  lane_sel_e        u_sel;
  logic [COLS-1:0]  u_ext;
  km_cmd_t          u_km;
  logic             u_last;  // this is the last step of the instruction

  logic [IDX_W-1:0] role [4];
  pass_t            ps;
  logic [COLS-1:0]  mv_word;

  always_comb begin
    cam_op_e cmp_op, wr_op, wt_op;
    cmp_op = ins.dir ? CAM_CMP_V : CAM_CMP_H;
    wr_op  = ins.dir ? CAM_WR_V  : CAM_WR_H;
    wt_op  = ins.dir ? CAM_WT_V  : CAM_WT_H;
    u_op = CAM_NOP; u_sel = SEL_TAG; u_ext = '0; u_km = '0; u_last = 1'b0;
    u_km.vert = ins.dir;
    for (int e = 0; e < 4; e++) role[e] = '0;
    ps = lut(ins.op, p);
    mv_word = ((ctag >> ins.b) & ((COLS'(1) << mm) - COLS'(1))) << ins.d;

    unique case (ins.op)
      OP_ADD, OP_MUL, OP_MAX: begin
        if (ins.op == OP_ADD) begin
          role[0] = ins.a + IDX_W'(j); role[1] = ins.b + IDX_W'(j); role[2] = ins.c;
        end else if (ins.op == OP_MUL) begin
          role[0] = ins.a + IDX_W'(j); role[1] = ins.c + IDX_W'(i) + IDX_W'(j);
          role[2] = ins.d;             role[3] = ins.b + IDX_W'(i);
        end else begin
          role[0] = ins.a + IDX_W'(4'(mm - 4'd1 - j)); role[1] = ins.b + IDX_W'(4'(mm - 4'd1 - j));
          role[2] = ins.c;                          role[3] = ins.c + IDX_W'(1);
        end
        if (pro != 2'd0) begin
          // clear carry / flags / product field on every lane
          u_op = wr_op; u_sel = SEL_ALL; u_km.load = 1'b1;
          if (ins.op == OP_ADD) begin
            u_km.en = 4'b0001; u_km.idx[0] = ins.c;
          end else if (ins.op == OP_MAX) begin
            u_km.en = 4'b0011; u_km.idx[0] = ins.c; u_km.idx[1] = ins.c + IDX_W'(1);
          end else begin
            u_km.en = 4'b0001; u_km.idx[0] = ins.d;
            u_km.rng_en = 1'b1; u_km.rng_lo = ins.c; u_km.rng_len = IDX_W'({mm, 1'b0});
          end
        end else if (fl) begin
          // MUL: move the carry into C_{i+m}, clear it
          u_km.load = 1'b1;
          if (!ph) begin
            u_op = cmp_op; u_km.en = 4'b0001; u_km.idx[0] = ins.d; u_km.kbit[0] = 1'b1;
          end else begin
            u_op = wr_op;  u_km.en = 4'b0011;
            u_km.idx[0] = ins.d;                      u_km.kbit[0] = 1'b0;
            u_km.idx[1] = ins.c + IDX_W'(i) + IDX_W'(mm); u_km.kbit[1] = 1'b1;
            u_last = (i == mm - 4'd1);
          end
        end else begin
          u_km.load = 1'b1;
          for (int e = 0; e < 4; e++) u_km.idx[e] = role[e];
          if (!ph) begin
            u_op = cmp_op; u_km.en = ps.ce; u_km.kbit = ps.ck;
          end else begin
            u_op = wr_op;  u_km.en = ps.we; u_km.kbit = ps.wk;
            u_last = (ins.op != OP_MUL) && (p == 2'd3) && (j == mm - 4'd1);
          end
        end
      end
      OP_RELU: begin
        u_km.load = 1'b1;
        if (pro == 2'd1) begin        // read the MSB into the tags
          u_op = cmp_op; u_km.en = 4'b0001; u_km.idx[0] = ins.a + IDX_W'(mm - 4'd1); u_km.kbit[0] = 1'b1;
        end else if (pro == 2'd2) begin // flag <- tag
          u_op = wt_op;  u_km.en = 4'b0001; u_km.idx[0] = ins.c;
        end else if (pro == 2'd3) begin // MSB <- 0 on negative lanes
          u_op = wr_op;  u_km.en = 4'b0001; u_km.idx[0] = ins.a + IDX_W'(mm - 4'd1);
          u_last = (mm == 4'd1);
        end else begin
          u_km.en = (!ph) ? 4'b0011 : 4'b0001;
          u_km.idx[0] = ins.a + IDX_W'(4'(mm - 4'd2 - j)); u_km.idx[1] = ins.c;
          u_km.kbit = (!ph) ? 4'b0011 : 4'b0000;
          u_op = (!ph) ? cmp_op : wr_op;
          u_last = ph && (j == mm - 4'd2);
        end
      end
      OP_COPY: begin
        u_km.load = 1'b1; u_km.en = 4'b0001;
        if (!ph) begin
          u_op = cmp_op; u_km.idx[0] = ins.a + IDX_W'(j); u_km.kbit[0] = 1'b1;
        end else begin
          u_op = wt_op;  u_km.idx[0] = ins.b + IDX_W'(j);
          u_last = (j == mm - 4'd1);
        end
      end
      OP_MOVE: begin
        u_km.load = (ws != 2'd1); u_km.vert = 1'b1; u_km.en = 4'b0001;
        unique case (ws)
          2'd0: begin u_op = CAM_CMP_V; u_km.idx[0] = ins.a; u_km.kbit[0] = 1'b1; end
          2'd1: ;  // tags settle
          2'd2: begin u_op = CAM_WR_V; u_sel = SEL_EXT; u_ext = mv_word;
                      u_km.idx[0] = ins.c; u_km.kbit[0] = 1'b1; end
          2'd3: begin u_op = CAM_WR_V; u_sel = SEL_EXT;
                      u_ext = ~mv_word & (((COLS'(1) << mm) - COLS'(1)) << ins.d);
                      u_km.idx[0] = ins.c; u_km.kbit[0] = 1'b0; u_last = 1'b1; end
        endcase
      end
      default: u_last = 1'b1;
    endcase
  end

  // Key/mask loads are combinational so that the key/mask registers and the
  // registered CAM opcode change on the same clock edge.
  always_comb begin
    km = '0;
    if (state == S_RUN) km = u_km;
    else if (state == S_WIO && (w_we || ws == 2'd0)) begin
      km.load = 1'b1; km.vert = 1'b1; km.en = 4'b0001; km.idx[0] = w_row;
      km.kbit[0] = !(w_we && ws != 2'd0);
    end
  end

  // --- sequencing ---------------------------------------------------------
  assign ic_raddr = pc;
  assign busy     = (state != S_IDLE) && (state != S_WIO);
  assign idle     = (state == S_IDLE);
  assign wio_rdy  = (state == S_IDLE) && !start;
  assign wio_rdata = ctag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; ins <= '0; pc <= '0;
      pro <= '0; i <= '0; j <= '0; p <= '0; ph <= 1'b0; fl <= 1'b0; ws <= '0;
      w_we <= 1'b0; w_row <= '0; w_data <= '0;
      cam_op <= CAM_NOP; cam_sel <= SEL_TAG; cam_ext <= '0;
      done <= 1'b0; err <= 1'b0; wio_ack <= 1'b0;
    end else begin
      cam_op <= CAM_NOP; cam_sel <= SEL_TAG; cam_ext <= '0;
      done <= 1'b0; wio_ack <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            pc <= start_pc; state <= S_FETCH;
          end else if (wio_req) begin
            w_we <= wio_we; w_row <= wio_row; w_data <= wio_wdata; ws <= '0;
            state <= S_WIO;
          end
        end
        S_FETCH: state <= S_DECODE;   // cache read latency
        S_DECODE: begin
          ins <= ic_rdata;
          pc  <= pc + 1'b1;
          i <= '0; j <= '0; p <= '0; ph <= 1'b0; fl <= 1'b0; ws <= '0;
          pro <= (ic_rdata.op inside {OP_ADD, OP_MUL, OP_MAX}) ? 2'd1 :
                 (ic_rdata.op == OP_RELU) ? 2'd1 : 2'd0;
          if (ic_rdata.op == OP_HALT) begin
            state <= S_IDLE; done <= 1'b1;
          end else if (ic_rdata.op == OP_NOP ||
                       (ic_rdata.op inside {OP_ADD, OP_MUL, OP_RELU, OP_MAX, OP_COPY} &&
                        ic_rdata.dir && !TWO_D)) begin
            if (ic_rdata.op != OP_NOP) err <= 1'b1;
            state <= S_FETCH;
          end else begin
            state <= S_RUN;
          end
        end
        S_RUN: begin
          cam_op <= u_op; cam_sel <= u_sel; cam_ext <= u_ext;
          if (u_last) begin
            state <= S_FETCH;
          end else begin
            // advance the step counters
            unique case (ins.op)
              OP_ADD, OP_MAX, OP_MUL: begin
                if (pro != 2'd0) pro <= 2'd0;
                else if (fl) begin
                  if (ph) begin fl <= 1'b0; ph <= 1'b0; i <= i + 1'b1; end
                  else ph <= 1'b1;
                end else if (!ph) ph <= 1'b1;
                else begin
                  ph <= 1'b0;
                  if (p != 2'd3) p <= p + 1'b1;
                  else begin
                    p <= '0;
                    if (j != mm - 4'd1) j <= j + 1'b1;
                    else begin j <= '0; fl <= 1'b1; end   // only MUL gets here
                  end
                end
              end
              OP_RELU: begin
                if (pro == 2'd3) pro <= 2'd0;
                else if (pro != 2'd0) pro <= pro + 1'b1;
                else if (!ph) ph <= 1'b1;
                else begin ph <= 1'b0; j <= j + 1'b1; end
              end
              OP_COPY: begin
                if (!ph) ph <= 1'b1;
                else begin ph <= 1'b0; j <= j + 1'b1; end
              end
              OP_MOVE: ws <= ws + 1'b1;
              default: ;
            endcase
          end
        end
        S_WIO: begin
          ws <= ws + 1'b1;
          if (!w_we) begin
            // read: compare the row against all-ones, wait, return column tags
            unique case (ws)
              2'd0: cam_op <= CAM_CMP_V;
              2'd1: ;
              default: begin wio_ack <= 1'b1; state <= S_IDLE; end
            endcase
          end else begin
            cam_op <= CAM_WR_V; cam_sel <= SEL_EXT;
            if (ws == 2'd0) begin
              cam_ext <= w_data;
            end else begin
              cam_ext <= ~w_data;
              wio_ack <= 1'b1; state <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
