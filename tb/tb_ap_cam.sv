// tb_ap_cam: self-checking testbench of the CAM array with its tags.
//
// Keeps a reference copy of an 8 x 16 array and applies random micro-operations
// (horizontal/vertical compare, keyed writes to tagged / all / externally
// selected lanes, tag write-backs). After each operation the tags and, through
// the tags, every stored bit are compared with the reference.
module tb_ap_cam;
  import bf_pkg::*;
  localparam int R = 8, C = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cam_op_e op = CAM_NOP; lane_sel_e sel = SEL_TAG;
  logic [C-1:0] ext_sel = '0, hkey = '0, hmask = '0, ctag;
  logic [R-1:0] vkey = '0, vmask = '0, rtag;

  ap_cam #(.ROWS(R), .COLS(C), .TWO_D(1'b1)) dut (.*);

  logic [C-1:0] m [R];
  logic [R-1:0] rt;
  logic [C-1:0] ct;
  int checks = 0, failures = 0;

  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic step(input cam_op_e o, input lane_sel_e s);
    @(negedge clk); op = o; sel = s;
    @(negedge clk); op = CAM_NOP;
  endtask

  // reference model of one micro-operation (uses the tags before the op)
  task automatic model(input cam_op_e o, input lane_sel_e s);
    logic [C-1:0] nm [R];
    nm = m;
    case (o)
      CAM_CMP_H: for (int r = 0; r < R; r++) rt[r] = ((m[r] ^ hkey) & hmask) == 0;
      CAM_CMP_V: for (int c = 0; c < C; c++) begin
        ct[c] = 1; for (int r = 0; r < R; r++) if (vmask[r] && m[r][c] != vkey[r]) ct[c] = 0;
      end
      CAM_WR_H: for (int r = 0; r < R; r++) if (s == SEL_ALL || rt[r]) nm[r] = (m[r] & ~hmask) | (hkey & hmask);
      CAM_WR_V: for (int r = 0; r < R; r++) if (vmask[r]) for (int c = 0; c < C; c++)
        if (s == SEL_ALL || (s == SEL_TAG && ct[c]) || (s == SEL_EXT && ext_sel[c])) nm[r][c] = vkey[r];
      CAM_WT_H: for (int r = 0; r < R; r++) nm[r] = (m[r] & ~hmask) | ({C{rt[r]}} & hmask);
      CAM_WT_V: for (int r = 0; r < R; r++) if (vmask[r]) nm[r] = ct;
      default: ;
    endcase
    m = nm;
  endtask

  task automatic dump_check(input string what);
    // read every row word-sequentially and compare
    for (int r = 0; r < R; r++) begin
      vmask = R'(1) << r; vkey = '1;
      step(CAM_CMP_V, SEL_TAG);
      checks++;
      if (ctag !== m[r]) begin failures++; $display("FAIL %s row %0d got %h exp %h", what, r, ctag, m[r]); end
    end
    // and column by column, bit-sequentially
    for (int c = 0; c < C; c++) begin
      logic [R-1:0] e;
      hmask = C'(1) << c; hkey = '1;
      step(CAM_CMP_H, SEL_TAG);
      for (int r = 0; r < R; r++) e[r] = m[r][c];
      checks++;
      if (rtag !== e) begin failures++; $display("FAIL %s col %0d", what, c); end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // fill with a word-sequential write of each row (two clocks per row)
    for (int r = 0; r < R; r++) begin
      m[r] = C'($urandom);
      vmask = R'(1) << r; vkey = '1; ext_sel = m[r]; step(CAM_WR_V, SEL_EXT);
      vkey = '0; ext_sel = ~m[r]; step(CAM_WR_V, SEL_EXT);
    end
    dump_check("fill");
    for (int it = 0; it < 60; it++) begin
      cam_op_e o; lane_sel_e s;
      // restore the tags of the model from the DUT's last read-back
      rt = rtag; ct = ctag;
      o = cam_op_e'(1 + $urandom % 6);
      s = lane_sel_e'($urandom % 3);
      if (o == CAM_WR_H && s == SEL_EXT) s = SEL_TAG;
      hkey = C'($urandom); hmask = C'($urandom); vkey = R'($urandom); vmask = R'($urandom);
      ext_sel = C'($urandom);
      // make compares match some lanes: mask few bits
      if (o == CAM_CMP_H) hmask = hmask & C'($urandom) & C'($urandom);
      if (o == CAM_CMP_V) vmask = vmask & R'($urandom);
      model(o, s);
      step(o, s);
      checks++;
      if (rtag !== rt || ctag !== ct) begin failures++; $display("FAIL tags after op %s", o.name()); end
      // the read-back below changes the tags; reload the model's tags afterwards
      dump_check(o.name());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
