// tb_offchip_ic: self-checking testbench of the off-chip interconnect with
// 5 clusters modelled here. Checks that a command reaches exactly the
// addressed cluster (or all of them for a broadcast) unchanged, that it is
// held until each target accepts, that a MAP read returns the addressed
// cluster's response, and that busy follows the clusters' busy.
module tb_offchip_ic;
  import bf_pkg::*;
  localparam int NCL = 5, C = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic host_valid = 0, host_ready, rsp_valid, busy;
  host_cmd_t host_cmd = '0, cl_cmd;
  logic [C-1:0] rsp_data;
  logic [NCL-1:0] cl_valid, cl_ready = '0, cl_rsp_valid = '0, cl_busy = '0;
  logic [C-1:0] cl_rsp_data [NCL];
  offchip_ic #(.NCL(NCL), .COLS(C)) dut (.*);

  int checks = 0, failures = 0;
  logic [NCL-1:0] taken;
  host_cmd_t seen [NCL];
  initial begin
    #2_000_000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  always @(negedge clk) cl_ready = NCL'($urandom);
  always @(posedge clk) for (int k = 0; k < NCL; k++) if (cl_valid[k] && cl_ready[k]) begin
    taken[k] <= 1; seen[k] <= cl_cmd;
  end

  initial begin
    for (int k = 0; k < NCL; k++) cl_rsp_data[k] = 16'(k * 4369);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 50; it++) begin
      host_cmd_t c; logic [NCL-1:0] exp;
      c = host_cmd_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
      c.kind = host_kind_e'($urandom % 5);
      c.cluster = 12'($urandom % NCL);
      c.bcast = ($urandom % 4 == 0);
      exp = c.bcast ? '1 : NCL'(1) << c.cluster;
      taken = '0;
      @(negedge clk); host_valid = 1; host_cmd = c;
      while (!host_ready) @(negedge clk);
      @(negedge clk); host_valid = 0;
      while (taken != exp) begin
        @(negedge clk);
        check((taken & ~exp) == '0, "only targets take the command");
      end
      foreach (seen[k]) if (exp[k]) check(seen[k] == c, "command delivered unchanged");
      if (c.kind == HC_MAP_RD && !c.bcast) begin
        repeat (3) begin @(negedge clk); check(!host_ready, "waits for read response"); end
        cl_rsp_valid[c.cluster] = 1; @(negedge clk); cl_rsp_valid = '0;
        check(rsp_valid && rsp_data == cl_rsp_data[c.cluster], "read response");
      end
      @(negedge clk); check(host_ready && !busy, "ready again");
    end
    cl_busy = 5'b00100; @(negedge clk); check(busy, "busy follows clusters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
