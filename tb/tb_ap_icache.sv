// tb_ap_icache: self-checking testbench of the instruction cache.
// Writes random instructions to every address, reads them back in random
// order and checks the one-clock read latency.
module tb_ap_icache;
  import bf_pkg::*;
  localparam int D = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0; logic [3:0] waddr = 0, raddr = 0; ap_instr_t wdata = '0, rdata;
  ap_icache #(.DEPTH(D)) dut (.*);
  ap_instr_t ref_m [D];
  int checks = 0, failures = 0;
  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int a = 0; a < D; a++) begin
      ref_m[a] = ap_instr_t'({$urandom, $urandom});
      @(negedge clk); we = 1; waddr = 4'(a); wdata = ref_m[a];
    end
    @(negedge clk); we = 0;
    for (int it = 0; it < 50; it++) begin
      int a;
      a = $urandom % D;
      raddr = 4'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata !== ref_m[a]) begin failures++; $display("FAIL addr %0d", a); end
      @(negedge clk);
    end
    // overwrite one entry and read it back
    @(negedge clk); we = 1; waddr = 3; wdata = ref_m[7]; @(negedge clk); we = 0; raddr = 3;
    @(posedge clk); #1; checks++; if (rdata !== ref_m[7]) begin failures++; $display("FAIL overwrite"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
