// tb_ap_keymask: self-checking testbench of the key/mask registers.
// Random loads of single positions and ranges in both directions; after each
// load the four registers are compared with values computed here, and the
// unaddressed pair must keep its value.
module tb_ap_keymask;
  import bf_pkg::*;
  localparam int R = 40, C = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  km_cmd_t cmd = '0;
  logic [C-1:0] hkey, hmask;
  logic [R-1:0] vkey, vmask;
  ap_keymask #(.ROWS(R), .COLS(C)) dut (.*);

  int checks = 0, failures = 0;
  logic [C-1:0] eh_k = 0, eh_m = 0;
  logic [R-1:0] ev_k = 0, ev_m = 0;

  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      int n;
      km_cmd_t c;
      c = '0;
      c.load = ($urandom % 4) != 0;
      c.vert = $urandom % 2;
      n = c.vert ? R : C;
      c.en = 4'($urandom);
      for (int e = 0; e < 4; e++) begin c.idx[e] = IDX_W'($urandom % (n + 4)); c.kbit[e] = 1'($urandom); end
      c.rng_en = $urandom % 2; c.rng_lo = IDX_W'($urandom % n); c.rng_len = IDX_W'($urandom % 12);
      c.rng_key = 1'($urandom);
      if (c.load) begin
        logic [R-1:0] k, m;
        k = 0; m = 0;
        for (int p = 0; p < n; p++) if (c.rng_en && p >= c.rng_lo && p < c.rng_lo + c.rng_len) begin m[p] = 1; k[p] = c.rng_key; end
        for (int e = 0; e < 4; e++) if (c.en[e] && c.idx[e] < n) begin m[c.idx[e]] = 1; k[c.idx[e]] = c.kbit[e]; end
        if (c.vert) begin ev_k = k; ev_m = m; end else begin eh_k = C'(k); eh_m = C'(m); end
      end
      @(negedge clk); cmd = c;
      @(negedge clk); cmd = '0;
      checks++;
      if (hkey !== eh_k || hmask !== eh_m || vkey !== ev_k || vmask !== ev_m) begin
        failures++; $display("FAIL it %0d vert %0d", it, c.vert);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
