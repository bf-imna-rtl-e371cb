// ap_keymask: the key and mask registers of an associative processor.
//
// There is one key/mask pair for horizontal operations (one bit per column)
// and one for vertical operations (one bit per row). The key holds the value
// that is compared against or written; the mask selects the columns (rows)
// that take part. A load (cmd.load) clears the pair it addresses (cmd.vert)
// and then sets up to four single positions (en/idx/kbit) and one contiguous
// range (rng_lo, rng_len, rng_key); positions beyond the register are ignored.
// The other pair keeps its value. The new contents are visible the clock after
// the load, which is the clock in which the CAM uses them. Reset clears all.
// The paper names the registers and their role; the load format is this
// design's own.
module ap_keymask
  import bf_pkg::*;
#(
  parameter int unsigned ROWS = AP_ROWS,
  parameter int unsigned COLS = AP_COLS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  km_cmd_t         cmd,
  output logic [COLS-1:0] hkey,
  output logic [COLS-1:0] hmask,
  output logic [ROWS-1:0] vkey,
  output logic [ROWS-1:0] vmask
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hkey <= '0; hmask <= '0; vkey <= '0; vmask <= '0;
    end else if (cmd.load) begin
      if (!cmd.vert) begin
        for (int p = 0; p < COLS; p++) begin
          logic in_rng;
          in_rng   = cmd.rng_en && (p >= int'(cmd.rng_lo)) && (p < int'(cmd.rng_lo) + int'(cmd.rng_len));
          hmask[p] <= in_rng;
          hkey[p]  <= in_rng & cmd.rng_key;
          for (int e = 0; e < 4; e++)
            if (cmd.en[e] && int'(cmd.idx[e]) == p) begin
              hmask[p] <= 1'b1;
              hkey[p]  <= cmd.kbit[e];
            end
        end
      end else begin
        for (int p = 0; p < ROWS; p++) begin
          logic in_rng;
          in_rng   = cmd.rng_en && (p >= int'(cmd.rng_lo)) && (p < int'(cmd.rng_lo) + int'(cmd.rng_len));
          vmask[p] <= in_rng;
          vkey[p]  <= in_rng & cmd.rng_key;
          for (int e = 0; e < 4; e++)
            if (cmd.en[e] && int'(cmd.idx[e]) == p) begin
              vmask[p] <= 1'b1;
              vkey[p]  <= cmd.kbit[e];
            end
        end
      end
    end
  end

endmodule
