// ap_cam: the CAM of an associative processor, with its search drivers, match
// sensing, tag registers and write drivers.
//
// Storage is a ROWS x COLS bit array. One micro-operation is executed per clock:
//   CAM_CMP_H  horizontal search: row r matches when every column c with
//              hmask[c]=1 holds hkey[c]; the row tags take the match result.
//              With one column unmasked and key 1 this is a bit-sequential read
//              (the column is copied into the row tags).
//   CAM_CMP_V  vertical search: column c matches when every row r with
//              vmask[r]=1 holds vkey[r]; the column tags take the result. With
//              one row unmasked and key all-ones it is a word-sequential read.
//   CAM_WR_H   the masked columns of the selected rows take hkey.
//   CAM_WR_V   the masked rows of the selected columns take vkey.
//   CAM_WT_H   the masked columns of every row take that row's tag (a column
//              copied through the tags, e.g. to save an MSB into a flag column).
//   CAM_WT_V   the masked rows of every column take that column's tag.
// Lane selection for writes (sel): the tagged lanes, all lanes, or (vertical
// writes only) the external vector ext_sel, used for a word-sequential write.
// Results (tags, cell contents) are visible the clock after the operation.
//
// The match evaluation stands for the precharge / sense-amplifier circuit of
// the paper; the cells (SRAM or ReRAM) are represented only by their stored
// bit. The MAP is built with TWO_D=0: it has no vertical search lines, so its
// vertical operations are restricted (by assertion) to one row at a time,
// i.e. plain word reads and writes. Tags reset to 0; the array is not reset.
module ap_cam
  import bf_pkg::*;
#(
  parameter int unsigned ROWS = AP_ROWS,
  parameter int unsigned COLS = AP_COLS,
  parameter bit          TWO_D = 1'b1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cam_op_e          op,
  input  lane_sel_e        sel,
  input  logic [COLS-1:0]  ext_sel,
  input  logic [COLS-1:0]  hkey,
  input  logic [COLS-1:0]  hmask,
  input  logic [ROWS-1:0]  vkey,
  input  logic [ROWS-1:0]  vmask,
  output logic [ROWS-1:0]  rtag,
  output logic [COLS-1:0]  ctag
);

  logic [COLS-1:0] mem [ROWS];

  // tags
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rtag <= '0;
      ctag <= '0;
    end else begin
      case (op)
        CAM_CMP_H: begin
          for (int r = 0; r < ROWS; r++)
            rtag[r] <= ((mem[r] ^ hkey) & hmask) == '0;
        end
        CAM_CMP_V: begin
          for (int c = 0; c < COLS; c++) begin
            logic m;
            m = 1'b1;
            for (int r = 0; r < ROWS; r++)
              if (vmask[r] && (mem[r][c] != vkey[r])) m = 1'b0;
            ctag[c] <= m;
          end
        end
        default: ;
      endcase
    end
  end

  // cells
  always_ff @(posedge clk) begin
    case (op)
      CAM_WR_H: begin
        for (int r = 0; r < ROWS; r++)
          if (sel == SEL_ALL || (sel == SEL_TAG && rtag[r]))
            mem[r] <= (mem[r] & ~hmask) | (hkey & hmask);
      end
      CAM_WR_V: begin
        for (int r = 0; r < ROWS; r++)
          if (vmask[r]) begin
            for (int c = 0; c < COLS; c++)
              if (sel == SEL_ALL || (sel == SEL_TAG && ctag[c]) || (sel == SEL_EXT && ext_sel[c]))
                mem[r][c] <= vkey[r];
          end
      end
      CAM_WT_H: begin
        for (int r = 0; r < ROWS; r++)
          mem[r] <= (mem[r] & ~hmask) | ({COLS{rtag[r]}} & hmask);
      end
      CAM_WT_V: begin
        for (int r = 0; r < ROWS; r++)
          if (vmask[r]) mem[r] <= ctag;
      end
      default: ;
    endcase
  end

  // A 1D AP (MAP) has no vertical search lines: vertical accesses address one row.
  if (!TWO_D) begin : g_one_d
    a_one_row_vertical: assert property (@(posedge clk) disable iff (!rst_n)
      (op inside {CAM_CMP_V, CAM_WR_V, CAM_WT_V}) |-> $onehot(vmask))
      else $error("ap_cam: 1D AP vertical access to %0d rows", $countones(vmask));
  end

endmodule
