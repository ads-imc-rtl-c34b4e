// imc_wb_mux: write-back multiplexer of one partition.
//
// After the sense amplifiers of a partition have produced one result bit per
// column, this 4-to-1 multiplexer decides where those bits go on the write
// back: (a) each bit into its own column, (b) each bit into the column to its
// right, (c) the last column's bit into every column, (d) the third column's
// bit into every column. Moves (c) and (d) are how the CAS micro-program
// spreads a single-column result (such as the comparison flag) across the
// row so that every bit position can use it later.
//
// Interface: `res` is the sensed row (bit c = column c), `mode` picks the
// move, `wdata`/`wmask` are the data and per-column write enables. Purely
// combinational. The four moves and the 4x1 selection follow the paper; that
// column 0 is left unwritten by the right shift is this design's choice (the
// paper does not use that cell).
module imc_wb_mux
  import ads_pkg::*;
#(
  parameter int unsigned W = DATA_W
) (
  input  logic [W-1:0] res,
  input  wb_mode_e     mode,
  output logic [W-1:0] wdata,
  output logic [W-1:0] wmask
);

  always_comb begin
    unique case (mode)
      WB_SAME: begin
        wdata = res;
        wmask = '1;
      end
      WB_RIGHT: begin
        wdata = {res[W-2:0], 1'b0};
        wmask = {{(W-1){1'b1}}, 1'b0};
      end
      WB_LAST_ALL: begin
        wdata = {W{res[W-1]}};
        wmask = '1;
      end
      WB_THIRD_ALL: begin
        wdata = {W{res[2]}};
        wmask = '1;
      end
      default: begin
        wdata = res;
        wmask = '1;
      end
    endcase
  end

endmodule
