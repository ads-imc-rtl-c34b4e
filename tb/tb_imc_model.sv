// tb_imc_model: reference model of the partitioned in-memory array, for
// testbenches of the controllers. It applies one instruction per clock,
// exactly as the array is specified: per column AND or NOR of the two
// selected rows, then the write-back move (own column, right neighbour,
// last column to all, third column to all) or, for a cross-partition copy,
// the source partition's same-column result, in enabled partitions only.
// Testbenches load and inspect `mem` hierarchically.
module tb_imc_model
  import ads_pkg::*;
#(
  parameter int NP = 4,
  parameter int NR = 24
) (
  input logic       clk,
  input imc_instr_t instr
);
  logic [3:0] mem [NR][NP];

  always @(posedge clk) begin
    if (instr.valid) begin
      logic [3:0] s [NP];
      logic [3:0] nw [NP];
      for (int p = 0; p < NP; p++)
        for (int c = 0; c < 4; c++) begin
          logic a, b;
          a = mem[instr.wl_a][p][c];
          b = mem[instr.wl_b][p][c];
          s[p][c] = (instr.op == OP_AND) ? (a & b) : ~(a | b);
        end
      for (int p = 0; p < NP; p++) begin
        nw[p] = mem[instr.wl_dst][p];
        if (instr.part_en[p]) begin
          if (instr.xfer) nw[p] = s[instr.xfer_src];
          else
            for (int c = 0; c < 4; c++)
              case (instr.wb)
                WB_SAME:      nw[p][c] = s[p][c];
                WB_RIGHT:     if (c > 0) nw[p][c] = s[p][c-1];
                WB_LAST_ALL:  nw[p][c] = s[p][3];
                default:      nw[p][c] = s[p][2];
              endcase
        end
      end
      for (int p = 0; p < NP; p++) mem[instr.wl_dst][p] <= nw[p];
    end
  end
endmodule
