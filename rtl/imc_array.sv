// imc_array: partitioned SRAM array with bitline AND/NOR computation.
//
// The array has N_ROWS rows and NP partitions of W columns; bit c of a
// partition's word sits in column c (column 0 = least significant bit). In
// a compute cycle two word lines (instr.wl_a, instr.wl_b) are raised
// together. In every column the BL sense amplifier then reads the AND of the
// two cells and the BLB sense amplifier their NOR; instr.op picks which one
// is written back, in the same cycle, into row instr.wl_dst. Each enabled
// partition routes its result through its own write-back multiplexer
// (imc_wb_mux); partitions whose part_en bit is low keep their cells, which
// is what lets the partitions be used as independent CAS blocks (memory
// partitioning). NOT and COPY are NOR with the all-zero row and AND with the
// all-one row. For data movement between partitions (instr.xfer) each
// enabled partition is written with the same-column result of partition
// instr.xfer_src.
//
// Interface: one compute instruction per clock (instr.valid), plus a host
// port that writes or reads one word of one partition, used to load the
// unsorted numbers and fetch the sorted ones; the host must not write while
// an instruction is valid. The read port is combinational. Reset clears the
// array and sets the constant-one row (paper: "The first-row stores logic 0
// and the second-row stores logic 1").
//
// The analog bitline sensing (two cells discharging BL/BLB against Vref) is
// modelled here by its logic result. The cross-partition write path, the
// host port and the reset are this design's choices: the paper assumes the
// data is already in the array and does not detail how words cross
// partitions.
module imc_array
  import ads_pkg::*;
#(
  parameter int unsigned W  = DATA_W,
  parameter int unsigned NP = N_PART,
  parameter int unsigned NR = N_ROWS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  imc_instr_t   instr,
  // host port
  input  logic         host_we,
  input  row_t         host_wrow,
  input  part_t        host_wpart,
  input  logic [W-1:0] host_wdata,
  input  row_t         host_rrow,
  input  part_t        host_rpart,
  output logic [W-1:0] host_rdata
);

  logic [NP*W-1:0] mem [NR];

  logic [NP*W-1:0] bl_and, blb_nor, sensed;
  logic [W-1:0]    wb_data [NP];
  logic [W-1:0]    wb_mask [NP];
  logic [W-1:0]    wr_data [NP];
  logic [W-1:0]    wr_mask [NP];

  // Dual word-line read: both sense amplifier outputs of every column.
  always_comb begin
    bl_and  = mem[instr.wl_a] & mem[instr.wl_b];
    blb_nor = ~(mem[instr.wl_a] | mem[instr.wl_b]);
    sensed  = (instr.op == OP_AND) ? bl_and : blb_nor;
  end

  for (genvar p = 0; p < NP; p++) begin : g_part
    imc_wb_mux #(.W(W)) u_wb (
      .res  (sensed[p*W +: W]),
      .mode (instr.wb),
      .wdata(wb_data[p]),
      .wmask(wb_mask[p])
    );
    always_comb begin
      if (instr.xfer) begin
        wr_data[p] = sensed[instr.xfer_src*W +: W];
        wr_mask[p] = {W{instr.part_en[p]}};
      end else begin
        wr_data[p] = wb_data[p];
        wr_mask[p] = wb_mask[p] & {W{instr.part_en[p]}};
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < int'(NR); r++)
        mem[r] <= (r == int'(ROW_ONE)) ? '1 : '0;
    end else if (instr.valid) begin
      for (int p = 0; p < int'(NP); p++)
        for (int c = 0; c < int'(W); c++)
          if (wr_mask[p][c]) mem[instr.wl_dst][p*W + c] <= wr_data[p][c];
    end else if (host_we) begin
      mem[host_wrow][host_wpart*W +: W] <= host_wdata;
    end
  end

  assign host_rdata = mem[host_rrow][host_rpart*W +: W];

  // The host port and the compute path share the write drivers.
  a_no_host_during_op : assert property (@(posedge clk) disable iff (!rst_n)
    !(instr.valid && host_we));
  // Both word lines and the destination are rows that exist.
  a_rows_in_range : assert property (@(posedge clk) disable iff (!rst_n)
    instr.valid |-> (int'(instr.wl_a) < int'(NR) && int'(instr.wl_b) < int'(NR) &&
                     int'(instr.wl_dst) < int'(NR)));

endmodule
