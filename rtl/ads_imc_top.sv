// ads_imc_top: the complete 8-input, 4-bit in-memory sorting unit.
//
// A 16-column SRAM array (four partitions of four columns, 22 CAS rows and
// two temporary rows) sorts eight 4-bit numbers in place. The host loads
// number i into partition i/2, row ROW_A for even i and ROW_B for odd i,
// through the host port, pulses `start`, waits for `done`, and reads the
// sorted numbers back from the same places: partition p, ROW_A holds the
// (2p)-th smallest and ROW_B the (2p+1)-th. Every clock of the sort is one
// bitline operation of the array (the paper's 0.55 ns, 1.81 GHz); a sort
// takes SORT_CYCLES = 198 clocks.
//
// Inside: imc_array (cells, bitline AND/NOR, write-back multiplexers,
// partition enables) driven by sort_controller (bitonic step sequencing and
// exchanges between partitions), which runs cas_sequencer (the CAS
// micro-program). The host must not write while `busy` is high.
module ads_imc_top
  import ads_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [2:0]        step,
  input  logic              host_we,
  input  row_t              host_wrow,
  input  part_t             host_wpart,
  input  logic [DATA_W-1:0] host_wdata,
  input  row_t              host_rrow,
  input  part_t             host_rpart,
  output logic [DATA_W-1:0] host_rdata
);

  imc_instr_t instr;

  sort_controller u_ctrl (
    .clk  (clk),
    .rst_n(rst_n),
    .start(start),
    .instr(instr),
    .busy (busy),
    .done (done),
    .step (step)
  );

  imc_array u_array (
    .clk       (clk),
    .rst_n     (rst_n),
    .instr     (instr),
    .host_we   (host_we),
    .host_wrow (host_wrow),
    .host_wpart(host_wpart),
    .host_wdata(host_wdata),
    .host_rrow (host_rrow),
    .host_rpart(host_rpart),
    .host_rdata(host_rdata)
  );

endmodule
