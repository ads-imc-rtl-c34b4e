// tb_imc_array: random operations on the partitioned array against a
// reference model kept in the testbench.
// The host port loads random rows, then random instructions (AND/NOR of two
// rows, every write-back move, random partition enables, cross-partition
// copies) run one per clock; after each clock all rows of all partitions are
// read back through the host port and compared with the model.
module tb_imc_array;
  import ads_pkg::*;

  localparam int W = 4, NP = 4, NR = 24;

  logic clk = 0, rst_n = 0;
  imc_instr_t instr;
  logic host_we;
  row_t host_wrow, host_rrow;
  part_t host_wpart, host_rpart;
  logic [3:0] host_wdata, host_rdata;
  int checks = 0, failures = 0;

  logic [3:0] model [NR][NP];

  imc_array dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare_all(string what);
    for (int r = 0; r < NR; r++)
      for (int p = 0; p < NP; p++) begin
        host_rrow  = row_t'(r);
        host_rpart = part_t'(p);
        #1;
        checks++;
        if (host_rdata !== model[r][p]) begin
          failures++;
          if (failures < 10)
            $display("FAIL %s row %0d part %0d: got %h exp %h", what, r, p, host_rdata, model[r][p]);
        end
      end
  endtask

  // model of one instruction, written independently of the RTL
  task automatic model_op(imc_instr_t i);
    logic [3:0] s [NP];
    logic [3:0] nw [NP];
    for (int p = 0; p < NP; p++) begin
      for (int c = 0; c < W; c++) begin
        logic a, b;
        a = model[i.wl_a][p][c];
        b = model[i.wl_b][p][c];
        s[p][c] = (i.op == OP_AND) ? (a && b) : !(a || b);
      end
    end
    for (int p = 0; p < NP; p++) begin
      nw[p] = model[i.wl_dst][p];
      if (i.part_en[p]) begin
        if (i.xfer) nw[p] = s[i.xfer_src];
        else begin
          for (int c = 0; c < W; c++) begin
            case (i.wb)
              WB_SAME:      nw[p][c] = s[p][c];
              WB_RIGHT:     if (c > 0) nw[p][c] = s[p][c-1];
              WB_LAST_ALL:  nw[p][c] = s[p][W-1];
              WB_THIRD_ALL: nw[p][c] = s[p][2];
            endcase
          end
        end
      end
    end
    for (int p = 0; p < NP; p++) model[i.wl_dst][p] = nw[p];
  endtask

  initial begin
    instr = INSTR_NOP;
    host_we = 0; host_wrow = '0; host_wpart = '0; host_wdata = '0;
    host_rrow = '0; host_rpart = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < NR; r++)
      for (int p = 0; p < NP; p++) model[r][p] = (r == 1) ? 4'hF : 4'h0;
    compare_all("reset");
    // load random contents
    for (int r = 0; r < NR; r++)
      for (int p = 0; p < NP; p++) begin
        host_we = 1; host_wrow = row_t'(r); host_wpart = part_t'(p);
        host_wdata = 4'($urandom);
        model[r][p] = host_wdata;
        @(posedge clk); #1;
      end
    host_we = 0;
    compare_all("load");
    for (int n = 0; n < 600; n++) begin
      imc_instr_t i;
      i = INSTR_NOP;
      i.valid    = 1'b1;
      i.op       = imc_op_e'($urandom_range(0, 1));
      i.wl_a     = row_t'($urandom_range(0, NR - 1));
      i.wl_b     = row_t'($urandom_range(0, NR - 1));
      i.wl_dst   = row_t'($urandom_range(0, NR - 1));
      i.wb       = wb_mode_e'($urandom_range(0, 3));
      i.part_en  = 4'($urandom);
      i.xfer     = ($urandom_range(0, 3) == 0);
      i.xfer_src = part_t'($urandom);
      instr = i;
      @(posedge clk); #1;
      model_op(i);
      instr = INSTR_NOP;
      compare_all("op");
      // keep some data flowing in so contents stay random
      if (n % 50 == 49) begin
        host_we = 1; host_wrow = row_t'($urandom_range(0, NR - 1));
        host_wpart = part_t'($urandom); host_wdata = 4'($urandom);
        model[host_wrow][host_wpart] = host_wdata;
        @(posedge clk); #1;
        host_we = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
