// tb_ads_imc_workloads: the sorting unit on the data sizes it can hold.
// The unit sorts eight 4-bit numbers. Network size 8 runs directly; network
// size 4 runs by filling the four unused places with the largest value,
// 4'hF, so the four numbers come out sorted in the first four places. Each
// size is run on many random sets; each sort must end in 198 clocks.
// Network sizes 16 and 32 need 8 and 16 partitions and do not fit.
module tb_ads_imc_workloads;
  import ads_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done;
  logic [2:0] step;
  logic host_we = 0;
  row_t host_wrow = '0, host_rrow = '0;
  part_t host_wpart = '0, host_rpart = '0;
  logic [3:0] host_wdata = '0, host_rdata;
  int checks = 0, failures = 0;

  ads_imc_top dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  // sort n numbers (n = 4 or 8); places n..7 hold 4'hF
  task automatic run(int n);
    logic [3:0] v [8];
    logic [3:0] s [$];
    int cyc;
    for (int i = 0; i < 8; i++) v[i] = (i < n) ? 4'($urandom) : 4'hF;
    s = {};
    for (int i = 0; i < n; i++) s.push_back(v[i]);
    s.sort();
    for (int i = 0; i < 8; i++) begin
      @(negedge clk);
      host_we = 1; host_wrow = (i % 2 == 1) ? ROW_B : ROW_A;
      host_wpart = part_t'(i / 2); host_wdata = v[i];
    end
    @(negedge clk) host_we = 0; start = 1;
    @(negedge clk) start = 0;
    cyc = 0;
    while (!done && cyc < 400) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == SORT_CYCLES, $sformatf("N=%0d: %0d clocks", n, cyc));
    for (int i = 0; i < n; i++) begin
      host_rrow = (i % 2 == 1) ? ROW_B : ROW_A;
      host_rpart = part_t'(i / 2);
      #1;
      check(host_rdata == s[i], $sformatf("N=%0d out[%0d]=%0d exp %0d", n, i, host_rdata, s[i]));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < 100; k++) run(4);
    for (int k = 0; k < 100; k++) run(8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
