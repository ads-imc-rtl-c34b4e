// tb_ads_imc_top: end-to-end test of the sorting unit at its full size.
// Numbers are written through the host port, a sort is started, and after
// `done` the eight results are read back through the host port and compared
// with the input sorted in the testbench. Sets: the 8-input network figure's
// example 6,7,3,2,5,0,1,4, the CAS waveform pair A=1000/B=0001 placed in
// every partition, all-equal, sorted, reversed and random; sorts run back to
// back without reset. The sort must take 198 clocks.
// It also counts how often each mechanism of the design happened and fails
// if one never did: a CAS that swapped its pair, one that kept it, a CAS on
// equal numbers, each of the four write-back moves, a cross-partition copy,
// a write restricted to one partition, and all six bitonic steps.
module tb_ads_imc_top;
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
    repeat (200000) @(posedge clk);
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

  // mechanism counters, from the instruction stream and the array contents
  int n_swap, n_keep, n_equal, n_wb [4], n_xfer, n_single_part, n_steps_seen [6];
  always @(posedge clk) if (rst_n) begin
    if (dut.instr.valid) begin
      if (dut.instr.xfer) n_xfer++;
      else n_wb[dut.instr.wb]++;
      if ($countones(dut.instr.part_en) == 1) n_single_part++;
      n_steps_seen[step]++;
      // first operation of a CAS: look at the pair each partition holds
      if (dut.u_ctrl.u_cas.step == 0 && dut.u_ctrl.u_cas.busy)
        for (int p = 0; p < 4; p++) begin
          logic [3:0] a, b;
          a = dut.u_array.mem[ROW_A][p*4 +: 4];
          b = dut.u_array.mem[ROW_B][p*4 +: 4];
          if (a > b) n_swap++;
          else if (a == b) n_equal++;
          else n_keep++;
        end
    end
  end

  task automatic host_write(row_t r, part_t p, logic [3:0] d);
    @(negedge clk);
    host_we = 1; host_wrow = r; host_wpart = p; host_wdata = d;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic run_sort(logic [3:0] v [8], string name);
    logic [3:0] s [8];
    int cyc;
    for (int i = 0; i < 8; i++) host_write((i % 2 == 1) ? ROW_B : ROW_A, part_t'(i / 2), v[i]);
    s = v;
    s.sort();
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 0;
    while (!done && cyc < 400) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == SORT_CYCLES, $sformatf("%s: sort took %0d clocks", name, cyc));
    for (int i = 0; i < 8; i++) begin
      host_rrow  = (i % 2 == 1) ? ROW_B : ROW_A;
      host_rpart = part_t'(i / 2);
      #1;
      check(host_rdata == s[i], $sformatf("%s: out[%0d]=%0d exp %0d", name, i, host_rdata, s[i]));
    end
    // the constant rows survive a sort
    host_rrow = ROW_ZERO; #1; check(host_rdata == 4'h0, "row 1 not zero");
    host_rrow = ROW_ONE;  #1; check(host_rdata == 4'hF, "row 2 not one");
  endtask

  initial begin
    logic [3:0] v [8];
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    v = '{4'd6, 4'd7, 4'd3, 4'd2, 4'd5, 4'd0, 4'd1, 4'd4};
    run_sort(v, "figure example");
    v = '{4'b1000, 4'b0001, 4'b1000, 4'b0001, 4'b1000, 4'b0001, 4'b1000, 4'b0001};
    run_sort(v, "waveform pair");
    v = '{default: 4'd5};
    run_sort(v, "all equal");
    for (int i = 0; i < 8; i++) v[i] = 4'(i + 3);
    run_sort(v, "sorted");
    for (int i = 0; i < 8; i++) v[i] = 4'(14 - i);
    run_sort(v, "reversed");
    for (int n = 0; n < 60; n++) begin
      for (int i = 0; i < 8; i++) v[i] = 4'($urandom);
      run_sort(v, "random");
    end
    $display("mechanisms: swap=%0d keep=%0d equal=%0d wb_same=%0d wb_right=%0d wb_last=%0d wb_third=%0d xfer=%0d single_partition=%0d",
             n_swap, n_keep, n_equal, n_wb[0], n_wb[1], n_wb[2], n_wb[3], n_xfer, n_single_part);
    check(n_swap > 0, "no CAS ever swapped");
    check(n_keep > 0, "no CAS ever kept its order");
    check(n_equal > 0, "no CAS on equal numbers");
    for (int m = 0; m < 4; m++) check(n_wb[m] > 0, $sformatf("write-back move %0d never used", m));
    check(n_xfer > 0, "no cross-partition copy");
    check(n_single_part > 0, "no single-partition write");
    for (int s = 0; s < 6; s++) check(n_steps_seen[s] > 0, $sformatf("step %0d never ran", s));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
