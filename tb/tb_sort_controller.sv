// tb_sort_controller: the bitonic step sequencer driving a reference array
// model. Eight 4-bit numbers are placed two per partition, a sort is
// started, and the result is compared with the sorted input. Input sets:
// the 8-input network figure's example 6,7,3,2,5,0,1,4, all-equal, already
// sorted, reversed and random. Also checked: 198 operations per sort with no
// idle clock, six steps, `done` timing, the scratch rows untouched by the
// exchanges, and the per-sort operation mix (NOR 84, NOT 48, AND 18 as in
// the paper's Table I; COPY 18 + 30 exchange copies).
module tb_sort_controller;
  import ads_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  imc_instr_t instr;
  logic busy, done;
  logic [2:0] step;
  int checks = 0, failures = 0;

  sort_controller dut (.*);
  tb_imc_model #(.NP(4), .NR(24)) model (.clk(clk), .instr(instr));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
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

  int n_nor, n_not, n_and, n_copy, n_ops, n_xfer, max_step;
  always @(posedge clk) if (rst_n && instr.valid) begin
    n_ops++;
    if (instr.xfer) n_xfer++;
    if (int'(step) > max_step) max_step = int'(step);
    if (instr.op == OP_NOR) begin
      if (instr.wl_a == ROW_ZERO || instr.wl_b == ROW_ZERO) n_not++; else n_nor++;
    end else begin
      if (instr.wl_a == ROW_ONE || instr.wl_b == ROW_ONE) n_copy++; else n_and++;
    end
  end

  task automatic run_sort(logic [3:0] v [8], string name);
    logic [3:0] s [8];
    logic [3:0] got [8];
    int cyc;
    for (int r = 0; r < 24; r++)
      for (int p = 0; p < 4; p++) model.mem[r][p] = 4'($urandom);
    for (int p = 0; p < 4; p++) begin
      model.mem[0][p] = 4'h0;
      model.mem[1][p] = 4'hF;
      model.mem[2][p] = v[2*p];
      model.mem[3][p] = v[2*p+1];
    end
    s = v;
    s.sort();
    n_nor = 0; n_not = 0; n_and = 0; n_copy = 0; n_ops = 0; n_xfer = 0; max_step = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 0;  // clocks after the one that took `start`
    while (!done && cyc < 400) begin
      check(busy && instr.valid, $sformatf("%s: idle clock %0d inside sort", name, cyc));
      @(negedge clk);
      cyc++;
    end
    check(cyc == SORT_CYCLES && n_ops == SORT_CYCLES,
          $sformatf("%s: %0d clocks, %0d ops", name, cyc, n_ops));
    check(max_step == 5, $sformatf("%s: last step %0d", name, max_step));
    check(n_nor == 84 && n_not == 48 && n_and == 18 && n_copy == 48 && n_xfer == 20,
          $sformatf("%s: op mix NOR %0d NOT %0d AND %0d COPY %0d XFER %0d",
                    name, n_nor, n_not, n_and, n_copy, n_xfer));
    for (int p = 0; p < 4; p++) begin
      got[2*p] = model.mem[2][p];
      got[2*p+1] = model.mem[3][p];
    end
    for (int i = 0; i < 8; i++)
      check(got[i] == s[i], $sformatf("%s: out[%0d]=%0d exp %0d", name, i, got[i], s[i]));
    @(negedge clk);
    check(!busy, "busy after done");
  endtask

  initial begin
    logic [3:0] v [8];
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    v = '{4'd6, 4'd7, 4'd3, 4'd2, 4'd5, 4'd0, 4'd1, 4'd4};
    run_sort(v, "figure example");
    v = '{default: 4'd9};
    run_sort(v, "all equal");
    for (int i = 0; i < 8; i++) v[i] = 4'(i * 2);
    run_sort(v, "sorted");
    for (int i = 0; i < 8; i++) v[i] = 4'(15 - i);
    run_sort(v, "reversed");
    for (int n = 0; n < 200; n++) begin
      for (int i = 0; i < 8; i++) v[i] = 4'($urandom);
      run_sort(v, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
