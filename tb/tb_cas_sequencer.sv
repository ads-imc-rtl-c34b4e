// tb_cas_sequencer: runs the CAS micro-program on a reference array model
// for all 256 pairs of 4-bit numbers (A in row 3, B in row 4, other scratch
// rows random) in two partitions at once (the other two disabled). Checks:
// min lands in row 3 and max in row 4, the comparator flags in rows 21/22,
// untouched rows and disabled partitions, 28 operations per CAS with no gap,
// `done` rising with the last write, the operation mix of the paper's
// Table I (NOR 14, NOT 8, AND 3, COPY 3), and the comparator gate outputs
// 24-29 still held in rows 13-20 against the gate equations. The paper's
// waveform example A=1000, B=0001 is one of the pairs.
module tb_cas_sequencer;
  import ads_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic [3:0] part_en;
  imc_instr_t instr;
  logic busy, last, done;
  int checks = 0, failures = 0;

  cas_sequencer dut (.*);
  tb_imc_model #(.NP(4), .NR(24)) model (.clk(clk), .instr(instr));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (40000) @(posedge clk);
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

  int n_nor, n_not, n_and, n_copy, n_ops, n_last;
  always @(posedge clk) if (rst_n && instr.valid) begin
    n_ops++;
    if (instr.op == OP_NOR) begin
      if (instr.wl_a == ROW_ZERO || instr.wl_b == ROW_ZERO) n_not++; else n_nor++;
    end else begin
      if (instr.wl_a == ROW_ONE || instr.wl_b == ROW_ONE) n_copy++; else n_and++;
    end
    if (last) n_last++;
  end

  initial begin
    part_en = 4'b0101;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int a = 0; a < 16; a++) begin
      for (int b = 0; b < 16; b++) begin
        int cyc;
        logic [3:0] keep1, keep3;
        for (int r = 0; r < 24; r++)
          for (int p = 0; p < 4; p++) model.mem[r][p] = 4'($urandom);
        for (int p = 0; p < 4; p++) begin
          model.mem[0][p] = 4'h0;
          model.mem[1][p] = 4'hF;
        end
        model.mem[2][0] = 4'(a); model.mem[3][0] = 4'(b);
        model.mem[2][2] = 4'(b); model.mem[3][2] = 4'(a);
        keep1 = model.mem[2][1]; keep3 = model.mem[3][3];
        n_nor = 0; n_not = 0; n_and = 0; n_copy = 0; n_ops = 0; n_last = 0;
        @(negedge clk) start = 1;
        @(negedge clk) start = 0;
        cyc = 0;
        while (!done) begin
          @(negedge clk);
          cyc++;
          check(cyc < 40, "no done");
          if (cyc >= 40) break;
        end
        // done rises with the write of the 28th operation, counted from the clock after start
        check(cyc == CAS_CYCLES && n_ops == CAS_CYCLES && n_last == 1,
              $sformatf("cycles %0d ops %0d", cyc, n_ops));
        check(n_nor == 14 && n_not == 8 && n_and == 3 && n_copy == 3,
              $sformatf("op mix NOR %0d NOT %0d AND %0d COPY %0d", n_nor, n_not, n_and, n_copy));
        check(model.mem[2][0] == 4'(a < b ? a : b) && model.mem[3][0] == 4'(a < b ? b : a),
              $sformatf("p0 A=%0d B=%0d -> min %0d max %0d", a, b, model.mem[2][0], model.mem[3][0]));
        check(model.mem[2][2] == 4'(a < b ? a : b) && model.mem[3][2] == 4'(a < b ? b : a),
              $sformatf("p2 A=%0d B=%0d -> min %0d max %0d", b, a, model.mem[2][2], model.mem[3][2]));
        check(model.mem[20][0] == {4{a >= b}} && model.mem[21][0] == {4{a < b}},
              $sformatf("flags A=%0d B=%0d rows 21/22 = %b %b", a, b, model.mem[20][0], model.mem[21][0]));
        // comparator rows the multiplexer leaves intact (paper rows 13-20),
        // against the two-input gate network worked out bit by bit
        begin
          logic [3:0] av, bv;
          logic eq1, eq2, eq3, lt0, lt1, lt2, lt3, g24, g25, g26, g27, g28, g29;
          av = 4'(a); bv = 4'(b);
          eq1 = av[1] == bv[1]; eq2 = av[2] == bv[2]; eq3 = av[3] == bv[3];
          lt0 = !av[0] && bv[0]; lt1 = !av[1] && bv[1];
          lt2 = !av[2] && bv[2]; lt3 = !av[3] && bv[3];
          g24 = eq2 && eq3;
          g25 = eq3;
          g26 = lt0 && eq1 && g24;
          g27 = lt1 && eq2 && g25;
          g28 = !((lt2 && eq3) || lt3);
          g29 = !(g26 || g27);
          check(model.mem[12][0][3] == !eq2 && model.mem[13][0] == {4{g24}} &&
                model.mem[14][0] == {4{g25}} && model.mem[15][0][1] == g26 &&
                model.mem[16][0][2] == g27 && model.mem[17][0] == {4{g28}} &&
                model.mem[18][0][2] == g26 && model.mem[19][0][2] == g29,
                $sformatf("gate rows A=%0d B=%0d", a, b));
        end
        check(model.mem[0][0] == 4'h0 && model.mem[1][0] == 4'hF, "constant rows changed");
        check(model.mem[2][1] == keep1 && model.mem[3][3] == keep3, "disabled partition written");
        if (a == 8 && b == 1)
          $display("example A=1000 B=0001: row3=%b row4=%b", model.mem[2][0], model.mem[3][0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
