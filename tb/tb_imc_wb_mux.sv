// tb_imc_wb_mux: exhaustive check of the write-back multiplexer.
// Every 4-bit sensed row is sent through each of the four moves and the
// data and column write enables are compared with a bit-by-bit reference.
module tb_imc_wb_mux;
  import ads_pkg::*;

  logic [3:0] res, wdata, wmask;
  wb_mode_e   mode;
  int checks = 0, failures = 0;

  imc_wb_mux dut (.res(res), .mode(mode), .wdata(wdata), .wmask(wmask));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] exp_d, exp_m;
    for (int m = 0; m < 4; m++) begin
      for (int v = 0; v < 16; v++) begin
        res  = 4'(v);
        mode = wb_mode_e'(m);
        #1;
        case (m)
          0: begin exp_d = res; exp_m = 4'b1111; end
          1: begin exp_d = {res[2], res[1], res[0], 1'b0}; exp_m = 4'b1110; end
          2: begin exp_d = {res[3], res[3], res[3], res[3]}; exp_m = 4'b1111; end
          default: begin exp_d = {res[2], res[2], res[2], res[2]}; exp_m = 4'b1111; end
        endcase
        checks++;
        // only written columns carry meaning
        if (wmask !== exp_m || (wdata & exp_m) !== (exp_d & exp_m)) begin
          failures++;
          $display("FAIL mode=%0d res=%b wdata=%b wmask=%b exp %b/%b", m, res, wdata, wmask, exp_d, exp_m);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
