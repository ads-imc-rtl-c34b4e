// cas_sequencer: the 28-cycle micro-program of one in-memory compare-and-swap.
//
// A CAS block leaves min(A,B) in row ROW_A and max(A,B) in row ROW_B of each
// partition, where A and B are 4-bit numbers stored bit-per-column (column 0
// = LSB). It is built only from two-input bitline operations, one per clock:
//   cycles 1-18  the comparator of 31 two-input gates (NOR, NOT, AND): bitwise
//                less-than and equality terms, chained through column copies
//                and broadcasts; row 21 (1-based) ends up holding A>=B in
//                every column and row 22 its inverse, A<B;
//   cycles 19-28 the multiplexer: A', B', P, Q, T, R, S, U, then
//                Max = NOT T written over B and Min = NOT U written over A.
// Per-operation counts are NOR 14, NOT 8, AND 3, COPY 3, as the paper's
// Table I gives for one CAS block.
//
// Interface: a `start` pulse while idle begins the program; for the next 28
// clocks `instr` is valid, one operation per clock, and the array writes its
// result at the end of that clock. `done` pulses in the clock after the last
// operation (results visible); `last` marks the clock of the last operation,
// so that a controller can follow on without an idle clock. `part_en` picks
// the partitions that run the program in parallel.
//
// The row of every gate output and the write-back move of every cycle are
// read off the paper's array maps (Figs. 6 and 7) and its gate-level
// comparator and multiplexer (Figs. 4 and 5). The paper labels the
// comparator output (gate 30) "A<B" but its drawn gates compute A>=B, and
// only that reading sorts its example (A=1000, B=0001 ends with Min=0001 in
// row 3); the multiplexer here therefore takes row 21 as A>=B and row 22 as
// A<B. Operand rows of the NOT/COPY steps (constant rows 1 and 2) and the
// start/done handshake are this design's choices.
module cas_sequencer
  import ads_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [N_PART-1:0] part_en,
  output imc_instr_t        instr,
  output logic              busy,
  output logic              last,
  output logic              done
);

  logic [4:0]        step;      // 0..27 = paper cycle 1..28
  logic [N_PART-1:0] part_q;

  // Row numbers below are 0-based (paper row n = n-1).
  function automatic imc_instr_t op_nor(row_t a, row_t b, row_t d, wb_mode_e wb);
    imc_instr_t i = INSTR_NOP;
    i.valid = 1'b1; i.op = OP_NOR; i.wl_a = a; i.wl_b = b; i.wl_dst = d; i.wb = wb;
    return i;
  endfunction

  function automatic imc_instr_t op_and(row_t a, row_t b, row_t d, wb_mode_e wb);
    imc_instr_t i = op_nor(a, b, d, wb);
    i.op = OP_AND;
    return i;
  endfunction

  function automatic imc_instr_t cas_program(logic [4:0] s);
    unique case (s)
      // ---- comparator (Fig. 4 gates, Fig. 6 placement) ----
      5'd0:  return op_nor(ROW_A, ROW_B, 5'd4,  WB_SAME);       // G1-4  = NOR(A,B)
      5'd1:  return op_nor(5'd4,  ROW_A, 5'd5,  WB_SAME);       // G5-8  = NOR(G1-4,A)  : A<B per bit
      5'd2:  return op_nor(ROW_B, 5'd4,  5'd6,  WB_SAME);       // G9-11 = NOR(B,G2-4)  : A>B per bit
      5'd3:  return op_nor(5'd6,  5'd5,  5'd7,  WB_SAME);       // G12-14 = NOR(G9-11,G6-8): equal
      5'd4:  return op_nor(5'd5,  ROW_ZERO, 5'd8, WB_SAME);     // G15-17 = NOT G5-7
      5'd5:  return op_nor(5'd7,  ROW_ZERO, 5'd9, WB_SAME);     // G18-20 = NOT G12-14
      5'd6:  return op_and(5'd8,  ROW_ONE, 5'd10, WB_RIGHT);    // C15-17 one column right
      5'd7:  return op_nor(5'd10, 5'd9,  5'd11, WB_SAME);       // G21-23 = NOR(C15-17,G18-20)
      5'd8:  return op_and(5'd9,  ROW_ONE, 5'd12, WB_RIGHT);    // C19 into column 3
      5'd9:  return op_nor(5'd12, 5'd9,  5'd13, WB_LAST_ALL);   // G24 = NOR(C19,G20), to all
      5'd10: return op_nor(5'd9,  ROW_ZERO, 5'd14, WB_LAST_ALL);// G25 = NOT G20, to all
      5'd11: return op_and(5'd11, 5'd13, 5'd15, WB_SAME);       // G26 = AND(G21,C24)
      5'd12: return op_and(5'd11, 5'd14, 5'd16, WB_SAME);       // G27 = AND(G22,C25)
      5'd13: return op_nor(5'd11, 5'd5,  5'd17, WB_LAST_ALL);   // G28 = NOR(G23,G8), to all
      5'd14: return op_and(5'd15, ROW_ONE, 5'd18, WB_RIGHT);    // C26 into column 2
      5'd15: return op_nor(5'd18, 5'd16, 5'd19, WB_SAME);       // G29 = NOR(C26,G27)
      5'd16: return op_and(5'd19, 5'd17, 5'd20, WB_THIRD_ALL);  // G30 = AND(G29,C28) = A>=B, to all
      5'd17: return op_nor(5'd20, ROW_ZERO, 5'd21, WB_SAME);    // G31 = NOT G30 = A<B
      // ---- multiplexer (Fig. 5 gates, Fig. 7 placement) ----
      5'd18: return op_nor(ROW_A, ROW_ZERO, 5'd4, WB_SAME);     // A' = NOT A
      5'd19: return op_nor(ROW_B, ROW_ZERO, 5'd5, WB_SAME);     // B' = NOT B
      5'd20: return op_nor(5'd4,  5'd21, 5'd6,  WB_SAME);       // P = NOR(A', A<B)
      5'd21: return op_nor(5'd5,  5'd20, 5'd7,  WB_SAME);       // Q = NOR(B', A>=B)
      5'd22: return op_nor(5'd6,  5'd7,  5'd8,  WB_SAME);       // T = NOR(P,Q)
      5'd23: return op_nor(5'd4,  5'd20, 5'd9,  WB_SAME);       // R = NOR(A', A>=B)
      5'd24: return op_nor(5'd5,  5'd21, 5'd10, WB_SAME);       // S = NOR(B', A<B)
      5'd25: return op_nor(5'd9,  5'd10, 5'd11, WB_SAME);       // U = NOR(R,S)
      5'd26: return op_nor(5'd8,  ROW_ZERO, ROW_B, WB_SAME);    // Max = NOT T -> row 4
      5'd27: return op_nor(5'd11, ROW_ZERO, ROW_A, WB_SAME);    // Min = NOT U -> row 3
      default: return INSTR_NOP;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      step   <= '0;
      done   <= 1'b0;
      part_q <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy   <= 1'b1;
          step   <= '0;
          part_q <= part_en;
        end
      end else if (step == 5'(CAS_CYCLES - 1)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end else begin
        step <= step + 5'd1;
      end
    end
  end

  always_comb begin
    instr = INSTR_NOP;
    if (busy) begin
      instr         = cas_program(step);
      instr.part_en = part_q;
    end
  end

  assign last = busy && (step == 5'(CAS_CYCLES - 1));

  a_step_in_range : assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> step < 5'(CAS_CYCLES));

endmodule
