// sort_controller: runs the 8-input bitonic network on the partitioned array.
//
// The eight numbers sit two per partition (partitions A..D = 0..3), in rows
// ROW_A and ROW_B. Each of the six bitonic steps is one CAS micro-program
// (cas_sequencer) run by all four partitions in parallel, 28 clocks. A CAS
// always leaves the smaller number in ROW_A, so the lower network line of
// the pair ends in ROW_A. Between two steps each partition keeps one of its
// numbers and exchanges the other with another partition, as the next step
// pairs the lines: two exchanges per step boundary, each three COPY
// operations through a temporary row (X -> temp, Y -> X, temp -> Y), which
// gives the paper's 6 extra cycles and 2 temporary rows (3N/4 and N/4 for
// N = 8).
//
// Which partition performs which comparator in every step is the lettering
// of the paper's 8-input network figure (Fig. 8); the exchange table below
// follows from it, and the network, fed 6,7,3,2,5,0,1,4 as in that figure,
// ends with lines 0..7 holding 0..7 when every CAS puts the minimum on the
// upper line. After step 6 line 2p is in partition p row ROW_A and line 2p+1
// in row ROW_B, so the sorted order reads partition by partition.
//
// Interface: `start` while idle begins a sort; `busy` is high for the whole
// sort, during which `instr` carries one array operation every clock, with no
// idle clocks; `done` pulses in the clock after the last one. `step` is the
// running bitonic step (0..5).
//
// Timing: 6 x 28 + 5 x 6 = 198 clocks. The paper states 192 clocks ("an
// extra 6 cycles for input provisioning, which adds up to 24 additional
// cycles"); with its own partition lettering, all five step boundaries need
// an exchange, so this design takes 198. Doing the exchanges one after the
// other, and the order of the three copies, are this design's choices.
module sort_controller
  import ads_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output imc_instr_t instr,
  output logic       busy,
  output logic       done,
  output logic [2:0] step
);

  typedef enum logic [1:0] {S_IDLE, S_CAS, S_XFER} state_e;

  // One exchange: word (pa, row hi_a) <-> word (pb, row hi_b); hi = ROW_B.
  typedef struct packed {
    part_t pa;
    logic  hi_a;
    part_t pb;
    logic  hi_b;
  } swap_t;

  localparam part_t PA = 2'd0, PB = 2'd1, PC = 2'd2, PD = 2'd3;

  // Exchanges before step t+1 (t = boundary 0..4), two per boundary.
  function automatic swap_t swap_table(logic [2:0] t, logic j);
    unique case ({t, j})
      {3'd0, 1'b0}: return '{PA, 1'b1, PB, 1'b1};
      {3'd0, 1'b1}: return '{PC, 1'b1, PD, 1'b1};
      {3'd1, 1'b0}: return '{PA, 1'b0, PB, 1'b1};
      {3'd1, 1'b1}: return '{PC, 1'b1, PD, 1'b0};
      {3'd2, 1'b0}: return '{PB, 1'b1, PD, 1'b1};
      {3'd2, 1'b1}: return '{PA, 1'b0, PC, 1'b0};
      {3'd3, 1'b0}: return '{PB, 1'b1, PC, 1'b0};
      {3'd3, 1'b1}: return '{PA, 1'b1, PD, 1'b0};
      {3'd4, 1'b0}: return '{PA, 1'b1, PB, 1'b0};
      {3'd4, 1'b1}: return '{PC, 1'b1, PD, 1'b0};
      default:      return '{PA, 1'b0, PA, 1'b0};
    endcase
  endfunction

  state_e     state;
  logic [2:0] xcnt;        // 0..5 within an exchange phase
  logic       cas_start, cas_busy, cas_last, cas_done;
  imc_instr_t cas_instr, xfer_instr;

  cas_sequencer u_cas (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (cas_start),
    .part_en({N_PART{1'b1}}),
    .instr  (cas_instr),
    .busy   (cas_busy),
    .last   (cas_last),
    .done   (cas_done)
  );

  assign cas_start = (state == S_IDLE && start) ||
                     (state == S_XFER && xcnt == 3'(XFER_CYCLES - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      step  <= '0;
      xcnt  <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_CAS;
          step  <= '0;
        end
        S_CAS: if (cas_last) begin
          if (step == 3'(N_STEPS - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_XFER;
            xcnt  <= '0;
          end
        end
        S_XFER: begin
          if (xcnt == 3'(XFER_CYCLES - 1)) begin
            state <= S_CAS;
            step  <= step + 3'd1;
          end else begin
            xcnt <= xcnt + 3'd1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The three copies of one exchange; swap j uses temporary row j.
  always_comb begin
    swap_t sw;
    row_t  ra, rb, rt;
    logic  j;
    logic [1:0] ph;
    j  = (xcnt >= 3'd3);
    ph = 2'(j ? xcnt - 3'd3 : xcnt);
    sw = swap_table(step, j);
    ra = sw.hi_a ? ROW_B : ROW_A;
    rb = sw.hi_b ? ROW_B : ROW_A;
    rt = j ? ROW_TEMP1 : ROW_TEMP0;
    xfer_instr       = INSTR_NOP;
    xfer_instr.valid = (state == S_XFER);
    xfer_instr.op    = OP_AND;     // COPY = AND with the all-one row
    xfer_instr.wl_b  = ROW_ONE;
    xfer_instr.wb    = WB_SAME;
    unique case (ph)
      2'd0: begin  // X -> temp (in partition pb's columns)
        xfer_instr.wl_a     = ra;
        xfer_instr.wl_dst   = rt;
        xfer_instr.xfer     = 1'b1;
        xfer_instr.xfer_src = sw.pa;
        xfer_instr.part_en  = 4'b0001 << sw.pb;
      end
      2'd1: begin  // Y -> X
        xfer_instr.wl_a     = rb;
        xfer_instr.wl_dst   = ra;
        xfer_instr.xfer     = 1'b1;
        xfer_instr.xfer_src = sw.pb;
        xfer_instr.part_en  = 4'b0001 << sw.pa;
      end
      default: begin  // temp -> Y
        xfer_instr.wl_a    = rt;
        xfer_instr.wl_dst  = rb;
        xfer_instr.part_en = 4'b0001 << sw.pb;
      end
    endcase
  end

  assign instr = cas_busy ? cas_instr : xfer_instr;
  assign busy  = (state != S_IDLE);

  a_no_overlap : assert property (@(posedge clk) disable iff (!rst_n)
    !(cas_busy && state == S_XFER));
  a_cas_done_only_in_cas : assert property (@(posedge clk) disable iff (!rst_n)
    cas_done |-> (state != S_CAS || !cas_busy));

endmodule
