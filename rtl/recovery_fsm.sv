// recovery_fsm -- controller of the on-the-fly recovery of CSRrec (C = 3).
//
// The core keeps three copies R0, R1, R2 of the original register (rn_bank)
// and two C-slow retiming register levels CR0, CR1. In normal operation the
// micro-cycle phase p = 0, 1, 2 selects:
//
//     phase 0: read R2 into slice 0, write R0   (copies are compared)
//     phase 1: read R0,               write R1
//     phase 2: read R1,               write R2
//
// so each thread owns one copy, and every third micro-cycle (phase 0) all
// three copies hold the same original cycle. The comparison is pipelined:
// the decoded result of the phase-0 cycle is registered here and acted on in
// the following cycles:
//
//   R2 failing: phase 1 writes the good result into R1 and R2; in phase 2 R2
//               is held, so the faulty thread's result is dropped.
//   R1 failing: phase 1 runs normally; in phase 2 slice 0 reads R0 instead
//               of the failing R1, and the result is written into R2 and R1.
//   R0 failing: a delay cycle is inserted: the cycle that would be phase 1
//               repeats phase 0 (reads R2 again, writes the good result into
//               R0) and the phase counter holds for one cycle, so the next
//               comparison comes four micro-cycles later instead of three.
//
// Two or three differing copies (no majority) cannot be singled out: `fatal`
// is set and stays set until reset. `grp` is the index of the original cycle
// whose input the thread in slice 0 needs; in the delay cycle it is the
// previous one again. After reset the writes are held off for two cycles so
// that all three threads start from the reset state.
//
// From the paper: the three recovery sequences, the pipelined comparison,
// the read/write order of the copies. This design's own choices: the
// encoding of the state, the start-up sequence, and the `fatal` flag.
module recovery_fsm #(
  parameter int unsigned GW = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [2:0]    cmp_bad,    // majority decoder: copies that differ
  input  logic          cmp_nomaj,  // majority decoder: no majority
  output logic [1:0]    rd_sel,     // copy read into slice 0
  output logic [2:0]    we,         // write enables of R0..R2
  output logic [1:0]    phase,      // effective micro-cycle phase
  output logic [GW-1:0] grp,        // original cycle of the thread in slice 0
  output logic          seu,        // pulse: comparison found a difference
  output logic [2:0]    seu_bad,    // ... and these copies were failing
  output logic          fatal,      // sticky: no majority was found
  output logic [2:0]    rec         // pulse: recovery action for R0/R1/R2 begins
);

  typedef enum logic [1:0] {ST_RUN, ST_HOLD_R2, ST_FIX_R1} st_e;

  st_e          st_q, st_d;
  logic [1:0]   phase_q;
  logic [1:0]   init_q;
  logic [GW-1:0] grp_q;
  logic         cmp_v_q, nomaj_q;
  logic [2:0]   bad_q;
  logic         cmp_en, delay_cyc, fix_r1, fix_r2;

  always_comb begin
    fix_r2    = (st_q == ST_RUN) && cmp_v_q && !nomaj_q && (bad_q == 3'b100);
    fix_r1    = (st_q == ST_RUN) && cmp_v_q && !nomaj_q && (bad_q == 3'b010);
    delay_cyc = (st_q == ST_RUN) && cmp_v_q && !nomaj_q && (bad_q == 3'b001);
    phase     = delay_cyc ? 2'd0 : phase_q;
    cmp_en    = (phase_q == 2'd0);

    unique case (phase)
      2'd0:    rd_sel = 2'd2;
      2'd1:    rd_sel = 2'd0;
      default: rd_sel = 2'd1;
    endcase
    we = (init_q != 2'd0) ? 3'b000 : 3'(1 << phase);
    st_d = ST_RUN;

    if (fix_r2) begin
      we   = we | 3'b100;
      st_d = ST_HOLD_R2;
    end else if (fix_r1) begin
      st_d = ST_FIX_R1;
    end
    if (st_q == ST_HOLD_R2) we = we & 3'b011;
    if (st_q == ST_FIX_R1) begin
      rd_sel = 2'd0;
      we     = we | 3'b010;
    end

    grp = delay_cyc ? grp_q - 1'b1 : grp_q;
    rec = {fix_r2, fix_r1, delay_cyc};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q    <= ST_RUN;
      phase_q <= 2'd1;
      init_q  <= 2'd2;
      grp_q   <= '0;
      cmp_v_q <= 1'b0;
      bad_q   <= '0;
      nomaj_q <= 1'b0;
      fatal   <= 1'b0;
    end else begin
      st_q <= st_d;
      if (!delay_cyc) phase_q <= (phase_q == 2'd2) ? 2'd0 : phase_q + 2'd1;
      if (phase_q == 2'd0) grp_q <= grp_q + 1'b1;
      if (init_q != 2'd0) init_q <= init_q - 2'd1;
      cmp_v_q <= cmp_en;
      bad_q   <= cmp_en ? cmp_bad : 3'b000;
      nomaj_q <= cmp_en && cmp_nomaj;
      if (cmp_v_q && nomaj_q) fatal <= 1'b1;
    end
  end

  assign seu     = cmp_v_q && (nomaj_q || (bad_q != 3'b000));
  assign seu_bad = bad_q;

  // the recovery sequences start only in the cycle after a phase-0 comparison
  a_fix_in_phase1: assert property (@(posedge clk) disable iff (!rst_n)
    (fix_r1 || fix_r2 || delay_cyc) |-> phase_q == 2'd1);
  // never all three copies written at once: one always keeps its value
  a_we_not_all: assert property (@(posedge clk) disable iff (!rst_n) we != 3'b111);

endmodule
