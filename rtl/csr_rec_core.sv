// csr_rec_core -- CSRrec: a 3-slow retimed core running three identical
// threads, with SEU detection by a majority decoder and on-the-fly recovery.
//
// Data path (C = 3): slice 0 takes the input and the thread state read from
// one of the three copies R0..R2 (rn_bank), CR0 captures its partial result
// together with the state, slice 1 works on CR0 into CR1, and slice 2
// produces the thread's next state, written into one (or, during recovery,
// two) of the copies:
//
//   CR0 <= {CL0(I, R[rd_sel]), R[rd_sel]}
//   CR1 <= {CL1(CR0.x, CR0.s), CR0.s}
//   R[we] <= CL2(CR1.x, CR1.s)
//
// The state copies travelling with the partial results (CR0.s, CR1.s) are
// the shift-register CRs of standard CSR. The majority decoder looks at the
// three copies in every phase-0 micro-cycle, and recovery_fsm registers the
// result and rewrites the failing copy in the next one or two micro-cycles
// (or inserts one delay cycle when R0 is the failing copy). Threads are
// identical, so overwriting a copy with a good state of another thread
// restores the failing one without stopping the core.
//
// Interface timing: `tid` (= rd_sel) and `grp` tell which thread copy and
// which original cycle are in slice 0, i.e. which input word `in_data` must
// hold in this cycle; `out_o` is the output O of that thread. Status
// outputs are single-cycle pulses except the sticky `fatal`.
// `inj_cr` flips bits of the partial results captured in CR0/CR1 (fault
// injection for simulation, tie to zero in use).
//
// From the paper: the structure (CR0, CR1, R0..R2, read multiplexer,
// comparator, FSM) and the recovery sequences. This design's own choices:
// the slice function, reset behaviour and the injection inputs.
module csr_rec_core #(
  parameter int unsigned W            = 32,
  parameter int unsigned GW           = 8,
  parameter logic [W-1:0] RESET_STATE = '0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [W-1:0]        in_data,
  input  logic [1:0][W-1:0]   inj_cr,
  output logic [W-1:0]        out_o,
  output logic [1:0]          tid,
  output logic [GW-1:0]       grp,
  output logic                seu,
  output logic [2:0]          seu_bad,
  output logic                fatal,
  output logic [2:0]          rec,
  output logic [2:0][W-1:0]   state      // R0..R2
);

  typedef struct packed {
    logic [W-1:0] x;  // partial result of the slice before
    logic [W-1:0] s;  // thread state carried along
  } cr_t;

  cr_t                cr0_q, cr1_q;
  logic [W-1:0]       rdata, y0, y1, y2, o_unused1, o_unused2, maj_unused;
  logic [2:0][W-1:0]  r;
  logic [2:0]         we, bad;
  logic [1:0]         rd_sel, phase_unused;
  logic               mismatch_unused, no_major;

  cl_slice #(.W(W), .K(0)) u_cl0 (.a(in_data),  .s(rdata),    .y(y0), .o(out_o));
  cl_slice #(.W(W), .K(1)) u_cl1 (.a(cr0_q.x),  .s(cr0_q.s),  .y(y1), .o(o_unused1));
  cl_slice #(.W(W), .K(2)) u_cl2 (.a(cr1_q.x),  .s(cr1_q.s),  .y(y2), .o(o_unused2));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cr0_q <= '0;
      cr1_q <= '0;
    end else begin
      cr0_q <= '{x: y0 ^ inj_cr[0], s: rdata};
      cr1_q <= '{x: y1 ^ inj_cr[1], s: cr0_q.s};
    end
  end

  rn_bank #(.W(W), .C(3), .RESET_STATE(RESET_STATE)) u_rn (
    .clk, .rst_n, .we, .wdata(y2), .rd_sel, .rdata, .r
  );

  majority_decoder #(.W(W), .C(3)) u_maj (
    .v(r), .maj(maj_unused), .bad, .mismatch(mismatch_unused), .no_major
  );

  recovery_fsm #(.GW(GW)) u_fsm (
    .clk, .rst_n, .cmp_bad(bad), .cmp_nomaj(no_major), .rd_sel, .we,
    .phase(phase_unused), .grp, .seu, .seu_bad, .fatal, .rec
  );

  assign tid   = rd_sel;
  assign state = r;

endmodule
