// csr_min_core -- "CSR minimal" (CSRmin): a C-slow retimed core for identical
// threads with the smallest number of C-slow retiming registers (CRs).
//
// In standard CSR the state of a thread travels along the CR levels as a
// shift register so that every slice sees it. When all threads are
// identical, any copy of the state that holds the right original cycle will
// do, so those shift registers are dropped: the original register is kept in
// C copies R0..R(C-1), and copy Rk feeds slice k directly. What remains is
// one CR level of partial results between consecutive slices.
//
//   CR0     <= CL0(I, R0)
//   CRk     <= CLk(CR(k-1), Rk)              k = 1..C-2
//   R[phase] <= CL(C-1)(CR(C-2), R(C-1))
//
// The write pointer `phase` steps R0, R1, ..., R(C-1), R0, ... one copy per
// micro-cycle. In the micro-cycles with phase 0 all copies hold the same
// original cycle and are compared (majority_decoder). The comparison is
// registered: `seu` pulses one cycle later, `seu_bad` names the differing
// copies when a majority exists (C >= 3) and `seu_nomaj` is set when it does
// not (always for C = 2). CSRmin detects only; it does not recover.
//
// Timing. The thread entering slice 0 in phase 0 finishes the current group;
// the threads entering in phases 1..C-1 already work on the next original
// cycle. So a group is the phases 1, ..., C-1, 0 and `grp` (the index of the
// input word to present on `in_data`) steps after each phase-0 cycle. After
// reset (all copies RESET_STATE) the writes are held off for C-1 cycles.
//
// From the paper: the register structure, the update order of the copies
// and the comparison every C micro-cycles. This design's own choices: the
// slice function, the start-up sequence, `tid` = phase, and the XOR fault
// injection inputs `inj_cr` (tie to zero in use).
module csr_min_core #(
  parameter int unsigned W           = 32,
  parameter int unsigned C           = 3,
  parameter int unsigned GW          = 8,
  parameter logic [W-1:0] RESET_STATE = '0,
  localparam int unsigned PW         = (C > 2) ? $clog2(C) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [W-1:0]         in_data,
  input  logic [C-2:0][W-1:0]  inj_cr,
  output logic [W-1:0]         out_o,
  output logic [PW-1:0]        tid,
  output logic [GW-1:0]        grp,
  output logic                 seu,
  output logic [C-1:0]         seu_bad,
  output logic                 seu_nomaj,
  output logic [C-1:0][W-1:0]  state     // R0..R(C-1)
);

  logic [PW-1:0]        phase_q;
  logic [PW-1:0]        init_q;
  logic [GW-1:0]        grp_q;
  logic [C-1:0][W-1:0]  r_q;
  logic [C-2:0][W-1:0]  crx_q;
  logic [C-1:0][W-1:0]  y;
  logic [W-1:0]         maj_unused;
  logic [C-1:0]         bad;
  logic                 mismatch, no_major;

  cl_slice #(.W(W), .K(0)) u_cl0 (.a(in_data), .s(r_q[0]), .y(y[0]), .o(out_o));

  for (genvar k = 1; k < C; k++) begin : g_cl
    logic [W-1:0] o_unused;
    cl_slice #(.W(W), .K(k)) u_cl (.a(crx_q[k-1]), .s(r_q[k]), .y(y[k]), .o(o_unused));
  end

  majority_decoder #(.W(W), .C(C)) u_cmp (
    .v(r_q), .maj(maj_unused), .bad(bad), .mismatch(mismatch), .no_major(no_major)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase_q   <= PW'(1 % C);
      init_q    <= PW'(C - 1);
      grp_q     <= '0;
      r_q       <= {C{RESET_STATE}};
      crx_q     <= '0;
      seu       <= 1'b0;
      seu_bad   <= '0;
      seu_nomaj <= 1'b0;
    end else begin
      phase_q <= (phase_q == PW'(C - 1)) ? '0 : phase_q + 1'b1;
      if (phase_q == '0) grp_q <= grp_q + 1'b1;
      if (init_q != '0) init_q <= init_q - 1'b1;
      else              r_q[phase_q] <= y[C-1];
      crx_q[0] <= y[0] ^ inj_cr[0];
      for (int k = 1; k < C - 1; k++) crx_q[k] <= y[k] ^ inj_cr[k];
      // comparison every C micro-cycles, one pipeline stage
      seu       <= (phase_q == '0) && mismatch;
      seu_bad   <= (phase_q == '0) ? bad : '0;
      seu_nomaj <= (phase_q == '0) && no_major;
    end
  end

  assign tid   = phase_q;
  assign grp   = grp_q;
  assign state = r_q;

endmodule
