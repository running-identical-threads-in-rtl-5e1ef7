// csr_core -- standard C-slow retimed core running C identical threads, with
// a comparator of consecutive threads for single-event-upset (SEU) detection.
//
// The original design is one register OR (the state, W bits) fed back through
// combinational logic CL. C-slow retiming cuts CL into C slices (cl_slice)
// and puts a C-slow retiming register (CR) level between consecutive slices.
// The core then holds C independent design copies ("threads"), each advancing
// by one original clock cycle every C micro-cycles. Because the slices need
// the thread's OR value at every C-level, the OR value also travels along the
// CR levels as a shift register (crs_q): these are the CRs that a register
// feedback loop produces under CSR.
//
// All threads get the same input, so they compute the same thing and form a
// C-times redundant system. The value about to be written into OR (output of
// the last slice) is compared with the value OR holds, i.e. the result of the
// previous thread. The two belong to the same original cycle unless the
// writing thread is the first of its group, so the comparison is made in
// every micro-cycle but one out of C. The mismatch is registered (one
// pipeline stage) and shows as a one-cycle pulse on `seu`.
//
// Timing. `phase` counts micro-cycles modulo C and is also the thread id
// `tid` of the thread whose state enters slice 0 in this cycle. A group of C
// threads that work on the same original cycle enters slice 0 in phases
// 1, 2, ..., C-1, 0; `grp` numbers the groups and is the index of the input
// word these threads must see on `in_data`. After reset (state RESET_STATE in
// all threads) the writes into OR are held off for C-1 cycles so that all C
// threads start from the same state.
//
// From the paper: the slicing, the CR placement, the comparison of
// consecutive threads (pipelined) and the identical-input operation. This
// design's own choices: the slice function, the reset/start-up sequence,
// the group order 1..C-1,0 and the XOR fault-injection inputs `inj_cr`
// (flip bits of the partial result captured at CR level k in this cycle;
// tie to zero in use).
module csr_core #(
  parameter int unsigned W           = 32,
  parameter int unsigned C           = 3,
  parameter int unsigned GW          = 8,
  parameter logic [W-1:0] RESET_STATE = '0,
  localparam int unsigned PW         = (C > 2) ? $clog2(C) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [W-1:0]         in_data,  // input word of group `grp`
  input  logic [C-2:0][W-1:0]  inj_cr,   // SEU injection into CR levels
  output logic [W-1:0]         out_o,    // output O of the thread in slice 0
  output logic [PW-1:0]        tid,      // thread id (phase) of slice 0
  output logic [GW-1:0]        grp,      // group (original cycle) of slice 0
  output logic                 seu,      // registered mismatch pulse
  output logic [W-1:0]         state     // OR
);

  logic [PW-1:0]        phase_q;
  logic [PW-1:0]        init_q;
  logic [GW-1:0]        grp_q;
  logic [W-1:0]         or_q;
  logic [C-2:0][W-1:0]  crx_q;  // partial results at CR levels 0..C-2
  logic [C-2:0][W-1:0]  crs_q;  // OR value carried along (shift register CRs)
  logic [C-1:0][W-1:0]  y;      // slice outputs
  logic                 cmp;

  cl_slice #(.W(W), .K(0)) u_cl0 (.a(in_data), .s(or_q), .y(y[0]), .o(out_o));

  for (genvar k = 1; k < C; k++) begin : g_cl
    logic [W-1:0] o_unused;
    cl_slice #(.W(W), .K(k)) u_cl (.a(crx_q[k-1]), .s(crs_q[k-1]), .y(y[k]), .o(o_unused));
  end

  assign cmp = (init_q == '0) && (phase_q != '0) && (y[C-1] != or_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase_q <= PW'(1 % C);
      init_q  <= PW'(C - 1);
      grp_q   <= '0;
      or_q    <= RESET_STATE;
      crx_q   <= '0;
      crs_q   <= '0;
      seu     <= 1'b0;
    end else begin
      phase_q <= (phase_q == PW'(C - 1)) ? '0 : phase_q + 1'b1;
      if (phase_q == '0) grp_q <= grp_q + 1'b1;
      if (init_q != '0) init_q <= init_q - 1'b1;
      else              or_q   <= y[C-1];
      crx_q[0] <= y[0] ^ inj_cr[0];
      crs_q[0] <= or_q;
      for (int k = 1; k < C - 1; k++) begin
        crx_q[k] <= y[k] ^ inj_cr[k];
        crs_q[k] <= crs_q[k-1];
      end
      seu <= cmp;
    end
  end

  assign tid   = phase_q;
  assign grp   = grp_q;
  assign state = or_q;

endmodule
