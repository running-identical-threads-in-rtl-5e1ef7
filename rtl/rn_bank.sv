// rn_bank -- the C copies R0..R(C-1) of the original register, with a hold
// per copy and the read multiplexer (CSRrec).
//
// In the recovery variant the single original register of a C-slow retimed
// design is replaced by C registers, one per thread, so that all C thread
// states can be seen and compared at the same time. Each copy loads `wdata`
// (the output of the last combinational slice) when its write enable is
// set and holds otherwise; the write enables are the "hold signals" that the
// recovery FSM drives, and on an ASIC they map naturally onto clock gating.
// The read multiplexer hands the copy selected by `rd_sel` to slice 0.
//
// Timing: one write per enabled copy at the clock edge; `rdata` and `r` are
// the register outputs (no combinational path from wdata). Reset loads
// RESET_STATE into every copy. Several copies may be written with the same
// value in one cycle; that is how a failing copy is overwritten.
module rn_bank #(
  parameter int unsigned W            = 32,
  parameter int unsigned C            = 3,
  parameter logic [W-1:0] RESET_STATE = '0,
  localparam int unsigned SW          = (C > 2) ? $clog2(C) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [C-1:0]        we,      // write enable (not hold) per copy
  input  logic [W-1:0]        wdata,
  input  logic [SW-1:0]       rd_sel,  // copy driven onto rdata
  output logic [W-1:0]        rdata,
  output logic [C-1:0][W-1:0] r        // all copies, for the comparison
);

  logic [C-1:0][W-1:0] r_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r_q <= {C{RESET_STATE}};
    else
      for (int i = 0; i < C; i++)
        if (we[i]) r_q[i] <= wdata;
  end

  assign rdata = r_q[rd_sel];
  assign r     = r_q;

  a_rd_sel_range: assert property (@(posedge clk) disable iff (!rst_n) int'(rd_sel) < C)
    else $error("rn_bank: rd_sel %0d out of range", rd_sel);

endmodule
