// out_voter -- majority vote over the C thread copies of an output that
// leaves the C-slow retimed section.
//
// The C identical threads produce the same output once per original cycle,
// in C (during a recovery delay cycle, C+1) consecutive micro-cycles. This
// block shifts every micro-cycle's output into a C-deep register; when the
// group number `grp` changes, the last C samples all belong to the finished
// group and are voted by a majority_decoder. A faulty thread copy is thereby
// masked from the world outside: `out_fixed` tells that one copy was
// outvoted, `out_nomaj` that no majority existed (then copy 0 is passed).
//
// Timing: the result of group g is registered and valid (`out_valid` pulse,
// `out_grp` = g) two cycles after the last micro-cycle of g. The vote
// follows the paper; the sampling scheme is this design's own.
module out_voter #(
  parameter int unsigned W  = 32,
  parameter int unsigned C  = 3,
  parameter int unsigned GW = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [W-1:0]  o,          // output of the thread in slice 0
  input  logic [GW-1:0] grp,        // its group (original cycle)
  output logic [W-1:0]  out_data,
  output logic          out_valid,
  output logic [GW-1:0] out_grp,
  output logic          out_fixed,
  output logic          out_nomaj
);

  localparam int unsigned NW = $clog2(C + 1);

  logic [C-1:0][W-1:0] sh_q;
  logic [GW-1:0]       grp_q;
  logic [NW-1:0]       n_q;     // samples seen since reset, saturating at C
  logic [W-1:0]        maj;
  logic [C-1:0]        bad;
  logic                mismatch_unused, no_major;

  majority_decoder #(.W(W), .C(C)) u_maj (
    .v(sh_q), .maj, .bad, .mismatch(mismatch_unused), .no_major
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh_q      <= '0;
      grp_q     <= '0;
      n_q       <= '0;
      out_data  <= '0;
      out_valid <= 1'b0;
      out_grp   <= '0;
      out_fixed <= 1'b0;
      out_nomaj <= 1'b0;
    end else begin
      sh_q  <= {sh_q[C-2:0], o};
      grp_q <= grp;
      if (n_q != NW'(C)) n_q <= n_q + 1'b1;
      out_valid <= 1'b0;
      out_fixed <= 1'b0;
      out_nomaj <= 1'b0;
      if (grp != grp_q && n_q == NW'(C)) begin
        out_data  <= maj;
        out_valid <= 1'b1;
        out_grp   <= grp_q;
        out_fixed <= |bad;
        out_nomaj <= no_major;
      end
    end
  end

endmodule
