// majority_decoder -- compares the C copies of a key register.
//
// Running C identical threads on a C-slow retimed core gives C copies of
// every original register. This block compares them all at once: `mismatch`
// is set when any two copies differ. When one value is held by more than
// half of the copies it is output on `maj` and every copy that differs from
// it is flagged in `bad`; with C >= 3 a single upset copy is thereby singled
// out (a 1-out-of-3 decoder for C = 3). When no value has a majority (always
// the case for a mismatch with C = 2) `no_major` is set, `bad` is zero and
// `maj` is copy 0.
//
// Purely combinational: C*(C-1)/2 W-bit equality comparators and a vote.
// The callers register its outputs (one pipeline stage for the comparison).
module majority_decoder #(
  parameter int unsigned W = 32,
  parameter int unsigned C = 3
) (
  input  logic [C-1:0][W-1:0] v,         // the C copies
  output logic [W-1:0]        maj,       // majority value
  output logic [C-1:0]        bad,       // copies that differ from the majority
  output logic                mismatch,  // at least two copies differ
  output logic                no_major   // copies differ and no majority exists
);

  localparam int unsigned CW = $clog2(C + 1);

  logic [C-1:0][CW-1:0] agree;  // how many copies equal copy i (itself included)
  logic [C-1:0]         is_maj;

  always_comb begin
    mismatch = 1'b0;
    for (int i = 0; i < C; i++) begin
      agree[i] = '0;
      for (int j = 0; j < C; j++) begin
        if (v[i] == v[j]) agree[i] = agree[i] + 1'b1;
        else              mismatch = 1'b1;
      end
      is_maj[i] = (2 * int'(agree[i])) > int'(C);
    end

    maj      = v[0];
    no_major = mismatch;
    for (int i = C - 1; i >= 0; i--) begin
      if (is_maj[i]) begin
        maj      = v[i];
        no_major = 1'b0;
      end
    end

    for (int j = 0; j < C; j++)
      bad[j] = !no_major && (v[j] != maj);
  end

endmodule
