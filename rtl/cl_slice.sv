// cl_slice -- one slice of the combinational logic (CL) of the example design.
//
// C-slow retiming cuts the next-state logic of a design into C slices that
// sit between consecutive C-levels of registers. Slice K combines the partial
// result `a` of the previous slice (the primary input for K = 0) with the
// value `s` of the original register of the thread it is working on:
//
//     m = a ^ s;   y = rotl(m, K + 1) + (2K + 1)
//
// Slice 0 also drives the design output o = a ^ s (for slice 0: input xor
// state), as the first CL block does in the paper's drawing. The slice
// function itself is this design's own stand-in: the method works on any
// logic, and the paper applies it to two third-party processors. The
// function is chosen so that any single flipped bit of `a` or `s` changes
// `y`, which lets every upset be seen downstream.
//
// Purely combinational; no clock.
module cl_slice #(
  parameter int unsigned W = 32,  // datapath / state width
  parameter int unsigned K = 0    // index of the slice (C-level it feeds)
) (
  input  logic [W-1:0] a,  // partial result of slice K-1, or input I for K = 0
  input  logic [W-1:0] s,  // original-register value of the same thread
  output logic [W-1:0] y,  // partial result for C-level K
  output logic [W-1:0] o   // design output O (used on slice 0)
);

  localparam int unsigned R = (K + 1) % W;

  logic [W-1:0] m;

  always_comb begin
    m = a ^ s;
    if (R == 0) y = m + W'(2 * K + 1);
    else        y = ((m << R) | (m >> (W - R))) + W'(2 * K + 1);
    o = m;
  end

endmodule
