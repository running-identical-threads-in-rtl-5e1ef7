// csr_pkg -- shared types of the C-slow retimed (CSR) example design.
//
// The design comes in three flavours that share the same combinational
// slices: standard CSR with a comparator (detection only), CSRrec (C = 3,
// detection plus on-the-fly recovery of the failing thread copy) and CSRmin
// (minimal number of C-slow retiming registers, detection only).
package csr_pkg;

  typedef enum logic [1:0] {
    VAR_CSR = 2'd0,  // standard CSR, consecutive-thread comparator
    VAR_REC = 2'd1,  // CSRrec: majority decoder, FSM-driven recovery (C = 3)
    VAR_MIN = 2'd2   // CSRmin: Rn copies drive every C-level, detection only
  } csr_variant_e;

endpackage
