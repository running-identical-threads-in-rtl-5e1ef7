// csr_top -- a C-slow retimed design (C = 3) running three identical
// threads for functional failure detection, with its memory port and
// output voter.
//
//   external memory --> mem_port --> core --> out_voter --> outputs
//   (one section per       (address +    (CSRrec by default)   (majority of
//    thread copy)           compare)                            the 3 copies)
//
// The core is chosen with VARIANT: VAR_REC (default, the variant with
// on-the-fly recovery), VAR_CSR (standard CSR, detection by comparing
// consecutive threads) or VAR_MIN (CSRmin, fewest registers, detection and
// identification of the failing copy, no recovery). The core asks for the
// input word of original cycle `grp` of thread copy `tid`; mem_port turns
// that into a memory address with the thread id in the LSBs (TID_LSB = 1)
// or the MSBs, and flags copies of a word that disagree. The voter passes
// one output per original cycle to the outside, masking a failing copy.
//
// Ports: the memory is read asynchronously (address out, data back in the
// same cycle). `inj_cr` flips bits in the CR levels for fault-injection
// experiments and must be tied to zero in use. Status flags are one-cycle
// pulses except `seu_fatal`. `state` shows the three copies of the
// original register (for VAR_CSR the single register, three times).
//
// The structure follows the paper; the example logic being retimed, the
// widths, and the memory/voter timing are this design's own choices.
module csr_top
  import csr_pkg::*;
#(
  parameter int unsigned  W            = 32,
  parameter int unsigned  AW           = 8,
  parameter csr_variant_e VARIANT      = VAR_REC,
  parameter bit           TID_LSB      = 1'b1,
  parameter logic [W-1:0] RESET_STATE  = '0
) (
  input  logic               clk,
  input  logic               rst_n,
  output logic [AW+1:0]      mem_addr,
  input  logic [W-1:0]       mem_rdata,
  input  logic [1:0][W-1:0]  inj_cr,
  output logic [W-1:0]       out_data,
  output logic               out_valid,
  output logic [AW-1:0]      out_grp,
  output logic               out_fixed,
  output logic               out_nomaj,
  output logic               seu,
  output logic [2:0]         seu_bad,
  output logic               seu_fatal,
  output logic [2:0]         rec,
  output logic               in_seu,
  output logic [2:0][W-1:0]  state
);

  localparam int unsigned C = 3;

  logic [W-1:0]  in_data, core_o;
  logic [1:0]    tid;
  logic [AW-1:0] grp;

  mem_port #(.W(W), .C(C), .AW(AW), .TID_LSB(TID_LSB)) u_mem (
    .clk, .rst_n, .tid, .grp, .mem_addr, .mem_rdata, .in_data, .in_seu
  );

  if (VARIANT == VAR_REC) begin : g_rec
    csr_rec_core #(.W(W), .GW(AW), .RESET_STATE(RESET_STATE)) u_core (
      .clk, .rst_n, .in_data, .inj_cr, .out_o(core_o), .tid, .grp,
      .seu, .seu_bad, .fatal(seu_fatal), .rec, .state
    );
  end else if (VARIANT == VAR_MIN) begin : g_min
    logic nomaj;
    csr_min_core #(.W(W), .C(C), .GW(AW), .RESET_STATE(RESET_STATE)) u_core (
      .clk, .rst_n, .in_data, .inj_cr, .out_o(core_o), .tid, .grp,
      .seu, .seu_bad, .seu_nomaj(nomaj), .state
    );
    assign seu_fatal = nomaj;
    assign rec       = '0;
  end else begin : g_csr
    logic [W-1:0] or_state;
    csr_core #(.W(W), .C(C), .GW(AW), .RESET_STATE(RESET_STATE)) u_core (
      .clk, .rst_n, .in_data, .inj_cr, .out_o(core_o), .tid, .grp,
      .seu, .state(or_state)
    );
    assign seu_bad   = '0;
    assign seu_fatal = 1'b0;
    assign rec       = '0;
    assign state     = {C{or_state}};
  end

  out_voter #(.W(W), .C(C), .GW(AW)) u_vote (
    .clk, .rst_n, .o(core_o), .grp, .out_data, .out_valid, .out_grp,
    .out_fixed, .out_nomaj
  );

endmodule
