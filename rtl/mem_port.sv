// mem_port -- access of the C identical threads to a duplicated external
// memory, with a check of the incoming words.
//
// Every thread copy owns its own section of the (duplicated) memory, so a
// corrupted memory word can only mislead one thread. The thread id is added
// to the word address: as the most significant bits (TID_LSB = 0: C
// separate sections) or, since the threads are identical, as the least
// significant bits (TID_LSB = 1: the C copies of a word lie next to each
// other and can be fetched in one burst).
//
// The incoming word is also latched in a register and compared with the
// word the next thread receives for the same original cycle: a difference
// means a faulty memory copy (or a spike on the incoming stream) and is
// reported, registered, on `in_seu` one cycle later. The word itself goes on
// to the core unchanged; the core's own state comparison then detects and
// repairs the thread that took the faulty word.
//
// Timing: mem_addr is combinational from tid/grp; the memory is expected to
// answer in the same cycle (asynchronous read). Which address bits the
// thread id takes follows the paper; the comparison register follows its
// drawing of an incoming register with a comparator; the asynchronous read
// and the registered flag are this design's choices.
module mem_port #(
  parameter int unsigned W       = 32,
  parameter int unsigned C       = 3,
  parameter int unsigned AW      = 8,   // word address width within a section
  parameter bit          TID_LSB = 1'b1,
  localparam int unsigned TW     = (C > 2) ? $clog2(C) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [TW-1:0]      tid,        // thread copy in slice 0
  input  logic [AW-1:0]      grp,        // original cycle = word index
  output logic [AW+TW-1:0]   mem_addr,
  input  logic [W-1:0]       mem_rdata,
  output logic [W-1:0]       in_data,    // to the core
  output logic               in_seu      // pulse: copies of a word differ
);

  logic [W-1:0]  prev_q;
  logic [AW-1:0] prev_grp_q;
  logic          prev_v_q;

  assign mem_addr = TID_LSB ? {grp, tid} : {tid, grp};
  assign in_data  = mem_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_q     <= '0;
      prev_grp_q <= '0;
      prev_v_q   <= 1'b0;
      in_seu     <= 1'b0;
    end else begin
      prev_q     <= mem_rdata;
      prev_grp_q <= grp;
      prev_v_q   <= 1'b1;
      in_seu     <= prev_v_q && (prev_grp_q == grp) && (prev_q != mem_rdata);
    end
  end

endmodule
