// tb_csr_top -- end-to-end test of the top at its default parameters
// (CSRrec core, 32-bit state, 256 input words per thread copy, thread id in
// the address LSBs).
//
// A behavioural model of the triplicated external memory holds the input
// stream word(g) once per thread copy. The test runs 240 original cycles and
// checks every voted output against the reference design. Along the way it
// provokes each mechanism of the design and counts how often it happened:
//   - upsets in CR0/CR1 aimed so that R0, R1 and R2 each become the failing
//     copy (detection, recovery with and without the delay cycle),
//   - corrupted words in one memory copy (incoming-word comparison, and
//     the resulting failing thread is recovered as well),
//   - the output voter outvoting a failing copy.
// A mechanism that never happened counts as a failure. At the end all three
// state copies must equal the reference state.
module tb_csr_top;
  import csr_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [9:0] mem_addr;
  logic [31:0] mem_rdata, out_data;
  logic [1:0][31:0] inj_cr;
  logic out_valid, out_fixed, out_nomaj, seu, seu_fatal, in_seu;
  logic [7:0] out_grp;
  logic [2:0] seu_bad, rec;
  logic [2:0][31:0] state;

  csr_top dut (
    .clk, .rst_n, .mem_addr, .mem_rdata, .inj_cr, .out_data, .out_valid, .out_grp,
    .out_fixed, .out_nomaj, .seu, .seu_bad, .seu_fatal, .rec, .in_seu, .state
  );

  always #5 clk = ~clk;

  // triplicated memory: address = {word index, thread id}
  logic [31:0] mem[0:1023];
  assign mem_rdata = mem[mem_addr];

  logic [31:0] ref_s[0:256];
  int n_seu = 0, n_in_seu = 0, n_fixed = 0, n_out = 0;
  int n_rec[3] = '{0, 0, 0};

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t %s", $time, what); end
  endtask

  always @(negedge clk) if (rst_n) begin
    if (seu) n_seu++;
    if (in_seu) n_in_seu++;
    for (int j = 0; j < 3; j++) if (rec[j]) n_rec[j]++;
    if (out_valid) begin
      chk(out_grp === 8'(n_out), $sformatf("output of group %0d, expected %0d", out_grp, n_out));
      chk(out_data === (ref_s[out_grp] ^ word(int'(out_grp))) && !out_nomaj,
          $sformatf("voted output g=%0d %h exp %h", out_grp, out_data, ref_s[out_grp] ^ word(int'(out_grp))));
      if (out_fixed) n_fixed++;
      n_out++;
    end
    chk(!seu_fatal, "fatal");
  end

  initial begin
    int target, lvl, q;
    for (int a = 0; a < 1024; a++) mem[a] = word(a >> 2);
    // one corrupted copy of some words: thread id rotates, groups 130..230
    for (int k = 0; k < 6; k++) mem[{8'(130 + 20 * k), 2'(k % 3)}] ^= 32'h0100_0000 >> k;
    ref_s[0] = '0;
    for (int g = 1; g <= 256; g++) ref_s[g] = step(3, ref_s[g-1], word(g - 1));
    inj_cr = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // upsets in the core, one every ~20 groups up to group 120
    for (int n = 0; n < 6; n++) begin
      while (dut.g_rec.u_core.grp < 8'(15 + 18 * n)) @(negedge clk);
      target = n % 3;
      lvl    = (n / 3) % 2;
      q      = (target + 1 + lvl) % 3;
      do @(negedge clk); while (dut.g_rec.u_core.u_fsm.phase !== 2'(q));
      inj_cr[lvl] = 32'h1 << (3 * n + 1);
      @(negedge clk);
      inj_cr = '0;
    end
    while (n_out < 240) @(negedge clk);
    // final state: at a comparison cycle all copies equal the reference
    do @(negedge clk); while (dut.g_rec.u_core.u_fsm.phase_q !== 2'd0);
    for (int j = 0; j < 3; j++)
      chk(state[j] === ref_s[dut.g_rec.u_core.grp], $sformatf("final R%0d", j));
    $display("MECH seu=%0d rec_R0(delay cycle)=%0d rec_R1=%0d rec_R2=%0d in_seu=%0d outvoted=%0d outputs=%0d",
             n_seu, n_rec[0], n_rec[1], n_rec[2], n_in_seu, n_fixed, n_out);
    chk(n_seu >= 12, "SEU detections");
    for (int j = 0; j < 3; j++) chk(n_rec[j] > 0, $sformatf("recovery of R%0d never happened", j));
    chk(n_in_seu > 0, "incoming-word comparison never fired");
    chk(n_fixed > 0, "output voter never outvoted a copy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
