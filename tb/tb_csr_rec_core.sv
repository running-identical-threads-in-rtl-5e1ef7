// tb_csr_rec_core -- CSRrec core (C = 3): detection and on-the-fly recovery.
//
// Outside the short windows after an injected upset, every micro-cycle's
// output must match the reference design at original cycle `grp`, and in
// every comparison (phase-0) cycle all three copies R0..R2 must hold the
// reference state. Upsets are injected into CR0 or CR1 at chosen phases so
// that each of R0, R1 and R2 becomes the failing copy many times. For each:
// `seu` must name exactly that copy, the matching recovery must start in
// the same cycle, and the copies must agree with the reference again at the
// comparison that follows, 3 micro-cycles after the detecting one (4 when
// R0 failed): recovery without stopping. Groups take 3
// micro-cycles, 4 when the R0 recovery inserts its delay cycle. Finally two
// copies are corrupted at once, which must set the sticky `fatal`.
module tb_csr_rec_core;
  import csr_ref_pkg::*;

  int checks = 0, failures = 0;
  int n_rec[3] = '{0, 0, 0};
  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] in_data, out_o;
  logic [1:0][31:0] inj_cr;
  logic [1:0] tid;
  logic [7:0] grp, grp_prev;
  logic seu, fatal;
  logic [2:0] seu_bad, rec;
  logic [2:0][31:0] state;
  logic [31:0] ref_s[0:255];
  int quiet = 0;  // cycles left in which checks are suspended

  csr_rec_core #(.W(32), .GW(8)) dut (
    .clk, .rst_n, .in_data, .inj_cr, .out_o, .tid, .grp, .seu, .seu_bad, .fatal, .rec, .state
  );

  always #5 clk = ~clk;
  assign in_data = word(int'(grp));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t %s", $time, what); end
  endtask

  // continuous checker, sampled at the falling edge
  initial begin
    int since = 0;
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      if (quiet > 0) quiet--;
      else begin
        chk(out_o === (ref_s[grp] ^ word(int'(grp))),
            $sformatf("out grp=%0d %h exp %h", grp, out_o, ref_s[grp] ^ word(int'(grp))));
        if (dut.u_fsm.phase_q === 2'd0)
          for (int j = 0; j < 3; j++)
            chk(state[j] === ref_s[grp], $sformatf("R%0d grp=%0d %h exp %h", j, grp, state[j], ref_s[grp]));
      end
      if (grp !== grp_prev) begin
        if (since > 0) chk(since === 3 || since === 4, $sformatf("group took %0d micro-cycles", since));
        since = 1;
      end else if (since > 0) since++;
      grp_prev = grp;
    end
  end

  initial begin
    int lvl, target, q, seen, lat;
    ref_s[0] = '0;
    for (int g = 1; g < 256; g++) ref_s[g] = step(3, ref_s[g-1], word(g - 1));
    inj_cr = '0;
    grp_prev = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (10) @(negedge clk);
    for (int n = 0; n < 24; n++) begin
      // choose the copy to corrupt and the CR level; CR1 hit in phase q
      // lands in R[q+1], CR0 hit in phase q lands in R[q+2]
      target = n % 3;
      lvl    = (n / 3) % 2;
      q      = (target + 1 + lvl) % 3;
      do @(negedge clk); while (dut.u_fsm.phase !== 2'(q) || dut.u_fsm.st_q !== 0);
      inj_cr[lvl] = 32'h1 << $urandom_range(0, 31);
      quiet = 14;
      @(negedge clk);
      inj_cr = '0;
      seen = 0;
      for (int k = 0; k < 8 && seen === 0; k++) begin
        if (seu) begin
          seen = 1;
          chk(seu_bad === 3'(1 << target), $sformatf("failing copy %b, expected R%0d", seu_bad, target));
          chk(rec === 3'(1 << target), $sformatf("recovery %b, expected R%0d", rec, target));
          if (rec === 3'(1 << target)) n_rec[target]++;
          // recovery latency: the next comparison comes 3 micro-cycles after
          // the detecting one (4 with the R0 delay cycle) and must find all
          // three copies equal to the reference again
          lat = 1;
          do begin @(negedge clk); lat++; end while (dut.u_fsm.phase_q !== 2'd0);
          chk(lat === (target === 0 ? 4 : 3), $sformatf("R%0d: next comparison after %0d cycles", target, lat));
          for (int j = 0; j < 3; j++)
            chk(state[j] === ref_s[grp], $sformatf("R%0d not recovered by the next comparison (R%0d)", target, j));
        end
        @(negedge clk);
      end
      chk(seen === 1, $sformatf("upset in CR%0d aimed at R%0d not detected", lvl, target));
      repeat (16 + $urandom_range(0, 5)) @(negedge clk);
      chk(!fatal, "fatal without a double upset");
    end
    for (int j = 0; j < 3; j++) chk(n_rec[j] >= 4, $sformatf("recovery of R%0d seen %0d times", j, n_rec[j]));
    // double upset: two different copies fail before one comparison
    do @(negedge clk); while (dut.u_fsm.phase !== 2'd0);
    inj_cr[1] = 32'h10;
    @(negedge clk);
    inj_cr[1] = 32'h20;
    quiet = 1000;
    @(negedge clk);
    inj_cr = '0;
    repeat (8) @(negedge clk);
    chk(fatal, "double upset must set fatal");
    $display("MECH recovery R0=%0d R1=%0d R2=%0d", n_rec[0], n_rec[1], n_rec[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
