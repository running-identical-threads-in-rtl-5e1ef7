// tb_csr_core -- standard C-slow retimed core with consecutive-thread
// comparison, for C = 2, 3, 4 and 5 (the range of C the method was
// evaluated with).
//
// Every micro-cycle the output of the thread in slice 0 is checked against
// the reference design at the original cycle `grp` (all threads are
// identical, so all must match), and `grp` must advance once every C
// micro-cycles. Each round then flips one bit in a CR level at a random
// time: `seu` must pulse within 2C+1 cycles, and never in a clean run.
module tb_csr_core;
  import csr_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t %s", $time, what); end
  endtask

  for (genvar gi = 0; gi < 4; gi++) begin : g_c
    localparam int C = gi + 2;
    logic [31:0] in_data, out_o, state;
    logic [C-2:0][31:0] inj_cr;
    logic [(C>2?$clog2(C):1)-1:0] tid;
    logic [7:0] grp, grp_prev;
    logic seu;
    logic rst_l = 1'b0;
    logic [31:0] ref_s[0:255];
    bit   done = 0;
    int   since = 0;

    csr_core #(.W(32), .C(C), .GW(8)) dut (
      .clk, .rst_n(rst_l), .in_data, .inj_cr, .out_o, .tid, .grp, .seu, .state
    );

    assign in_data = word(int'(grp));

    initial begin
      ref_s[0] = '0;
      for (int g = 1; g < 256; g++) ref_s[g] = step(C, ref_s[g-1], word(g - 1));
    end

    initial begin
      int t_inj, lvl, seen;
      inj_cr = '0;
      repeat (2) @(posedge clk);
      #1 rst_l = 1'b1;
      for (int round = 0; round < 12; round++) begin
        // clean run: check every micro-cycle
        for (int n = 0; n < 20 * C; n++) begin
          @(negedge clk);
          chk(out_o === (ref_s[grp] ^ word(int'(grp))),
              $sformatf("C=%0d out grp=%0d %h exp %h", C, grp, out_o, ref_s[grp] ^ word(int'(grp))));
          chk(!seu, $sformatf("C=%0d spurious seu", C));
          if (n > 0 && grp !== grp_prev) begin
            if (since > 0) chk(since === C, $sformatf("C=%0d group took %0d micro-cycles", C, since));
            since = 1;
          end else if (n === 0) since = 0;
          else if (since > 0) since++;
          grp_prev = grp;
        end
        // one upset in a random CR level
        lvl = $urandom_range(0, C - 2);
        repeat ($urandom_range(0, C - 1)) @(negedge clk);
        inj_cr[lvl] = 32'h1 << $urandom_range(0, 31);
        @(negedge clk);
        inj_cr = '0;
        seen = 0;
        for (int n = 0; n < 2 * C + 1; n++) begin
          if (seu) seen++;
          @(negedge clk);
        end
        chk(seen > 0, $sformatf("C=%0d upset at level %0d not detected", C, lvl));
        // start again from reset (this variant cannot recover)
        rst_l = 1'b0;
        @(negedge clk);
        rst_l = 1'b1;
        @(negedge clk);
      end
      done = 1;
    end
  end

  initial begin
    wait (g_c[0].done && g_c[1].done && g_c[2].done && g_c[3].done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
