// tb_csr_min_core -- CSRmin core for C = 2, 3, 4 and 5.
//
// Every micro-cycle the output of the thread in slice 0 is checked against
// the reference design at original cycle `grp`; in every phase-0 cycle all
// C copies R0..R(C-1) must hold the reference state of that original cycle;
// `grp` must advance once every C micro-cycles. Each round then flips one
// bit in a CR level: `seu` must pulse within 3C+1 cycles, naming exactly one
// failing copy for C >= 3 and reporting "no majority" for C = 2.
module tb_csr_min_core;
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
    logic [31:0] in_data, out_o;
    logic [C-1:0][31:0] state;
    logic [C-2:0][31:0] inj_cr;
    logic [(C>2?$clog2(C):1)-1:0] tid;
    logic [7:0] grp, grp_prev;
    logic seu, seu_nomaj;
    logic [C-1:0] seu_bad;
    logic rst_l = 1'b0;
    logic [31:0] ref_s[0:255];
    bit   done = 0;
    int   since = 0;

    csr_min_core #(.W(32), .C(C), .GW(8)) dut (
      .clk, .rst_n(rst_l), .in_data, .inj_cr, .out_o, .tid, .grp, .seu,
      .seu_bad, .seu_nomaj, .state
    );

    assign in_data = word(int'(grp));

    initial begin
      ref_s[0] = '0;
      for (int g = 1; g < 256; g++) ref_s[g] = step(C, ref_s[g-1], word(g - 1));
    end

    initial begin
      int lvl, seen;
      inj_cr = '0;
      repeat (2) @(posedge clk);
      #1 rst_l = 1'b1;
      for (int round = 0; round < 12; round++) begin
        for (int n = 0; n < 20 * C; n++) begin
          @(negedge clk);
          chk(out_o === (ref_s[grp] ^ word(int'(grp))),
              $sformatf("C=%0d out grp=%0d %h exp %h", C, grp, out_o, ref_s[grp] ^ word(int'(grp))));
          chk(!seu, $sformatf("C=%0d spurious seu", C));
          if (tid === 0)
            for (int j = 0; j < C; j++)
              chk(state[j] === ref_s[grp], $sformatf("C=%0d R%0d grp=%0d %h exp %h", C, j, grp, state[j], ref_s[grp]));
          if (n > 0 && grp !== grp_prev) begin
            if (since > 0) chk(since === C, $sformatf("C=%0d group took %0d micro-cycles", C, since));
            since = 1;
          end else if (n === 0) since = 0;
          else if (since > 0) since++;
          grp_prev = grp;
        end
        lvl = $urandom_range(0, C - 2);
        repeat ($urandom_range(0, C - 1)) @(negedge clk);
        inj_cr[lvl] = 32'h1 << $urandom_range(0, 31);
        @(negedge clk);
        inj_cr = '0;
        seen = 0;
        for (int n = 0; n < 3 * C + 1 && seen === 0; n++) begin
          if (seu) begin
            seen++;
            if (C >= 3) chk($onehot(seu_bad) && !seu_nomaj, $sformatf("C=%0d bad copies %b", C, seu_bad));
            else        chk(seu_nomaj && seu_bad === '0, "C=2 must report no majority");
          end
          @(negedge clk);
        end
        chk(seen > 0, $sformatf("C=%0d upset at level %0d not detected", C, lvl));
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
