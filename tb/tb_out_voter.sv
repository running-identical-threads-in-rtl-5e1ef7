// tb_out_voter -- groups of 3 (sometimes 4, as with a recovery delay cycle)
// output samples with 0, 1 or 2 corrupted copies; the voted output, its
// group number, the "outvoted" and "no majority" flags and the latency of
// two cycles after the group's last sample are checked.
module tb_out_voter;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] o, out_data;
  logic [7:0] grp, out_grp;
  logic out_valid, out_fixed, out_nomaj;

  out_voter #(.W(32), .C(3), .GW(8)) dut (
    .clk, .rst_n, .o, .grp, .out_data, .out_valid, .out_grp, .out_fixed, .out_nomaj
  );

  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t %s", $time, what); end
  endtask

  logic [31:0] exp_w[0:255];
  int          exp_nbad[0:255];
  int          n_out = 0;

  // outputs: the result of group g must come two cycles after its last sample
  initial begin
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      if (out_valid) begin
        n_out++;
        chk(out_grp === 8'(n_out - 1), $sformatf("group %0d out of order (exp %0d)", out_grp, n_out - 1));
        if (exp_nbad[out_grp] <= 1)
          chk(out_data === exp_w[out_grp] && out_fixed === (exp_nbad[out_grp] === 1) && !out_nomaj,
              $sformatf("g=%0d voted %h exp %h fixed=%b", out_grp, out_data, exp_w[out_grp], out_fixed));
        else
          chk(out_nomaj, $sformatf("g=%0d no-majority flag", out_grp));
      end
    end
  end

  initial begin
    int n, len, nbad;
    int valid_seen;
    o = '0; grp = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int g = 0; g < 150; g++) begin
      exp_w[g] = $urandom;
      len  = ($urandom_range(0, 4) === 0) ? 4 : 3;
      nbad = $urandom_range(0, 5) === 0 ? 2 : $urandom_range(0, 1);
      exp_nbad[g] = nbad;
      for (int t = 0; t < len; t++) begin
        @(negedge clk);
        grp = 8'(g);
        // corrupt the last `nbad` of the three voted samples
        o = (t >= len - nbad) ? exp_w[g] ^ 32'(t + 1) : exp_w[g];
      end
    end
    // latency: the group's last sample is in cycle t, its vote valid in t+2
    @(negedge clk);
    grp = 8'(150);
    o = '0;
    valid_seen = n_out;
    #1;
    chk(!out_valid, "no output in the first cycle of the next group");
    @(posedge clk); #1;
    chk(out_valid && out_grp === 8'd149, "output in the second cycle after the group ends");
    repeat (3) @(negedge clk);
    chk(n_out === 150, $sformatf("%0d groups voted, expected 150", n_out));
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
