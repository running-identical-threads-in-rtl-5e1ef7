// tb_recovery_fsm -- checks the read-select / write-enable / phase sequences
// of the recovery controller: the normal rotation, and the sequences that
// follow a comparison naming R2, R1 or R0 as failing (the three recovery
// cases), and the sticky fatal flag when no majority exists. Expected
// sequences are written out by hand from the copy-propagation tables.
module tb_recovery_fsm;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [2:0] cmp_bad;
  logic cmp_nomaj;
  logic [1:0] rd_sel, phase;
  logic [2:0] we, seu_bad, rec;
  logic [7:0] grp;
  logic seu, fatal;

  recovery_fsm #(.GW(8)) dut (
    .clk, .rst_n, .cmp_bad, .cmp_nomaj, .rd_sel, .we, .phase, .grp,
    .seu, .seu_bad, .fatal, .rec
  );

  always #5 clk = ~clk;

  typedef struct packed { logic [1:0] rd; logic [2:0] we; logic [1:0] ph; } exp_t;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t %s", $time, what); end
  endtask

  // wait for a phase-0 (comparison) cycle, present `bad`, then check the
  // four cycles that follow against `e`
  task automatic scenario(logic [2:0] bad, logic nomaj, exp_t e[4], logic [2:0] exp_rec,
                          bit delay, string name);
    logic [7:0] g0;
    do @(negedge clk); while (phase !== 2'd0);
    cmp_bad = bad; cmp_nomaj = nomaj; g0 = grp;
    chk(rd_sel === 2'd2 && we === 3'b001, {name, ": compare cycle"});
    @(negedge clk);
    cmp_bad = '0; cmp_nomaj = 1'b0;
    chk(seu === (bad !== 0 || nomaj) && seu_bad === (nomaj ? 3'b000 : bad), {name, ": seu flags"});
    chk(rec === exp_rec, $sformatf("%s: rec %b exp %b", name, rec, exp_rec));
    chk(grp === (delay ? g0 : g0 + 8'd1), {name, ": group number"});
    for (int k = 0; k < 4; k++) begin
      if (k > 0) @(negedge clk);
      chk(rd_sel === e[k].rd && we === e[k].we && phase === e[k].ph,
          $sformatf("%s: cycle +%0d rd=%0d we=%b ph=%0d exp rd=%0d we=%b ph=%0d", name, k + 1,
                    rd_sel, we, phase, e[k].rd, e[k].we, e[k].ph));
    end
  endtask

  initial begin
    exp_t en[4], e2[4], e1[4], e0[4];
    en = '{'{2'd0, 3'b010, 2'd1}, '{2'd1, 3'b100, 2'd2}, '{2'd2, 3'b001, 2'd0}, '{2'd0, 3'b010, 2'd1}};
    e2 = '{'{2'd0, 3'b110, 2'd1}, '{2'd1, 3'b000, 2'd2}, '{2'd2, 3'b001, 2'd0}, '{2'd0, 3'b010, 2'd1}};
    e1 = '{'{2'd0, 3'b010, 2'd1}, '{2'd0, 3'b110, 2'd2}, '{2'd2, 3'b001, 2'd0}, '{2'd0, 3'b010, 2'd1}};
    e0 = '{'{2'd2, 3'b001, 2'd0}, '{2'd0, 3'b010, 2'd1}, '{2'd1, 3'b100, 2'd2}, '{2'd2, 3'b001, 2'd0}};
    cmp_bad = '0; cmp_nomaj = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // start-up: phases 1, 2 without writes, then the first write in phase 0
    chk(phase === 2'd1 && rd_sel === 2'd0 && we === 3'b000 && grp === 0, "start-up cycle 0");
    @(posedge clk); #1;
    chk(phase === 2'd2 && rd_sel === 2'd1 && we === 3'b000, "start-up cycle 1");
    @(posedge clk); #1;
    chk(phase === 2'd0 && rd_sel === 2'd2 && we === 3'b001 && grp === 0, "start-up cycle 2");
    for (int n = 0; n < 20; n++) begin
      scenario(3'b000, 1'b0, en, 3'b000, 0, "normal");
      scenario(3'b100, 1'b0, e2, 3'b100, 0, "R2 failing");
      scenario(3'b010, 1'b0, e1, 3'b010, 0, "R1 failing");
      scenario(3'b001, 1'b0, e0, 3'b001, 1, "R0 failing");
    end
    chk(!fatal, "no fatal before");
    scenario(3'b000, 1'b1, en, 3'b000, 0, "no majority");
    chk(fatal, "fatal set");
    scenario(3'b000, 1'b0, en, 3'b000, 0, "after fatal");
    chk(fatal, "fatal sticky");
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
