// tb_mem_port -- address mapping (thread id in the LSBs and in the MSBs)
// and the comparison of the copies of an incoming word: identical copies
// must pass silently, a differing copy must raise `in_seu` one cycle later,
// and words of different original cycles must never be compared.
module tb_mem_port;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [1:0] tid;
  logic [7:0] grp;
  logic [31:0] rdata, in_l, in_m;
  logic [9:0] addr_l, addr_m;
  logic seu_l, seu_m;

  mem_port #(.W(32), .C(3), .AW(8), .TID_LSB(1'b1)) dut_l (
    .clk, .rst_n, .tid, .grp, .mem_addr(addr_l), .mem_rdata(rdata), .in_data(in_l), .in_seu(seu_l)
  );
  mem_port #(.W(32), .C(3), .AW(8), .TID_LSB(1'b0)) dut_m (
    .clk, .rst_n, .tid, .grp, .mem_addr(addr_m), .mem_rdata(rdata), .in_data(in_m), .in_seu(seu_m)
  );

  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t %s", $time, what); end
  endtask

  initial begin
    logic [31:0] w;
    bit exp_seu;
    int bad_slot;
    tid = '0; grp = '0; rdata = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int g = 0; g < 200; g++) begin
      w = $urandom;
      bad_slot = ($urandom_range(0, 3) === 0) ? $urandom_range(0, 2) : -1;
      for (int t = 0; t < 3; t++) begin
        @(negedge clk);
        tid = 2'(t); grp = 8'(g);
        rdata = (t === bad_slot) ? w ^ 32'h8 : w;
        #1;
        chk(addr_l === {8'(g), 2'(t)} && addr_m === {2'(t), 8'(g)}, "address mapping");
        chk(in_l === rdata && in_m === rdata, "data pass-through");
        // comparison with the copy received one cycle earlier
        exp_seu = (t > 0) && (t === bad_slot || t - 1 === bad_slot);
        @(posedge clk); #1;
        chk(seu_l === exp_seu && seu_m === exp_seu,
            $sformatf("g=%0d t=%0d bad=%0d in_seu=%b exp %b", g, t, bad_slot, seu_l, exp_seu));
      end
    end
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
