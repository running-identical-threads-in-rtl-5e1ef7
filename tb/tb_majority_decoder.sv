// tb_majority_decoder -- checks the decoder for C = 3 and C = 5 with 0, 1, 2
// (and for C = 5 up to 3) corrupted copies; the expected vote is worked out
// from which copies the testbench corrupted.
module tb_majority_decoder;

  int checks = 0, failures = 0;

  logic [2:0][31:0] v3;
  logic [31:0] maj3;
  logic [2:0] bad3;
  logic mm3, nm3;
  logic [4:0][31:0] v5;
  logic [31:0] maj5;
  logic [4:0] bad5;
  logic mm5, nm5;

  majority_decoder #(.W(32), .C(3)) dut3 (.v(v3), .maj(maj3), .bad(bad3), .mismatch(mm3), .no_major(nm3));
  majority_decoder #(.W(32), .C(5)) dut5 (.v(v5), .maj(maj5), .bad(bad5), .mismatch(mm5), .no_major(nm5));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    logic [31:0] good;
    logic [4:0]  corrupt;
    int          n;
    repeat (300) begin
      good = $urandom;
      // C = 3: choose 0, 1 or 2 corrupted copies, each with its own value
      corrupt = 5'($urandom_range(0, 7));
      n = $countones(corrupt[2:0]);
      for (int i = 0; i < 3; i++)
        v3[i] = corrupt[i] ? good ^ (32'h1 << (i * 7 + 1)) : good;
      #1;
      chk(mm3 === (n !== 0), "C3 mismatch");
      if (n <= 1) begin
        chk(!nm3 && maj3 === good && bad3 === corrupt[2:0], $sformatf("C3 vote n=%0d bad=%b", n, bad3));
      end else begin
        chk(nm3 && bad3 === 3'b000, $sformatf("C3 no majority n=%0d", n));
      end
      // C = 5
      corrupt = 5'($urandom);
      n = $countones(corrupt);
      for (int i = 0; i < 5; i++)
        v5[i] = corrupt[i] ? good ^ (32'h1 << (i * 5 + 2)) : good;
      #1;
      chk(mm5 === (n !== 0), "C5 mismatch");
      if (n <= 2) chk(!nm5 && maj5 === good && bad5 === corrupt, $sformatf("C5 vote n=%0d", n));
      else        chk(nm5 && bad5 === '0, $sformatf("C5 no majority n=%0d", n));
    end
    // C = 5, three copies agreeing on a wrong value still win the vote
    good = 32'hCAFE_F00D;
    v5 = {good, good ^ 32'h10, good ^ 32'h10, good ^ 32'h10, good};
    #1;
    chk(!nm5 && maj5 === (good ^ 32'h10) && bad5 === 5'b10001, "C5 3-vs-2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
