// tb_rn_bank -- random writes (including several copies at once and holds)
// and reads, compared with a plain array model.
module tb_rn_bank;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [2:0] we;
  logic [31:0] wdata, rdata;
  logic [1:0] rd_sel;
  logic [2:0][31:0] r, model;

  rn_bank #(.W(32), .C(3), .RESET_STATE(32'h1234_5678)) dut (
    .clk, .rst_n, .we, .wdata, .rd_sel, .rdata, .r
  );

  always #5 clk = ~clk;

  initial begin
    we = '0; wdata = '0; rd_sel = '0;
    model = {3{32'h1234_5678}};
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    checks++;
    if (r !== model) begin failures++; $display("FAIL reset value"); end
    repeat (500) begin
      @(negedge clk);
      we = 3'($urandom); wdata = $urandom; rd_sel = 2'($urandom_range(0, 2));
      #1;
      checks++;
      if (rdata !== model[rd_sel]) begin
        failures++;
        $display("FAIL read sel=%0d got %h exp %h", rd_sel, rdata, model[rd_sel]);
      end
      @(posedge clk);
      for (int i = 0; i < 3; i++) if (we[i]) model[i] = wdata;
      #1;
      checks++;
      if (r !== model) begin failures++; $display("FAIL copies %h exp %h", r, model); end
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
