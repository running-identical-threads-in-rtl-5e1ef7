// tb_cl_slice -- checks slices 0..3 of the combinational logic against the
// reference formula with random operands and a few corner values.
module tb_cl_slice;
  import csr_ref_pkg::*;

  int checks = 0, failures = 0;
  logic [31:0] a, s;
  logic [3:0][31:0] y, o;

  for (genvar k = 0; k < 4; k++) begin : g_dut
    cl_slice #(.W(32), .K(k)) dut (.a(a), .s(s), .y(y[k]), .o(o[k]));
  end

  task automatic check_now();
    #1;
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (y[k] !== stage(k, a, s) || o[k] !== (a ^ s)) begin
        failures++;
        $display("FAIL k=%0d a=%h s=%h y=%h exp=%h", k, a, s, y[k], stage(k, a, s));
      end
    end
  endtask

  initial begin
    a = '0; s = '0; check_now();
    a = '1; s = '0; check_now();
    a = 32'h8000_0001; s = 32'h0000_0001; check_now();
    repeat (200) begin
      a = $urandom; s = $urandom; check_now();
    end
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
