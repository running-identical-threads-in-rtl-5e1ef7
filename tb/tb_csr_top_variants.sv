// tb_csr_top_variants -- the top with the two detection-only cores:
// standard CSR (VARIANT = VAR_CSR) and CSRmin (VARIANT = VAR_MIN), both with
// the thread id in the address MSBs (separate memory section per thread).
//
// Each runs 60 clean original cycles, its voted outputs checked against the
// reference design and with no `seu`; then one bit of CR0 is flipped, which
// must be detected (for CSRmin with exactly one failing copy named). For
// standard CSR, whose threads are independent, the failing thread stays
// wrong and the output voter must keep the outputs correct by outvoting it.
module tb_csr_top_variants;
  import csr_pkg::*;
  import csr_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t %s", $time, what); end
  endtask

  logic [31:0] ref_s[0:256];
  logic [31:0] mem[0:1023];
  initial begin
    for (int a = 0; a < 1024; a++) mem[a] = word(a & 255);
    ref_s[0] = '0;
    for (int g = 1; g <= 256; g++) ref_s[g] = step(3, ref_s[g-1], word(g - 1));
  end

  for (genvar vi = 0; vi < 2; vi++) begin : g_v
    localparam csr_variant_e V = (vi === 0) ? VAR_CSR : VAR_MIN;
    logic [9:0] mem_addr;
    logic [31:0] mem_rdata, out_data;
    logic [1:0][31:0] inj_cr;
    logic out_valid, out_fixed, out_nomaj, seu, seu_fatal, in_seu;
    logic [7:0] out_grp;
    logic [2:0] seu_bad, rec;
    logic [2:0][31:0] state;
    int n_out = 0, n_seu = 0, n_fixed = 0;
    bit injected = 0, done = 0;

    csr_top #(.VARIANT(V), .TID_LSB(1'b0)) dut (
      .clk, .rst_n, .mem_addr, .mem_rdata, .inj_cr, .out_data, .out_valid, .out_grp,
      .out_fixed, .out_nomaj, .seu, .seu_bad, .seu_fatal, .rec, .in_seu, .state
    );
    assign mem_rdata = mem[mem_addr];

    always @(negedge clk) if (rst_n) begin
      chk(!in_seu && rec === '0, "no incoming mismatch, no recovery");
      if (seu) begin
        n_seu++;
        chk(injected, $sformatf("variant %0d: seu in a clean run", vi));
        if (V === VAR_MIN) chk($onehot(seu_bad), "CSRmin names one failing copy");
      end
      if (out_valid) begin
        if (!injected || V === VAR_CSR)
          chk(out_data === (ref_s[out_grp] ^ word(int'(out_grp))) && !out_nomaj,
              $sformatf("variant %0d voted output g=%0d", vi, out_grp));
        if (out_fixed) n_fixed++;
        n_out++;
      end
    end

    initial begin
      inj_cr = '0;
      wait (rst_n);
      while (n_out < 60) @(negedge clk);
      inj_cr[0] = 32'h0000_4000;
      injected = 1;
      @(negedge clk);
      inj_cr = '0;
      while (n_out < 100) @(negedge clk);
      chk(n_seu > 0, $sformatf("variant %0d: upset not detected", vi));
      if (V === VAR_CSR) chk(n_fixed > 0, "voter outvoted the failing thread");
      $display("MECH variant=%0d seu=%0d outvoted=%0d", vi, n_seu, n_fixed);
      done = 1;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    wait (g_v[0].done && g_v[1].done);
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
