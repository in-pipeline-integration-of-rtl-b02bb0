// tb_dimc_subarray: writes random rows under random bit masks into one sub-array,
// keeps a reference copy, and checks every read-back row and the MAC sum computed
// on the selected row against the reference dot product.
module tb_dimc_subarray;
  import dimc_pkg::*;
  import tb_dimc_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic         we = 0, en = 1, sgn = 0;
  logic [4:0]   wrow = 0, rrow = 0;
  logic [255:0] d = 0, m = 0, q, f = 0;
  prec_e        prec = PREC_4B;
  logic signed [23:0] ps;
  logic [255:0] model [32];
  int checks = 0, failures = 0;

  dimc_subarray dut (.clk, .we, .wrow, .d, .m, .rrow, .q, .features(f), .feature_en(en),
                     .prec, .is_signed(sgn), .int_ps(ps));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every row fully
    for (int r = 0; r < 32; r++) begin
      @(negedge clk);
      we = 1; wrow = 5'(r); d = rand1024()[255:0]; m = '1; model[r] = d;
    end
    @(negedge clk) we = 0;
    // masked overwrites
    for (int i = 0; i < 100; i++) begin
      @(negedge clk);
      we = 1; wrow = 5'($urandom_range(0, 31)); d = rand1024()[255:0]; m = rand1024()[255:0];
      model[wrow] = (model[wrow] & ~m) | (d & m);
    end
    @(negedge clk) we = 0;
    for (int r = 0; r < 32; r++) begin
      @(negedge clk);
      rrow = 5'(r);
      f = rand1024()[255:0]; prec = prec_e'($urandom_range(0, 2)); sgn = 1'($urandom);
      #1;
      checks++;
      if (q !== model[r]) begin failures++; $display("FAIL read row %0d", r); end
      checks++;
      if (int'(ps) != ref_dot({768'b0, model[r]}, {768'b0, f}, 256, prec_bits(int'(prec)), sgn)) begin
        failures++; $display("FAIL mac row %0d", r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
