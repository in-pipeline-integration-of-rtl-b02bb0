// tb_dimc_relu_quant: sweeps the sum over negative, small and large values for the
// three output precisions and checks ReLU plus saturation.
module tb_dimc_relu_quant;
  import dimc_pkg::*;
  import tb_dimc_ref_pkg::*;
  logic signed [23:0] psum;
  prec_e prec;
  logic [3:0] q;
  int checks = 0, failures = 0;

  dimc_relu_quant dut (.psum, .prec, .q);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int pc = 0; pc < 3; pc++)
      for (int v = -40; v < 40; v++)
        for (int big = 0; big < 2; big++) begin
          int val;
          val  = big ? v * 100000 : v;
          psum = 24'(val); prec = prec_e'(pc);
          #1;
          checks++;
          if (int'(q) != ref_quant(val, prec_bits(pc))) begin
            failures++; $display("FAIL v=%0d prec=%0d q=%0d", val, pc, q);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
