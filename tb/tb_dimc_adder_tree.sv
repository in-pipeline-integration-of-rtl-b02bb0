// tb_dimc_adder_tree: checks that PSOUT is the sum of the four sub-array partial sums
// and PSIN, modulo 2^24, for random and extreme values.
module tb_dimc_adder_tree;
  logic signed [23:0] int_ps [4];
  logic signed [23:0] psin, psout;
  int checks = 0, failures = 0;

  dimc_adder_tree dut (.int_ps, .psin, .psout);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 400; i++) begin
      longint s;
      s = 0;
      for (int p = 0; p < 4; p++) begin
        int_ps[p] = (i < 10) ? 24'sh7fffff : 24'($urandom);
        s += longint'(int_ps[p]);
      end
      psin = (i < 5) ? -24'sd1 : 24'($urandom);
      s += longint'(psin);
      #1;
      checks++;
      if (psout !== 24'(s)) begin failures++; $display("FAIL %0d: %0d vs %0d", i, psout, s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
