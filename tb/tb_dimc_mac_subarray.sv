// tb_dimc_mac_subarray: checks the MAC slice of one sub-array against the reference
// dot product for all three precisions, signed and unsigned, random and extreme
// operands, and the feature-enable gate.
module tb_dimc_mac_subarray;
  import dimc_pkg::*;
  import tb_dimc_ref_pkg::*;

  logic [255:0] w, f;
  logic         en, sgn;
  prec_e        prec;
  logic signed [23:0] ps;
  int checks = 0, failures = 0;

  dimc_mac_subarray dut (.weights(w), .features(f), .feature_en(en), .prec(prec),
                         .is_signed(sgn), .int_ps(ps));

  task automatic check(input string what);
    int exp;
    #1;
    exp = en ? ref_dot({768'b0, w}, {768'b0, f}, 256, prec_bits(int'(prec)), sgn) : 0;
    checks++;
    if (int'(ps) != exp) begin
      failures++;
      $display("FAIL %s prec=%0d sgn=%0d got %0d exp %0d", what, prec, sgn, ps, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int pc = 0; pc < 3; pc++)
      for (int s = 0; s < 2; s++) begin
        prec = prec_e'(pc); sgn = s[0]; en = 1'b1;
        w = '1; f = '1;                check("all ones");
        w = {64{4'h8}}; f = {64{4'h8}}; check("most negative");
        w = {64{4'h7}}; f = {64{4'h9}}; check("mixed");
        for (int i = 0; i < 40; i++) begin
          w = rand1024()[255:0]; f = rand1024()[255:0];
          check("random");
        end
        en = 1'b0; check("disabled");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
