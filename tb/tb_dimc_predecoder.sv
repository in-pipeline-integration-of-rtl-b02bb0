// tb_dimc_predecoder: drives random write, read and compute requests into the
// pre-decoder and checks the one-hot sub-array write enable, the row selects and
// the read/compute priority against independently computed values.
module tb_dimc_predecoder;
  logic       wr_en, rd_en, imc_en;
  logic [6:0] wa, ra;
  logic [4:0] imc_row, wrow, rrow;
  logic [3:0] sa_we;
  logic [1:0] rd_sel;
  logic       imc, rd;
  int checks = 0, failures = 0;

  dimc_predecoder dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      logic [3:0] exp_we;
      wr_en = 1'($urandom); rd_en = 1'($urandom); imc_en = 1'($urandom);
      wa = 7'($urandom); ra = 7'($urandom); imc_row = 5'($urandom);
      #1;
      exp_we = wr_en ? 4'(1 << (wa / 32)) : 4'b0;
      checks++;
      if (sa_we !== exp_we || wrow !== 5'(wa % 32) || imc !== imc_en ||
          rd !== (rd_en & ~imc_en) || rrow !== (imc_en ? imc_row : 5'(ra % 32)) ||
          rd_sel !== 2'(ra / 32)) begin
        failures++;
        $display("FAIL wa=%0d ra=%0d imc=%0d", wa, ra, imc_en);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
