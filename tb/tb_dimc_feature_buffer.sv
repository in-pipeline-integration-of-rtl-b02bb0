// tb_dimc_feature_buffer: loads random sectors under random chunk masks and checks
// the whole 1024-bit buffer and the four sector enables against a reference copy,
// one cycle after each load.
module tb_dimc_feature_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          ld_en = 0;
  logic [1:0]    ld_sec = 0;
  logic [255:0]  ld_data = 0;
  logic [3:0]    ld_mask = 0;
  logic [1023:0] features;
  logic [3:0]    feature_en;
  logic [1023:0] model = '0;
  logic [3:0]    model_en = '0;
  int checks = 0, failures = 0;

  dimc_feature_buffer dut (.clk, .rst_n, .ld_en, .ld_sec, .ld_data, .ld_mask, .features,
                           .feature_en);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (features !== '0 || feature_en !== '0) begin failures++; $display("FAIL reset"); end
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      ld_en = 1'($urandom_range(0, 3) != 0);
      ld_sec = 2'($urandom); ld_data = {$urandom, $urandom, $urandom, $urandom,
                                        $urandom, $urandom, $urandom, $urandom};
      ld_mask = 4'($urandom);
      if (ld_en) begin
        for (int k = 0; k < 4; k++)
          model[ld_sec*256 + k*64 +: 64] = ld_mask[k] ? ld_data[k*64 +: 64] : 64'b0;
        model_en[ld_sec] = |ld_mask;
      end
      @(negedge clk);
      ld_en = 0;
      checks++;
      if (features !== model || feature_en !== model_en) begin
        failures++; $display("FAIL load %0d", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
