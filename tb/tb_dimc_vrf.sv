// tb_dimc_vrf: random writes on both write ports (with clashes) against a reference
// register array; checks the group read with wrap-around, the single and the debug
// read ports, and reset.
module tb_dimc_vrf;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [4:0]  grp_base = 0, rd_addr = 0, dbg_addr = 0, wa_a = 0, wa_b = 0;
  logic [63:0] grp_data [4];
  logic [63:0] rd_data, dbg_data, wd_a = 0, wd_b = 0;
  logic        we_a = 0, we_b = 0;
  logic [63:0] model [32];
  int checks = 0, failures = 0;

  dimc_vrf dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 32; r++) model[r] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      // check reads of current state
      grp_base = 5'($urandom); rd_addr = 5'($urandom); dbg_addr = 5'($urandom);
      #1;
      checks++;
      if (grp_data[0] !== model[grp_base] || grp_data[1] !== model[5'(grp_base + 1)] ||
          grp_data[2] !== model[5'(grp_base + 2)] || grp_data[3] !== model[5'(grp_base + 3)] ||
          rd_data !== model[rd_addr] || dbg_data !== model[dbg_addr]) begin
        failures++; $display("FAIL read at %0d base %0d", i, grp_base);
      end
      we_a = 1'($urandom); we_b = 1'($urandom);
      wa_a = 5'($urandom); wa_b = (i % 7 == 0) ? wa_a : 5'($urandom);
      wd_a = {$urandom, $urandom}; wd_b = {$urandom, $urandom};
      if (we_b) model[wa_b] = wd_b;
      if (we_a) model[wa_a] = wd_a;
    end
    @(negedge clk) begin we_a = 0; we_b = 0; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
