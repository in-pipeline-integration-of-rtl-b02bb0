// tb_dimc_tile: loads kernel rows sector by sector (with partial chunk masks) and
// feature-buffer sectors, then runs computes and checks the partial sum and the
// ReLU-quantised final value against the reference, including the two-cycle latency
// and a compute issued right after a feature load.
module tb_dimc_tile;
  import dimc_pkg::*;
  import tb_dimc_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic fb_ld_en = 0, km_ld_en = 0, cmp_en = 0, cmp_signed = 0, out_valid;
  logic [1:0] fb_ld_sec = 0, km_ld_sec = 0;
  logic [255:0] fb_ld_data = 0, km_ld_data = 0, mm_q;
  logic [3:0] fb_ld_mask = 0, km_ld_mask = 0, final_out;
  logic [4:0] km_ld_row = 0, cmp_row = 0;
  prec_e cmp_prec = PREC_4B;
  logic signed [23:0] cmp_psin = 0, psum_out;
  logic mm_rd_en = 0, mm_rd_ready, mm_q_valid;
  logic [6:0] mm_ra = 0;

  logic [1023:0] km [32];
  logic [1023:0] fb = '0;
  logic [3:0] fen = '0;
  int exp_ps[$], exp_fin[$], exp_cyc[$];
  int cyc = 0, checks = 0, failures = 0, n_out = 0;

  dimc_tile dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    int e, f, c;
    n_out++;
    checks++;
    e = exp_ps.pop_front(); f = exp_fin.pop_front(); c = exp_cyc.pop_front();
    if (int'(psum_out) != e || int'(final_out) != f || cyc != c + 2) begin
      failures++;
      $display("FAIL ps %0d/%0d final %0d/%0d cyc %0d/%0d", psum_out, e, final_out, f, cyc, c + 2);
    end
  end

  task automatic fb_load(input int sec, input logic [3:0] mask);
    @(negedge clk);
    fb_ld_en = 1; fb_ld_sec = 2'(sec); fb_ld_data = rand1024()[255:0]; fb_ld_mask = mask;
    for (int k = 0; k < 4; k++) fb[sec*256 + k*64 +: 64] = mask[k] ? fb_ld_data[k*64 +: 64] : 64'b0;
    fen[sec] = |mask;
  endtask

  task automatic compute(input bit then_idle);
    int e, b;
    @(negedge clk);
    fb_ld_en = 0;
    cmp_en = 1; cmp_row = 5'($urandom); cmp_prec = prec_e'($urandom_range(0, 2));
    cmp_signed = 1'($urandom); cmp_psin = 24'($urandom_range(0, 400)) - 24'sd200;
    b = prec_bits(int'(cmp_prec));
    e = int'(cmp_psin);
    for (int p = 0; p < 4; p++)
      if (fen[p]) e += ref_dot({768'b0, km[cmp_row][p*256 +: 256]}, {768'b0, fb[p*256 +: 256]}, 256, b, cmp_signed);
    exp_ps.push_back(e); exp_fin.push_back(ref_quant(e, b)); exp_cyc.push_back(cyc);
    if (then_idle) begin @(negedge clk); cmp_en = 0; end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 32; r++) km[r] = '0;
    // kernel rows: full loads, then partial-mask overwrites
    for (int r = 0; r < 40; r++)
      for (int s = 0; s < 4; s++) begin
        @(negedge clk);
        km_ld_en = 1; km_ld_row = 5'(r % 32); km_ld_sec = 2'(s); km_ld_data = rand1024()[255:0];
        km_ld_mask = (r < 32) ? 4'hF : 4'($urandom);
        for (int k = 0; k < 4; k++)
          if (km_ld_mask[k]) km[r % 32][s*256 + k*64 +: 64] = km_ld_data[k*64 +: 64];
      end
    @(negedge clk) km_ld_en = 0;
    // memory-mapped read back of some rows
    for (int a = 0; a < 8; a++) begin
      int r, s;
      @(negedge clk);
      r = $urandom_range(0, 31); s = $urandom_range(0, 3);
      mm_rd_en = 1; mm_ra = 7'(s * 32 + r);
      @(negedge clk);
      mm_rd_en = 0;
      checks++;
      if (!mm_q_valid || mm_q !== km[r][s*256 +: 256]) begin failures++; $display("FAIL mm read"); end
    end
    // feature loads and computes
    for (int it = 0; it < 30; it++) begin
      for (int s = 0; s < 4; s++) fb_load(s, (it % 3 == 0) ? 4'($urandom) : 4'hF);
      for (int c = 0; c < 6; c++) compute(0);
      @(negedge clk) cmp_en = 0;
    end
    repeat (4) @(negedge clk);
    checks++;
    if (n_out != 180) begin failures++; $display("FAIL %0d results", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
