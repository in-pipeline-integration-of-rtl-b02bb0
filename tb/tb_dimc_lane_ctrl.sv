// tb_dimc_lane_ctrl: drives decoded DL.I, DL.M, DC.P and DC.F instructions with
// their register operands into the lane controller connected to a DIMC tile.
// Checks the chunk masks derived from nvec and mask, the write-back word (24-bit
// result sign-extended into half dh; 4-bit result shifted into byte 4*dh+bidx),
// that the rest of vd is preserved, the three-cycle issue-to-write-back timing and
// the destinations reported in flight.
module tb_dimc_lane_ctrl;
  import dimc_pkg::*;
  import tb_dimc_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0;
  dimc_dec_t in_dec = '0;
  logic [63:0] in_vs [4];
  logic [63:0] in_vd_old = 0;

  logic fb_ld_en, km_ld_en, cmp_en, cmp_signed, res_valid, wb_en;
  logic [1:0] fb_ld_sec, km_ld_sec;
  logic [255:0] fb_ld_data, km_ld_data, mm_q;
  logic [3:0] fb_ld_mask, km_ld_mask, res_final;
  logic [4:0] km_ld_row, cmp_row, wb_addr;
  prec_e cmp_prec;
  logic signed [23:0] cmp_psin, res_psum;
  logic [63:0] wb_data;
  logic [2:0] inflight_v;
  logic [4:0] inflight_vd [3];
  logic mm_rd_ready, mm_q_valid;

  dimc_lane_ctrl dut (.*);
  dimc_tile u_tile (.clk, .rst_n, .fb_ld_en, .fb_ld_sec, .fb_ld_data, .fb_ld_mask,
                    .km_ld_en, .km_ld_row, .km_ld_sec, .km_ld_data, .km_ld_mask,
                    .cmp_en, .cmp_row, .cmp_prec, .cmp_signed, .cmp_psin,
                    .out_valid(res_valid), .psum_out(res_psum), .final_out(res_final),
                    .mm_rd_en(1'b0), .mm_ra(7'd0), .mm_rd_ready, .mm_q, .mm_q_valid);

  logic [1023:0] km [32];
  logic [1023:0] fb = '0;
  logic [3:0] fen = '0;
  logic [63:0] exp_wb[$];
  int exp_addr[$], exp_cyc[$];
  int cyc = 0, checks = 0, failures = 0, n_wb = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && wb_en) begin
    logic [63:0] e;
    int a, c;
    n_wb++;
    checks++;
    e = exp_wb.pop_front(); a = exp_addr.pop_front(); c = exp_cyc.pop_front();
    if (wb_data !== e || int'(wb_addr) != a || cyc != c + 3) begin
      failures++;
      $display("FAIL wb %016h exp %016h addr %0d/%0d cyc %0d/%0d", wb_data, e, wb_addr, a, cyc, c + 3);
    end
  end

  function automatic logic [3:0] chunk_mask(input int nvec, input logic [3:0] mask);
    logic [3:0] r;
    for (int k = 0; k < 4; k++) r[k] = (k < nvec) && mask[k];
    return r;
  endfunction

  task automatic issue_dl(input bit to_mem, input int row, input int sec, input int nvec,
                          input logic [3:0] mask);
    logic [3:0] cm;
    @(negedge clk);
    in_valid = 1;
    in_dec = '0;
    in_dec.op = to_mem ? OP_DLM : OP_DLI;
    in_dec.nvec = 3'(nvec); in_dec.mask = mask; in_dec.sec = 2'(sec); in_dec.m_row = 5'(row);
    for (int k = 0; k < 4; k++) in_vs[k] = {$urandom, $urandom};
    cm = chunk_mask(nvec, mask);
    for (int k = 0; k < 4; k++) begin
      if (to_mem) begin
        if (cm[k]) km[row][sec*256 + k*64 +: 64] = in_vs[k];
      end else
        fb[sec*256 + k*64 +: 64] = cm[k] ? in_vs[k] : 64'b0;
    end
    if (!to_mem) fen[sec] = |cm;
    // the tile request appears in the next cycle
    @(negedge clk);
    in_valid = 0;
    checks++;
    if ((to_mem ? km_ld_mask : fb_ld_mask) !== cm || (to_mem ? !km_ld_en : !fb_ld_en)) begin
      failures++; $display("FAIL dl request mask");
    end
  endtask

  task automatic issue_dc(input bit final_sum, input bit back_to_back);
    int e, b;
    logic [63:0] w;
    logic [5:0] bp;
    @(negedge clk);
    in_valid = 1;
    in_dec = '0;
    in_dec.op = final_sum ? OP_DCF : OP_DCP;
    in_dec.m_row = 5'($urandom); in_dec.vd = 5'($urandom); in_dec.src_half = 1'($urandom);
    in_dec.dst_half = 1'($urandom); in_dec.bidx = 2'($urandom);
    in_dec.prec = prec_e'($urandom_range(0, 2)); in_dec.is_signed = 1'($urandom);
    for (int k = 0; k < 4; k++) in_vs[k] = {$urandom, $urandom};
    in_vd_old = {$urandom, $urandom};
    b = prec_bits(int'(in_dec.prec));
    e = int'(signed'(in_vs[0][in_dec.src_half*32 +: 24]));
    for (int p = 0; p < 4; p++)
      if (fen[p]) e += ref_dot({768'b0, km[in_dec.m_row][p*256 +: 256]}, {768'b0, fb[p*256 +: 256]},
                               256, b, in_dec.is_signed);
    w = in_vd_old;
    if (final_sum) begin
      bp = {in_dec.dst_half, in_dec.bidx, 3'b0};
      w[bp +: 8] = {in_vd_old[bp +: 4], 4'(ref_quant(e, b))};
    end else
      w[in_dec.dst_half*32 +: 32] = 32'(e);
    exp_wb.push_back(w); exp_addr.push_back(int'(in_dec.vd)); exp_cyc.push_back(cyc);
    if (!back_to_back) begin
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (inflight_v[0] !== 1'b1 || inflight_vd[0] !== 5'(exp_addr[$])) begin
        failures++; $display("FAIL inflight");
      end
    end
  endtask

  initial begin
    for (int r = 0; r < 32; r++) km[r] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 36; r++)
      for (int s = 0; s < 4; s++) issue_dl(1, r % 32, s, (r < 32) ? 4 : $urandom_range(1, 4), (r < 32) ? 4'hF : 4'($urandom));
    for (int it = 0; it < 20; it++) begin
      for (int s = 0; s < 4; s++) issue_dl(0, 0, s, $urandom_range(1, 4), (it % 2) ? 4'hF : 4'($urandom));
      for (int c = 0; c < 4; c++) issue_dc(c % 2, 1);
      for (int c = 0; c < 2; c++) issue_dc(c % 2, 0);
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (n_wb != 120) begin failures++; $display("FAIL %0d write-backs", n_wb); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
