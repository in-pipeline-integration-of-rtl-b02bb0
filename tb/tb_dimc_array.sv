// tb_dimc_array: fills the 32 x 1024-bit memory through the memory-mapped write port
// (including masked writes), then issues back-to-back computes with random rows,
// precisions, signedness, sub-array enables and partial-sum inputs. Checks each PSOUT
// against the reference and that it arrives exactly two cycles after its request;
// checks memory-mapped reads (one cycle) and that a read is refused while a compute
// uses the read word lines.
module tb_dimc_array;
  import dimc_pkg::*;
  import tb_dimc_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               wr_en = 0, rd_en = 0, imc_en = 0, sgn = 0, rd_ready, q_valid, psout_valid;
  logic [6:0]         wa = 0, ra = 0;
  logic [255:0]       d = 0, m = 0, q;
  logic [4:0]         imc_row = 0;
  logic [1023:0]      feature_in = 0;
  logic [3:0]         feature_en = 0;
  prec_e              prec = PREC_4B;
  logic signed [23:0] psin = 0, psout;

  logic [1023:0] model [32];
  int exp_q[$];
  int exp_cyc[$];
  logic [255:0] exp_rd[$];
  int cyc = 0, checks = 0, failures = 0, n_results = 0, n_reads = 0, n_refused = 0;

  dimc_array dut (.*, .is_signed(sgn));

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result monitor
  always @(negedge clk) if (rst_n) begin
    if (psout_valid) begin
      checks++;
      n_results++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected psout"); end
      else begin
        int e, c;
        e = exp_q.pop_front(); c = exp_cyc.pop_front();
        if (int'(psout) != e || cyc != c + 2) begin
          failures++; $display("FAIL psout %0d exp %0d at cycle %0d (issued %0d)", psout, e, cyc, c);
        end
      end
    end
    if (q_valid) begin
      checks++;
      n_reads++;
      if (exp_rd.size() == 0 || q !== exp_rd.pop_front()) begin failures++; $display("FAIL q"); end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 32; r++) model[r] = rand1024();
    for (int p = 0; p < 4; p++)
      for (int r = 0; r < 32; r++) begin
        @(negedge clk);
        wr_en = 1; wa = 7'(p * 32 + r); d = model[r][p*256 +: 256]; m = '1;
      end
    // masked writes
    for (int i = 0; i < 40; i++) begin
      int p, r;
      @(negedge clk);
      p = $urandom_range(0, 3); r = $urandom_range(0, 31);
      wr_en = 1; wa = 7'(p * 32 + r); d = rand1024()[255:0]; m = rand1024()[255:0];
      model[r][p*256 +: 256] = (model[r][p*256 +: 256] & ~m) | (d & m);
    end
    @(negedge clk) wr_en = 0;
    // reads of the whole memory
    for (int a = 0; a < 128; a++) begin
      @(negedge clk);
      rd_en = 1; ra = 7'(a); exp_rd.push_back(model[a % 32][(a / 32)*256 +: 256]);
    end
    @(negedge clk) rd_en = 0;
    // computes, one per cycle
    for (int i = 0; i < 150; i++) begin
      int e, b;
      @(negedge clk);
      imc_en = 1; imc_row = 5'($urandom); prec = prec_e'($urandom_range(0, 2)); sgn = 1'($urandom);
      feature_in = rand1024(); feature_en = (i % 5 == 0) ? 4'($urandom) : 4'hF;
      psin = 24'($urandom_range(0, 2000)) - 24'sd1000;
      // a read in the same cycle is refused
      rd_en = (i % 10 == 3); ra = 7'($urandom);
      b = prec_bits(int'(prec));
      e = int'(psin);
      for (int p = 0; p < 4; p++)
        if (feature_en[p])
          e += ref_dot({768'b0, model[imc_row][p*256 +: 256]}, {768'b0, feature_in[p*256 +: 256]},
                       256, b, sgn);
      exp_q.push_back(e); exp_cyc.push_back(cyc);
      #1;
      if (rd_en) begin
        checks++; n_refused++;
        if (rd_ready) begin failures++; $display("FAIL read accepted during compute"); end
      end
    end
    @(negedge clk) begin imc_en = 0; rd_en = 0; end
    repeat (5) @(negedge clk);
    checks++;
    if (n_results != 150 || n_reads != 128 || exp_q.size() != 0) begin
      failures++; $display("FAIL counts results=%0d reads=%0d", n_results, n_reads);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
