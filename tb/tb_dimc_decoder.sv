// tb_dimc_decoder: assembles random DL.I, DL.M, DC.P and DC.F words field by field,
// decodes them and compares every field; also checks malformed custom-0 words and
// words with other opcodes.
module tb_dimc_decoder;
  import dimc_pkg::*;
  logic [31:0] instr;
  dimc_dec_t   dec;
  int checks = 0, failures = 0;

  dimc_decoder dut (.instr, .dec);

  task automatic expect_ok(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s instr=%08h", what, instr); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 300; i++) begin
      int unsigned kind, nvec, mask, vs1, width, sec, row, vd, sh, dh;
      kind = $urandom_range(0, 3); nvec = $urandom_range(1, 4); mask = $urandom_range(0, 15);
      vs1 = $urandom_range(0, 31); width = $urandom_range(0, 7); sec = $urandom_range(0, 3);
      row = $urandom_range(0, 31); vd = $urandom_range(0, 31);
      sh = $urandom_range(0, 1); dh = $urandom_range(0, 1);
      if (kind >= 2 && (width & 3) == 3) width = width & 4;
      if (kind < 2)
        instr = (nvec << 29) | (mask << 25) | (vs1 << 20) | (width << 17) | (sec << 15) |
                (kind << 12) | (((kind == 1) ? row : 0) << 7) | 32'h0B;
      else
        instr = (sh << 31) | (dh << 30) | (row << 25) | (vs1 << 20) | (width << 17) |
                (sec << 15) | (kind << 12) | (vd << 7) | 32'h0B;
      #1;
      expect_ok(!dec.illegal && int'(dec.op) == kind + 1, "op");
      expect_ok(int'(dec.vs1) == vs1, "vs1");
      if (kind < 2) begin
        expect_ok(int'(dec.nvec) == nvec && int'(dec.mask) == mask && int'(dec.sec) == sec,
                  "dl fields");
        if (kind == 1) expect_ok(int'(dec.m_row) == row, "dl.m row");
      end else begin
        expect_ok(int'(dec.m_row) == row && int'(dec.vd) == vd && dec.src_half == sh[0] &&
                  dec.dst_half == dh[0], "dc fields");
        expect_ok(int'(dec.prec) == (width & 3) && dec.is_signed == width[2], "width");
        if (kind == 3) expect_ok(int'(dec.bidx) == sec, "bidx");
      end
    end
    // malformed: bad funct3, nvec 0 and 5, precision 11
    instr = 32'h0000_400B;                      #1; expect_ok(dec.illegal && dec.op == OP_NONE, "f3");
    instr = (32'd0 << 29) | 32'h0000_000B;      #1; expect_ok(dec.illegal, "nvec0");
    instr = (32'd5 << 29) | 32'h0000_000B;      #1; expect_ok(dec.illegal, "nvec5");
    instr = (32'd3 << 17) | (32'd2 << 12) | 32'h0B; #1; expect_ok(dec.illegal, "prec11");
    // not custom-0
    instr = 32'h0221_00D7;                      #1; expect_ok(!dec.illegal && dec.op == OP_NONE, "op-v");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
