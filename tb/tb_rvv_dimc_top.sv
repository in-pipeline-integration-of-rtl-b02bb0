// tb_rvv_dimc_top: end-to-end test of the vector pipeline with the DIMC lane, at the
// design's full size.
//
// An instruction-level reference model executes every instruction when the pipeline
// accepts it (in program order) and predicts each VRF write-back; the testbench
// compares every write-back and, at the end, the whole register file and the whole
// kernel memory (through the memory-mapped read port). The program:
//  1. preloads the VRF through the external write port;
//  2. loads all 32 kernel rows with DL.M;
//  3. timing: 8 independent DC.P must issue one per cycle and write back three
//     cycles after issue; a chain of DC.P, each reading the previous result, must
//     issue every four cycles (stall on the read-after-write hazard);
//  4. a long random mix of DL.I, DL.M (partial masks), DC.P and DC.F over all
//     precisions and signedness, malformed custom words and ordinary vector words,
//     using few registers so that hazards are frequent;
//  5. memory-mapped read-back of the kernel memory.
// Each mechanism is counted and a failure is counted for any that never happened.
module tb_rvv_dimc_top;
  import dimc_pkg::*;
  import tb_dimc_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        instr_valid = 0, instr_ready, fwd_valid, illegal, busy;
  logic [31:0] instr = 0, fwd_instr;
  logic        ext_we = 0;
  logic [4:0]  ext_waddr = 0, ext_raddr = 0;
  logic [63:0] ext_wdata = 0, ext_rdata;
  logic        mm_rd_en = 0, mm_rd_ready, mm_q_valid;
  logic [6:0]  mm_ra = 0;
  logic [255:0] mm_q;
  logic        wb_valid;
  logic [4:0]  wb_vd;
  logic [63:0] wb_value;

  rvv_dimc_top dut (.*);

  // ---------------- reference model ----------------
  logic [63:0]   vrf_m [32];
  logic [1023:0] km_m  [32];
  logic [1023:0] fb_m = '0;
  logic [3:0]    fen_m = '0;
  logic [63:0]   exp_wb[$];
  int            exp_addr[$], exp_cyc[$];

  int cyc = 0, checks = 0, failures = 0;
  int last_accept = 0;
  // mechanism counters
  int n_dli = 0, n_dlm = 0, n_dcp = 0, n_dcf = 0, n_prec[3] = '{0, 0, 0}, n_signed = 0;
  int n_stall = 0, n_stall_fwd = 0, n_fwd = 0, n_illegal = 0, n_masked = 0;
  int n_relu = 0, n_sat = 0, n_pack = 0, n_mm = 0, n_mm_refused = 0, n_wb = 0;
  int last_dcf_byte = -1;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL at cycle %0d: %s", cyc, msg);
  endtask

  // encoders (field positions of the four instructions)
  function automatic logic [31:0] enc_dl(input bit to_mem, input int nvec, input int mask,
                                         input int vs1, input int sec, input int row);
    return (32'(nvec) << 29) | (32'(mask) << 25) | (32'(vs1) << 20) | (32'(sec) << 15) |
           ((to_mem ? 32'd1 : 32'd0) << 12) | ((to_mem ? 32'(row) : 32'd0) << 7) | 32'h0B;
  endfunction

  function automatic logic [31:0] enc_dc(input bit fin, input int sh, input int dh, input int row,
                                         input int vs1, input int width, input int bidx, input int vd);
    return (32'(sh) << 31) | (32'(dh) << 30) | (32'(row) << 25) | (32'(vs1) << 20) |
           (32'(width) << 17) | ((fin ? 32'(bidx) : 32'd0) << 15) |
           ((fin ? 32'd3 : 32'd2) << 12) | (32'(vd) << 7) | 32'h0B;
  endfunction

  // execute one accepted instruction in the model
  task automatic model_exec(input logic [31:0] w);
    int f3, nvec, mask, vs1, sec, row, vd, sh, dh, bidx, width, b, s;
    bit sgn;
    if (w[6:0] != 7'h0B) begin
      n_fwd++;
      return;
    end
    f3 = int'(w[14:12]); vs1 = int'(w[24:20]);
    if (f3 <= 1) begin
      nvec = int'(w[31:29]); mask = int'(w[28:25]); sec = int'(w[16:15]); row = int'(w[11:7]);
      if (nvec == 0 || nvec > 4) begin n_illegal++; return; end
      if (!(nvec == 4 && mask == 15)) n_masked++;
      if (f3 == 0) begin
        n_dli++;
        fen_m[sec] = 1'b0;
        for (int k = 0; k < 4; k++) begin
          bit use_k;
          use_k = (k < nvec) && mask[k];
          fb_m[sec*256 + k*64 +: 64] = use_k ? vrf_m[(vs1 + k) % 32] : 64'b0;
          if (use_k) fen_m[sec] = 1'b1;
        end
      end else begin
        n_dlm++;
        for (int k = 0; k < 4; k++)
          if ((k < nvec) && mask[k]) km_m[row][sec*256 + k*64 +: 64] = vrf_m[(vs1 + k) % 32];
      end
      return;
    end
    if (f3 > 3) begin n_illegal++; return; end
    width = int'(w[19:17]);
    if ((width & 3) == 3) begin n_illegal++; return; end
    sh = int'(w[31]); dh = int'(w[30]); row = int'(w[29:25]); vd = int'(w[11:7]);
    bidx = int'(w[16:15]);
    b = prec_bits(width & 3); sgn = width[2];
    n_prec[width & 3]++;
    if (sgn) n_signed++;
    s = int'(signed'(vrf_m[vs1][sh*32 +: 24]));
    for (int p = 0; p < 4; p++)
      if (fen_m[p]) s += ref_dot({768'b0, km_m[row][p*256 +: 256]}, {768'b0, fb_m[p*256 +: 256]}, 256, b, sgn);
    s = int'(signed'(24'(s)));
    if (f3 == 2) begin
      n_dcp++;
      vrf_m[vd][dh*32 +: 32] = 32'(s);
    end else begin
      int q, byte_i;
      n_dcf++;
      q = ref_quant(s, b);
      if (s < 0) n_relu++;
      if (s > (1 << b) - 1) n_sat++;
      byte_i = vd * 8 + dh * 4 + bidx;
      if (byte_i == last_dcf_byte) n_pack++;
      last_dcf_byte = byte_i;
      vrf_m[vd][(dh*4 + bidx)*8 +: 8] = {vrf_m[vd][(dh*4 + bidx)*8 +: 4], 4'(q)};
    end
    exp_wb.push_back(vrf_m[vd]); exp_addr.push_back(vd); exp_cyc.push_back(cyc);
  endtask

  // present one instruction until accepted
  task automatic send(input logic [31:0] w);
    @(negedge clk);
    instr_valid = 1; instr = w;
    #1;
    while (!instr_ready) begin
      if (w[6:0] == 7'h0B) n_stall++; else n_stall_fwd++;
      @(negedge clk);
      #1;
    end
    if (w[6:0] != 7'h0B) begin
      checks++;
      if (!fwd_valid || fwd_instr !== w) fail("vector instruction not forwarded");
    end
    if (illegal) begin
      checks++;
      if (w[6:0] != 7'h0B) fail("illegal on a non-custom word");
    end
    model_exec(w);
    last_accept = cyc;
  endtask

  task automatic idle(input int n);
    @(negedge clk);
    instr_valid = 0;
    repeat (n) @(negedge clk);
  endtask

  // write-back monitor
  always @(negedge clk) if (rst_n && wb_valid) begin
    logic [63:0] e;
    int a, c;
    n_wb++;
    checks++;
    if (exp_wb.size() == 0) fail("unexpected write-back");
    else begin
      e = exp_wb.pop_front(); a = exp_addr.pop_front(); c = exp_cyc.pop_front();
      if (wb_value !== e || int'(wb_vd) != a)
        fail($sformatf("write-back v%0d=%016h, expected v%0d=%016h", wb_vd, wb_value, a, e));
      if (cyc != c + 3) fail($sformatf("write-back at %0d, issued at %0d", cyc, c));
    end
  end

  initial begin
    int acc [$];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 32; r++) km_m[r] = '0;
    // 1. preload the VRF
    for (int r = 0; r < 32; r++) begin
      @(negedge clk);
      ext_we = 1; ext_waddr = 5'(r); ext_wdata = {$urandom, $urandom};
      vrf_m[r] = ext_wdata;
    end
    @(negedge clk) ext_we = 0;
    // 2. load all kernel rows (full masks), data from v8..v31
    for (int r = 0; r < 32; r++)
      for (int s = 0; s < 4; s++) send(enc_dl(1, 4, 15, 8 + ((r * 4 + s) % 24), s, r));
    for (int s = 0; s < 4; s++) send(enc_dl(0, 4, 15, 12 + s * 4, s, 0));
    idle(4);
    // 3a. independent computes issue every cycle; a memory-mapped read meanwhile is refused
    acc.delete();
    for (int i = 0; i < 8; i++) begin
      send(enc_dc(0, 0, i % 2, i, 24, 0, 0, 16 + i / 2 * 0 + i));
      acc.push_back(last_accept);
      if (i == 3) begin
        mm_rd_en = 1; mm_ra = 7'd5;
        #1;
        checks++; n_mm_refused++;
        if (mm_rd_ready) fail("memory-mapped read accepted during a compute");
      end
      if (i == 4) mm_rd_en = 0;
    end
    checks++;
    if (acc[7] - acc[0] != 7) fail($sformatf("8 independent computes took %0d cycles to issue", acc[7] - acc[0] + 1));
    idle(4);
    // 3b. dependent chain: each DC.P reads the partial sum written by the previous one
    acc.delete();
    for (int i = 0; i < 6; i++) begin
      send(enc_dc(0, 0, 0, i, 1, 0, 0, 1));
      acc.push_back(last_accept);
    end
    for (int i = 1; i < 6; i++) begin
      checks++;
      if (acc[i] - acc[i-1] != 4) fail($sformatf("dependent issue interval %0d", acc[i] - acc[i-1]));
    end
    // 4. random mix
    for (int i = 0; i < 3000; i++) begin
      int kind;
      kind = $urandom_range(0, 99);
      if (kind < 15)
        send(enc_dl(0, $urandom_range(1, 4), (i % 3 == 0) ? $urandom_range(0, 15) : 15,
                    $urandom_range(0, 31), $urandom_range(0, 3), 0));
      else if (kind < 20)
        send(enc_dl(1, $urandom_range(1, 4), $urandom_range(0, 15), $urandom_range(0, 31),
                    $urandom_range(0, 3), $urandom_range(0, 31)));
      else if (kind < 85) begin
        int width;
        width = $urandom_range(0, 7);
        if ((width & 3) == 3) width = width & 4;
        send(enc_dc(kind >= 55, $urandom_range(0, 1), $urandom_range(0, 1), $urandom_range(0, 31),
                    $urandom_range(0, 7), width, (i % 4 == 0) ? 1 : $urandom_range(0, 3),
                    $urandom_range(0, 7)));
      end else if (kind < 90)
        send({6'b0, 1'b1, 5'($urandom_range(0, 7)), 5'($urandom_range(0, 7)), 3'b000,
              5'($urandom_range(0, 7)), 7'b1010111});          // an ordinary vector instruction
      else if (kind < 93)
        send({17'($urandom), 3'($urandom_range(4, 7)), 5'($urandom), 7'h0B});   // bad funct3
      else if (kind < 95)
        send({3'd0, 14'($urandom), 3'd0, 5'($urandom), 7'h0B});                 // DL.I, nvec 0
      else
        idle($urandom_range(0, 3));
    end
    idle(8);
    checks++;
    if (busy || exp_wb.size() != 0) fail("pipeline not drained");
    // whole register file
    for (int r = 0; r < 32; r++) begin
      ext_raddr = 5'(r);
      #1;
      checks++;
      if (ext_rdata !== vrf_m[r]) fail($sformatf("v%0d=%016h, expected %016h", r, ext_rdata, vrf_m[r]));
    end
    // 5. memory-mapped read of the whole kernel memory
    for (int a = 0; a < 128; a++) begin
      @(negedge clk);
      mm_rd_en = 1; mm_ra = 7'(a);
      @(negedge clk);
      mm_rd_en = 0;
      n_mm++;
      checks++;
      if (!mm_q_valid || mm_q !== km_m[a % 32][(a / 32)*256 +: 256]) fail($sformatf("kernel word %0d", a));
    end
    // mechanisms
    $display("mechanisms: DL.I %0d, DL.M %0d (masked %0d), DC.P %0d, DC.F %0d, 4b/2b/1b %0d/%0d/%0d, signed %0d",
             n_dli, n_dlm, n_masked, n_dcp, n_dcf, n_prec[0], n_prec[1], n_prec[2], n_signed);
    $display("mechanisms: hazard stalls %0d (vector words %0d), forwarded %0d, illegal %0d, ReLU %0d, saturate %0d, nibble packs %0d, mm reads %0d (refused %0d), write-backs %0d",
             n_stall, n_stall_fwd, n_fwd, n_illegal, n_relu, n_sat, n_pack, n_mm, n_mm_refused, n_wb);
    foreach (n_prec[i]) begin checks++; if (n_prec[i] == 0) fail("a precision never ran"); end
    checks++; if (n_dli == 0 || n_dlm == 0 || n_dcp == 0 || n_dcf == 0) fail("an instruction never ran");
    checks++; if (n_signed == 0 || n_masked == 0) fail("signed or masked never ran");
    checks++; if (n_stall == 0 || n_stall_fwd == 0) fail("a hazard stall never happened");
    checks++; if (n_fwd == 0 || n_illegal == 0) fail("forwarding or illegal never happened");
    checks++; if (n_relu == 0 || n_sat == 0 || n_pack == 0) fail("ReLU, saturation or packing never happened");
    checks++; if (n_mm == 0 || n_mm_refused == 0) fail("memory-mapped read never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
