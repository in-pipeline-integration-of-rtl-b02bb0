// tb_conv_layer: runs small convolution layers on the full design through the four
// DIMC instructions, as a compiler would map them, and checks every output against a
// direct convolution.
//
// The testbench plays the scalar core, the ordinary vector lanes and memory: it puts
// data into vector registers through the external VRF port and issues DL/DC words.
// Mapping of a layer (KH x KW kernel, ICH input and OCH output channels, b-bit data):
//  * a kernel is flattened as e = (kh*KW + kw)*ICH + c, element e at bits [b*e +: b];
//    a kernel longer than 1024 bits is cut into 1024-bit tiles ("tiling");
//  * up to 32 kernels live in the 32 rows; more output channels are processed in
//    groups of 32, reloading the rows ("grouping");
//  * for each group and tile: DL.M the kernels' tile into the rows; then for every
//    output pixel DL.I the matching input patch tile and issue one DC.P per output
//    channel, with the partial sum of the previous tiles as input; on the last tile
//    a DC.F with the same input gives the ReLU-quantised output as well.
// Layers run: the tiling case (OCH = 32, 2x2 kernel, 1152-bit kernels) and the
// grouping case (ICH = 32, 2x2 kernel, OCH = 33) of the published sweeps, 2-bit
// and 1-bit signed layers, and three ResNet-50 layer shapes (conv1 7x7x3 -> 64,
// conv2_2 3x3x64 -> 64, conv3_1 1x1x256 -> 32 of its 128 channels) with their full
// kernels but a 2x2 output map at stride 1, which leaves the per-pixel mapping as
// it is for the real 56x56 or 112x112 maps. The cycle count and the share of issue slots used by
// computes are printed.
module tb_conv_layer;
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

  // every layer is run on a 2x2 output map, stride 1; the input map is KH+1 x KW+1
  localparam int OH = 2, OW = 2, MAXK = 7, MAXH = OH + MAXK - 1;
  localparam int MAXE = 3 * 3 * 64, MAXO = 64;

  int cyc = 0, checks = 0, failures = 0;
  int n_dc = 0, n_tiles_max = 0, n_groups_max = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // layer data
  int wt [MAXO][MAXE];
  int xin [MAXH][MAXH][MAXE];
  int KH, KW;
  int psum_mem [OH*OW][MAXO];
  // write-back bookkeeping: {pixel, och, final?} per issued compute, in order
  int tag_pix[$], tag_och[$], tag_fin[$], tag_last[$];
  int cur_b;

  always @(negedge clk) if (rst_n && wb_valid) begin
    int p, o, f, l, exp_s;
    p = tag_pix.pop_front(); o = tag_och.pop_front(); f = tag_fin.pop_front(); l = tag_last.pop_front();
    if (f) begin
      checks++;
      if (int'(wb_value[3:0]) != ref_quant(psum_mem[p][o], cur_b)) begin
        failures++; $display("FAIL final pix %0d och %0d: %0d", p, o, wb_value[3:0]);
      end
    end else begin
      psum_mem[p][o] = int'(signed'(wb_value[31:0]));
    end
  end

  task automatic ext_write(input int r, input logic [63:0] v);
    @(negedge clk);
    instr_valid = 0;
    ext_we = 1; ext_waddr = 5'(r); ext_wdata = v;
    @(negedge clk);
    ext_we = 0;
  endtask

  task automatic send(input logic [31:0] w);
    @(negedge clk);
    instr_valid = 1; instr = w;
    #1;
    while (!instr_ready) begin @(negedge clk); #1; end
  endtask

  function automatic logic [31:0] enc_dl(input bit to_mem, input int vs1, input int sec, input int row);
    return (32'd4 << 29) | (32'd15 << 25) | (32'(vs1) << 20) | (32'(sec) << 15) |
           ((to_mem ? 32'd1 : 32'd0) << 12) | ((to_mem ? 32'(row) : 32'd0) << 7) | 32'h0B;
  endfunction

  function automatic logic [31:0] enc_dc(input bit fin, input int row, input int vs1,
                                         input int width, input int vd);
    return (32'(row) << 25) | (32'(vs1) << 20) | (32'(width) << 17) |
           ((fin ? 32'd3 : 32'd2) << 12) | (32'(vd) << 7) | 32'h0B;
  endfunction

  // 1024-bit tile t of a flattened vector of b-bit elements
  function automatic logic [1023:0] pack_tile(input int vals[MAXE], input int ne, input int b, input int t);
    logic [1023:0] r;
    int per;
    r = '0;
    per = 1024 / b;
    for (int i = 0; i < per; i++)
      if (t*per + i < ne)
        for (int j = 0; j < b; j++) r[i*b + j] = 1'((vals[t*per + i] >> j) & 1);
    return r;
  endfunction

  task automatic load_1024(input bit to_mem, input logic [1023:0] v, input int row);
    for (int s = 0; s < 4; s++) begin
      for (int k = 0; k < 4; k++) ext_write(8 + k, v[s*256 + k*64 +: 64]);
      send(enc_dl(to_mem, 8, s, row));
    end
  endtask

  task automatic run_layer(input string name, input int kh_n, input int kw_n, input int ich,
                          input int och, input int width);
    int ne, b, ntile, ngroup, c0, dcs, vdr;
    bit sgn;
    int ref_s;
    b = prec_bits(width & 3); sgn = width[2]; cur_b = b;
    KH = kh_n; KW = kw_n;
    ne = KH * KW * ich;
    ntile = (ne * b + 1023) / 1024;
    ngroup = (och + 31) / 32;
    // random data in the element range
    for (int o = 0; o < och; o++)
      for (int e = 0; e < ne; e++) wt[o][e] = $urandom_range(0, (1 << b) - 1);
    for (int y = 0; y < OH + KH - 1; y++) for (int x = 0; x < OW + KW - 1; x++)
      for (int c = 0; c < ich; c++) xin[y][x][c] = $urandom_range(0, (1 << b) - 1);
    for (int p = 0; p < OH*OW; p++) for (int o = 0; o < och; o++) psum_mem[p][o] = 0;
    c0 = cyc; dcs = 0; vdr = 0;
    for (int g = 0; g < ngroup; g++)
      for (int t = 0; t < ntile; t++) begin
        int flat [MAXE];
        for (int o = 32*g; o < och && o < 32*g + 32; o++) begin
          for (int e = 0; e < ne; e++) flat[e] = wt[o][e];
          load_1024(1, pack_tile(flat, ne, b, t), o - 32*g);
        end
        for (int p = 0; p < OH*OW; p++) begin
          int py, px;
          py = p / OW; px = p % OW;
          for (int kh = 0; kh < KH; kh++) for (int kw = 0; kw < KW; kw++)
            for (int c = 0; c < ich; c++) flat[(kh*KW + kw)*ich + c] = xin[py+kh][px+kw][c];
          load_1024(0, pack_tile(flat, ne, b, t), 0);
          // wait for the previous partial sums of this pixel to come back
          while (tag_pix.size() != 0) @(negedge clk);
          for (int o = 32*g; o < och && o < 32*g + 32; o++) begin
            ext_write(24 + (o % 8), {40'b0, 24'(psum_mem[p][o])});
            send(enc_dc(0, o - 32*g, 24 + (o % 8), width, 16 + vdr));
            tag_pix.push_back(p); tag_och.push_back(o); tag_fin.push_back(0); tag_last.push_back(0);
            vdr = (vdr + 1) % 8; dcs++;
            if (t == ntile - 1) begin
              send(enc_dc(1, o - 32*g, 24 + (o % 8), width, 16 + vdr));
              tag_pix.push_back(p); tag_och.push_back(o); tag_fin.push_back(1); tag_last.push_back(1);
              vdr = (vdr + 1) % 8; dcs++;
            end
          end
        end
      end
    @(negedge clk) instr_valid = 0;
    while (tag_pix.size() != 0) @(negedge clk);
    // compare with a direct convolution
    for (int p = 0; p < OH*OW; p++)
      for (int o = 0; o < och; o++) begin
        int py, px;
        py = p / OW; px = p % OW;
        ref_s = 0;
        for (int kh = 0; kh < KH; kh++) for (int kw = 0; kw < KW; kw++)
          for (int c = 0; c < ich; c++) begin
            int a, w;
            a = xin[py+kh][px+kw][c]; w = wt[o][(kh*KW + kw)*ich + c];
            if (sgn && a >= (1 << (b-1))) a -= (1 << b);
            if (sgn && w >= (1 << (b-1))) w -= (1 << b);
            ref_s += a * w;
          end
        checks++;
        if (psum_mem[p][o] != ref_s) begin
          failures++; $display("FAIL %s pix %0d och %0d: %0d expected %0d", name, p, o, psum_mem[p][o], ref_s);
        end
      end
    n_dc += dcs;
    if (ntile > n_tiles_max) n_tiles_max = ntile;
    if (ngroup > n_groups_max) n_groups_max = ngroup;
    $display("%s: %0dx%0d kernel ICH=%0d OCH=%0d %0d-bit kernel=%0d bits tiles=%0d groups=%0d computes=%0d cycles=%0d",
             name, KH, KW, ich, och, b, ne * b, ntile, ngroup, dcs, cyc - c0);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_layer("tiling",   2, 2,  72, 32, 0);   // 2x2x72x4 = 1152-bit kernels: two tiles
    run_layer("grouping", 2, 2,  32, 33, 0);   // 33 output channels: two groups
    run_layer("int2",     2, 2,  64,  8, 5);   // signed 2-bit
    run_layer("int1",     2, 2, 128,  4, 6);   // signed 1-bit, 512-bit kernels
    // ResNet-50 layer shapes (full kernels and channel counts, 2x2 output map)
    run_layer("resnet50_conv1",   7, 7,   3, 64, 0);  // 588-bit kernels, two groups
    run_layer("resnet50_conv2_2", 3, 3,  64, 64, 0);  // 2304-bit kernels: three tiles, two groups
    run_layer("resnet50_conv3_1", 1, 1, 256, 32, 0);  // exactly one full 1024-bit row
    checks++;
    if (n_tiles_max < 2 || n_groups_max < 2) begin failures++; $display("FAIL tiling or grouping not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
