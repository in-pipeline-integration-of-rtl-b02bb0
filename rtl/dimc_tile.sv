// dimc_tile: the DIMC tile as one execution lane of the vector unit sees it.
//
// Combines the 1024-bit feature buffer, the kernel memory with its MAC array and
// adder tree (dimc_array), and the ReLU/quantiser. Three kinds of request, one of
// each per cycle at most:
//  * feature load: sector fb_ld_sec of the feature buffer from 256 bits of data and
//    a 4-bit chunk mask (one bit per 64-bit vector register);
//  * kernel load: sector km_ld_sec of kernel row km_ld_row; the chunk mask is
//    widened to the macro's bit mask, masked-off chunks keep their contents;
//  * compute: multiply the feature buffer with kernel row cmp_row at the given
//    precision, add psin, and return the 24-bit partial sum and the 4-bit ReLU +
//    quantised final value.
// The kernel memory can also be read memory-mapped (mm_*), when no compute is
// requested in the same cycle.
//
// Timing: loads take effect at the next rising edge; a compute issued in cycle t
// sees all loads issued before t and its results are valid in cycle t+2
// (out_valid). The chunk-mask handling is this design's choice.
module dimc_tile
  import dimc_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  // feature buffer load
  input  logic                   fb_ld_en,
  input  logic [1:0]             fb_ld_sec,
  input  logic [COLS-1:0]        fb_ld_data,
  input  logic [GRP-1:0]         fb_ld_mask,
  // kernel memory load
  input  logic                   km_ld_en,
  input  logic [ROW_AW-1:0]      km_ld_row,
  input  logic [SA_AW-1:0]       km_ld_sec,
  input  logic [COLS-1:0]        km_ld_data,
  input  logic [GRP-1:0]         km_ld_mask,
  // compute
  input  logic                   cmp_en,
  input  logic [ROW_AW-1:0]      cmp_row,
  input  prec_e                  cmp_prec,
  input  logic                   cmp_signed,
  input  logic signed [PS_W-1:0] cmp_psin,
  output logic                   out_valid,
  output logic signed [PS_W-1:0] psum_out,
  output logic [3:0]             final_out,
  // memory-mapped read of the kernel memory
  input  logic                   mm_rd_en,
  input  logic [MM_AW-1:0]       mm_ra,
  output logic                   mm_rd_ready,
  output logic [COLS-1:0]        mm_q,
  output logic                   mm_q_valid
);

  logic [ROW_W-1:0] features;
  logic [P-1:0]     feature_en;
  logic [COLS-1:0]  km_bitmask;

  dimc_feature_buffer u_fbuf (
    .clk, .rst_n,
    .ld_en  (fb_ld_en),
    .ld_sec (fb_ld_sec),
    .ld_data(fb_ld_data),
    .ld_mask(fb_ld_mask),
    .features,
    .feature_en
  );

  always_comb
    for (int k = 0; k < GRP; k++) km_bitmask[k*VLEN +: VLEN] = {VLEN{km_ld_mask[k]}};

  dimc_array u_array (
    .clk, .rst_n,
    .wr_en      (km_ld_en),
    .wa         ({km_ld_sec, km_ld_row}),
    .d          (km_ld_data),
    .m          (km_bitmask),
    .rd_en      (mm_rd_en),
    .ra         (mm_ra),
    .rd_ready   (mm_rd_ready),
    .q          (mm_q),
    .q_valid    (mm_q_valid),
    .imc_en     (cmp_en),
    .imc_row    (cmp_row),
    .feature_in (features),
    .feature_en (feature_en),
    .prec       (cmp_prec),
    .is_signed  (cmp_signed),
    .psin       (cmp_psin),
    .psout      (psum_out),
    .psout_valid(out_valid)
  );

  // The quantiser needs the precision of the computation now leaving the array
  prec_e prec_d1, prec_d2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prec_d1 <= PREC_4B;
      prec_d2 <= PREC_4B;
    end else begin
      prec_d1 <= cmp_prec;
      prec_d2 <= prec_d1;
    end
  end

  dimc_relu_quant u_relu (
    .psum(psum_out),
    .prec(prec_d2),
    .q   (final_out)
  );

endmodule
