// dimc_lane_ctrl: control of the DIMC execution lane.
//
// Receives, from the decode stage, one decoded DIMC instruction per cycle together
// with its register operands: the four registers vs1..vs1+3 and the old value of vd.
// It holds the instruction for one cycle (EX1) and turns it into a tile request:
//  * DL.I / DL.M: the 256 bits of vs1..vs1+3 with the chunk mask
//    (register k used when k < nvec and mask[k]) go to sector sec of the feature
//    buffer (DL.I) or of kernel row m_row (DL.M);
//  * DC.P / DC.F: a compute on kernel row m_row, with bits [23:0] of half sh of vs1
//    as the incoming partial sum.
// While the tile computes (EX2) and delivers (WB), the lane carries vd, dh, bidx and
// the old vd along, then forms the write-back word:
//  * DC.P: half dh of vd takes the 24-bit result sign-extended to 32 bits;
//  * DC.F: byte 4*dh+bidx of vd takes {old low nibble, new 4-bit result}, so two
//    DC.F to the same byte pack two results, the first in the high nibble.
// The rest of vd keeps its old value.
//
// Timing: an instruction accepted in cycle t (in_valid) is in EX1 in t+1, EX2 in t+2
// and writes the VRF at the end of t+3 (wb_en high in t+3). The destination of each
// DC in EX1, EX2 and WB is output for the decode stage's hazard check. Sign
// extension and the nibble packing order are this design's choices.
module dimc_lane_ctrl
  import dimc_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  // issue from vID
  input  logic                   in_valid,
  input  dimc_dec_t              in_dec,
  input  logic [VLEN-1:0]        in_vs [GRP],
  input  logic [VLEN-1:0]        in_vd_old,
  // tile requests
  output logic                   fb_ld_en,
  output logic [1:0]             fb_ld_sec,
  output logic [COLS-1:0]        fb_ld_data,
  output logic [GRP-1:0]         fb_ld_mask,
  output logic                   km_ld_en,
  output logic [ROW_AW-1:0]      km_ld_row,
  output logic [SA_AW-1:0]       km_ld_sec,
  output logic [COLS-1:0]        km_ld_data,
  output logic [GRP-1:0]         km_ld_mask,
  output logic                   cmp_en,
  output logic [ROW_AW-1:0]      cmp_row,
  output prec_e                  cmp_prec,
  output logic                   cmp_signed,
  output logic signed [PS_W-1:0] cmp_psin,
  // tile results
  input  logic                   res_valid,
  input  logic signed [PS_W-1:0] res_psum,
  input  logic [3:0]             res_final,
  // write-back
  output logic                   wb_en,
  output logic [VR_AW-1:0]       wb_addr,
  output logic [VLEN-1:0]        wb_data,
  // destinations in flight
  output logic [2:0]             inflight_v,
  output logic [VR_AW-1:0]       inflight_vd [3]
);

  // Write-back bookkeeping that travels with a compute
  typedef struct packed {
    logic             v;
    logic             final_sum;
    logic [VR_AW-1:0] vd;
    logic             dst_half;
    logic [1:0]       bidx;
    logic [VLEN-1:0]  vd_old;
  } wbinfo_t;

  // EX1 register
  logic             ex1_v;
  dimc_dec_t        ex1_dec;
  logic [VLEN-1:0]  ex1_vs [GRP];
  logic [VLEN-1:0]  ex1_vd_old;
  wbinfo_t          ex2_q, wb_q, ex1_info;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ex1_v      <= 1'b0;
      ex1_dec    <= '0;
      ex1_vd_old <= '0;
      for (int k = 0; k < GRP; k++) ex1_vs[k] <= '0;
      ex2_q      <= '0;
      wb_q       <= '0;
    end else begin
      ex1_v <= in_valid && in_dec.op != OP_NONE;
      if (in_valid) begin
        ex1_dec    <= in_dec;
        ex1_vs     <= in_vs;
        ex1_vd_old <= in_vd_old;
      end
      ex2_q <= ex1_info;
      wb_q  <= ex2_q;
    end
  end

  logic is_dc, is_dli, is_dlm;
  logic [COLS-1:0] grp_bits;

  always_comb begin
    is_dli = ex1_v && ex1_dec.op == OP_DLI;
    is_dlm = ex1_v && ex1_dec.op == OP_DLM;
    is_dc  = ex1_v && (ex1_dec.op == OP_DCP || ex1_dec.op == OP_DCF);
    for (int k = 0; k < GRP; k++) grp_bits[k*VLEN +: VLEN] = ex1_vs[k];

    fb_ld_en   = is_dli;
    fb_ld_sec  = ex1_dec.sec;
    fb_ld_data = grp_bits;
    fb_ld_mask = dl_chunk_mask(ex1_dec.nvec, ex1_dec.mask);
    km_ld_en   = is_dlm;
    km_ld_row  = ex1_dec.m_row;
    km_ld_sec  = ex1_dec.sec;
    km_ld_data = grp_bits;
    km_ld_mask = dl_chunk_mask(ex1_dec.nvec, ex1_dec.mask);

    cmp_en     = is_dc;
    cmp_row    = ex1_dec.m_row;
    cmp_prec   = ex1_dec.prec;
    cmp_signed = ex1_dec.is_signed;
    cmp_psin   = ex1_dec.src_half ? ex1_vs[0][32 +: PS_W] : ex1_vs[0][0 +: PS_W];

    ex1_info.v         = is_dc;
    ex1_info.final_sum = ex1_dec.op == OP_DCF;
    ex1_info.vd        = ex1_dec.vd;
    ex1_info.dst_half        = ex1_dec.dst_half;
    ex1_info.bidx      = ex1_dec.bidx;
    ex1_info.vd_old    = ex1_vd_old;
  end

  // Write-back word
  always_comb begin
    logic [5:0] byte_pos;
    logic [7:0] old_byte;
    wb_en    = wb_q.v && res_valid;
    wb_addr  = wb_q.vd;
    wb_data  = wb_q.vd_old;
    byte_pos = {wb_q.dst_half, wb_q.bidx, 3'b000};
    old_byte = wb_q.vd_old[byte_pos +: 8];
    if (wb_q.final_sum) wb_data[byte_pos +: 8] = {old_byte[3:0], res_final};
    else                wb_data[{wb_q.dst_half, 5'b0} +: 32] = {{(32-PS_W){res_psum[PS_W-1]}}, res_psum};
  end

  assign inflight_v     = {wb_q.v, ex2_q.v, ex1_info.v};
  assign inflight_vd[0] = ex1_info.vd;
  assign inflight_vd[1] = ex2_q.vd;
  assign inflight_vd[2] = wb_q.vd;

endmodule
