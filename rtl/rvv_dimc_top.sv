// rvv_dimc_top: vector pipeline slice with a DIMC tile as an execution lane.
//
// A RISC-V vector unit (Zve32x, VLEN = 64) in which a digital in-memory-computing
// tile sits in the execute stage next to the ordinary vector lanes, driven by four
// custom instructions: DL.I and DL.M load 64..256 bits from up to four consecutive
// vector registers into the tile's feature buffer or kernel memory, DC.P and DC.F
// compute one 1024-bit kernel row against the feature buffer (256 4-bit, 512 2-bit or
// 1024 1-bit MACs) and write a 24-bit partial sum, or a ReLU-quantised 4-bit result,
// back into a vector register. All data move through the vector register file.
//
// Pipeline (one instruction per cycle):
//   vID  decode, read-after-write hazard check, VRF read (vs1..vs1+3 and vd)
//   EX1  DIMC lane: loads written into the tile, compute stage 1 (sub-array MACs)
//   EX2  compute stage 2 (adder tree + partial-sum input)
//   vWB  ReLU/quantiser, packing into vd, VRF write
// An instruction whose source or destination register is the destination of a
// DC.P/DC.F still in EX1, EX2 or vWB waits in vID (instr_ready low); there is no
// forwarding, so dependent computes issue every four cycles, independent ones every
// cycle. Instructions that are not DIMC instructions are handed on through fwd_* to
// the standard lanes after the same check on their register fields [11:7], [19:15]
// and [24:20]. Malformed custom-0 words are dropped and flagged on `illegal`.
// The rest of the core reaches the VRF through ext_* and the kernel memory's
// memory-mapped read port through mm_*; wb_* shows each DIMC write-back as it
// happens, for that core's own hazard tracking.
//
// The organisation (vID/vEX/vWB, DIMC lane in vEX, operands through the VRF) is the
// published one. The published pipeline drawing shows vEX as one stage; here the
// DIMC lane spends two cycles in it (EX1, EX2), because the tile's accumulation
// pipeline has two register stages. Pipeline depth, hazard rule and the port set
// are this design's.
module rvv_dimc_top
  import dimc_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // from the scalar core
  input  logic                 instr_valid,
  input  logic [31:0]          instr,
  output logic                 instr_ready,
  // to the standard vector lanes
  output logic                 fwd_valid,
  output logic [31:0]          fwd_instr,
  output logic                 illegal,
  // VRF access by the rest of the core
  input  logic                 ext_we,
  input  logic [VR_AW-1:0]     ext_waddr,
  input  logic [VLEN-1:0]      ext_wdata,
  input  logic [VR_AW-1:0]     ext_raddr,
  output logic [VLEN-1:0]      ext_rdata,
  // memory-mapped read of the DIMC kernel memory
  input  logic                 mm_rd_en,
  input  logic [MM_AW-1:0]     mm_ra,
  output logic                 mm_rd_ready,
  output logic [COLS-1:0]      mm_q,
  output logic                 mm_q_valid,
  // DIMC write-backs, for the scoreboard of the rest of the core
  output logic                 wb_valid,
  output logic [VR_AW-1:0]     wb_vd,
  output logic [VLEN-1:0]      wb_value,
  // status
  output logic                 busy
);

  // ---------------- vID ----------------
  dimc_dec_t        dec;
  logic [VLEN-1:0]  grp_data [GRP];
  logic [VLEN-1:0]  vd_old;
  logic [2:0]       inflight_v;
  logic [VR_AW-1:0] inflight_vd [3];
  logic             hazard, is_dimc, is_custom;

  dimc_decoder u_dec (.instr(instr), .dec(dec));

  assign is_custom = instr[6:0] == OPC_CUSTOM0;
  assign is_dimc   = dec.op != OP_NONE;

  // Does the instruction in vID touch register r?
  function automatic logic reads_reg(input dimc_dec_t d, input logic [31:0] iw,
                                     input logic [VR_AW-1:0] r);
    logic hit;
    hit = 1'b0;
    unique case (d.op)
      OP_DLI, OP_DLM:
        for (int k = 0; k < GRP; k++)
          if (k < int'(d.nvec) && VR_AW'(d.vs1 + VR_AW'(k)) == r) hit = 1'b1;
      OP_DCP, OP_DCF:
        hit = (d.vs1 == r) || (d.vd == r);
      default:
        hit = (iw[11:7] == r) || (iw[19:15] == r) || (iw[24:20] == r);
    endcase
    return hit;
  endfunction

  always_comb begin
    hazard = 1'b0;
    if (!(is_custom && !is_dimc))             // a malformed custom word is just dropped
      for (int s = 0; s < 3; s++)
        if (inflight_v[s] && reads_reg(dec, instr, inflight_vd[s])) hazard = 1'b1;
  end

  assign instr_ready = !hazard;

  logic issue;
  assign issue     = instr_valid && instr_ready && is_dimc;
  assign fwd_valid = instr_valid && instr_ready && !is_custom;
  assign fwd_instr = instr;
  assign illegal   = instr_valid && is_custom && !is_dimc;

  // ---------------- VRF ----------------
  logic             wb_en;
  logic [VR_AW-1:0] wb_addr;
  logic [VLEN-1:0]  wb_data;

  dimc_vrf u_vrf (
    .clk, .rst_n,
    .grp_base(dec.vs1),
    .grp_data(grp_data),
    .rd_addr (dec.vd),
    .rd_data (vd_old),
    .dbg_addr(ext_raddr),
    .dbg_data(ext_rdata),
    .we_a    (wb_en),
    .wa_a    (wb_addr),
    .wd_a    (wb_data),
    .we_b    (ext_we),
    .wa_b    (ext_waddr),
    .wd_b    (ext_wdata)
  );

  // ---------------- vEX: DIMC lane ----------------
  logic                   fb_ld_en, km_ld_en, cmp_en, cmp_signed, res_valid;
  logic [1:0]             fb_ld_sec;
  logic [COLS-1:0]        fb_ld_data, km_ld_data;
  logic [GRP-1:0]         fb_ld_mask, km_ld_mask;
  logic [ROW_AW-1:0]      km_ld_row, cmp_row;
  logic [SA_AW-1:0]       km_ld_sec;
  prec_e                  cmp_prec;
  logic signed [PS_W-1:0] cmp_psin, res_psum;
  logic [3:0]             res_final;

  dimc_lane_ctrl u_ctrl (
    .clk, .rst_n,
    .in_valid (issue),
    .in_dec   (dec),
    .in_vs    (grp_data),
    .in_vd_old(vd_old),
    .fb_ld_en, .fb_ld_sec, .fb_ld_data, .fb_ld_mask,
    .km_ld_en, .km_ld_row, .km_ld_sec, .km_ld_data, .km_ld_mask,
    .cmp_en, .cmp_row, .cmp_prec, .cmp_signed, .cmp_psin,
    .res_valid, .res_psum, .res_final,
    .wb_en, .wb_addr, .wb_data,
    .inflight_v, .inflight_vd
  );

  dimc_tile u_tile (
    .clk, .rst_n,
    .fb_ld_en, .fb_ld_sec, .fb_ld_data, .fb_ld_mask,
    .km_ld_en, .km_ld_row, .km_ld_sec, .km_ld_data, .km_ld_mask,
    .cmp_en, .cmp_row, .cmp_prec, .cmp_signed, .cmp_psin,
    .out_valid(res_valid),
    .psum_out (res_psum),
    .final_out(res_final),
    .mm_rd_en, .mm_ra, .mm_rd_ready, .mm_q, .mm_q_valid
  );

  assign busy     = |inflight_v;
  assign wb_valid = wb_en;
  assign wb_vd    = wb_addr;
  assign wb_value = wb_data;

  // A compute's result must arrive exactly when its write-back slot reaches vWB
  a_wb_aligned: assert property (@(posedge clk) disable iff (!rst_n)
                                 inflight_v[2] |-> res_valid);

endmodule
