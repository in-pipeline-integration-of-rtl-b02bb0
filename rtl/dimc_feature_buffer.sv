// dimc_feature_buffer: the DIMC input (feature) buffer.
//
// 1024 bits in four 256-bit sectors; each sector holds four 64-bit chunks, one per
// vector register of a load. A load writes one sector: chunk k takes
// ld_data[64k +: 64] when ld_mask[k] is set and is cleared otherwise, and its valid
// bit follows ld_mask[k]. Clearing unselected chunks makes them contribute nothing
// to the MACs. feature_en[p] is high when sector p holds at least one valid chunk;
// it enables the matching sub-array's MAC slice.
//
// Timing: a load is written on the rising edge and visible in the next cycle.
// Reset clears data and valid bits. Clearing masked-off chunks and deriving the
// sub-array enables from the valid bits are this design's choices.
module dimc_feature_buffer
  import dimc_pkg::*;
#(
  parameter int unsigned SECTORS = dimc_pkg::P,
  parameter int unsigned SEC_W   = dimc_pkg::COLS,
  parameter int unsigned CHUNK_W = dimc_pkg::VLEN,
  localparam int unsigned NCH    = SEC_W / CHUNK_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       ld_en,
  input  logic [$clog2(SECTORS)-1:0] ld_sec,
  input  logic [SEC_W-1:0]           ld_data,
  input  logic [NCH-1:0]             ld_mask,
  output logic [SECTORS*SEC_W-1:0]   features,
  output logic [SECTORS-1:0]         feature_en
);

  logic [SEC_W-1:0] buf_q   [SECTORS];
  logic [NCH-1:0]   valid_q [SECTORS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SECTORS; s++) begin
        buf_q[s]   <= '0;
        valid_q[s] <= '0;
      end
    end else if (ld_en) begin
      for (int k = 0; k < NCH; k++)
        buf_q[ld_sec][k*CHUNK_W +: CHUNK_W] <= ld_mask[k] ? ld_data[k*CHUNK_W +: CHUNK_W]
                                                          : '0;
      valid_q[ld_sec] <= ld_mask;
    end
  end

  always_comb begin
    for (int s = 0; s < SECTORS; s++) begin
      features[s*SEC_W +: SEC_W] = buf_q[s];
      feature_en[s]              = |valid_q[s];
    end
  end

endmodule
