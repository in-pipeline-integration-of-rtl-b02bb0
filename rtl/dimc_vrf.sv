// dimc_vrf: vector register file with the ports the DIMC lane needs.
//
// NREGS registers of VLEN bits. A group read port returns registers
// grp_base .. grp_base+3 (numbers wrap modulo NREGS), 256 bits per cycle, which
// matches the DIMC's 256-bit load bandwidth. A second read port gives one register
// (the old destination value for partial writes), a third serves the rest of the
// vector core. Two write ports: port a is the DIMC write-back, port b the rest of
// the core; on a clash port a wins.
//
// Timing: reads are combinational, writes happen on the rising edge, so a value
// written in cycle t is read in t+1. Reset clears every register.
module dimc_vrf
  import dimc_pkg::*;
#(
  parameter int unsigned NREGS  = dimc_pkg::NVREGS,
  parameter int unsigned VLEN_P = dimc_pkg::VLEN,
  parameter int unsigned NGRP   = dimc_pkg::GRP,
  localparam int unsigned AW    = $clog2(NREGS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [AW-1:0]     grp_base,
  output logic [VLEN_P-1:0] grp_data [NGRP],
  input  logic [AW-1:0]     rd_addr,
  output logic [VLEN_P-1:0] rd_data,
  input  logic [AW-1:0]     dbg_addr,
  output logic [VLEN_P-1:0] dbg_data,
  input  logic              we_a,
  input  logic [AW-1:0]     wa_a,
  input  logic [VLEN_P-1:0] wd_a,
  input  logic              we_b,
  input  logic [AW-1:0]     wa_b,
  input  logic [VLEN_P-1:0] wd_b
);

  logic [VLEN_P-1:0] regs [NREGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NREGS; r++) regs[r] <= '0;
    end else begin
      if (we_b && !(we_a && wa_a == wa_b)) regs[wa_b] <= wd_b;
      if (we_a)                            regs[wa_a] <= wd_a;
    end
  end

  always_comb begin
    for (int k = 0; k < NGRP; k++) grp_data[k] = regs[AW'(grp_base + AW'(k))];
    rd_data  = regs[rd_addr];
    dbg_data = regs[dbg_addr];
  end

endmodule
