// dimc_predecoder: control and pre-decoder of the DIMC macro.
//
// Splits the memory-mapped write address WA and read address RA, each
// {sub-array index, row}, into a one-hot sub-array write enable, the row for the
// row decoders and the sub-array whose row is sensed onto Q. In compute (IMC) mode
// every sub-array reads the same row, given by the low bits of RA, and the MAC
// slices run. Write can run in the same cycle as a read or a compute (1R1W cells);
// a compute and a memory-mapped read cannot, and the compute wins.
//
// Timing: purely combinational. The address layout is this design's choice.
module dimc_predecoder #(
  parameter int unsigned P_P = dimc_pkg::P,
  parameter int unsigned J_P = dimc_pkg::J
) (
  input  logic                               wr_en,
  input  logic [$clog2(P_P)+$clog2(J_P)-1:0] wa,
  input  logic                               rd_en,
  input  logic [$clog2(P_P)+$clog2(J_P)-1:0] ra,
  input  logic                               imc_en,
  input  logic [$clog2(J_P)-1:0]             imc_row,
  output logic [P_P-1:0]                     sa_we,
  output logic [$clog2(J_P)-1:0]             wrow,
  output logic [$clog2(J_P)-1:0]             rrow,
  output logic [$clog2(P_P)-1:0]             rd_sel,
  output logic                               imc,
  output logic                               rd
);

  localparam int unsigned RW = $clog2(J_P);

  always_comb begin
    sa_we  = '0;
    if (wr_en) sa_we[wa[RW +: $clog2(P_P)]] = 1'b1;
    wrow   = wa[RW-1:0];
    imc    = imc_en;
    rd     = rd_en && !imc_en;
    rrow   = imc_en ? imc_row : ra[RW-1:0];
    rd_sel = ra[RW +: $clog2(P_P)];
  end

endmodule
