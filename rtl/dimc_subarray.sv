// dimc_subarray: one sub-array of the DIMC macro.
//
// Holds J rows of 256 bitcells (1R1W), its row decoder and its computation IO/MAC
// slice. The write port stores D into row wrow under the bit mask M (bits with M=1
// change). The read port selects row rrow; the row drives both the memory-mapped
// output q and, in compute mode, the MAC slice, which returns this sub-array's
// partial sum INT_PS.
//
// Timing: write on the rising clock edge; q and int_ps are combinational in rrow and
// the compute inputs (the array above registers them). A row written in a cycle is
// seen by a read in the next cycle. The bitcells are modelled as a register array.
module dimc_subarray
  import dimc_pkg::*;
#(
  parameter int unsigned J_P    = dimc_pkg::J,
  parameter int unsigned COLS_P = dimc_pkg::COLS,
  parameter int unsigned PS_W_P = dimc_pkg::PS_W
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [$clog2(J_P)-1:0]    wrow,
  input  logic [COLS_P-1:0]         d,
  input  logic [COLS_P-1:0]         m,
  input  logic [$clog2(J_P)-1:0]    rrow,
  output logic [COLS_P-1:0]         q,
  input  logic [COLS_P-1:0]         features,
  input  logic                      feature_en,
  input  prec_e                     prec,
  input  logic                      is_signed,
  output logic signed [PS_W_P-1:0]  int_ps
);

  logic [COLS_P-1:0] cells [J_P];

  always_ff @(posedge clk) begin
    if (we) cells[wrow] <= (cells[wrow] & ~m) | (d & m);
  end

  assign q = cells[rrow];

  dimc_mac_subarray #(.COLS_P(COLS_P), .PS_W_P(PS_W_P)) u_mac (
    .weights   (q),
    .features  (features),
    .feature_en(feature_en),
    .prec      (prec),
    .is_signed (is_signed),
    .int_ps    (int_ps)
  );

endmodule
