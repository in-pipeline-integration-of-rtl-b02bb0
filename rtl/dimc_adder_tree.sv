// dimc_adder_tree: sub-array recombination adder tree.
//
// Adds the P sub-array partial sums INT_PS_0..P-1 and the incoming partial sum PSIN
// into PSOUT, modulo 2^PS_W (the 24-bit range is far above the largest single
// computation, 256 x 225). Combinational; the array registers its output.
module dimc_adder_tree #(
  parameter int unsigned P_P    = dimc_pkg::P,
  parameter int unsigned PS_W_P = dimc_pkg::PS_W
) (
  input  logic signed [PS_W_P-1:0] int_ps [P_P],
  input  logic signed [PS_W_P-1:0] psin,
  output logic signed [PS_W_P-1:0] psout
);

  always_comb begin
    logic signed [PS_W_P-1:0] s;
    s = psin;
    for (int p = 0; p < P_P; p++) s = s + int_ps[p];
    psout = s;
  end

endmodule
