// dimc_relu_quant: ReLU activation and output quantiser of the DIMC tile.
//
// Takes the signed 24-bit sum, clamps negative values to zero (ReLU) and saturates
// the result to the output precision: 0..15 for 4-bit, 0..3 for 2-bit, 0..1 for
// 1-bit. The result is zero-padded to 4 bits so that two results pack into a byte.
// The saturating quantiser (no scaling) is this design's choice: a scale or bias is
// applied through the partial-sum input. Combinational.
module dimc_relu_quant
  import dimc_pkg::*;
#(
  parameter int unsigned PS_W_P = dimc_pkg::PS_W
) (
  input  logic signed [PS_W_P-1:0] psum,
  input  prec_e                    prec,
  output logic [3:0]               q
);

  always_comb begin
    logic [PS_W_P-1:0] maxv;
    unique case (prec)
      PREC_4B: maxv = PS_W_P'(15);
      PREC_2B: maxv = PS_W_P'(3);
      default: maxv = PS_W_P'(1);
    endcase
    if (psum[PS_W_P-1])                  q = 4'd0;          // ReLU
    else if (PS_W_P'(psum) > maxv)       q = maxv[3:0];     // saturate
    else                                 q = psum[3:0];
  end

endmodule
