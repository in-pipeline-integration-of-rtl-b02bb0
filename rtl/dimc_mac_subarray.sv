// dimc_mac_subarray: computation IO and MAC slice of one DIMC sub-array.
//
// Multiplies the 256 weight bits read from the selected row with the 256 feature
// bits of this sub-array and adds all products. The precision is reconfigurable at
// run time: 64 4-bit, 128 2-bit or 256 1-bit MACs per cycle, operands packed LSB
// first, both operands signed (two's complement) or both unsigned. A signed 1-bit
// operand takes the values 0 and -1. When feature_en is low the slice is idle and
// its sum is zero.
//
// Timing: purely combinational; the enclosing array registers int_ps.
// The MAC counts per precision follow the published macro; signed 1-bit handling
// and the plain adder tree inside are this design's choice.
module dimc_mac_subarray
  import dimc_pkg::*;
#(
  parameter int unsigned COLS_P = dimc_pkg::COLS,
  parameter int unsigned PS_W_P = dimc_pkg::PS_W
) (
  input  logic [COLS_P-1:0]        weights,
  input  logic [COLS_P-1:0]        features,
  input  logic                     feature_en,
  input  prec_e                    prec,
  input  logic                     is_signed,
  output logic signed [PS_W_P-1:0] int_ps
);

  localparam int unsigned NSLOT = COLS_P / 4;

  // Product of one b-bit field pair, sign-extended as requested
  function automatic logic signed [9:0] mul_field(input logic [3:0] a, input logic [3:0] w,
                                                  input int unsigned b, input logic sgn);
    logic signed [4:0] ea, ew;
    ea = '0; ew = '0;
    case (b)
      4: begin ea = sgn ? {a[3], a}           : {1'b0, a};
               ew = sgn ? {w[3], w}           : {1'b0, w}; end
      2: begin ea = sgn ? {{3{a[1]}}, a[1:0]} : {3'b0, a[1:0]};
               ew = sgn ? {{3{w[1]}}, w[1:0]} : {3'b0, w[1:0]}; end
      default: begin ea = sgn ? {5{a[0]}}     : {4'b0, a[0]};
                     ew = sgn ? {5{w[0]}}     : {4'b0, w[0]}; end
    endcase
    return 10'(ea * ew);
  endfunction

  always_comb begin
    logic signed [PS_W_P-1:0] acc;
    logic [3:0] a, w;
    acc = '0;
    for (int s = 0; s < NSLOT; s++) begin
      a = features[4*s +: 4];
      w = weights[4*s +: 4];
      unique case (prec)
        PREC_4B: acc = acc + PS_W_P'(mul_field(a, w, 4, is_signed));
        PREC_2B: acc = acc + PS_W_P'(mul_field({2'b0, a[1:0]}, {2'b0, w[1:0]}, 2, is_signed))
                           + PS_W_P'(mul_field({2'b0, a[3:2]}, {2'b0, w[3:2]}, 2, is_signed));
        default: for (int k = 0; k < 4; k++)
                   acc = acc + PS_W_P'(mul_field({3'b0, a[k]}, {3'b0, w[k]}, 1, is_signed));
      endcase
    end
    int_ps = feature_en ? acc : '0;
  end

endmodule
