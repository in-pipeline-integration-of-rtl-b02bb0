// tb_dimc_ref_pkg: reference arithmetic for the DIMC testbenches.
//
// Written independently of the RTL: each operand field is read as an unsigned
// integer and, for signed operands, moved into the negative range by subtracting
// 2^b; products are summed in plain integers.
package tb_dimc_ref_pkg;

  // Dot product of the first nbits bits of w and f, fields of b bits (b = 4, 2, 1)
  function automatic int ref_dot(input logic [1023:0] w, input logic [1023:0] f,
                                 input int nbits, input int b, input bit sgn);
    int acc, vw, vf;
    acc = 0;
    for (int i = 0; i < nbits / b; i++) begin
      vw = 0; vf = 0;
      for (int j = 0; j < b; j++) begin
        vw += int'(w[i*b + j]) << j;
        vf += int'(f[i*b + j]) << j;
      end
      if (sgn && vw >= (1 << (b - 1))) vw -= (1 << b);
      if (sgn && vf >= (1 << (b - 1))) vf -= (1 << b);
      acc += vw * vf;
    end
    return acc;
  endfunction

  // Bits per operand of a precision code (0: 4, 1: 2, 2: 1)
  function automatic int prec_bits(input int code);
    return (code == 0) ? 4 : (code == 1) ? 2 : 1;
  endfunction

  // ReLU followed by saturation to b bits
  function automatic int ref_quant(input int s, input int b);
    int mx;
    mx = (1 << b) - 1;
    if (s < 0) return 0;
    if (s > mx) return mx;
    return s;
  endfunction

  // Random 1024-bit vector
  function automatic logic [1023:0] rand1024();
    logic [1023:0] v;
    for (int i = 0; i < 32; i++) v[i*32 +: 32] = $urandom();
    return v;
  endfunction

endpackage
