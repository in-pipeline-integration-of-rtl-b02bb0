// dimc_array: the digital in-memory-computing macro.
//
// P sub-arrays of J rows x 256 bitcells hold 32 logical kernel rows of 1024 bits
// (4 KiB): sector p of logical row r is row r of sub-array p, so the memory-mapped
// address is {p, r}. The macro works in two ways at once:
//  * memory-mapped: one 256-bit masked write (wa, d, m) and one 256-bit read
//    (ra -> q) per cycle, the sub-arrays acting as one array;
//  * compute (IMC): the same row of every sub-array is read and multiplied with the
//    matching 256 bits of feature_in by the sub-array's MAC slice; the recombination
//    adder tree adds the P partial sums and psin into a 24-bit psout.
// A compute and a read in the same cycle share the read word lines: the compute
// wins and the read is dropped (rd_ready low).
//
// Timing: the accumulation pipeline has two stages. A compute requested in cycle t
// registers INT_PS_p at the end of t and PSOUT at the end of t+1; psout_valid is
// high in cycle t+2. One compute per cycle. A read requested in cycle t gives q in
// t+1 with q_valid. Reset clears the valid bits, not the cells.
// Pipeline depth and the read/compute priority are this design's choices.
module dimc_array
  import dimc_pkg::*;
#(
  parameter int unsigned P_P    = dimc_pkg::P,
  parameter int unsigned J_P    = dimc_pkg::J,
  parameter int unsigned COLS_P = dimc_pkg::COLS,
  parameter int unsigned PS_W_P = dimc_pkg::PS_W,
  localparam int unsigned AW    = $clog2(P_P) + $clog2(J_P)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // memory-mapped write
  input  logic                     wr_en,
  input  logic [AW-1:0]            wa,
  input  logic [COLS_P-1:0]        d,
  input  logic [COLS_P-1:0]        m,
  // memory-mapped read
  input  logic                     rd_en,
  input  logic [AW-1:0]            ra,
  output logic                     rd_ready,
  output logic [COLS_P-1:0]        q,
  output logic                     q_valid,
  // compute
  input  logic                     imc_en,
  input  logic [$clog2(J_P)-1:0]   imc_row,
  input  logic [P_P*COLS_P-1:0]    feature_in,
  input  logic [P_P-1:0]           feature_en,
  input  prec_e                    prec,
  input  logic                     is_signed,
  input  logic signed [PS_W_P-1:0] psin,
  output logic signed [PS_W_P-1:0] psout,
  output logic                     psout_valid
);

  localparam int unsigned RW = $clog2(J_P);

  logic [P_P-1:0]           sa_we;
  logic [RW-1:0]            wrow, rrow;
  logic [$clog2(P_P)-1:0]   rd_sel;
  logic                     imc, rd;
  logic [COLS_P-1:0]        sa_q   [P_P];
  logic signed [PS_W_P-1:0] int_ps [P_P];

  dimc_predecoder #(.P_P(P_P), .J_P(J_P)) u_predec (
    .wr_en, .wa, .rd_en, .ra, .imc_en, .imc_row,
    .sa_we, .wrow, .rrow, .rd_sel, .imc, .rd
  );

  for (genvar p = 0; p < P_P; p++) begin : g_sa
    dimc_subarray #(.J_P(J_P), .COLS_P(COLS_P), .PS_W_P(PS_W_P)) u_sa (
      .clk,
      .we        (sa_we[p]),
      .wrow,
      .d,
      .m,
      .rrow,
      .q         (sa_q[p]),
      .features  (feature_in[p*COLS_P +: COLS_P]),
      .feature_en(feature_en[p] && imc),
      .prec,
      .is_signed,
      .int_ps    (int_ps[p])
    );
  end

  assign rd_ready = !imc_en;

  // Stage 1: sub-array partial sums
  logic signed [PS_W_P-1:0] int_ps_q [P_P];
  logic signed [PS_W_P-1:0] psin_q;
  logic                     v1;
  // Stage 2: recombined sum
  logic signed [PS_W_P-1:0] sum;

  dimc_adder_tree #(.P_P(P_P), .PS_W_P(PS_W_P)) u_tree (
    .int_ps(int_ps_q), .psin(psin_q), .psout(sum)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1          <= 1'b0;
      psout_valid <= 1'b0;
      q_valid     <= 1'b0;
      psin_q      <= '0;
      psout       <= '0;
      q           <= '0;
      for (int p = 0; p < P_P; p++) int_ps_q[p] <= '0;
    end else begin
      v1          <= imc;
      psout_valid <= v1;
      q_valid     <= rd;
      if (imc) begin
        psin_q <= psin;
        for (int p = 0; p < P_P; p++) int_ps_q[p] <= int_ps[p];
      end
      if (v1) psout <= sum;
      if (rd) q     <= sa_q[rd_sel];
    end
  end

endmodule
