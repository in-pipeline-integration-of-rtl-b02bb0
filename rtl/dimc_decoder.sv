// dimc_decoder: decoder of the four DIMC custom instructions.
//
// Field positions (bit 31 first):
//   DL.I  nvec[31:29] mask[28:25] vs1[24:20] width[19:17] sec[16:15] f3[14:12] -[11:7]    opc[6:0]
//   DL.M  nvec[31:29] mask[28:25] vs1[24:20] width[19:17] sec[16:15] f3[14:12] m_row[11:7] opc[6:0]
//   DC.P  sh[31] dh[30] m_row[29:25] vs1[24:20] width[19:17] -[16:15]    f3[14:12] vd[11:7] opc[6:0]
//   DC.F  sh[31] dh[30] m_row[29:25] vs1[24:20] width[19:17] bidx[16:15] f3[14:12] vd[11:7] opc[6:0]
// The opcode is custom-0 (0001011). This design's own choices: funct3 000 DL.I,
// 001 DL.M, 010 DC.P, 011 DC.F; width[1:0] is the compute precision (00 4-bit,
// 01 2-bit, 10 1-bit) and width[2] selects signed operands. A custom-0 word with
// another funct3, a DL with nvec outside 1..4, or a DC with width[1:0] = 11 is
// flagged illegal. Any other opcode decodes to OP_NONE.
// Combinational.
module dimc_decoder
  import dimc_pkg::*;
(
  input  logic [31:0] instr,
  output dimc_dec_t   dec
);

  always_comb begin
    dec           = '0;
    dec.op        = OP_NONE;
    dec.prec      = PREC_4B;
    dec.nvec      = instr[31:29];
    dec.mask      = instr[28:25];
    dec.vs1       = instr[24:20];
    dec.sec       = instr[16:15];
    dec.bidx      = instr[16:15];
    dec.vd        = instr[11:7];
    dec.src_half        = instr[31];
    dec.dst_half        = instr[30];
    dec.is_signed = instr[19];
    if (instr[6:0] == OPC_CUSTOM0) begin
      unique case (instr[14:12])
        F3_DLI: dec.op = OP_DLI;
        F3_DLM: dec.op = OP_DLM;
        F3_DCP: dec.op = OP_DCP;
        F3_DCF: dec.op = OP_DCF;
        default: dec.illegal = 1'b1;
      endcase
      if (dec.op inside {OP_DLI, OP_DLM}) begin
        dec.m_row = instr[11:7];
        if (instr[31:29] == 3'd0 || instr[31:29] > 3'd4) dec.illegal = 1'b1;
      end
      if (dec.op inside {OP_DCP, OP_DCF}) begin
        dec.m_row = instr[29:25];
        if (instr[18:17] == 2'b11) dec.illegal = 1'b1;
        else                       dec.prec = prec_e'(instr[18:17]);
      end
      if (dec.illegal) dec.op = OP_NONE;
    end
  end

endmodule
