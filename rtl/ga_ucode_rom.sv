// ga_ucode_rom: the Microcode Table of a PE.
//
// A look-up table from a high-level opcode to the microcode word that the
// control signal generator uses to expand the instruction: which sequencer
// runs it (DMA, the GEMM three-level loop, the edge-centric loop, the
// activation loop, the initialisation loop or the tiling-block end), the ACK
// execution mode it needs, whether the edge loop sends two indices per edge
// (SDDMM, vector add) and the DMA direction. The paper names the table and
// the loops; the word format is this design's choice. Combinational.
module ga_ucode_rom
  import ga_pkg::*;
(
  input  opcode_e op,
  output ucode_t  uc
);
  always_comb begin
    uc = '{seq: SEQ_NONE, mode: MODE_IDLE, pair: 1'b0, store: 1'b0};
    unique case (op)
      OP_MEM_RD: uc.seq = SEQ_DMA;
      OP_MEM_WR: begin uc.seq = SEQ_DMA; uc.store = 1'b1; end
      OP_GEMM:   begin uc.seq = SEQ_GEMM; uc.mode = MODE_GEMM; end
      OP_SPDMM:  begin uc.seq = SEQ_EDGE; uc.mode = MODE_SPDMM; end
      OP_SDDMM:  begin uc.seq = SEQ_EDGE; uc.mode = MODE_SDDMM; uc.pair = 1'b1; end
      OP_VADD:   begin uc.seq = SEQ_EDGE; uc.mode = MODE_VADD;  uc.pair = 1'b1; end
      OP_ACT:    uc.seq = SEQ_ACT;
      OP_INIT:   uc.seq = SEQ_INIT;
      OP_TB_END: uc.seq = SEQ_END;
      default:   ;
    endcase
  end
endmodule
