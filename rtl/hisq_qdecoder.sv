// hisq_qdecoder: quantum instruction decoder ("Q. Inst. Decoder").
//
// Turns the timing, codeword and sync instructions of HISQ into commands for
// the timing control unit. It is purely combinational: the classical pipeline
// presents the instruction word together with the values of its rs1 and rs2
// registers, and the decoder resolves the immediate-or-register operand forms
// of cw.x.x and waiti/waitr.
//
//   waiti imm  -> TCMD_WAIT, amount = imm[31:20] zero-extended
//   waitr rs1  -> TCMD_WAIT, amount = rs1
//   cw.p.c     -> TCMD_CW, port and codeword from immediate or register
//                 (cw.i.r 3, r3 sends the codeword in r3 to port 3)
//   sync imm   -> TCMD_SYNC, tgt = imm[31:20] (low ADDR_W bits)
//
// is_tcu is high for these instructions only; send/recv and all RV32I
// instructions are left to the pipeline. The operation names and operand
// forms follow the architecture; the bit encodings (see hisq_pkg) are this
// design's own.
module hisq_qdecoder
  import hisq_pkg::*;
(
  input  logic [31:0]     instr,
  input  logic [XLEN-1:0] rs1_val,
  input  logic [XLEN-1:0] rs2_val,
  output logic            is_tcu,
  output tcu_cmd_t        cmd
);
  logic [6:0] opc;
  logic [2:0] f3;
  assign opc = instr[6:0];
  assign f3  = instr[14:12];

  always_comb begin
    is_tcu     = 1'b0;
    cmd        = '0;
    cmd.op     = TCMD_WAIT;
    if (opc == OPC_HISQ) begin
      unique case (f3)
        F3_WAITI: begin
          is_tcu     = 1'b1;
          cmd.op     = TCMD_WAIT;
          cmd.amount = XLEN'(instr[31:20]);
        end
        F3_WAITR: begin
          is_tcu     = 1'b1;
          cmd.op     = TCMD_WAIT;
          cmd.amount = rs1_val;
        end
        F3_SYNC: begin
          is_tcu  = 1'b1;
          cmd.op  = TCMD_SYNC;
          cmd.tgt = instr[20 +: ADDR_W];
        end
        default: ;
      endcase
    end else if (opc == OPC_CW && !f3[2]) begin
      is_tcu   = 1'b1;
      cmd.op   = TCMD_CW;
      cmd.port = f3[1] ? rs1_val[PORT_W-1:0] : instr[11:7];
      unique case (f3[1:0])
        2'b00:   cmd.cw = instr[15 +: CW_W];
        2'b01:   cmd.cw = rs1_val[CW_W-1:0];
        2'b10:   cmd.cw = CW_W'(instr[31:20]);
        default: cmd.cw = rs2_val[CW_W-1:0];
      endcase
    end
  end
endmodule
