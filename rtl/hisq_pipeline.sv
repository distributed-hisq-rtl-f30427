// hisq_pipeline: the classical pipeline of a HISQ core.
//
// Executes RV32I (without the interrupt, CSR and fence instructions, which
// HISQ disables to keep timing predictable) plus the HISQ extension. Quantum
// instructions (waiti, waitr, cw.x.x, sync) are handed, with their register
// operands, to the quantum instruction decoder and on to the timing control
// unit; send/recv go to the message unit. The pipeline itself only has to
// run ahead of the timer: exact timing is the TCU's job.
//
// Structure: two stages. Fetch presents the next PC to the synchronous
// instruction port of hisq_mem; Execute decodes the returned word, reads the
// register file, computes, resolves branches and writes back in the same
// cycle. The next fetch address is chosen from Execute's result in that
// cycle, so taken branches and jumps cost no bubble. Execute stalls (and
// fetch re-reads the same word) for:
//   - a load: one extra cycle for the synchronous data read;
//   - a quantum instruction while the TCU cannot accept it (queue full);
//   - send while the message unit is busy, recv until a message is there.
// ecall, ebreak, fence, CSR and unknown opcodes set the sticky illegal flag
// and are otherwise skipped.
//
// Interface: run starts execution at address 0 (while run is low the core
// holds its PC at 0). All memory addresses are word addresses of hisq_mem.
// The RV32I semantics and the split into pipeline, Q decoder and MsgU follow
// the architecture; the two-stage organisation is this design's choice.
module hisq_pipeline
  import hisq_pkg::*;
#(
  parameter int MEM_AW = 15
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,
  // instruction port
  output logic [MEM_AW-1:0] i_addr,
  input  logic [31:0]       i_rdata,
  // data port
  output logic [MEM_AW-1:0] d_addr,
  output logic [3:0]        d_we,
  output logic [31:0]       d_wdata,
  input  logic [31:0]       d_rdata,
  // quantum instruction to the Q decoder / TCU
  output logic              q_valid,
  output logic [31:0]       q_instr,
  output logic [XLEN-1:0]   q_rs1,
  output logic [XLEN-1:0]   q_rs2,
  input  logic              q_ready,
  // message unit
  output logic              send_valid,
  output logic [ADDR_W-1:0] send_dst,
  output logic [XLEN-1:0]   send_data,
  input  logic              send_ready,
  output logic              recv_req,
  output logic [ADDR_W-1:0] recv_src,
  input  logic              recv_valid,
  input  logic [XLEN-1:0]   recv_data,
  // status
  output logic [31:0]       pc,
  output logic              illegal,
  output logic [31:0]       retired
);
  logic [31:0]     e_pc;
  logic            e_valid;
  logic            ld_phase;
  logic [XLEN-1:0] rf [32];

  logic [31:0] ins;
  logic [6:0]  opc;
  logic [2:0]  f3;
  logic [6:0]  f7;
  logic [4:0]  rd, rs1, rs2;
  logic [31:0] a, b;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;

  assign ins   = i_rdata;
  assign opc   = ins[6:0];
  assign f3    = ins[14:12];
  assign f7    = ins[31:25];
  assign rd    = ins[11:7];
  assign rs1   = ins[19:15];
  assign rs2   = ins[24:20];
  assign a     = (rs1 == 5'd0) ? '0 : rf[rs1];
  assign b     = (rs2 == 5'd0) ? '0 : rf[rs2];
  assign imm_i = {{20{ins[31]}}, ins[31:20]};
  assign imm_s = {{20{ins[31]}}, ins[31:25], ins[11:7]};
  assign imm_b = {{19{ins[31]}}, ins[31], ins[7], ins[30:25], ins[11:8], 1'b0};
  assign imm_u = {ins[31:12], 12'b0};
  assign imm_j = {{11{ins[31]}}, ins[31], ins[19:12], ins[20], ins[30:21], 1'b0};
  assign pc    = e_pc;

  function automatic logic [31:0] alu(input logic [2:0] fn, input logic alt,
                                      input logic [31:0] x, input logic [31:0] y);
    unique case (fn)
      3'b000: return alt ? x - y : x + y;
      3'b001: return x << y[4:0];
      3'b010: return {31'b0, $signed(x) < $signed(y)};
      3'b011: return {31'b0, x < y};
      3'b100: return x ^ y;
      3'b101: return alt ? 32'($signed(x) >>> y[4:0]) : x >> y[4:0];
      3'b110: return x | y;
      default: return x & y;
    endcase
  endfunction

  // Execute-stage combinational results
  logic        stall, redirect, wb_en, is_illegal;
  logic [31:0] target, wb_val, ls_addr;
  logic        br_taken;

  always_comb begin
    stall      = 1'b0;
    redirect   = 1'b0;
    target     = '0;
    wb_en      = 1'b0;
    wb_val     = '0;
    is_illegal = 1'b0;
    br_taken   = 1'b0;
    d_addr     = '0;
    d_we       = '0;
    d_wdata    = '0;
    q_valid    = 1'b0;
    send_valid = 1'b0;
    recv_req   = 1'b0;
    ls_addr    = a + ((opc == OPC_STORE) ? imm_s : imm_i);
    q_instr    = ins;
    q_rs1      = a;
    q_rs2      = b;
    send_dst   = a[ADDR_W-1:0];
    send_data  = b;
    recv_src   = ins[20 +: ADDR_W];
    if (e_valid) begin
      unique case (opc)
        OPC_LUI:   begin wb_en = 1'b1; wb_val = imm_u; end
        OPC_AUIPC: begin wb_en = 1'b1; wb_val = e_pc + imm_u; end
        OPC_JAL: begin
          wb_en = 1'b1; wb_val = e_pc + 32'd4;
          redirect = 1'b1; target = e_pc + imm_j;
        end
        OPC_JALR: begin
          wb_en = 1'b1; wb_val = e_pc + 32'd4;
          redirect = 1'b1; target = (a + imm_i) & ~32'd1;
        end
        OPC_BRANCH: begin
          unique case (f3)
            3'b000: br_taken = (a == b);
            3'b001: br_taken = (a != b);
            3'b100: br_taken = ($signed(a) < $signed(b));
            3'b101: br_taken = ($signed(a) >= $signed(b));
            3'b110: br_taken = (a < b);
            3'b111: br_taken = (a >= b);
            default: is_illegal = 1'b1;
          endcase
          redirect = br_taken;
          target   = e_pc + imm_b;
        end
        OPC_LOAD: begin
          d_addr = ls_addr[MEM_AW+1:2];
          if (!ld_phase) stall = 1'b1;
          else begin
            wb_en = 1'b1;
            unique case (f3)
              3'b000: wb_val = {{24{d_rdata[8*ls_addr[1:0]+7]}}, d_rdata[8*ls_addr[1:0] +: 8]};
              3'b001: wb_val = {{16{d_rdata[16*ls_addr[1]+15]}}, d_rdata[16*ls_addr[1] +: 16]};
              3'b010: wb_val = d_rdata;
              3'b100: wb_val = {24'b0, d_rdata[8*ls_addr[1:0] +: 8]};
              3'b101: wb_val = {16'b0, d_rdata[16*ls_addr[1] +: 16]};
              default: begin wb_en = 1'b0; is_illegal = 1'b1; end
            endcase
          end
        end
        OPC_STORE: begin
          d_addr = ls_addr[MEM_AW+1:2];
          unique case (f3)
            3'b000: begin d_we = 4'b0001 << ls_addr[1:0]; d_wdata = {4{b[7:0]}}; end
            3'b001: begin d_we = 4'b0011 << {ls_addr[1], 1'b0}; d_wdata = {2{b[15:0]}}; end
            3'b010: begin d_we = 4'b1111; d_wdata = b; end
            default: is_illegal = 1'b1;
          endcase
        end
        OPC_OPIMM: begin
          wb_en  = 1'b1;
          wb_val = alu(f3, (f3 == 3'b101) && ins[30], a, imm_i);
        end
        OPC_OP: begin
          wb_en  = 1'b1;
          wb_val = alu(f3, ins[30], a, b);
          if (f7 != 7'b0 && f7 != 7'b0100000) begin wb_en = 1'b0; is_illegal = 1'b1; end
        end
        OPC_HISQ: begin
          unique case (f3)
            F3_WAITI, F3_WAITR, F3_SYNC: begin
              q_valid = 1'b1;
              stall   = !q_ready;
            end
            F3_SEND: begin
              send_valid = 1'b1;
              stall      = !send_ready;
            end
            F3_RECV: begin
              recv_req = 1'b1;
              stall    = !recv_valid;
              wb_en    = recv_valid;
              wb_val   = recv_data;
            end
            default: is_illegal = 1'b1;
          endcase
        end
        OPC_CW: begin
          if (!f3[2]) begin
            q_valid = 1'b1;
            stall   = !q_ready;
          end else is_illegal = 1'b1;
        end
        default: is_illegal = 1'b1;
      endcase
    end
  end

  // Fetch address: re-read the current word while stalled, follow a redirect,
  // otherwise fall through.
  logic [31:0] nf;
  always_comb begin
    if (!e_valid || stall) nf = e_pc;
    else if (redirect)     nf = target;
    else                   nf = e_pc + 32'd4;
  end
  assign i_addr = nf[MEM_AW+1:2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_pc     <= '0;
      e_valid  <= 1'b0;
      ld_phase <= 1'b0;
      illegal  <= 1'b0;
      retired  <= '0;
    end else if (!run) begin
      e_pc     <= '0;
      e_valid  <= 1'b0;
      ld_phase <= 1'b0;
    end else begin
      e_pc     <= nf;
      e_valid  <= 1'b1;
      ld_phase <= e_valid && (opc == OPC_LOAD) && !ld_phase;
      if (e_valid && is_illegal) illegal <= 1'b1;
      if (e_valid && !stall) retired <= retired + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (run && e_valid && !stall && wb_en && rd != 5'd0) rf[rd] <= wb_val;
  end
endmodule
