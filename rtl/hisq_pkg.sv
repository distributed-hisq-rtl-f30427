// hisq_pkg: types and constants shared by every block of the distributed HISQ
// controller.
//
// HISQ extends RV32I with timing, codeword, synchronisation and messaging
// instructions. The architecture names the instructions (waiti, waitr,
// cw.x.x, sync, send, recv) and their operands but not their binary form; the
// encodings below are this design's own. They occupy the two RISC-V
// "custom" major opcodes so that ordinary RV32I code is unaffected:
//
//   custom-0 (0001011), I-type layout, funct3 selects:
//     000 waiti imm      timestamp += imm[31:20] (unsigned)
//     001 waitr rs1      timestamp += rs1
//     010 sync  imm      book a synchronisation with target imm[31:20]
//     011 send  rs1,rs2  send rs2 to the neighbour whose address is rs1
//     100 recv  rd,imm   rd <= next message from neighbour address imm[31:20]
//   custom-1 (0101011), funct3 = {0, port_is_reg, cw_is_reg}:
//     cw.i.i port=[11:7], codeword=[31:15]
//     cw.i.r port=[11:7], codeword=rs1
//     cw.r.i port=rs1,    codeword=[31:20]
//     cw.r.r port=rs1,    codeword=rs2
//
// An event queue entry is 38 bits wide, the width quoted for the event queue
// of the reference implementation; it is split here into a 24-bit timestamp
// and a 14-bit codeword (the split is this design's choice).
//
// Sync targets and node addresses are ADDR_W bits. Addresses with the top bit
// set denote routers, the others controllers.
package hisq_pkg;

  localparam int XLEN   = 32;
  localparam int TS_W   = 24;           // TCU timestamp / timer width
  localparam int CW_W   = 14;           // codeword width
  localparam int EVT_W  = TS_W + CW_W;  // 38-bit event queue entry
  localparam int PORT_W = 5;            // up to 32 codeword ports
  localparam int ADDR_W = 8;            // controller / router address
  localparam int ABS_W  = 32;           // absolute (global) time width
  localparam int LAT_W  = 8;            // configured sync latency width

  localparam logic [6:0] OPC_HISQ   = 7'b0001011;  // custom-0
  localparam logic [6:0] OPC_CW     = 7'b0101011;  // custom-1
  localparam logic [6:0] OPC_LUI    = 7'b0110111;
  localparam logic [6:0] OPC_AUIPC  = 7'b0010111;
  localparam logic [6:0] OPC_JAL    = 7'b1101111;
  localparam logic [6:0] OPC_JALR   = 7'b1100111;
  localparam logic [6:0] OPC_BRANCH = 7'b1100011;
  localparam logic [6:0] OPC_LOAD   = 7'b0000011;
  localparam logic [6:0] OPC_STORE  = 7'b0100011;
  localparam logic [6:0] OPC_OPIMM  = 7'b0010011;
  localparam logic [6:0] OPC_OP     = 7'b0110011;

  localparam logic [2:0] F3_WAITI = 3'b000;
  localparam logic [2:0] F3_WAITR = 3'b001;
  localparam logic [2:0] F3_SYNC  = 3'b010;
  localparam logic [2:0] F3_SEND  = 3'b011;
  localparam logic [2:0] F3_RECV  = 3'b100;

  typedef struct packed {
    logic [TS_W-1:0] ts;
    logic [CW_W-1:0] cw;
  } event_t;

  typedef enum logic [1:0] {
    TCMD_WAIT = 2'd0,
    TCMD_CW   = 2'd1,
    TCMD_SYNC = 2'd2
  } tcu_op_e;

  // Command from the quantum instruction decoder to the TCU.
  typedef struct packed {
    tcu_op_e           op;
    logic [XLEN-1:0]   amount;  // TCMD_WAIT: cycles to add to the timestamp
    logic [PORT_W-1:0] port;    // TCMD_CW
    logic [CW_W-1:0]   cw;      // TCMD_CW
    logic [ADDR_W-1:0] tgt;     // TCMD_SYNC
  } tcu_cmd_t;

  // Region-level synchronisation message: a time-point addressed to a router.
  typedef struct packed {
    logic [ADDR_W-1:0] dest;
    logic [ABS_W-1:0]  tp;
  } sync_msg_t;

  function automatic logic is_router_addr(logic [ADDR_W-1:0] a);
    return a[ADDR_W-1];
  endfunction

  // Wrap-safe "a is later than b" for free-running absolute time.
  function automatic logic abs_later(logic [ABS_W-1:0] a, logic [ABS_W-1:0] b);
    logic [ABS_W-1:0] d;
    d = a - b;
    return (d != '0) && !d[ABS_W-1];
  endfunction

  // Wrap-safe "timestamp ts is due (reached or passed) at timer t".
  function automatic logic ts_due(logic [TS_W-1:0] ts, logic [TS_W-1:0] t);
    logic [TS_W-1:0] d;
    d = ts - t;
    return (d == '0) || d[TS_W-1];
  endfunction

endpackage
