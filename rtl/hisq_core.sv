// hisq_core: one HISQ controller node.
//
// A controller sends codewords to ports at precise time-points. It consists
// of the memory, the classical RV32I pipeline, the quantum instruction
// decoder, the timing control unit (TCU) with one codeword queue per port and
// a sync queue, the synchronisation unit (SyncU) and the message unit (MsgU):
//
//   hisq_mem --instr--> hisq_pipeline --q instr--> hisq_qdecoder --cmd--> tcu
//                            |  ^                                          | ^
//                       send/recv                           sync event    | | pause
//                            v  |                                          v |
//                           msgu <--> neighbour data links      syncu <--> sync links,
//                                                                         parent router
//
// The same core serves both board types of the reference system; only the
// number of codeword ports differs (28 on a control board: 8 XY and 20 Z
// channels; 8 on a readout board). What a codeword means is decided by the
// analog part behind each port, not by the core.
//
// Interface: while run is low the pipeline is held at address 0 and the
// program can be written word by word through prog_we/prog_addr/prog_data
// (this loading path is this design's choice). run starts the pipeline; trig,
// the global trigger shared by all nodes, starts the TCU timer and the
// absolute timer. A program should begin with enough waiting that the
// pipeline stays ahead of the timer (the time between run and trig helps).
// cw_valid[p] pulses in the cycle the codeword cw_data[p] is due on port p.
// Results coming back from the analog part (res_valid/res_data, one word per
// pulse) are queued in the message unit and read by the program with
// recv rd, <my_id>; the architecture shows this results path, the way it is
// read is this design's choice. my_id is the node's own address.
module hisq_core
  import hisq_pkg::*;
#(
  parameter int NUM_PORTS   = 28,
  parameter int NB          = 4,
  parameter int NA          = 2,
  parameter int MEM_WORDS   = 32768,
  parameter int QDEPTH      = 1024,
  parameter int SYNC_QDEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       run,
  input  logic                       trig,
  // program loading (while run is low)
  input  logic                       prog_we,
  input  logic [$clog2(MEM_WORDS)-1:0] prog_addr,
  input  logic [31:0]                prog_data,
  // configuration
  input  logic [ADDR_W-1:0]          my_id,
  input  logic [ADDR_W-1:0]          nb_id   [NB],
  input  logic [LAT_W-1:0]           nb_lat  [NB],
  input  logic [ADDR_W-1:0]          anc_id  [NA],
  input  logic [LAT_W-1:0]           anc_lat [NA],
  // nearby sync links
  output logic [NB-1:0]              sync_out,
  input  logic [NB-1:0]              sync_in,
  // message links
  output logic [NB-1:0]              msg_tx_valid,
  output logic [XLEN-1:0]            msg_tx_data,
  input  logic [NB-1:0]              msg_rx_valid,
  input  logic [XLEN-1:0]            msg_rx_data [NB],
  // parent router
  output logic                       up_valid,
  output sync_msg_t                  up_msg,
  input  logic                       down_valid,
  input  sync_msg_t                  down_msg,
  // codeword triggers to the analog part
  output logic [NUM_PORTS-1:0]       cw_valid,
  output logic [CW_W-1:0]            cw_data [NUM_PORTS],
  // results from the analog part (read by recv rd, my_id)
  input  logic                       res_valid,
  input  logic [XLEN-1:0]            res_data,
  // status
  output logic [31:0]                pc,
  output logic [TS_W-1:0]            timer,
  output logic [ABS_W-1:0]           abs_time,
  output logic                       pause,
  output logic [3:0]                 errors    // {msgu, syncu, tcu late|bad port, illegal}
);
  localparam int AW = $clog2(MEM_WORDS);

  logic [AW-1:0] i_addr, d_addr, b_addr;
  logic [31:0]   i_rdata, d_rdata, d_wdata, b_wdata;
  logic [3:0]    d_we, b_we;

  logic            q_valid, q_ready, is_tcu;
  logic [31:0]     q_instr;
  logic [XLEN-1:0] q_rs1, q_rs2;
  tcu_cmd_t        cmd;

  logic              send_valid, send_ready, recv_req, recv_valid;
  logic [ADDR_W-1:0] send_dst, recv_src;
  logic [XLEN-1:0]   send_data, recv_data;

  logic              sync_evt;
  logic [ADDR_W-1:0] sync_tgt;
  logic              illegal, late, bad_port, s_err, m_err;

  assign b_addr  = run ? d_addr  : prog_addr;
  assign b_we    = run ? d_we    : {4{prog_we}};
  assign b_wdata = run ? d_wdata : prog_data;

  hisq_mem #(.WORDS(MEM_WORDS)) u_mem (
    .clk, .a_addr(i_addr), .a_rdata(i_rdata),
    .b_addr, .b_we, .b_wdata, .b_rdata(d_rdata));

  hisq_pipeline #(.MEM_AW(AW)) u_pipe (
    .clk, .rst_n, .run,
    .i_addr, .i_rdata, .d_addr, .d_we, .d_wdata, .d_rdata,
    .q_valid, .q_instr, .q_rs1, .q_rs2, .q_ready,
    .send_valid, .send_dst, .send_data, .send_ready,
    .recv_req, .recv_src, .recv_valid, .recv_data,
    .pc, .illegal, .retired());

  hisq_qdecoder u_qdec (
    .instr(q_instr), .rs1_val(q_rs1), .rs2_val(q_rs2), .is_tcu, .cmd);

  logic tcu_ready;
  assign q_ready = tcu_ready || !is_tcu;

  tcu #(.NUM_PORTS(NUM_PORTS), .QDEPTH(QDEPTH), .SYNC_QDEPTH(SYNC_QDEPTH)) u_tcu (
    .clk, .rst_n, .trig, .pause,
    .cmd_valid(q_valid && is_tcu), .cmd, .cmd_ready(tcu_ready),
    .cw_valid, .cw_data, .sync_evt, .sync_tgt,
    .timer, .running(), .late, .bad_port);

  syncu #(.NB(NB), .NA(NA)) u_sync (
    .clk, .rst_n, .trig,
    .nb_id, .nb_lat, .anc_id, .anc_lat,
    .evt_valid(sync_evt), .evt_tgt(sync_tgt), .pause,
    .sync_out, .sync_in,
    .up_valid, .up_msg, .down_valid, .down_msg,
    .abs_time, .abs_run(), .flags(), .busy(), .err(s_err));

  msgu #(.NB(NB)) u_msg (
    .clk, .rst_n, .nb_id, .my_id, .res_valid, .res_data,
    .send_valid, .send_dst, .send_data, .send_ready,
    .recv_req, .recv_src, .recv_valid, .recv_data,
    .tx_valid(msg_tx_valid), .tx_data(msg_tx_data),
    .rx_valid(msg_rx_valid), .rx_data(msg_rx_data), .err(m_err));

  assign errors = {m_err, s_err, late | bad_port, illegal};
endmodule
