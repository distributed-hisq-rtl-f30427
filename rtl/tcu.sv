// tcu: timing control unit, queue-based timing control with a pausable timer.
//
// Quantum operations are scheduled, not executed, by the pipeline: the timing
// manager keeps a running timestamp that each wait instruction advances; a
// codeword instruction pushes {timestamp, codeword} into the event queue of
// its port and a sync instruction pushes {timestamp, target} into the sync
// queue. A free-running timer, started by the global trigger, is compared with
// the head of every queue; a head whose timestamp the timer has reached is
// issued in that cycle (codeword trigger on its port, or a sync event to the
// synchronisation unit). In this way instructions are enqueued at imprecise
// times and issued at precise ones.
//
// The HISQ addition is the pause input from the synchronisation unit. While
// pause is high the timer holds its value and nothing is issued, so all events
// after a synchronisation point keep their exact spacing relative to it and
// are merely shifted by the length of the pause.
//
// Interface: cmd_valid/cmd_ready/cmd accept one command per cycle; waits are
// always accepted, codewords and syncs when their queue has room. Timing: a
// command accepted in cycle c can be issued from cycle c+2 on. An event whose
// timestamp is already past when it reaches the queue head is issued at once
// and sets the sticky late flag; a codeword for a port that does not exist is
// dropped and sets bad_port. The queue and timer structure follows the
// architecture; the flags and the 24-bit wrap-around timestamp are this
// design's choices.
module tcu
  import hisq_pkg::*;
#(
  parameter int NUM_PORTS   = 28,
  parameter int QDEPTH      = 1024,
  parameter int SYNC_QDEPTH = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 trig,        // global start trigger
  input  logic                 pause,       // from the synchronisation unit
  input  logic                 cmd_valid,
  input  tcu_cmd_t             cmd,
  output logic                 cmd_ready,
  output logic [NUM_PORTS-1:0] cw_valid,
  output logic [CW_W-1:0]      cw_data [NUM_PORTS],
  output logic                 sync_evt,
  output logic [ADDR_W-1:0]    sync_tgt,
  output logic [TS_W-1:0]      timer,
  output logic                 running,
  output logic                 late,
  output logic                 bad_port
);
  localparam int SW = TS_W + ADDR_W;

  logic [TS_W-1:0] tstamp;           // timing manager: timestamp of the next event
  logic            advance;

  event_t          head   [NUM_PORTS];
  logic [EVT_W-1:0] head_raw [NUM_PORTS];
  logic [NUM_PORTS-1:0] hv, qfull, push, fire;
  logic [SW-1:0]   s_head;
  logic            s_hv, s_full, s_push;
  logic            port_ok;

  assign advance = running && !pause;
  assign port_ok = (int'(cmd.port) < NUM_PORTS);

  always_comb begin
    cmd_ready = 1'b1;
    if (cmd.op == TCMD_CW && port_ok)  cmd_ready = !qfull[cmd.port];
    if (cmd.op == TCMD_SYNC)           cmd_ready = !s_full;
  end

  assign s_push = cmd_valid && cmd_ready && (cmd.op == TCMD_SYNC);

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_port
    assign push[p] = cmd_valid && cmd_ready && (cmd.op == TCMD_CW) && (int'(cmd.port) == p);
    event_queue #(.W(EVT_W), .DEPTH(QDEPTH)) u_q (
      .clk, .rst_n,
      .push(push[p]), .din({tstamp, cmd.cw}),
      .pop(fire[p]),
      .head(head_raw[p]), .head_valid(hv[p]), .full(qfull[p]), .count());
    assign head[p]     = event_t'(head_raw[p]);
    assign fire[p]     = advance && hv[p] && ts_due(head[p].ts, timer);
    assign cw_valid[p] = fire[p];
    assign cw_data[p]  = head[p].cw;
  end

  event_queue #(.W(SW), .DEPTH(SYNC_QDEPTH)) u_syncq (
    .clk, .rst_n,
    .push(s_push), .din({tstamp, cmd.tgt}),
    .pop(sync_evt),
    .head(s_head), .head_valid(s_hv), .full(s_full), .count());

  assign sync_evt = advance && s_hv && ts_due(s_head[SW-1 -: TS_W], timer);
  assign sync_tgt = s_head[ADDR_W-1:0];

  logic any_late;
  always_comb begin
    any_late = sync_evt && (s_head[SW-1 -: TS_W] != timer);
    for (int p = 0; p < NUM_PORTS; p++)
      if (fire[p] && head[p].ts != timer) any_late = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tstamp   <= '0;
      timer    <= '0;
      running  <= 1'b0;
      late     <= 1'b0;
      bad_port <= 1'b0;
    end else begin
      if (trig) running <= 1'b1;
      if (advance) timer <= timer + 1'b1;
      if (cmd_valid && cmd.op == TCMD_WAIT) tstamp <= tstamp + TS_W'(cmd.amount);
      if (cmd_valid && cmd.op == TCMD_CW && !port_ok) bad_port <= 1'b1;
      if (any_late) late <= 1'b1;
    end
  end
endmodule
