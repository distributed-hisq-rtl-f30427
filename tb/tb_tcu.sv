// tb_tcu: schedules codeword and sync events through TCU commands, starts the
// timer with the trigger and checks that every event is issued on its port
// in exactly the cycle its timestamp says, counted from the trigger. A
// pause of PAUSE cycles is then applied and the later events must be shifted
// by exactly that much while the timer holds. Also checks back-pressure from
// a full queue, issue order within a port, the late flag for an event whose
// time has passed and the bad_port flag.
module tb_tcu;
  import hisq_pkg::*;
  localparam int NP = 4, QD = 16, PAUSE = 5, PAUSE_AT = 13;
  logic clk = 0, rst_n = 0, trig = 0, pause = 0;
  logic cmd_valid = 0, cmd_ready;
  tcu_cmd_t cmd;
  logic [NP-1:0] cw_valid;
  logic [CW_W-1:0] cw_data [NP];
  logic sync_evt;
  logic [ADDR_W-1:0] sync_tgt;
  logic [TS_W-1:0] timer;
  logic running, late, bad_port;
  int checks = 0, failures = 0;
  int cyc;   // cycles since the timer started running

  typedef struct { int cyc; int port; int cw; } exp_t;
  exp_t expq [$];

  tcu #(.NUM_PORTS(NP), .QDEPTH(QD), .SYNC_QDEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  task automatic issue(tcu_op_e op, int amount, int port, int cw);
    @(negedge clk);
    cmd = '0; cmd.op = op; cmd.amount = 32'(amount); cmd.port = 5'(port);
    cmd.cw = 14'(cw); cmd.tgt = 8'(cw);
    cmd_valid = 1;
    @(posedge clk); #1;
    cmd_valid = 0;
  endtask

  // expected wall-clock issue cycle of timestamp ts given the pause
  function automatic int when(int ts);
    return (ts >= PAUSE_AT) ? ts + PAUSE : ts;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor: every issued event must be the next expected one for its cycle
  always @(negedge clk) if (rst_n && running) begin
    for (int p = 0; p < NP; p++) if (cw_valid[p]) begin
      int idx; idx = -1;
      foreach (expq[i]) if (idx < 0 && expq[i].port == p) idx = i;
      check(idx >= 0, "unexpected codeword");
      if (idx >= 0) begin
        check(expq[idx].cyc == cyc || expq[idx].cyc < 0, $sformatf("port %0d issue cycle (exp %0d)", p, expq[idx].cyc));
        check(expq[idx].cw == int'(cw_data[p]), "codeword value");
        expq.delete(idx);
      end
    end
    if (sync_evt) begin
      int idx; idx = -1;
      foreach (expq[i]) if (idx < 0 && expq[i].port == 99) idx = i;
      check(idx >= 0 && expq[idx].cyc == cyc && expq[idx].cw == int'(sync_tgt), "sync event cycle/target");
      if (idx >= 0) expq.delete(idx);
    end
  end

  always @(posedge clk) begin
    if (running) cyc <= cyc + 1;
    pause <= running && (cyc + 1 >= PAUSE_AT) && (cyc + 1 < PAUSE_AT + PAUSE);
  end

  initial begin
    cmd = '0; cyc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    issue(TCMD_WAIT, 10, 0, 0);
    issue(TCMD_CW, 0, 0, 1);     expq.push_back('{when(10), 0, 1});
    issue(TCMD_WAIT, 1, 0, 0);
    issue(TCMD_CW, 0, 1, 2);     expq.push_back('{when(11), 1, 2});
    issue(TCMD_CW, 0, 0, 3);     expq.push_back('{when(11), 0, 3});
    issue(TCMD_WAIT, 5, 0, 0);
    issue(TCMD_CW, 0, 9, 5);     // port 9 does not exist
    issue(TCMD_SYNC, 0, 0, 7);   expq.push_back('{when(16), 99, 7});
    issue(TCMD_WAIT, 3, 0, 0);
    issue(TCMD_CW, 0, 2, 4);     expq.push_back('{when(19), 2, 4});
    // fill port 3 back to back, one per cycle from ts 20
    for (int i = 0; i < QD; i++) begin
      issue(TCMD_WAIT, 1, 0, 0);
      issue(TCMD_CW, 0, 3, 100 + i); expq.push_back('{when(20 + i), 3, 100 + i});
    end
    @(negedge clk);
    cmd = '0; cmd.op = TCMD_CW; cmd.port = 5'd3; cmd_valid = 0;
    #1 check(!cmd_ready, "cmd_ready low when port queue full");
    cmd.op = TCMD_WAIT; #1 check(cmd_ready, "wait accepted when a queue is full");
    check(bad_port, "bad_port flagged");
    check(!running && timer == 0, "timer idle before trigger");
    // start
    @(negedge clk); trig = 1; @(negedge clk); trig = 0;
    // timer must hold during the pause
    wait (cyc == PAUSE_AT + 1);
    @(negedge clk); check(timer == TS_W'(PAUSE_AT), "timer holds while paused");
    wait (cyc == 60);
    @(negedge clk);
    check(expq.size() == 0, "all events issued");
    check(!late, "no late event so far");
    check(timer == TS_W'(60 - PAUSE), "timer value after pause");
    // an event whose time (35) has passed goes out at once and flags late
    issue(TCMD_CW, 0, 1, 9);     expq.push_back('{-1, 1, 9});
    repeat (3) @(negedge clk);
    check(expq.size() == 0 && late, "late event issued and flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
