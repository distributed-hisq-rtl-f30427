// tb_dhisq_system: end-to-end self-checking testbench of the whole system
// (dhisq_system with the default 3 groups x (1 readout + 3 control boards),
// reduced memory and queue depth so that it runs quickly and so that a
// codeword queue can be filled).
//
// Every node gets its own program, loaded through the programming bus; run
// starts all pipelines and trig (20 cycles later) all timers. The programs
// exercise each mechanism of the architecture:
//   node 0 (readout) + node 1 (control): the reference two-board
//       synchronisation experiment, made finite: node 1 runs its
//       loop with waitr 40/80/120 twice, node 0 its loop six times; each
//       sync is a nearby sync over the direct link. The sync aligns the
//       points after "waiti 8" (node 1) and "waiti 6" (node 0), so codeword 1
//       on node 0 port 5 (after a further waiti 57) must appear exactly 57
//       cycles after codeword 1 on node 1 port 7, six times. Node 0 is always early and must be paused; node 1 is always
//       late and must never be paused (zero-overhead synchronisation).
//   nodes 2, 3: message exchange. Node 2 sends V to node 3, node 3 returns
//       V+1, both put the word they hold on port 4 as a register codeword;
//       node 3 stalls on recv meanwhile.
//   nodes 4..7: region-level sync through their leaf router (0x82) after
//       random different waits; all four markers on port 3 must coincide,
//       and the node that arrives last must not be paused.
//   node 10: 60 codewords 20 cycles apart on port 0, faster than they drain,
//       so the queue fills and the pipeline stalls; all 60 must come out with
//       the right values exactly 20 cycles apart.
//   nodes 8, 9: measurement feedback. The bench delivers a random result
//       bit to readout node 8 as a result word; node 8 reads it with recv
//       from its own address (stalling until it comes) and sends it to
//       control node 9, which branches on it and emits codeword 77 (bit 1)
//       or 66 (bit 0) on port 2. Node 8 waits 100 cycles after the
//       forward so that its timeline is ahead of real time again before
//       it books the root sync (the recv stall consumed its slack).
//   all 12 nodes: finally a sync addressed to the root (0x80), then a marker
//       on port 6; all twelve markers must coincide.
//   node 11: after the root marker a long classical loop lets the timer
//       overtake the program; the next codeword is late, must still be
//       emitted and must raise node 11's late flag (and only that flag).
// The bench counts how often each mechanism happened and counts a failure
// for every mechanism that never happened. Error flags of all other nodes and
// of all routers must stay clear.
module tb_dhisq_system;
  import hisq_pkg::*;
  import tb_asm_pkg::*;

  localparam int MEMW    = 1024;
  localparam int QD      = 32;
  localparam int STALL_N = 60;
  localparam int NG = 3, CPG = 3, GS = 4, NN = 12, NCB = 9;
  localparam int LAT_LEAF = 11, LAT_ROOT = 22;

  logic clk = 1'b0, rst_n = 1'b0, run = 1'b0, trig = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  logic                     prog_we = 1'b0;
  logic [7:0]               prog_node = '0;
  logic [$clog2(MEMW)-1:0]  prog_addr = '0;
  logic [31:0]              prog_data = '0;
  logic [27:0]              cb_cw_valid [NCB];
  logic [CW_W-1:0]          cb_cw_data  [NCB][28];
  logic [7:0]               ro_cw_valid [NG];
  logic [CW_W-1:0]          ro_cw_data  [NG][8];
  logic [31:0]              node_pc     [NN];
  logic [3:0]               node_err    [NN];
  logic                     node_pause  [NN];
  logic [ABS_W-1:0]         abs_time;
  logic [NG:0]              router_err;
  logic                     node_res_valid [NN];
  logic [31:0]              node_res_data  [NN];

  dhisq_system #(.MEM_WORDS(MEMW), .QDEPTH(QD)) dut (
    .clk, .rst_n, .run, .trig, .prog_we, .prog_node, .prog_addr, .prog_data,
    .cb_cw_valid, .cb_cw_data, .node_res_valid, .node_res_data, .ro_cw_valid, .ro_cw_data,
    .node_pc, .node_err, .node_pause, .abs_time, .router_err);

  // ---- monitors ------------------------------------------------------------
  typedef struct { int t; int cw; } fire_t;
  fire_t fires [NN][28][$];
  int    cyc = 0;
  int    pause_n [NN];
  int    stall_q10 = 0, stall_recv3 = 0, stall_res8 = 0;
  int    snap_fig13 = -1;        // node 1 pause cycles when its 6th marker fires
  int    snap_leaf [NN];         // pause cycles of a node when its leaf marker fires

  function automatic int cb_of(int n); return (n / GS) * CPG + (n % GS) - 1; endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (run) begin
      for (int n = 0; n < NN; n++) begin
        if (node_pause[n]) pause_n[n]++;
        if (n % GS == 0) begin
          for (int p = 0; p < 8; p++)
            if (ro_cw_valid[n / GS][p]) fires[n][p].push_back('{cyc, int'(ro_cw_data[n / GS][p])});
        end else begin
          for (int p = 0; p < 28; p++)
            if (cb_cw_valid[cb_of(n)][p]) fires[n][p].push_back('{cyc, int'(cb_cw_data[cb_of(n)][p])});
        end
      end
      if (fires[1][7].size() == 6 && snap_fig13 < 0) snap_fig13 = pause_n[1];
      for (int n = 4; n < 8; n++) if (fires[n][3].size() == 1 && snap_leaf[n] < 0) snap_leaf[n] = pause_n[n];
      if (dut.g_node[10].g_cb.u_core.u_pipe.q_valid && !dut.g_node[10].g_cb.u_core.u_pipe.q_ready) stall_q10++;
      if (dut.g_node[8].g_ro.u_core.u_pipe.recv_req && !dut.g_node[8].g_ro.u_core.u_pipe.recv_valid) stall_res8++;
      if (dut.g_node[3].g_cb.u_core.u_pipe.recv_req && !dut.g_node[3].g_cb.u_core.u_pipe.recv_valid) stall_recv3++;
    end
  end

  // ---- programs --------------------------------------------------------------
  logic [31:0] prog [NN][$];
  int W [4:7];
  int V;
  int RESBIT;

  task automatic root_tail(int n);
    prog[n].push_back(sync(8'h80));
    prog[n].push_back(waiti(LAT_ROOT));
    prog[n].push_back(cw_ii(6, 63));
  endtask

  task automatic build();
    // node 0: readout board of the two-board experiment, loop run 6 times
    prog[0] = '{addi(3, 0, 6),
                waiti(2), sync(1), waiti(6), waiti(57), cw_ii(5, 1), addi(3, 3, -1), bne(3, 0, -24)};
    root_tail(0); prog[0].push_back(halt());
    // node 1: control board of the two-board experiment, outer loop run twice
    prog[1] = '{addi(4, 0, 2),
                addi(2, 0, 120), addi(1, 0, 0),
                waiti(1), cw_ii(21, 2), addi(1, 1, 40), cw_ii(20, 2), waitr(1), sync(0),
                waiti(8), cw_ii(7, 1), waiti(50), bne(1, 2, -36),
                addi(4, 4, -1), bne(4, 0, -52)};
    root_tail(1); prog[1].push_back(halt());
    // nodes 2, 3: messages
    prog[2] = '{waiti(10), addi(5, 0, V), addi(10, 0, 3), send(10, 5), recv(6, 3),
                waiti(150), cw_ir(4, 6)};
    root_tail(2); prog[2].push_back(halt());
    prog[3] = '{recv(6, 2), addi(6, 6, 1), addi(10, 0, 2), send(10, 6),
                waiti(150), cw_ir(4, 6)};
    root_tail(3); prog[3].push_back(halt());
    // nodes 4..7: leaf-router region sync
    for (int n = 4; n < 8; n++) begin
      prog[n] = '{waiti(W[n]), sync(8'h82), waiti(LAT_LEAF), cw_ii(3, 42)};
      root_tail(n); prog[n].push_back(halt());
    end
    // nodes 8, 9: measurement result of node 8 steers a codeword of node 9
    prog[8] = '{waiti(30), recv(5, 8), addi(10, 0, 9), send(10, 5), waiti(100)};
    root_tail(8); prog[8].push_back(halt());
    prog[9] = '{waiti(100), recv(6, 8), beq(6, 0, 12), cw_ii(2, 77), jal(0, 8), cw_ii(2, 66)};
    root_tail(9); prog[9].push_back(halt());
    // node 10: fill the codeword queue of port 0
    prog[10] = '{addi(7, 0, STALL_N), waiti(20), cw_ir(0, 7), addi(7, 7, -1), bne(7, 0, -12)};
    root_tail(10); prog[10].push_back(halt());
    // node 11: root sync, then a late codeword
    prog[11] = '{waiti(20)};
    root_tail(11);
    prog[11].push_back(addi(7, 0, 1500));
    prog[11].push_back(slli(7, 7, 1));
    prog[11].push_back(addi(7, 7, -1));
    prog[11].push_back(bne(7, 0, -4));
    prog[11].push_back(waiti(1));
    prog[11].push_back(cw_ii(1, 5));
    prog[11].push_back(halt());
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("WATCHDOG");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- stimulus and checks ---------------------------------------------------
  int n_nearby = 0, n_pause = 0, n_zero_ovh = 0, n_msg = 0, n_recv_stall = 0;
  int n_feedback = 0;
  int n_leaf = 0, n_root = 0, n_qstall = 0, n_late = 0, n_cw = 0;

  initial begin
    for (int n = 0; n < NN; n++) begin pause_n[n] = 0; snap_leaf[n] = -1; end
    V = $urandom_range(1, 2000);
    RESBIT = $urandom_range(0, 1);
    for (int n = 0; n < NN; n++) begin node_res_valid[n] = 1'b0; node_res_data[n] = '0; end
    for (int n = 4; n < 8; n++) W[n] = $urandom_range(5, 80);
    W[4 + $urandom_range(0, 3)] = 90;   // a unique last arrival
    build();

    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < NN; n++)
      for (int i = 0; i < prog[n].size(); i++) begin
        prog_we = 1'b1; prog_node = 8'(n); prog_addr = ($clog2(MEMW))'(i); prog_data = prog[n][i];
        @(posedge clk); #1;
      end
    prog_we = 1'b0;
    @(posedge clk); #1 run = 1'b1;
    repeat (20) @(posedge clk);
    #1 trig = 1'b1;
    @(posedge clk); #1 trig = 1'b0;
    repeat (60) @(posedge clk);
    #1 node_res_valid[8] = 1'b1; node_res_data[8] = 32'(RESBIT);
    @(posedge clk); #1 node_res_valid[8] = 1'b0;

    // wait until every node has halted (pc at its last instruction)
    fork
      begin
        bit done;
        do begin
          @(posedge clk);
          done = 1'b1;
          for (int n = 0; n < NN; n++)
            if (node_pc[n] != 32'((prog[n].size() - 1) * 4)) done = 1'b0;
        end while (!done);
      end
      begin repeat (150000) @(posedge clk); end
    join_any
    disable fork;
    repeat (200) @(posedge clk);
    #1;

    // two-board experiment: nearby sync between readout node 0 and control node 1
    check(fires[0][5].size() == 6 && fires[1][7].size() == 6,
          $sformatf("two-board marker counts %0d %0d", fires[0][5].size(), fires[1][7].size()));
    for (int i = 0; i < 6 && i < fires[0][5].size() && i < fires[1][7].size(); i++) begin
      check(fires[0][5][i].t == fires[1][7][i].t + 57, $sformatf("two-board sync %0d: RO %0d CB %0d", i, fires[0][5][i].t, fires[1][7][i].t));
      if (fires[0][5][i].t == fires[1][7][i].t + 57) n_nearby++;
    end
    check(fires[1][21].size() == 6 && fires[1][20].size() == 6, "two-board drive pulses");
    for (int i = 1; i < 6 && i < fires[1][20].size(); i++)
      check(fires[1][20][i].t == fires[1][7][i - 1].t + 51, $sformatf("two-board loop timing %0d", i));

    // messages
    check(fires[2][4].size() == 1 && fires[2][4][0].cw == V + 1, "message returned to node 2");
    check(fires[3][4].size() == 1 && fires[3][4][0].cw == V + 1, "message received by node 3");
    if (fires[2][4].size() == 1 && fires[2][4][0].cw == V + 1) n_msg++;
    if (fires[3][4].size() == 1 && fires[3][4][0].cw == V + 1) n_msg++;
    n_recv_stall = stall_recv3;

    // measurement feedback from node 8 to node 9
    check(fires[9][2].size() == 1 && fires[9][2][0].cw == (RESBIT ? 77 : 66),
          $sformatf("feedback codeword for result %0d: %0d fired", RESBIT, fires[9][2].size()));
    if (fires[9][2].size() == 1 && fires[9][2][0].cw == (RESBIT ? 77 : 66)) n_feedback++;
    check(stall_res8 > 0, "node 8 waited for its result");

    // leaf region sync
    begin
      int last, t0;
      bit ok;
      ok = 1'b1; last = 4;
      for (int n = 4; n < 8; n++) begin
        if (fires[n][3].size() != 1 || fires[n][3][0].cw != 42) ok = 1'b0;
        if (W[n] > W[last]) last = n;
      end
      check(ok, "leaf markers present");
      if (ok) begin
        t0 = fires[4][3][0].t;
        for (int n = 5; n < 8; n++) if (fires[n][3][0].t != t0) ok = 1'b0;
        check(ok, $sformatf("leaf markers aligned %0d %0d %0d %0d", fires[4][3][0].t, fires[5][3][0].t, fires[6][3][0].t, fires[7][3][0].t));
        if (ok) n_leaf++;
        // the last arrival is never paused; every earlier one is
        check(snap_leaf[last] == 0, $sformatf("leaf: last arrival node %0d paused %0d", last, snap_leaf[last]));
        if (snap_leaf[last] == 0) n_zero_ovh++;
        for (int n = 4; n < 8; n++)
          if (n != last) check(snap_leaf[n] > 0, $sformatf("leaf: early node %0d not paused", n));
      end
    end

    // queue-full stall on node 10
    check(fires[10][0].size() == STALL_N, $sformatf("node 10 codewords %0d", fires[10][0].size()));
    for (int i = 0; i < STALL_N && i < fires[10][0].size(); i++) begin
      check(fires[10][0][i].cw == STALL_N - i, $sformatf("node 10 codeword %0d value %0d", i, fires[10][0][i].cw));
      if (i > 0) check(fires[10][0][i].t == fires[10][0][i - 1].t + 20, $sformatf("node 10 spacing %0d", i));
    end
    n_qstall = stall_q10;

    // root sync
    begin
      bit ok;
      ok = 1'b1;
      for (int n = 0; n < NN; n++)
        if (fires[n][6].size() != 1 || fires[n][6][0].cw != 63 || fires[n][6][0].t != fires[0][6][0].t) ok = 1'b0;
      check(ok, "root markers present and aligned");
      if (ok) n_root++;
      if (ok) check(fires[0][6][0].t > fires[1][7][5].t && fires[0][6][0].t > fires[10][0][STALL_N - 1].t,
                    "root marker after all other work");
    end

    // late event on node 11
    check(fires[11][1].size() == 1 && fires[11][1][0].cw == 5, "late codeword still emitted");
    if (fires[11][1].size() == 1 && node_err[11] == 4'b0010) n_late++;
    check(node_err[11] == 4'b0010, $sformatf("node 11 error flags %b", node_err[11]));
    for (int n = 0; n < 11; n++) check(node_err[n] == 4'b0000, $sformatf("node %0d error flags %b", n, node_err[n]));
    check(router_err == '0, $sformatf("router errors %b", router_err));

    // pause and zero-overhead accounting for the two-board pair
    if (pause_n[0] > 0) n_pause++;
    check(pause_n[0] > 0, "two-board: early readout board paused");
    check(snap_fig13 == 0, $sformatf("two-board: late control board paused %0d cycles", snap_fig13));
    if (snap_fig13 == 0) n_zero_ovh += 6;

    for (int n = 0; n < NN; n++) for (int p = 0; p < 28; p++) n_cw += fires[n][p].size();

    $display("mechanisms: nearby_sync_aligned=%0d pause_cycles_node0=%0d pause_cycles_node1=%0d messages=%0d recv_stall_cycles=%0d",
             n_nearby, pause_n[0], pause_n[1], n_msg, n_recv_stall);
    $display("mechanisms: zero_overhead_syncs=%0d feedback=%0d result_wait_cycles=%0d", n_zero_ovh, n_feedback, stall_res8);
    $display("mechanisms: leaf_region_sync=%0d root_region_sync=%0d queue_full_stall_cycles=%0d late_events=%0d codewords=%0d",
             n_leaf, n_root, n_qstall, n_late, n_cw);
    check(n_nearby == 6,     "mechanism: nearby sync");
    check(n_pause > 0,       "mechanism: timer pause");
    check(n_zero_ovh == 7,   "mechanism: zero-overhead sync");
    check(n_feedback == 1,   "mechanism: measurement feedback");
    check(n_msg == 2,        "mechanism: messages");
    check(n_recv_stall > 0,  "mechanism: recv stall");
    check(n_leaf == 1,       "mechanism: leaf-router region sync");
    check(n_root == 1,       "mechanism: root-router region sync");
    check(n_qstall > 0,      "mechanism: queue-full stall");
    check(n_late == 1,       "mechanism: late event");
    check(n_cw > 0,          "mechanism: codewords");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
