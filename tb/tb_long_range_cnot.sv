// tb_long_range_cnot: the long-range CNOT dynamic circuit run as HISQ
// programs on group 0 of dhisq_system (one readout board, three chained
// control boards).
//
// The circuit makes a CNOT between two distant qubits psi1 and psi2 through a
// chain of five ancillas A1..A5 in constant depth: CNOT/H layers entangle the
// chain, the ancillas are measured, and the parity A2^A4 decides an X on
// psi2 while A1^A3^A5 decides a Z on psi1. The qubits are spread over three
// boards, so two of the CNOTs cross a board boundary and the two corrections
// depend on results that only the readout board has:
//   node 1 (control): psi1 port 0, A1 port 1, A2 port 2
//   node 2 (control): A3 port 0,   A4 port 1
//   node 3 (control): A5 port 0,   psi2 port 1
//   node 0 (readout): measurement of A1..A5 on ports 0..4
// Codewords stand for gates: 1 H, 2 CNOT control, 3 CNOT target, 4 X, 5 Z,
// 6 measure. At 4 ns per cycle, one-qubit gates take 5 cycles, two-qubit
// gates 10 and measurement 75 (20 ns, 40 ns and 300 ns).
//
// Schedule, relative to the common point t0 after the region sync:
//   0  CNOT psi1->A1, H A2, H A4      10 CNOT A2->A3, CNOT A4->A5 (both cross)
//   20 CNOT A1->A2, A3->A4, A5->psi2   30 H A1, A3, A5; measure A2, A4
//   35 measure A1, A3, A5              FB X psi2 if A2^A4, Z psi1 if A1^A3^A5
// with FB = 35 + 75 + FB_BUDGET. Every board waits a random time before it
// reaches `sync` with the leaf router, which aligns the four timelines. The
// bench plays the discriminator. 75 cycles after the last measurement
// codeword it hands the readout board a 5-bit result word (bit i = A(i+1)).
// The readout program reads it with recv from its own address, computes both
// parities and sends them to nodes 3 and 1. Those nodes wait on recv and
// branch. Because the corrections are booked at FB, they fire at a fixed
// cycle as long as the messages arrive within the budget.
//
// Checks per trial: every gate and measurement codeword appears once, at
// its scheduled offset from t0 on every board (so cross-board CNOTs are
// cycle-aligned); the corrections appear exactly when the parity is 1, at FB;
// no board raises an error flag (none is late); the messages arrive before
// FB. Mechanisms counted: pauses taken by the region sync, result waits,
// corrections of each kind applied and skipped.
module tb_long_range_cnot;
  import hisq_pkg::*;
  import tb_asm_pkg::*;

  localparam int MEMW = 1024, QD = 32;
  localparam int NN = 12, NCB = 9, NG = 3;
  localparam int LAT_LEAF  = 11;
  localparam int T_MEAS    = 75;
  localparam int FB_BUDGET = 60;
  localparam int FB        = 35 + T_MEAS + FB_BUDGET;
  localparam int TRIALS    = 12;

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

  // ---- monitors (nodes 0..3 only) ------------------------------------------
  typedef struct { int t; int cw; } fire_t;
  fire_t fires [4][8][$];
  int    cyc = 0;
  int    pause_n [4];
  int    msg_t [4];          // cycle the parity message became available at node 1 / 3
  int    res_wait = 0;       // cycles node 0 waited in recv for its result

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (run) begin
      for (int p = 0; p < 8; p++) begin
        if (ro_cw_valid[0][p]) fires[0][p].push_back('{cyc, int'(ro_cw_data[0][p])});
        for (int n = 1; n < 4; n++)
          if (cb_cw_valid[n - 1][p]) fires[n][p].push_back('{cyc, int'(cb_cw_data[n - 1][p])});
      end
      for (int n = 0; n < 4; n++) if (node_pause[n]) pause_n[n]++;
      if (dut.g_node[0].g_ro.u_core.u_pipe.recv_req && !dut.g_node[0].g_ro.u_core.u_pipe.recv_valid) res_wait++;
      if (msg_t[1] < 0 && dut.g_node[1].g_cb.u_core.u_pipe.recv_req && dut.g_node[1].g_cb.u_core.u_pipe.recv_valid) msg_t[1] = cyc;
      if (msg_t[3] < 0 && dut.g_node[3].g_cb.u_core.u_pipe.recv_req && dut.g_node[3].g_cb.u_core.u_pipe.recv_valid) msg_t[3] = cyc;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("WATCHDOG");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- programs --------------------------------------------------------------
  logic [31:0] prog [NN][$];

  task automatic build(int w [4]);
    for (int n = 4; n < NN; n++) prog[n] = '{halt()};
    // readout board: measurements, then the two parities
    prog[0] = '{waiti(w[0]), sync(8'h81), waiti(LAT_LEAF),
                waiti(30), cw_ii(1, 6), cw_ii(3, 6), waiti(5), cw_ii(0, 6), cw_ii(2, 6), cw_ii(4, 6),
                recv(5, 0),
                srai(7, 5, 1), srai(8, 5, 3), xor_(9, 7, 8), andi(9, 9, 1),           // A2 ^ A4
                srai(7, 5, 2), srai(8, 5, 4), xor_(6, 5, 7), xor_(6, 6, 8), andi(6, 6, 1), // A1 ^ A3 ^ A5
                addi(10, 0, 3), send(10, 9), addi(10, 0, 1), send(10, 6),
                halt()};
    // node 1: psi1, A1, A2; Z correction on psi1
    prog[1] = '{waiti(w[1]), sync(8'h81), waiti(LAT_LEAF),
                cw_ii(0, 2), cw_ii(1, 3), cw_ii(2, 1), waiti(10),
                cw_ii(2, 2), waiti(10),
                cw_ii(1, 2), cw_ii(2, 3), waiti(10),
                cw_ii(1, 1), waiti(FB - 30),
                recv(6, 0), beq(6, 0, 8), cw_ii(0, 5),
                halt()};
    // node 2: A3, A4
    prog[2] = '{waiti(w[2]), sync(8'h81), waiti(LAT_LEAF),
                cw_ii(1, 1), waiti(10),
                cw_ii(0, 3), cw_ii(1, 2), waiti(10),
                cw_ii(0, 2), cw_ii(1, 3), waiti(10),
                cw_ii(0, 1),
                halt()};
    // node 3: A5, psi2; X correction on psi2
    prog[3] = '{waiti(w[3]), sync(8'h81), waiti(LAT_LEAF),
                waiti(10),
                cw_ii(0, 3), waiti(10),
                cw_ii(0, 2), cw_ii(1, 3), waiti(10),
                cw_ii(0, 1), waiti(FB - 30),
                recv(6, 0), beq(6, 0, 8), cw_ii(1, 4),
                halt()};
  endtask

  // expected codeword stream of one (node, port): offsets from t0 and values
  typedef struct { int node; int port; int rel; int cw; } ev_t;
  ev_t exp_ev [$];

  task automatic expect_all(bit px, bit pz);
    exp_ev = '{'{1, 0, 0, 2}, '{1, 1, 0, 3}, '{1, 2, 0, 1}, '{2, 1, 0, 1},
               '{1, 2, 10, 2}, '{2, 0, 10, 3}, '{2, 1, 10, 2}, '{3, 0, 10, 3},
               '{1, 1, 20, 2}, '{1, 2, 20, 3}, '{2, 0, 20, 2}, '{2, 1, 20, 3}, '{3, 0, 20, 2}, '{3, 1, 20, 3},
               '{1, 1, 30, 1}, '{2, 0, 30, 1}, '{3, 0, 30, 1},
               '{0, 1, 30, 6}, '{0, 3, 30, 6}, '{0, 0, 35, 6}, '{0, 2, 35, 6}, '{0, 4, 35, 6}};
    if (pz) exp_ev.push_back('{1, 0, FB, 5});
    if (px) exp_ev.push_back('{3, 1, FB, 4});
  endtask

  int n_sync_pause = 0, n_res_wait = 0, n_x = 0, n_no_x = 0, n_z = 0, n_no_z = 0, n_in_budget = 0;

  initial begin
    for (int n = 0; n < NN; n++) begin node_res_valid[n] = 1'b0; node_res_data[n] = '0; end
    for (int trial = 0; trial < TRIALS; trial++) begin
      int w [4];
      logic [4:0] res;
      bit px, pz;
      int t0, t_inj, last;
      for (int n = 0; n < 4; n++) w[n] = $urandom_range(2, 120);
      res = (trial == 0) ? 5'b00000 : (trial == 1) ? 5'b11111 : 5'($urandom_range(0, 31));
      px  = res[1] ^ res[3];
      pz  = res[0] ^ res[2] ^ res[4];
      build(w);
      expect_all(px, pz);

      run = 1'b0; trig = 1'b0; rst_n = 1'b0;
      repeat (2) @(posedge clk);
      #1 rst_n = 1'b1;
      for (int n = 0; n < NN; n++)
        for (int i = 0; i < prog[n].size(); i++) begin
          prog_we = 1'b1; prog_node = 8'(n); prog_addr = ($clog2(MEMW))'(i); prog_data = prog[n][i];
          @(posedge clk); #1;
        end
      prog_we = 1'b0;
      for (int n = 0; n < 4; n++) begin
        pause_n[n] = 0; msg_t[n] = -1;
        for (int p = 0; p < 8; p++) fires[n][p].delete();
      end
      res_wait = 0;
      @(posedge clk); #1 run = 1'b1;
      repeat (10) @(posedge clk);
      #1 trig = 1'b1;
      @(posedge clk); #1 trig = 1'b0;

      // discriminator: the result word follows the last measurement by T_MEAS
      while (fires[0][4].size() == 0) @(posedge clk);
      repeat (T_MEAS - 1) @(posedge clk);
      #1 node_res_valid[0] = 1'b1; node_res_data[0] = 32'(res); t_inj = cyc;
      @(posedge clk); #1 node_res_valid[0] = 1'b0;
      repeat (FB_BUDGET + 100) @(posedge clk);
      #1;

      // cycle-exact schedule on all four boards
      t0 = (fires[1][0].size() > 0) ? fires[1][0][0].t : -1;
      for (int n = 0; n < 4; n++)
        for (int p = 0; p < 8; p++) begin
          automatic int k = 0;
          foreach (exp_ev[i]) if (exp_ev[i].node == n && exp_ev[i].port == p) begin
            check(k < fires[n][p].size() && fires[n][p][k].t - t0 == exp_ev[i].rel && fires[n][p][k].cw == exp_ev[i].cw,
                  $sformatf("trial %0d node %0d port %0d event %0d: expected cw %0d at t0+%0d", trial, n, p, k, exp_ev[i].cw, exp_ev[i].rel));
            k++;
          end
          check(fires[n][p].size() == k, $sformatf("trial %0d node %0d port %0d: %0d codewords, expected %0d", trial, n, p, fires[n][p].size(), k));
        end
      for (int n = 0; n < 4; n++)
        check(node_err[n] == 4'd0, $sformatf("trial %0d node %0d error flags %b", trial, n, node_err[n]));
      check(msg_t[1] >= 0 && msg_t[1] < t0 + FB && msg_t[3] >= 0 && msg_t[3] < t0 + FB,
            $sformatf("trial %0d parities arrived at %0d/%0d, budget ends %0d", trial, msg_t[1], msg_t[3], t0 + FB));
      if (msg_t[1] >= 0 && msg_t[3] >= 0 && msg_t[1] < t0 + FB && msg_t[3] < t0 + FB) n_in_budget++;
      last = (msg_t[1] > msg_t[3]) ? msg_t[1] : msg_t[3];
      $display("trial %0d: W %0d %0d %0d %0d result %b X %0d Z %0d, result to both parities %0d cycles",
               trial, w[0], w[1], w[2], w[3], res, px, pz, last - t_inj);

      if (pause_n[0] + pause_n[1] + pause_n[2] + pause_n[3] > 0) n_sync_pause++;
      if (res_wait > 0) n_res_wait++;
      if (px) n_x++; else n_no_x++;
      if (pz) n_z++; else n_no_z++;
    end

    $display("mechanisms: sync_pauses=%0d result_waits=%0d X=%0d noX=%0d Z=%0d noZ=%0d in_budget=%0d",
             n_sync_pause, n_res_wait, n_x, n_no_x, n_z, n_no_z, n_in_budget);
    check(n_sync_pause == TRIALS, "mechanism: region sync paused early boards in every trial");
    check(n_res_wait == TRIALS, "mechanism: readout board waited for its result");
    check(n_x > 0 && n_no_x > 0, "mechanism: X correction both applied and skipped");
    check(n_z > 0 && n_no_z > 0, "mechanism: Z correction both applied and skipped");
    check(n_in_budget == TRIALS, "mechanism: feedback within its budget");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
