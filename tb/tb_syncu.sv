// tb_syncu: synchronisation unit, nearby and remote.
//
// Nearby: two units A and B joined by links of latency LA (A to B) and LB
// (B to A), with each unit's counter set to its own outgoing latency. In
// each trial A and B book at random cycles bA, bB. The sync point of a unit
// is its booking cycle plus its latency; each unit must resume (pause low at
// or after its sync point) in the cycle max(bA+LA, bB+LB), both together,
// and never pause before its sync point. This covers A first, B first, equal
// bookings, and the zero-overhead case where no pause happens at all.
//
// Remote: three units book with the same ancestor router. A behavioural
// router in this bench collects their requests and broadcasts the latest
// time-point after a fixed delay; all three must resume exactly at that
// absolute time.
module tb_syncu;
  import hisq_pkg::*;
  localparam int LA = 3, LB = 5, LR = 12;
  logic clk = 0, rst_n = 0, trig = 0;
  int checks = 0, failures = 0;
  int cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  // five units: 0 = A, 1 = B (nearby pair); 2..4 remote group
  localparam int NU = 5;
  logic [ADDR_W-1:0] nb_id [NU][2];
  logic [LAT_W-1:0]  nb_lat [NU][2];
  logic [ADDR_W-1:0] anc_id [NU][1];
  logic [LAT_W-1:0]  anc_lat [NU][1];
  logic evt [NU];
  logic [ADDR_W-1:0] tgt [NU];
  logic pause [NU];
  logic [1:0] s_out [NU], s_in [NU];
  logic up_v [NU], dn_v [NU];
  sync_msg_t up_m [NU], dn_m [NU];
  logic [ABS_W-1:0] abs_t [NU];
  logic err [NU];

  for (genvar u = 0; u < NU; u++) begin : g_u
    syncu #(.NB(2), .NA(1)) dut (
      .clk, .rst_n, .trig,
      .nb_id(nb_id[u]), .nb_lat(nb_lat[u]), .anc_id(anc_id[u]), .anc_lat(anc_lat[u]),
      .evt_valid(evt[u]), .evt_tgt(tgt[u]), .pause(pause[u]),
      .sync_out(s_out[u]), .sync_in(s_in[u]),
      .up_valid(up_v[u]), .up_msg(up_m[u]), .down_valid(dn_v[u]), .down_msg(dn_m[u]),
      .abs_time(abs_t[u]), .abs_run(), .flags(), .busy(), .err(err[u]));
  end

  // links between A (id 0) and B (id 1), on link 0 of each
  logic [LA-1:0] a2b;
  logic [LB-1:0] b2a;
  always @(posedge clk) begin
    a2b <= {a2b[LA-2:0], s_out[0][0]};
    b2a <= {b2a[LB-2:0], s_out[1][0]};
  end
  assign s_in[1] = {1'b0, a2b[LA-1]};
  assign s_in[0] = {1'b0, b2a[LB-1]};
  for (genvar u = 2; u < NU; u++) begin : g_open
    assign s_in[u] = '0;
  end

  // behavioural router for units 2..4: broadcast max time-point 4 cycles
  // after the last request
  logic [ABS_W-1:0] rq_tp [3];
  logic [2:0]       rq_v;
  int               bc_at;
  logic [ABS_W-1:0] bc_tp;
  always @(posedge clk) begin
    for (int u = 2; u < NU; u++) begin
      dn_v[u] <= 1'b0;
      if (up_v[u]) begin rq_v[u-2] <= 1'b1; rq_tp[u-2] <= up_m[u].tp; end
    end
    if (rq_v == 3'b111) begin
      bc_tp = rq_tp[0];
      for (int i = 1; i < 3; i++) if (rq_tp[i] > bc_tp) bc_tp = rq_tp[i];
      bc_at <= cyc + 4;
      rq_v  <= '0;
    end
    if (cyc == bc_at) for (int u = 2; u < NU; u++) begin
      dn_v[u] <= 1'b1; dn_m[u] <= '{dest: 8'h81, tp: bc_tp};
    end
  end
  assign dn_v[0] = 0; assign dn_v[1] = 0;
  assign dn_m[0] = '0; assign dn_m[1] = '0;

  // resume tracking
  int sp [NU], resume [NU];
  bit armed [NU];
  always @(negedge clk) if (rst_n) begin
    for (int u = 0; u < NU; u++) begin
      if (armed[u] && cyc < sp[u]) check(!pause[u], "no pause before the sync point");
      if (armed[u] && cyc >= sp[u] && !pause[u]) begin resume[u] = cyc; armed[u] = 0; end
    end
  end

  task automatic book(int u, int t, int lat);
    @(negedge clk);
    evt[u] = 1; tgt[u] = 8'(t);
    sp[u] = cyc + lat; armed[u] = 1; resume[u] = -1;
    @(posedge clk); #1 evt[u] = 0;
  endtask

  int n_zero = 0, n_pause = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bc_at = -1; rq_v = 0; a2b = 0; b2a = 0;
    for (int u = 0; u < NU; u++) begin
      evt[u] = 0; tgt[u] = 0; armed[u] = 0;
      nb_id[u][0] = 8'h7F; nb_id[u][1] = 8'h7E; nb_lat[u][0] = 1; nb_lat[u][1] = 1;
      anc_id[u][0] = 8'h81; anc_lat[u][0] = LAT_W'(LR);
    end
    nb_id[0][0] = 8'd1; nb_lat[0][0] = LA;   // A's neighbour B
    nb_id[1][0] = 8'd0; nb_lat[1][0] = LB;   // B's neighbour A
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); trig = 1; @(negedge clk); trig = 0;

    // nearby trials
    for (int t = 0; t < 300; t++) begin
      int da, db, exp_r;
      da = $urandom_range(0, 12); db = $urandom_range(0, 12);
      if (t == 0) begin da = 0; db = 0; end
      fork
        begin repeat (da) @(posedge clk); book(0, 1, LA); end
        begin repeat (db) @(posedge clk); book(1, 0, LB); end
      join
      wait (!armed[0] && !armed[1]);
      exp_r = (sp[0] > sp[1]) ? sp[0] : sp[1];
      check(resume[0] == exp_r, $sformatf("A resumes at max(T0,T1) (got %0d exp %0d)", resume[0], exp_r));
      check(resume[1] == exp_r, $sformatf("B resumes at max(T0,T1) (got %0d exp %0d)", resume[1], exp_r));
      if (sp[0] == sp[1]) n_zero++; else n_pause++;
      repeat (3) @(posedge clk);
    end
    check(!err[0] && !err[1], "no nearby errors");

    // remote trials
    for (int t = 0; t < 100; t++) begin
      int d [3];
      logic [ABS_W-1:0] tm;
      for (int i = 0; i < 3; i++) d[i] = $urandom_range(0, 8);
      fork
        begin repeat (d[0]) @(posedge clk); book(2, 8'h81, LR); end
        begin repeat (d[1]) @(posedge clk); book(3, 8'h81, LR); end
        begin repeat (d[2]) @(posedge clk); book(4, 8'h81, LR); end
      join
      wait (!armed[2] && !armed[3] && !armed[4]);
      check(resume[2] == resume[3] && resume[3] == resume[4], "remote group resumes together");
      tm = bc_tp;
      @(negedge clk);
      check(int'(tm) == int'(abs_t[2]) - (cyc - resume[2]), "remote resume at the broadcast time-point");
      check(resume[2] == ((sp[2] > sp[3]) ? ((sp[2] > sp[4]) ? sp[2] : sp[4]) : ((sp[3] > sp[4]) ? sp[3] : sp[4])),
            "remote resume at the latest sync point");
      repeat (3) @(posedge clk);
    end
    check(!err[2] && !err[3] && !err[4], "no remote errors");
    check(n_zero > 0 && n_pause > 0, "both zero-overhead and paused cases seen");
    $display("nearby trials: %0d equal sync points, %0d with a pause", n_zero, n_pause);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
