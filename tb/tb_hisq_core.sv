// tb_hisq_core: self-checking testbench for hisq_core.
//
// Two cores are joined by one bidirectional neighbour link (sync pulse and
// message data, each direction a link_delay of LAT cycles), the setting of
// the architecture's basic nearby-sync example. Each trial reloads both programs
// with random waiting times before the sync and a random data word:
//   C0: waiti W0; sync c1; waiti LAT; cw.i.i 0,1; waiti 1; cw.i.i 1,2;
//       addi x5,x0,V; addi x10,x0,1; send x10,x5; halt
//   C1: waiti W1; sync c0; waiti LAT; cw.i.i 1,0; waiti 1; cw.i.i 3,3;
//       recv x6,c0; waiti 60; cw.i.r 2,x6; halt
// (the wait after sync equals the link latency: the sync is booked that many
// cycles ahead of the point it aligns, as in the programs of the two-board experiment).
// Checks per trial: the two first codewords after the sync fire in the same
// cycle on both cores, as do the two second ones; the core that reaches its
// sync later is never paused (zero-overhead case) and the earlier one is
// paused exactly |W0-W1| cycles; the received word comes out as the codeword
// on C1 port 2; no error flag is set; every expected codeword appears once.
module tb_hisq_core;
  import hisq_pkg::*;
  import tb_asm_pkg::*;

  localparam int NP = 4, MW = 256, LAT = 3;
  localparam logic [ADDR_W-1:0] NO_ADDR = 8'h7F;

  logic clk = 1'b0, rst_n = 1'b0, run = 1'b0, trig = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  logic              prog_we [2];
  logic [7:0]        prog_addr [2];
  logic [31:0]       prog_data [2];
  logic [ADDR_W-1:0] nb_id [2][4];
  logic [LAT_W-1:0]  nb_lat [2][4];
  logic [ADDR_W-1:0] anc_id [2];
  logic [LAT_W-1:0]  anc_lat [2];
  logic [3:0]        sync_out [2], sync_in [2], mtx_v [2], mrx_v [2];
  logic [31:0]       mtx_d [2];
  logic [31:0]       mrx_d [2][4];
  logic [NP-1:0]     cw_valid [2];
  logic [CW_W-1:0]   cw_data [2][NP];
  logic              pause [2];
  logic [3:0]        errors [2];
  sync_msg_t         up_msg [2];
  sync_msg_t         no_msg;
  assign no_msg = '0;

  assign anc_id  = '{8'h81, 8'h80};
  assign anc_lat = '{8'd11, 8'd22};

  for (genvar c = 0; c < 2; c++) begin : g_core
    for (genvar k = 0; k < 4; k++) begin : g_cfg
      assign nb_id[c][k]  = (k == 0) ? ADDR_W'(1 - c) : NO_ADDR;
      assign nb_lat[c][k] = LAT_W'(LAT);
    end
    hisq_core #(.NUM_PORTS(NP), .NB(4), .NA(2), .MEM_WORDS(MW), .QDEPTH(16), .SYNC_QDEPTH(4)) u_core (
      .clk, .rst_n, .run, .trig,
      .prog_we(prog_we[c]), .prog_addr(prog_addr[c]), .prog_data(prog_data[c]),
      .my_id(ADDR_W'(c)), .nb_id(nb_id[c]), .nb_lat(nb_lat[c]), .anc_id, .anc_lat,
      .sync_out(sync_out[c]), .sync_in(sync_in[c]),
      .msg_tx_valid(mtx_v[c]), .msg_tx_data(mtx_d[c]),
      .msg_rx_valid(mrx_v[c]), .msg_rx_data(mrx_d[c]),
      .up_valid(), .up_msg(up_msg[c]), .down_valid(1'b0), .down_msg(no_msg),
      .cw_valid(cw_valid[c]), .cw_data(cw_data[c]), .res_valid(1'b0), .res_data(32'd0),
      .pc(), .timer(), .abs_time(), .pause(pause[c]), .errors(errors[c]));
  end

  // link 0 of each core to link 0 of the other; links 1..3 unused
  for (genvar c = 0; c < 2; c++) begin : g_link
    logic       s_o;
    logic       m_v;
    logic [31:0] m_d;
    link_delay #(.W(1), .LAT(LAT)) u_s (.clk, .rst_n, .in_valid(sync_out[c][0]), .in_data(1'b0),
      .out_valid(s_o), .out_data());
    link_delay #(.W(32), .LAT(LAT)) u_m (.clk, .rst_n, .in_valid(mtx_v[c][0]), .in_data(mtx_d[c]),
      .out_valid(m_v), .out_data(m_d));
    assign sync_in[1-c] = {3'b0, s_o};
    assign mrx_v[1-c]   = {3'b0, m_v};
    assign mrx_d[1-c]   = '{m_d, 32'd0, 32'd0, 32'd0};
  end

  // monitors
  int cyc = 0;
  int fire_t [2][NP];
  int fire_n [2][NP];
  logic [CW_W-1:0] fire_cw [2][NP];
  int pause_n [2];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int c = 0; c < 2; c++) begin
      if (run && pause[c]) pause_n[c]++;
      for (int p = 0; p < NP; p++)
        if (run && cw_valid[c][p]) begin
          fire_t[c][p] = cyc; fire_n[c][p]++; fire_cw[c][p] = cw_data[c][p];
        end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("WATCHDOG");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(int c, logic [31:0] prog [$]);
    for (int i = 0; i < prog.size(); i++) begin
      prog_we[c] = 1'b1; prog_addr[c] = 8'(i); prog_data[c] = prog[i];
      @(posedge clk); #1;
    end
    prog_we[c] = 1'b0;
  endtask

  int balanced = 0, unbalanced = 0;
  initial begin
    prog_we   = '{1'b0, 1'b0};
    prog_addr = '{8'd0, 8'd0};
    prog_data = '{32'd0, 32'd0};
    for (int trial = 0; trial < 40; trial++) begin
      int w0, w1, v;
      logic [31:0] p0 [$], p1 [$];
      w0 = $urandom_range(2, 40);
      w1 = (trial % 4 == 0) ? w0 : $urandom_range(2, 40);
      v  = $urandom_range(0, 2047);
      p0 = '{waiti(w0), sync(1), waiti(LAT), cw_ii(0, 1), waiti(1), cw_ii(1, 2),
             addi(5, 0, v), addi(10, 0, 1), send(10, 5), halt()};
      p1 = '{waiti(w1), sync(0), waiti(LAT), cw_ii(1, 0), waiti(1), cw_ii(3, 3),
             recv(6, 0), waiti(60), cw_ir(2, 6), halt()};
      run = 1'b0; trig = 1'b0; rst_n = 1'b0;
      @(posedge clk); #1; rst_n = 1'b1;
      load(0, p0);
      load(1, p1);
      for (int c = 0; c < 2; c++) begin
        pause_n[c] = 0;
        for (int p = 0; p < NP; p++) begin fire_n[c][p] = 0; fire_t[c][p] = 0; fire_cw[c][p] = '0; end
      end
      @(posedge clk); #1; run = 1'b1;
      repeat (4) @(posedge clk);
      #1; trig = 1'b1; @(posedge clk); #1; trig = 1'b0;
      repeat (w0 + w1 + 200) @(posedge clk);
      #1;
      check(fire_n[0][0] == 1 && fire_n[0][1] == 1 && fire_n[1][1] == 1 && fire_n[1][3] == 1 && fire_n[1][2] == 1,
            $sformatf("trial %0d codeword counts %0d %0d %0d %0d %0d", trial,
                      fire_n[0][0], fire_n[0][1], fire_n[1][1], fire_n[1][3], fire_n[1][2]));
      check(fire_t[0][0] == fire_t[1][1], $sformatf("trial %0d first aligned pair %0d %0d (W %0d %0d)", trial, fire_t[0][0], fire_t[1][1], w0, w1));
      check(fire_t[0][1] == fire_t[1][3], $sformatf("trial %0d second aligned pair %0d %0d", trial, fire_t[0][1], fire_t[1][3]));
      check(fire_t[0][1] == fire_t[0][0] + 1, $sformatf("trial %0d spacing", trial));
      check(fire_cw[0][0] == 14'd1 && fire_cw[0][1] == 14'd2 && fire_cw[1][1] == 14'd0 && fire_cw[1][3] == 14'd3,
            $sformatf("trial %0d codeword values", trial));
      check(fire_cw[1][2] == CW_W'(v), $sformatf("trial %0d message word %0d got %0d", trial, v, fire_cw[1][2]));
      if (w0 >= w1) check(pause_n[0] == 0, $sformatf("trial %0d later core C0 paused %0d", trial, pause_n[0]));
      if (w1 >= w0) check(pause_n[1] == 0, $sformatf("trial %0d later core C1 paused %0d", trial, pause_n[1]));
      check(pause_n[0] + pause_n[1] == ((w0 > w1) ? w0 - w1 : w1 - w0),
            $sformatf("trial %0d pause cycles %0d+%0d for W %0d %0d", trial, pause_n[0], pause_n[1], w0, w1));
      check(errors[0] == 4'd0 && errors[1] == 4'd0, $sformatf("trial %0d errors %b %b", trial, errors[0], errors[1]));
      if (w0 == w1) balanced++; else unbalanced++;
    end
    check(balanced > 0 && unbalanced > 0, "both balanced and unbalanced trials");
    $display("balanced=%0d unbalanced=%0d", balanced, unbalanced);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
