// tb_msgu: message unit with two units back to back over 2-cycle links.
// Unit X sends random words to unit Y (and Y to X) while the receivers pop
// at random; every word must arrive once, in order, on the link of its
// sender, and recv_valid must reflect an empty FIFO. Also checks that a send
// to an unknown address is flagged and goes nowhere. The local results
// channel is checked too: words on res_valid/res_data must come out, in
// order, from recv with the unit's own address, independently of the link
// FIFOs, and a fifth word into the full 4-deep FIFO must be flagged.
module tb_msgu;
  import hisq_pkg::*;
  localparam int NB = 2;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic [ADDR_W-1:0] id [2][NB];
  logic sv [2], sr [2], rq [2], rv [2];
  logic [ADDR_W-1:0] sd [2], rs [2];
  logic [XLEN-1:0] sdat [2], rdat [2];
  logic [NB-1:0] txv [2], rxv [2];
  logic [XLEN-1:0] txd [2];
  logic [XLEN-1:0] rxd [2][NB];
  logic err [2];
  logic [ADDR_W-1:0] my [2];
  logic resv [2];
  logic [XLEN-1:0] resd [2];

  for (genvar u = 0; u < 2; u++) begin : g_u
    msgu #(.NB(NB), .RXDEPTH(4)) dut (
      .clk, .rst_n, .nb_id(id[u]), .my_id(my[u]), .res_valid(resv[u]), .res_data(resd[u]),
      .send_valid(sv[u]), .send_dst(sd[u]), .send_data(sdat[u]), .send_ready(sr[u]),
      .recv_req(rq[u]), .recv_src(rs[u]), .recv_valid(rv[u]), .recv_data(rdat[u]),
      .tx_valid(txv[u]), .tx_data(txd[u]), .rx_valid(rxv[u]), .rx_data(rxd[u]), .err(err[u]));
  end
  // X (address 10) link 1 <-> Y (address 20) link 0, two cycles each way
  logic [1:0] v01, v10; logic [XLEN-1:0] d01 [2], d10 [2];
  always @(posedge clk) begin
    v01 <= {v01[0], txv[0][1]}; d01[0] <= txd[0]; d01[1] <= d01[0];
    v10 <= {v10[0], txv[1][0]}; d10[0] <= txd[1]; d10[1] <= d10[0];
  end
  assign rxv[1] = {1'b0, v01[1]}; assign rxd[1][0] = d01[1]; assign rxd[1][1] = '0;
  assign rxv[0] = {v10[1], 1'b0}; assign rxd[0][1] = d10[1]; assign rxd[0][0] = '0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [XLEN-1:0] exp_q [2][$];
  int inflight [2];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    id[0][0] = 8'd99; id[0][1] = 8'd20;   // X: link 1 goes to Y
    id[1][0] = 8'd10; id[1][1] = 8'd98;   // Y: link 0 goes to X
    my[0] = 8'd10; my[1] = 8'd20;
    resv[0] = 0; resv[1] = 0; resd[0] = '0; resd[1] = '0;
    v01 = 0; v10 = 0;
    for (int u = 0; u < 2; u++) begin sv[u] = 0; rq[u] = 0; sd[u] = 0; sdat[u] = 0; end
    rs[0] = 8'd20; rs[1] = 8'd10;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      for (int u = 0; u < 2; u++) begin
        // receiver side: compare with expected order
        rq[u] = ($urandom_range(0, 1) == 1);
        if (rq[u] && rv[u]) begin
          check(exp_q[u].size() > 0 && rdat[u] == exp_q[u][0], "in-order delivery");
          if (exp_q[u].size() > 0) void'(exp_q[u].pop_front());
        end
        // sender side: never overflow the 4-deep receive FIFO of the peer
        sv[u] = (exp_q[1-u].size() < 2) && ($urandom_range(0, 2) == 0);
        sd[u] = (u == 0) ? 8'd20 : 8'd10;
        sdat[u] = $urandom;
        if (sv[u]) exp_q[1-u].push_back(sdat[u]);
        check(sr[u], "send ready");
      end
      @(posedge clk);
    end
    @(negedge clk); sv[0] = 0; sv[1] = 0; rq[0] = 0; rq[1] = 0;
    repeat (4) @(posedge clk);
    // drain
    for (int u = 0; u < 2; u++) begin
      while (exp_q[u].size() > 0) begin
        @(negedge clk); rq[u] = 1;
        check(rv[u] && rdat[u] == exp_q[u][0], "drain delivery");
        void'(exp_q[u].pop_front());
        @(posedge clk); #1 rq[u] = 0;
      end
      @(negedge clk); check(!rv[u], "empty after drain");
    end
    check(!err[0] && !err[1], "no errors");
    // local results of unit 0, read with recv from its own address 10
    for (int r = 0; r < 20; r++) begin
      logic [XLEN-1:0] w [$];
      int n;
      w.delete();
      n = $urandom_range(1, 4);
      for (int i = 0; i < n; i++) begin
        @(negedge clk); resv[0] = 1; resd[0] = $urandom; w.push_back(resd[0]);
        @(posedge clk); #1 resv[0] = 0;
        repeat ($urandom_range(0, 3)) @(posedge clk);
      end
      @(negedge clk); rs[0] = 8'd20; #1 check(!rv[0], "results not visible on the link FIFO");
      rs[0] = 8'd10;
      for (int i = 0; i < n; i++) begin
        @(negedge clk); rq[0] = 1;
        check(rv[0] && rdat[0] == w[i], $sformatf("result %0d of %0d", i, n));
        @(posedge clk); #1 rq[0] = 0;
      end
      @(negedge clk); check(!rv[0], "results FIFO empty");
    end
    check(!err[0], "no error from results");
    for (int i = 0; i < 5; i++) begin
      @(negedge clk); resv[1] = 1; resd[1] = i;
      @(posedge clk); #1 resv[1] = 0;
    end
    @(negedge clk); check(err[1], "results overflow flagged");
    rs[0] = 8'd20;
    @(negedge clk); sv[0] = 1; sd[0] = 8'd55; @(posedge clk); #1 sv[0] = 0;
    @(negedge clk); check(err[0], "unknown destination flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
