// tb_sync_router: router actions for region-level synchronisation.
// Children of a router addressed to itself deliver time-points at random
// cycles and in random order; once the last one is in, the router must
// broadcast the latest time-point to all children exactly two cycles later,
// and send nothing to its parent. With a request addressed to another
// router it must instead pass the latest time-point up to the parent, with
// the destination unchanged. A message from the parent must be broadcast
// to the children after one cycle. Also checks a masked-out child and the
// wrap-around-safe maximum.
module tb_sync_router;
  import hisq_pkg::*;
  localparam int NC = 4;
  localparam logic [ADDR_W-1:0] ME = 8'h83;
  logic clk = 0, rst_n = 0;
  logic [NC-1:0] mask, civ;
  sync_msg_t ci [NC];
  logic cov, piv, pov, err;
  sync_msg_t co, pi, po;
  int checks = 0, failures = 0, cyc = 0;

  sync_router #(.N_CHILD(NC), .MY_ADDR(ME)) dut (
    .clk, .rst_n, .child_mask(mask), .c_in_valid(civ), .c_in(ci),
    .c_out_valid(cov), .c_out(co), .p_in_valid(piv), .p_in(pi),
    .p_out_valid(pov), .p_out(po), .err);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // run one group: returns after checking the output
  task automatic group(logic [ADDR_W-1:0] dest, logic [NC-1:0] m, logic [ABS_W-1:0] base);
    int order [NC];
    logic [ABS_W-1:0] tp [NC], mx;
    int last, t_out;
    bit first;
    mask = m;
    first = 1;
    for (int c = 0; c < NC; c++) begin
      order[c] = c;
      tp[c] = base + ABS_W'($urandom_range(0, 1000));
      if (m[c] && (first || $signed(tp[c] - mx) > 0)) begin mx = tp[c]; first = 0; end
    end
    order.shuffle();
    foreach (order[i]) begin
      int c; c = order[i];
      if (!m[c]) continue;
      repeat ($urandom_range(0, 3)) begin
        @(negedge clk); check(!cov && !pov, "no output before the group is complete");
      end
      @(negedge clk);
      check(!cov && !pov, "no output before the group is complete");
      civ = '0; civ[c] = 1'b1; ci[c] = '{dest: dest, tp: tp[c]};
      @(posedge clk); #1 civ = '0;
    end
    // the last message was taken at the last posedge; output 2 cycles after it arrived
    @(negedge clk);
    check(!cov && !pov, "buffering cycle");
    @(negedge clk);
    if (dest == ME) begin
      check(cov && !pov && co.tp == mx && co.dest == ME, $sformatf("broadcast of the latest time-point %0b %0b %h %h", cov, pov, co.tp, mx));
    end else begin
      check(pov && !cov && po.tp == mx && po.dest == dest, "forward of the latest time-point to the parent");
    end
    @(negedge clk);
    check(!cov && !pov, "single output");
  endtask

  initial begin
    civ = '0; piv = 0; pi = '0; mask = '1;
    for (int c = 0; c < NC; c++) ci[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      logic [NC-1:0] m;
      m = (t % 5 == 4) ? 4'b1011 : 4'b1111;
      group((t % 3 == 0) ? 8'h80 : ME, m, (t % 7 == 0) ? 32'hFFFF_FE00 : 32'(t * 3000));
    end
    // message from the parent
    @(negedge clk); piv = 1; pi = '{dest: 8'h80, tp: 32'd12345};
    @(posedge clk); #1 piv = 0;
    @(negedge clk);
    check(cov && co.tp == 32'd12345 && co.dest == 8'h80, "parent message broadcast");
    check(!err, "no error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
