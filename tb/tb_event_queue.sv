// tb_event_queue: random push/pop traffic against a reference queue model.
// Checks first-word-fall-through head data, one-cycle push-to-head latency,
// back-to-back pops, the full flag at the configured depth and push+pop
// while full. The producer never pushes into a full queue (asserted).
module tb_event_queue;
  localparam int W = 38, DEPTH = 16;
  logic clk = 0, rst_n = 0;
  logic push, pop, head_valid, full;
  logic [W-1:0] din, head;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  event_queue #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; din = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!head_valid && count == 0, "empty after reset");
    // fill to full
    for (int i = 0; i < DEPTH; i++) begin
      push = 1; din = W'(64'h1000 + i);
      @(posedge clk); model.push_back(din); #1;
    end
    push = 0;
    @(negedge clk);
    check(full && count == DEPTH, "full at depth");
    check(head == model[0], "head after fill");
    // push and pop together while full
    push = 1; pop = 1; din = W'(64'h55);
    @(posedge clk); void'(model.pop_front()); model.push_back(W'(64'h55)); #1;
    push = 0; pop = 0;
    @(negedge clk);
    check(count == DEPTH && head == model[0], "push+pop when full");
    // drain back to back
    while (model.size() > 0) begin
      @(negedge clk);
      check(head_valid && head == model[0], "drain order");
      pop = 1;
      @(posedge clk); void'(model.pop_front()); #1; pop = 0;
    end
    @(negedge clk);
    check(!head_valid, "empty after drain");
    // random traffic
    for (int c = 0; c < 5000; c++) begin
      @(negedge clk);
      check(head_valid == (model.size() > 0), "valid matches model");
      if (model.size() > 0) check(head == model[0], "random head");
      push = ($urandom_range(0, 99) < 55);
      pop  = ($urandom_range(0, 99) < 50);
      if (full && !pop) push = 0;   // the producer respects full
      din  = {$urandom, $urandom};
      @(posedge clk);
      begin
        bit dp, dq;
        dq = pop && model.size() > 0;
        dp = push && (model.size() < DEPTH || dq);
        if (dq) void'(model.pop_front());
        if (dp) model.push_back(din);
      end
      #1;
    end
    push = 0; pop = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
