// tb_hisq_mem: writes words and single bytes through port B, reads them back
// on both ports and checks the one-cycle read latency and read-first
// behaviour of port B, against a reference array.
module tb_hisq_mem;
  localparam int WORDS = 256;
  logic clk = 0;
  logic [7:0] a_addr, b_addr;
  logic [3:0] b_we;
  logic [31:0] b_wdata, a_rdata, b_rdata;
  logic [31:0] ref_m [WORDS];
  int checks = 0, failures = 0;

  hisq_mem #(.WORDS(WORDS)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_addr = 0; b_addr = 0; b_we = 0; b_wdata = 0;
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      b_addr = 8'(i); b_we = 4'hF; b_wdata = $urandom; ref_m[i] = b_wdata;
    end
    @(negedge clk); b_we = 0;
    for (int t = 0; t < 2000; t++) begin
      logic [7:0] aa, ba; logic [3:0] we; logic [31:0] wd, exp_a, exp_b;
      aa = 8'($urandom); ba = 8'($urandom); we = ($urandom_range(0,3) == 0) ? 4'($urandom) : 4'h0;
      wd = $urandom;
      @(negedge clk);
      a_addr = aa; b_addr = ba; b_we = we; b_wdata = wd;
      exp_a = ref_m[aa]; exp_b = ref_m[ba];
      for (int i = 0; i < 4; i++) if (we[i]) ref_m[ba][8*i +: 8] = wd[8*i +: 8];
      if (aa == ba) exp_a = exp_a; // port A reads old data too (read-first)
      @(posedge clk); #1;
      b_we = 0;
      check(b_rdata == exp_b, "port B read-first data");
      if (aa != ba || we == 0) check(a_rdata == exp_a, "port A data");
    end
    // a final pass over every word on port A
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); a_addr = 8'(i);
      @(posedge clk); #1;
      check(a_rdata == ref_m[i], "port A sweep");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
