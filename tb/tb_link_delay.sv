// tb_link_delay: sends random valid/data patterns into the channel model and
// checks that each appears unchanged exactly LAT cycles later.
module tb_link_delay;
  localparam int W = 12, LAT = 5;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  logic [W-1:0] in_data, out_data;
  logic         hv [$];
  logic [W-1:0] hd [$];
  int checks = 0, failures = 0;

  link_delay #(.W(W), .LAT(LAT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < LAT; i++) begin hv.push_back(1'b0); hd.push_back('0); end
    for (int c = 0; c < 1000; c++) begin
      @(negedge clk);
      checks++;
      if (out_valid != hv[0] || (out_valid && out_data != hd[0])) begin
        failures++; $display("FAIL cycle %0d", c);
      end
      in_valid = 1'($urandom); in_data = W'($urandom);
      @(posedge clk);
      void'(hv.pop_front()); void'(hd.pop_front());
      hv.push_back(in_valid); hd.push_back(in_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
