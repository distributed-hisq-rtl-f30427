// tb_hisq_pipeline: runs a small program on the classical pipeline with a
// hisq_mem instance and a bench model of the TCU and message unit that
// accept with random delays. Checks the RV32I results (loop, loads with
// sign/zero extension, stores, lui, jal link value, xor/slt/srai), the
// sequence of quantum instructions handed to the decoder together with
// their register operands, the send/recv data, the retired-instruction count
// and that a loop without stalls retires one instruction per cycle.
module tb_hisq_pipeline;
  import hisq_pkg::*;
  import tb_asm_pkg::*;
  localparam int AW = 10;
  logic clk = 0, rst_n = 0, run = 0;
  logic [AW-1:0] i_addr, d_addr, b_addr, prog_addr;
  logic [31:0] i_rdata, d_rdata, d_wdata, b_wdata, prog_data;
  logic [3:0] d_we, b_we;
  logic prog_we;
  logic q_valid, q_ready, send_valid, send_ready, recv_req, recv_valid, illegal;
  logic [31:0] q_instr, q_rs1, q_rs2, send_data, recv_data, pc, retired;
  logic [ADDR_W-1:0] send_dst, recv_src;
  int checks = 0, failures = 0;

  assign b_addr  = run ? d_addr : prog_addr;
  assign b_we    = run ? d_we : {4{prog_we}};
  assign b_wdata = run ? d_wdata : prog_data;
  hisq_mem #(.WORDS(1 << AW)) u_mem (.clk, .a_addr(i_addr), .a_rdata(i_rdata),
    .b_addr, .b_we, .b_wdata, .b_rdata(d_rdata));
  hisq_pipeline #(.MEM_AW(AW)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [31:0] prog [$];
  typedef struct { logic [31:0] ins, r1, r2; bit use1, use2; } q_t;
  q_t qexp [$];
  logic [31:0] sent [$];

  // bench TCU: random ready, records handshakes in order
  always @(negedge clk) q_ready = ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (run && q_valid && q_ready) begin
    check(qexp.size() > 0, "unexpected quantum instruction");
    if (qexp.size() > 0) begin
      check(q_instr == qexp[0].ins, $sformatf("q instr %h", q_instr));
      check((!qexp[0].use1 || q_rs1 == qexp[0].r1) && (!qexp[0].use2 || q_rs2 == qexp[0].r2), $sformatf("q operands %h %h", q_rs1, q_rs2));
      void'(qexp.pop_front());
    end
  end
  // bench MsgU: echo every sent word back after a random delay
  assign send_ready = 1'b1;
  logic [31:0] rxq [$];
  always @(posedge clk) begin
    if (run && send_valid) begin
      check(send_dst == 8'd20, "send destination");
      sent.push_back(send_data);
      begin automatic logic [31:0] v = send_data; automatic int d = $urandom_range(1, 20); fork begin repeat (d) @(posedge clk); rxq.push_back(v); end join_none end
    end
    if (run && recv_req && recv_valid) begin
      check(recv_src == 8'd20, "recv source");
      void'(rxq.pop_front());
    end
  end
  always @(negedge clk) begin
    recv_valid = rxq.size() > 0;
    recv_data  = (rxq.size() > 0) ? rxq[0] : '0;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int halt_pc, t_loop0, t_loop1;
  initial begin
    prog = '{
      addi(1, 0, 0), addi(2, 0, 10),                         // 0,1
      add(1, 1, 2), addi(2, 2, -1), bne(2, 0, -8),           // 2..4 loop
      sw(1, 0, 32'h200),                                     // 5
      lui(3, 20'hABCDE), addi(3, 3, 12'h123), sw(3, 0, 32'h204), // 6..8
      lb(4, 0, 32'h204), lb(5, 0, 32'h207), lhu(6, 0, 32'h206),  // 9..11
      add(7, 5, 6), sw(7, 0, 32'h208),                       // 12,13
      jal(8, 8), addi(9, 0, 1), sw(8, 0, 32'h20C),           // 14..16
      xor_(12, 3, 1), slt(13, 5, 0), srai(14, 3, 4),         // 17..19
      sw(12, 0, 32'h210), sw(13, 0, 32'h214), sw(14, 0, 32'h218), // 20..22
      waiti(5), cw_ir(3, 1), waitr(6), sync(7), cw_rr(4, 6), // 23..27
      addi(10, 0, 20), send(10, 3), recv(11, 20),            // 28..30
      addi(11, 11, 1), send(10, 11), recv(15, 20), sw(15, 0, 32'h21C), // 31..34
      addi(2, 0, 50), addi(2, 2, -1), bne(2, 0, -4),         // 35..37 timing loop
      halt()                                                 // 38
    };
    halt_pc = 38 * 4;
    qexp.push_back('{waiti(5), 32'd0, 32'd0, 0, 0});
    qexp.push_back('{cw_ir(3, 1), 32'd55, 32'd0, 1, 0});
    qexp.push_back('{waitr(6), 32'hABCD, 32'd0, 1, 0});
    qexp.push_back('{sync(7), 32'd0, 32'd0, 0, 0});
    qexp.push_back('{cw_rr(4, 6), 32'h23, 32'hABCD, 1, 1});
    prog_we = 0; prog_addr = 0; prog_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (prog[i]) begin
      @(negedge clk); prog_we = 1; prog_addr = AW'(i); prog_data = prog[i];
    end
    @(negedge clk); prog_we = 0;
    @(negedge clk); run = 1;
    wait (pc == 35 * 4); t_loop0 = $time;
    wait (pc == halt_pc);  t_loop1 = $time;
    repeat (5) @(posedge clk);
    check(pc == halt_pc, "halted");
    check(u_mem.mem[32'h200 >> 2] == 32'd55, "loop sum");
    check(u_mem.mem[32'h204 >> 2] == 32'hABCDE123, "lui+addi");
    check(u_mem.mem[32'h208 >> 2] == 32'hFFFFFFAB + 32'hABCD, "lb sign ext + lhu");
    check(u_mem.mem[32'h20C >> 2] == 32'd60, "jal link");
    check(u_mem.mem[32'h210 >> 2] == (32'hABCDE123 ^ 32'd55), "xor");
    check(u_mem.mem[32'h214 >> 2] == 32'd1, "slt");
    check(u_mem.mem[32'h218 >> 2] == 32'hFABCDE12, "srai");
    check(u_mem.mem[32'h21C >> 2] == 32'hABCDE124, "send/recv round trip");
    if (sent.size() > 1) $display("sent %0d words, %h %h got %h", sent.size(), sent[0], sent[1], u_mem.mem[32'h21C >> 2]);
    check(sent.size() == 2 && sent[0] == 32'hABCDE123 && sent[1] == 32'hABCDE124, "sent words");
    check(qexp.size() == 0, "all quantum instructions handed over");
    check(!illegal, "no illegal instruction");
    // loop of 50 x (addi, bne) + entry: no stalls, so one instruction per cycle
    check((t_loop1 - t_loop0) / 10 == 1 + 2 * 50, $sformatf("loop cycles %0d", (t_loop1 - t_loop0) / 10));
    // dynamic count: 2 + 30 loop + 30 + 101 timing loop instructions, the halt jump spins
    check(retired >= 32'd2 + 30 + 30 + 101, "retired count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
