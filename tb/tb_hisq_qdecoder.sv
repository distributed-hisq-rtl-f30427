// tb_hisq_qdecoder: encodes every quantum instruction form with random
// operands and checks the decoded TCU command, and that RV32I, send and recv
// words are not taken for TCU commands.
module tb_hisq_qdecoder;
  import hisq_pkg::*;
  import tb_asm_pkg::*;
  logic [31:0] instr, rs1_val, rs2_val;
  logic is_tcu;
  tcu_cmd_t cmd;
  int checks = 0, failures = 0;

  hisq_qdecoder dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (instr %h)", what, instr); end
  endtask

  initial begin
    for (int t = 0; t < 500; t++) begin
      int n, port, cw;
      n = $urandom_range(0, 4095); port = $urandom_range(0, 31); cw = $urandom_range(0, 4095);
      rs1_val = $urandom; rs2_val = $urandom;
      instr = waiti(n); #1;
      check(is_tcu && cmd.op == TCMD_WAIT && cmd.amount == 32'(n), "waiti");
      instr = waitr(5); #1;
      check(is_tcu && cmd.op == TCMD_WAIT && cmd.amount == rs1_val, "waitr");
      instr = sync(n & 8'hFF); #1;
      check(is_tcu && cmd.op == TCMD_SYNC && cmd.tgt == 8'(n), "sync");
      instr = cw_ii(port, cw); #1;
      check(is_tcu && cmd.op == TCMD_CW && cmd.port == 5'(port) && cmd.cw == 14'(cw), "cw.i.i");
      instr = cw_ir(port, 3); #1;
      check(is_tcu && cmd.op == TCMD_CW && cmd.port == 5'(port) && cmd.cw == rs1_val[13:0], "cw.i.r");
      instr = cw_ri(3, cw); #1;
      check(is_tcu && cmd.op == TCMD_CW && cmd.port == rs1_val[4:0] && cmd.cw == 14'(cw), "cw.r.i");
      instr = cw_rr(3, 4); #1;
      check(is_tcu && cmd.op == TCMD_CW && cmd.port == rs1_val[4:0] && cmd.cw == rs2_val[13:0], "cw.r.r");
      instr = addi(1, 2, n); #1;   check(!is_tcu, "addi not tcu");
      instr = send(1, 2); #1;      check(!is_tcu, "send not tcu");
      instr = recv(1, 2); #1;      check(!is_tcu, "recv not tcu");
    end
    // the figure example: cw.i.i 1, 1 and cw.i.i 21, 2
    rs1_val = 0; rs2_val = 0;
    instr = cw_ii(21, 2); #1;
    check(cmd.port == 5'd21 && cmd.cw == 14'd2, "cw.i.i 21,2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
