// tb_cm_decoder -- self-checking test of the CM instruction decoder.
// Checks the four CM encodings (opcode, R/W) with random register fields,
// the R/W variants that are not CM instructions, and random other words.
module tb_cm_decoder;
  import alpine_pkg::*;
  int checks = 0, failures = 0;
  logic [31:0] instr;
  cm_op_e op;
  logic is_cm;
  logic [4:0] rd, rn, rm, ra;

  cm_decoder dut (.*);

  task automatic expect_dec(input cm_op_e exp_op, input logic [4:0] erd, ern, erm, era);
    #1;
    checks++;
    if (op !== exp_op || is_cm !== (exp_op != CM_NONE) ||
        (exp_op != CM_NONE && (rd !== erd || rn !== ern || rm !== erm || ra !== era))) begin
      failures++;
      $display("FAIL instr=%h op=%s exp=%s rd=%0d rn=%0d rm=%0d ra=%0d", instr, op.name(), exp_op.name(), rd, rn, rm, ra);
    end
  endtask

  initial begin
    logic [4:0] a, b, c, d;
    // Fixed encodings from the instruction table: opcode in [31:21], R/W in [15].
    instr = {11'h108, 5'd1, 1'b1, 5'd2, 5'd3, 5'd4}; expect_dec(CM_QUEUE, 4, 3, 1, 2);
    instr = {11'h108, 5'd1, 1'b0, 5'd2, 5'd3, 5'd4}; expect_dec(CM_DEQUEUE, 4, 3, 1, 2);
    instr = {11'h008, 5'd0, 1'b0, 5'd0, 5'd0, 5'd9}; expect_dec(CM_PROCESS, 9, 0, 0, 0);
    instr = {11'h208, 5'd7, 1'b0, 5'd6, 5'd5, 5'd8}; expect_dec(CM_INITIALIZE, 8, 5, 7, 6);
    instr = {11'h008, 5'd0, 1'b1, 5'd0, 5'd0, 5'd9}; expect_dec(CM_NONE, 0, 0, 0, 0);
    instr = {11'h208, 5'd7, 1'b1, 5'd6, 5'd5, 5'd8}; expect_dec(CM_NONE, 0, 0, 0, 0);
    instr = {11'h109, 5'd7, 1'b1, 5'd6, 5'd5, 5'd8}; expect_dec(CM_NONE, 0, 0, 0, 0);
    instr = 32'hD503201F; expect_dec(CM_NONE, 0, 0, 0, 0);  // an ARMv8 NOP
    for (int k = 0; k < 200; k++) begin
      cm_op_e o;
      a = 5'($urandom); b = 5'($urandom); c = 5'($urandom); d = 5'($urandom);
      o = cm_op_e'(1 + ($urandom % 4));
      instr = cm_encode(o, a, b, c, d);
      expect_dec(o, a, b, c, d);
      instr = $urandom;
      if (instr[31:21] != 11'h108 && instr[31:21] != 11'h008 && instr[31:21] != 11'h208)
        expect_dec(CM_NONE, 0, 0, 0, 0);
    end
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
