// tb_aimc_ctrl -- self-checking test of the core-side AIMC CTRL unit.
// A bench tile accepts commands after a random delay and answers after a
// random latency. For random CM instructions the bench checks the command
// fields built from Rn/Rm/Ra, the writeback (Rd and data only for
// CM_DEQUEUE), that issue_ready stays low (stall) until completion, and that
// non-CM instructions are neither claimed nor sent to the tile.
module tb_aimc_ctrl;
  import alpine_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic issue_valid = 0;
  logic [31:0] issue_instr = 0;
  logic [63:0] rn_val = 0, rm_val = 0, ra_val = 0;
  logic issue_ready, is_cm, wb_valid, wb_we;
  logic [4:0] wb_rd;
  logic [63:0] wb_data;
  logic cmd_valid, cmd_ready = 0, rsp_valid = 0;
  tile_cmd_t cmd;
  logic [31:0] rsp_data = 0;

  aimc_ctrl dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // Bench tile: random ready delay and response latency; records the command.
  tile_cmd_t got_cmd;
  int n_cmds = 0, stall_cycles = 0;
  logic [31:0] next_rsp;
  initial begin
    forever begin
      @(negedge clk);
      if (cmd_valid) begin
        repeat ($urandom % 3) begin @(negedge clk); check(cmd_valid && cmd == cmd, "cmd held"); end
        cmd_ready = 1;
        got_cmd = cmd;
        @(negedge clk);
        cmd_ready = 0;
        n_cmds++;
        repeat (1 + $urandom % 6) @(negedge clk);
        next_rsp = $urandom;
        rsp_data = next_rsp; rsp_valid = 1;
        @(negedge clk);
        rsp_valid = 0; rsp_data = $urandom;
      end
    end
  end
  always @(posedge clk) if (rst_n && issue_valid && is_cm && !issue_ready) stall_cycles++;

  initial begin
    cm_op_e op;
    logic [4:0] rd, rn, rm, ra;
    int n_before, wait_cycles;
    logic [2:0] exp_cnt;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      rd = 5'($urandom); rn = 5'($urandom); rm = 5'($urandom); ra = 5'($urandom);
      rn_val = {$urandom, $urandom}; rm_val = 64'($urandom % 7); ra_val = {$urandom, $urandom};
      if (k % 10 == 9) begin
        // Not a CM instruction: must not be claimed or reach the tile.
        issue_instr = 32'h8B020020;   // ARMv8 ADD x0, x1, x2
        issue_valid = 1;
        n_before = n_cmds;
        #1 check(!is_cm, "non-CM instruction not claimed");
        repeat (3) @(negedge clk);
        check(!cmd_valid && n_cmds == n_before && issue_ready, "non-CM ignored");
        issue_valid = 0;
        continue;
      end
      op = cm_op_e'(1 + $urandom % 4);
      issue_instr = cm_encode(op, rd, rn, rm, ra);
      issue_valid = 1;
      #1 check(is_cm && issue_ready, "CM instruction claimed when idle");
      @(negedge clk);
      issue_valid = (k % 3 == 0);   // sometimes keep offering the next one: must stall
      wait_cycles = 0;
      while (!wb_valid && wait_cycles < 100) begin
        check(!issue_ready, "stalled while outstanding");
        @(negedge clk); wait_cycles++;
      end
      issue_valid = 0;
      exp_cnt = (rm_val == 0 || rm_val > 4) ? 3'd4 : rm_val[2:0];
      check(got_cmd.op == op, "command op");
      case (op)
        CM_QUEUE: check(got_cmd.data == rn_val[31:0] && got_cmd.index == ra_val[31:0] &&
                        got_cmd.count == exp_cnt, "queue operands");
        CM_DEQUEUE: check(got_cmd.index == rn_val[31:0] && got_cmd.count == exp_cnt, "dequeue operands");
        CM_INITIALIZE: check(got_cmd.data == {24'd0, rn_val[7:0]} && got_cmd.index == ra_val[31:0] &&
                             got_cmd.col == rm_val[31:0], "initialize operands");
        default: ;
      endcase
      check(wb_valid && wb_rd == rd, "writeback register");
      check(wb_we == (op == CM_DEQUEUE), "writes Rd only for dequeue");
      if (op == CM_DEQUEUE) check(wb_data == {32'd0, next_rsp}, "dequeue data");
      @(negedge clk);
      check(!wb_valid && issue_ready, "completion is one cycle, then ready");
    end
    check(stall_cycles > 0, "stall happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
