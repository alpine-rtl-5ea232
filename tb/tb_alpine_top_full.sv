// tb_alpine_top_full -- one complete operation on the subsystem at its
// default size: 8 cores, each with a private 2048 x 2048 tile.
// Core 0 programs four full columns (2048 weights each), queues a full
// 2048-element input vector and runs one MVM; its four programmed outputs
// are checked against the bench's dot products. Cores 1..7 meanwhile each
// program a 4 x 4 corner at a core-specific offset, queue four inputs
// (every other input stays at its reset value 0, so unprogrammed cells do
// not contribute) and check their outputs. The MVM latency (230 cycles) is
// checked on every core.
module tb_alpine_top_full;
  import alpine_pkg::*;
  localparam int C = 8, M = 2048, LAT = 230;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic        issue_valid [C];
  logic [31:0] issue_instr [C];
  logic [63:0] rn_val [C], rm_val [C], ra_val [C];
  logic        issue_ready [C], is_cm [C], wb_valid [C], wb_we [C];
  logic [4:0]  wb_rd [C];
  logic [63:0] wb_data [C];

  alpine_top dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic exec(input int c, input cm_op_e op, input logic [63:0] rn, rm, ra,
                      output logic [63:0] rd_val, output int lat);
    int t0;
    @(negedge clk);
    issue_instr[c] = cm_encode(op, 5'd7, 5'd1, 5'd2, 5'd4);
    rn_val[c] = rn; rm_val[c] = rm; ra_val[c] = ra;
    issue_valid[c] = 1;
    while (!issue_ready[c]) @(negedge clk);
    t0 = cyc;
    @(negedge clk);
    issue_valid[c] = 0;
    while (!wb_valid[c]) @(negedge clk);
    lat = cyc - t0;
    rd_val = wb_data[c];
  endtask

  function automatic logic signed [7:0] q8(input longint s);
    s = s >>> 7;
    return (s > 127) ? 8'sd127 : (s < -128) ? -8'sd128 : 8'(s);
  endfunction

  // Core 0: full-length columns.
  task automatic core0();
    logic signed [7:0] w [M][4];
    logic signed [7:0] x [M];
    logic [63:0] d; int lat;
    for (int i = 0; i < M; i++) begin
      x[i] = 8'($signed($urandom % 16) - 8);
      for (int j = 0; j < 4; j++) begin
        w[i][j] = 8'($signed($urandom % 16) - 8);
        exec(0, CM_INITIALIZE, 64'(8'(w[i][j])), 64'(j), 64'(i), d, lat);
      end
    end
    for (int i = 0; i < M; i += 4)
      exec(0, CM_QUEUE, 64'({x[i+3], x[i+2], x[i+1], x[i]}), 64'd4, 64'(i), d, lat);
    exec(0, CM_PROCESS, 0, 0, 0, d, lat);
    check(lat == LAT + 2, $sformatf("core 0 MVM latency %0d", lat));
    exec(0, CM_DEQUEUE, 64'd0, 64'd4, 0, d, lat);
    for (int j = 0; j < 4; j++) begin
      longint s = 0;
      for (int i = 0; i < M; i++) s += longint'(x[i]) * longint'(w[i][j]);
      check($signed(d[8*j +: 8]) == q8(s), $sformatf("core 0 y[%0d]=%0d exp %0d", j, $signed(d[8*j +: 8]), q8(s)));
    end
  endtask

  // Cores 1..7: a 4 x 4 block at row/column offset 256*c.
  task automatic core_small(input int c);
    logic signed [7:0] w [4][4];
    logic signed [7:0] x [4];
    logic [63:0] d; int lat;
    int off = 256 * c;
    for (int i = 0; i < 4; i++) begin
      x[i] = 8'($urandom);
      for (int j = 0; j < 4; j++) begin
        w[i][j] = 8'($urandom);
        exec(c, CM_INITIALIZE, 64'(8'(w[i][j])), 64'(off + j), 64'(off + i), d, lat);
      end
    end
    exec(c, CM_QUEUE, 64'({x[3], x[2], x[1], x[0]}), 64'd4, 64'(off), d, lat);
    exec(c, CM_PROCESS, 0, 0, 0, d, lat);
    check(lat == LAT + 2, $sformatf("core %0d MVM latency %0d", c, lat));
    exec(c, CM_DEQUEUE, 64'(off), 64'd4, 0, d, lat);
    for (int j = 0; j < 4; j++) begin
      int s = 0;
      for (int i = 0; i < 4; i++) s += int'(x[i]) * int'(w[i][j]);
      check($signed(d[8*j +: 8]) == q8(s), $sformatf("core %0d y[%0d]", c, j));
    end
  endtask

  initial begin
    for (int c = 0; c < C; c++) begin
      issue_valid[c] = 0; issue_instr[c] = 0; rn_val[c] = 0; rm_val[c] = 0; ra_val[c] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      core0();
      core_small(1); core_small(2); core_small(3); core_small(4);
      core_small(5); core_small(6); core_small(7);
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
