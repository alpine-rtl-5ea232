// tb_alpine_top -- end-to-end test of the tightly-coupled AIMC subsystem.
// Two cores, each with its private tile (16 x 16 here to keep the run short,
// other parameters at their defaults), run a two-layer MLP split as in the
// dual-core mapping: core 0 holds layer 1, core 1 layer 2. The bench plays
// the cores' software: it issues CM_INITIALIZE / CM_QUEUE / CM_PROCESS /
// CM_DEQUEUE instructions with their register operands, applies ReLU to
// layer-1 outputs and forwards them to core 1, pipelining inference k+1 on
// core 0 with inference k on core 1. Every output is compared with a
// reference MLP computed here. It also exercises and counts: a stall (a CM
// instruction offered while the unit is busy), a non-CM instruction passing
// by, a partial (count < 4) transfer, ADC saturation and the MVM latency.
module tb_alpine_top;
  import alpine_pkg::*;
  localparam int C = 2, M = 16, N = 16, LAT = 230, NINF = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic        issue_valid [C];
  logic [31:0] issue_instr [C];
  logic [63:0] rn_val [C], rm_val [C], ra_val [C];
  logic        issue_ready [C], is_cm [C], wb_valid [C], wb_we [C];
  logic [4:0]  wb_rd [C];
  logic [63:0] wb_data [C];

  alpine_top #(.NUM_CORES(C), .M(M), .N(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  int cyc = 0;
  int n_init = 0, n_queue = 0, n_process = 0, n_dequeue = 0, n_stall = 0, n_noncm = 0;
  int n_partial = 0, n_sat = 0;
  always @(posedge clk) begin
    cyc++;
    for (int c = 0; c < C; c++)
      if (rst_n && issue_valid[c] && is_cm[c] && !issue_ready[c]) n_stall++;
  end

  // Issue one instruction on core c and wait for its completion.
  task automatic exec(input int c, input cm_op_e op, input logic [63:0] rn, rm, ra,
                      output logic [63:0] rd_val, output int lat);
    int t0;
    @(negedge clk);
    issue_instr[c] = cm_encode(op, 5'd3, 5'd1, 5'd2, 5'd4);
    rn_val[c] = rn; rm_val[c] = rm; ra_val[c] = ra;
    issue_valid[c] = 1;
    while (!issue_ready[c]) @(negedge clk);
    t0 = cyc;
    @(negedge clk);
    issue_valid[c] = 0;
    while (!wb_valid[c]) @(negedge clk);
    lat = cyc - t0;
    rd_val = wb_data[c];
    check(wb_rd[c] == 5'd3 && wb_we[c] == (op == CM_DEQUEUE), "writeback fields");
    case (op)
      CM_INITIALIZE: n_init++;
      CM_QUEUE:      n_queue++;
      CM_PROCESS:    n_process++;
      CM_DEQUEUE:    n_dequeue++;
      default: ;
    endcase
  endtask

  logic signed [7:0] w1 [M][N], w2 [N][N];
  logic signed [7:0] xin [NINF][M];
  logic signed [7:0] h_dut [NINF][N];

  function automatic logic signed [7:0] q8(input int s);
    s = s >>> 7;
    return (s > 127) ? 8'sd127 : (s < -128) ? -8'sd128 : 8'(s);
  endfunction

  task automatic queue_vec(input int c, input logic signed [7:0] v [], input int len);
    logic [63:0] d; int lat;
    for (int i = 0; i < len; i += 4) begin
      logic [31:0] p = '0;
      int cnt = (len - i < 4) ? len - i : 4;
      for (int b = 0; b < cnt; b++) p[8*b +: 8] = v[i + b];
      exec(c, CM_QUEUE, 64'(p), 64'(cnt), 64'(i), d, lat);
      if (cnt < 4) n_partial++;
    end
  endtask

  task automatic dequeue_vec(input int c, input int len, output logic signed [7:0] v [N]);
    logic [63:0] d; int lat;
    for (int j = 0; j < len; j += 4) begin
      exec(c, CM_DEQUEUE, 64'(j), 64'(4), 0, d, lat);
      for (int b = 0; b < 4; b++) if (j + b < len) v[j + b] = d[8*b +: 8];
    end
  endtask

  task automatic layer1(input int k);
    logic [63:0] d; int lat;
    logic signed [7:0] v [];
    logic signed [7:0] y [N];
    v = new[M];
    for (int i = 0; i < M; i++) v[i] = xin[k][i];
    queue_vec(0, v, M - 1);                      // 15 inputs: last group is partial
    exec(0, CM_QUEUE, 64'(8'(xin[k][M-1])), 64'd1, 64'(M - 1), d, lat);
    n_partial++;
    exec(0, CM_PROCESS, 0, 0, 0, d, lat);
    check(lat == LAT + 2, $sformatf("MVM instruction latency %0d", lat));
    dequeue_vec(0, N, y);
    for (int j = 0; j < N; j++) h_dut[k][j] = (y[j] < 0) ? 8'sd0 : y[j];   // ReLU on core 0
  endtask

  task automatic layer2(input int k);
    logic [63:0] d; int lat;
    logic signed [7:0] v [];
    logic signed [7:0] y [N];
    v = new[N];
    for (int i = 0; i < N; i++) v[i] = h_dut[k][i];
    queue_vec(1, v, N);
    exec(1, CM_PROCESS, 0, 0, 0, d, lat);
    dequeue_vec(1, N, y);
    // reference MLP
    for (int j = 0; j < N; j++) begin
      int s1, s2; logic signed [7:0] hj, yj;
      s2 = 0;
      for (int i = 0; i < N; i++) begin
        s1 = 0;
        for (int r = 0; r < M; r++) s1 += int'(xin[k][r]) * int'(w1[r][i]);
        hj = q8(s1); if (hj < 0) hj = 0;
        s2 += int'(hj) * int'(w2[i][j]);
      end
      yj = q8(s2);
      if ((s2 >>> 7) > 127 || (s2 >>> 7) < -128) n_sat++;
      yj = (yj < 0) ? 8'sd0 : yj;
      if (y[j] < 0) y[j] = 0;
      check(y[j] == yj, $sformatf("inference %0d y[%0d]=%0d exp %0d", k, j, y[j], yj));
    end
  endtask

  initial begin
    logic [63:0] d; int lat;
    for (int c = 0; c < C; c++) begin
      issue_valid[c] = 0; issue_instr[c] = 0; rn_val[c] = 0; rm_val[c] = 0; ra_val[c] = 0;
    end
    for (int i = 0; i < M; i++) for (int j = 0; j < N; j++) w1[i][j] = 8'($urandom);
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) w2[i][j] = 8'($urandom);
    for (int k = 0; k < NINF; k++) for (int i = 0; i < M; i++) xin[k][i] = 8'($urandom);
    for (int i = 0; i < M; i++) xin[0][i] = 8'sd127;   // large input: drives some ADCs to saturation
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Program both tiles in parallel.
    fork
      for (int i = 0; i < M; i++) for (int j = 0; j < N; j++)
        exec(0, CM_INITIALIZE, 64'(8'(w1[i][j])), 64'(j), 64'(i), d, lat);
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
        exec(1, CM_INITIALIZE, 64'(8'(w2[i][j])), 64'(j), 64'(i), d, lat);
    join
    // A non-CM instruction offered to core 0 must not be claimed.
    @(negedge clk);
    issue_instr[0] = 32'h8B020020; issue_valid[0] = 1;
    #1 check(!is_cm[0], "non-CM instruction not claimed");
    n_noncm++;
    @(negedge clk); issue_valid[0] = 0;
    // A CM instruction offered while core 1 is busy stalls.
    fork
      exec(1, CM_PROCESS, 0, 0, 0, d, lat);
      begin
        @(negedge clk); @(negedge clk); @(negedge clk);
        issue_valid[1] = 1;  // still the PROCESS word: unit is busy, so it is held
        repeat (4) @(negedge clk);
        issue_valid[1] = 0;
      end
    join
    // Pipelined inferences: layer 1 of k+1 on core 0 while core 1 runs layer 2 of k.
    layer1(0);
    for (int k = 0; k < NINF; k++) begin
      fork
        if (k + 1 < NINF) layer1(k + 1);
        layer2(k);
      join
    end
    check(n_init > 0,    "mechanism CM_INITIALIZE");
    check(n_queue > 0,   "mechanism CM_QUEUE");
    check(n_process > 0, "mechanism CM_PROCESS");
    check(n_dequeue > 0, "mechanism CM_DEQUEUE");
    check(n_stall > 0,   "mechanism stall");
    check(n_noncm > 0,   "mechanism non-CM pass-by");
    check(n_partial > 0, "mechanism partial transfer");
    check(n_sat > 0,     "mechanism ADC saturation");
    $display("mechanisms: init=%0d queue=%0d process=%0d dequeue=%0d stall=%0d noncm=%0d partial=%0d sat=%0d",
             n_init, n_queue, n_process, n_dequeue, n_stall, n_noncm, n_partial, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
