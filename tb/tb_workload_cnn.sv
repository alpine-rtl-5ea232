// tb_workload_cnn -- the CNN workload: convolution layers on AIMC tiles.
// Each convolution kernel is flattened into one tile column (row index =
// (ky*K + kx)*CIN + ci), and each input patch is flattened the same way and
// queued; one CM_PROCESS then gives all output channels of one output pixel.
// Two layers run on two cores, one layer per core as in the CNN mapping:
//   conv1: 3x3, 1 -> 4 channels, on a 6x6 image   (9 rows x 4 columns)
//   conv2: 3x3, 4 -> 4 channels, on conv1's 4x4 output (36 rows x 4 columns)
// with ReLU on the core after each layer. The bench plays both cores'
// software; patches of conv2 are started as soon as conv1 has produced the
// pixels they need (fine-grained pipelining). The network here is a small
// stand-in for CNN-F/M/S, whose layers need up to 4608 rows. Stride 1, no
// padding and no pooling are this bench's simplifications. Every output is
// compared with a direct convolution computed here.
module tb_workload_cnn;
  import alpine_pkg::*;
  localparam int C = 2, K = 3, IMG = 6, C1 = 4, C2 = 4;
  localparam int O1 = IMG - K + 1, O2 = O1 - K + 1;
  localparam int R1 = K * K, R2 = K * K * C1;
  localparam int M = 40, N = 8;
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

  task automatic exec(input int c, input cm_op_e op, input logic [63:0] rn, rm, ra,
                      output logic [63:0] rd_val);
    @(negedge clk);
    issue_instr[c] = cm_encode(op, 5'd9, 5'd1, 5'd2, 5'd4);
    rn_val[c] = rn; rm_val[c] = rm; ra_val[c] = ra;
    issue_valid[c] = 1;
    while (!issue_ready[c]) @(negedge clk);
    @(negedge clk);
    issue_valid[c] = 0;
    while (!wb_valid[c]) @(negedge clk);
    rd_val = wb_data[c];
  endtask

  task automatic mvm(input int c, input logic signed [7:0] v [M], input int len,
                     output logic signed [7:0] o [N]);
    logic [63:0] d;
    for (int i = 0; i < len; i += 4) begin
      logic [31:0] p = '0;
      int cnt;
      cnt = (len - i < 4) ? len - i : 4;
      for (int b = 0; b < cnt; b++) p[8*b +: 8] = v[i + b];
      exec(c, CM_QUEUE, 64'(p), 64'(cnt), 64'(i), d);
    end
    exec(c, CM_PROCESS, 0, 0, 0, d);
    exec(c, CM_DEQUEUE, 64'd0, 64'd4, 0, d);
    for (int b = 0; b < 4; b++) o[b] = d[8*b +: 8];
  endtask

  function automatic logic signed [7:0] q8(input int s);
    s = s >>> 7;
    return (s > 127) ? 8'sd127 : (s < -128) ? -8'sd128 : 8'(s);
  endfunction

  logic signed [7:0] img [IMG][IMG];
  logic signed [7:0] k1 [K][K][C1], k2 [K][K][C1][C2];
  logic signed [7:0] f1_ref [O1][O1][C1], f2_ref [O2][O2][C2];
  logic signed [7:0] f1 [O1][O1][C1];
  bit                f1_done [O1][O1];
  int                n_mvm [C];

  task automatic conv1_core;
    logic signed [7:0] v [M], o [N];
    for (int y = 0; y < O1; y++) for (int x = 0; x < O1; x++) begin
      for (int i = 0; i < M; i++) v[i] = 0;
      for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++)
        v[ky*K + kx] = img[y + ky][x + kx];
      mvm(0, v, R1, o);
      n_mvm[0]++;
      for (int co = 0; co < C1; co++) begin
        f1[y][x][co] = (o[co] < 0) ? 8'sd0 : o[co];
        check(f1[y][x][co] == f1_ref[y][x][co],
              $sformatf("conv1 (%0d,%0d,%0d)=%0d exp %0d", y, x, co, f1[y][x][co], f1_ref[y][x][co]));
      end
      f1_done[y][x] = 1;
    end
  endtask

  task automatic conv2_core;
    logic signed [7:0] v [M], o [N];
    for (int y = 0; y < O2; y++) for (int x = 0; x < O2; x++) begin
      wait (f1_done[y + K - 1][x + K - 1]);   // last pixel of the patch is ready
      for (int i = 0; i < M; i++) v[i] = 0;
      for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++)
        for (int ci = 0; ci < C1; ci++) v[(ky*K + kx)*C1 + ci] = f1[y + ky][x + kx][ci];
      mvm(1, v, R2, o);
      n_mvm[1]++;
      for (int co = 0; co < C2; co++) begin
        logic signed [7:0] r;
        r = (o[co] < 0) ? 8'sd0 : o[co];
        check(r == f2_ref[y][x][co],
              $sformatf("conv2 (%0d,%0d,%0d)=%0d exp %0d", y, x, co, r, f2_ref[y][x][co]));
      end
    end
  endtask

  initial begin
    logic [63:0] d;
    for (int c = 0; c < C; c++) begin
      issue_valid[c] = 0; issue_instr[c] = 0; rn_val[c] = 0; rm_val[c] = 0; ra_val[c] = 0;
      n_mvm[c] = 0;
    end
    for (int y = 0; y < IMG; y++) for (int x = 0; x < IMG; x++) img[y][x] = 8'($urandom);
    for (int a = 0; a < K; a++) for (int b = 0; b < K; b++) for (int c = 0; c < C1; c++) begin
      k1[a][b][c] = 8'($urandom);
      for (int e = 0; e < C2; e++) k2[a][b][c][e] = 8'($urandom);
    end
    for (int y = 0; y < O1; y++) for (int x = 0; x < O1; x++) begin
      f1_done[y][x] = 0;
      for (int co = 0; co < C1; co++) begin
        int s;
        s = 0;
        for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++)
          s += int'(img[y + ky][x + kx]) * int'(k1[ky][kx][co]);
        f1_ref[y][x][co] = q8(s);
        if (f1_ref[y][x][co] < 0) f1_ref[y][x][co] = 0;
      end
    end
    for (int y = 0; y < O2; y++) for (int x = 0; x < O2; x++)
      for (int co = 0; co < C2; co++) begin
        int s;
        s = 0;
        for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++)
          for (int ci = 0; ci < C1; ci++)
            s += int'(f1_ref[y + ky][x + kx][ci]) * int'(k2[ky][kx][ci][co]);
        f2_ref[y][x][co] = q8(s);
        if (f2_ref[y][x][co] < 0) f2_ref[y][x][co] = 0;
      end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Flattened kernels: one column per output channel.
    fork
      for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++) for (int co = 0; co < C1; co++)
        exec(0, CM_INITIALIZE, 64'(8'(k1[ky][kx][co])), 64'(co), 64'(ky*K + kx), d);
      for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++)
        for (int ci = 0; ci < C1; ci++) for (int co = 0; co < C2; co++)
          exec(1, CM_INITIALIZE, 64'(8'(k2[ky][kx][ci][co])), 64'(co), 64'((ky*K + kx)*C1 + ci), d);
    join
    fork
      conv1_core;
      conv2_core;
    join
    check(n_mvm[0] == O1 * O1 && n_mvm[1] == O2 * O2, "one CM_PROCESS per output pixel");
    $display("MVMs: conv1=%0d conv2=%0d", n_mvm[0], n_mvm[1]);
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
