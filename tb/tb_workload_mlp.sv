// tb_workload_mlp -- the two-layer MLP workload in its four tile mappings.
// The network is y = q(W2 * relu(q(W1 * x))), both layers D x D with int8
// weights and activations, where q() is the tile's ADC (arithmetic shift by
// 7, saturate to int8) and ReLU runs on the core. The full-size network has
// D = 1024; here D = 8 and the tile is 2D x 2D = 16 x 16, so each mapping is
// the full-size one scaled down by 128 in every dimension:
//   Case 1: one core, one 2D x 2D tile. W1 and W2 sit on the block diagonal
//           (off-diagonal blocks programmed to zero). One CM_PROCESS computes
//           layer 1 of inference k+1 and layer 2 of inference k together.
//   Case 2: one core, one D x 2D tile. W1 and W2 sit side by side in the
//           columns; each inference needs two CM_PROCESS.
//   Case 3: two cores with D x D each, layer 1 on core 0, layer 2 on core 1.
//   Case 4: four cores with D x D/2 each: cores 0/1 hold the two column
//           halves of W1, cores 2/3 the two halves of W2; the bench, playing
//           the cores' software, gathers the hidden vector and sends it on.
// The mappings follow the architecture's MLP study; the scaled size and the
// block-diagonal pipelining of Case 1 are this bench's choices. Every
// output of every case is compared with a reference computed here, and the
// bench checks that Case 2 issues twice as many CM_PROCESS per inference as
// the pipelined Case 1 (one per inference plus one to drain).
module tb_workload_mlp;
  import alpine_pkg::*;
  localparam int C = 4, D = 8, M = 2 * D, N = 2 * D, NINF = 4;
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

  int n_proc [C];

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
    if (op == CM_PROCESS) n_proc[c]++;
  endtask

  task automatic init_w(input int c, input int row, input int col, input logic signed [7:0] w);
    logic [63:0] d;
    exec(c, CM_INITIALIZE, 64'(8'(w)), 64'(col), 64'(row), d);
  endtask

  // Queue len bytes of v starting at v[0] into input memory index base.
  task automatic queue_vec(input int c, input int base, input logic signed [7:0] v [M], input int len);
    logic [63:0] d;
    for (int i = 0; i < len; i += 4) begin
      logic [31:0] p = '0;
      for (int b = 0; b < 4; b++) p[8*b +: 8] = v[i + b];
      exec(c, CM_QUEUE, 64'(p), 64'd4, 64'(base + i), d);
    end
  endtask

  task automatic dequeue_vec(input int c, input int base, input int len, output logic signed [7:0] v [N]);
    logic [63:0] d;
    for (int j = 0; j < len; j += 4) begin
      exec(c, CM_DEQUEUE, 64'(base + j), 64'd4, 0, d);
      for (int b = 0; b < 4; b++) v[j + b] = d[8*b +: 8];
    end
  endtask

  function automatic logic signed [7:0] q8(input int s);
    s = s >>> 7;
    return (s > 127) ? 8'sd127 : (s < -128) ? -8'sd128 : 8'(s);
  endfunction

  logic signed [7:0] w1 [D][D], w2 [D][D];
  logic signed [7:0] xin [NINF][D];
  logic signed [7:0] h_ref [NINF][D], y_ref [NINF][D];

  task automatic compare(input string cname, input int k, input logic signed [7:0] y [N]);
    for (int j = 0; j < D; j++)
      check(y[j] == y_ref[k][j], $sformatf("%s inference %0d y[%0d]=%0d exp %0d",
                                           cname, k, j, y[j], y_ref[k][j]));
  endtask

  function automatic void relu(ref logic signed [7:0] v [N]);
    for (int j = 0; j < N; j++) if (v[j] < 0) v[j] = 0;
  endfunction

  task automatic case1;   // core 0, block-diagonal, pipelined
    logic signed [7:0] v [M], o [N], h [N];
    logic [63:0] d;
    for (int i = 0; i < M; i++) for (int j = 0; j < N; j++)
      init_w(0, i, j, (i < D && j < D) ? w1[i][j] :
                      (i >= D && j >= D) ? w2[i-D][j-D] : 8'sd0);
    for (int j = 0; j < N; j++) h[j] = 0;
    for (int t = 0; t <= NINF; t++) begin
      for (int i = 0; i < D; i++) begin
        v[i]     = (t < NINF) ? xin[t][i] : 8'sd0;
        v[D + i] = (t > 0) ? h[i] : 8'sd0;
      end
      queue_vec(0, 0, v, M);
      exec(0, CM_PROCESS, 0, 0, 0, d);
      dequeue_vec(0, 0, N, o);
      if (t > 0) begin
        logic signed [7:0] y [N];
        for (int j = 0; j < D; j++) y[j] = o[D + j];
        compare("case1", t - 1, y);
      end
      for (int j = 0; j < D; j++) h[j] = o[j];
      relu(h);
    end
  endtask

  task automatic case2;   // core 1, layers side by side in the columns
    logic signed [7:0] v [M], o [N];
    logic [63:0] d;
    for (int i = 0; i < D; i++) for (int j = 0; j < N; j++)
      init_w(1, i, j, (j < D) ? w1[i][j] : w2[i][j-D]);
    for (int k = 0; k < NINF; k++) begin
      for (int i = 0; i < M; i++) v[i] = (i < D) ? xin[k][i] : 8'sd0;
      queue_vec(1, 0, v, D);
      exec(1, CM_PROCESS, 0, 0, 0, d);
      dequeue_vec(1, 0, D, o);
      relu(o);
      for (int i = 0; i < M; i++) v[i] = (i < D) ? o[i] : 8'sd0;
      queue_vec(1, 0, v, D);
      exec(1, CM_PROCESS, 0, 0, 0, d);
      dequeue_vec(1, D, D, o);
      compare("case2", k, o);
    end
  endtask

  task automatic case3;   // cores 2 and 3, one layer each
    logic signed [7:0] v [M], o [N];
    logic [63:0] d;
    fork
      for (int i = 0; i < D; i++) for (int j = 0; j < D; j++) init_w(2, i, j, w1[i][j]);
      for (int i = 0; i < D; i++) for (int j = 0; j < D; j++) init_w(3, i, j, w2[i][j]);
    join
    for (int k = 0; k < NINF; k++) begin
      for (int i = 0; i < M; i++) v[i] = (i < D) ? xin[k][i] : 8'sd0;
      queue_vec(2, 0, v, D);
      exec(2, CM_PROCESS, 0, 0, 0, d);
      dequeue_vec(2, 0, D, o);
      relu(o);
      for (int i = 0; i < M; i++) v[i] = (i < D) ? o[i] : 8'sd0;
      queue_vec(3, 0, v, D);
      exec(3, CM_PROCESS, 0, 0, 0, d);
      dequeue_vec(3, 0, D, o);
      compare("case3", k, o);
    end
  endtask

  // One core's share of a split layer: queue v, run the MVM, fetch D/2 outputs.
  task automatic half(input int c, input logic signed [7:0] v [M], output logic signed [7:0] o [N]);
    logic [63:0] d;
    queue_vec(c, 0, v, D);
    exec(c, CM_PROCESS, 0, 0, 0, d);
    dequeue_vec(c, 0, D / 2, o);
  endtask

  task automatic case4;   // four cores, each layer split into two column halves
    localparam int H = D / 2;
    logic signed [7:0] v [M], h [N], y [N], h0 [N], h1 [N];
    fork
      for (int i = 0; i < D; i++) for (int j = 0; j < H; j++) init_w(0, i, j, w1[i][j]);
      for (int i = 0; i < D; i++) for (int j = 0; j < H; j++) init_w(1, i, j, w1[i][H + j]);
      for (int i = 0; i < D; i++) for (int j = 0; j < H; j++) init_w(2, i, j, w2[i][j]);
      for (int i = 0; i < D; i++) for (int j = 0; j < H; j++) init_w(3, i, j, w2[i][H + j]);
    join
    for (int k = 0; k < NINF; k++) begin
      for (int i = 0; i < M; i++) v[i] = (i < D) ? xin[k][i] : 8'sd0;
      fork
        half(0, v, h0);
        half(1, v, h1);
      join
      for (int j = 0; j < H; j++) begin h[j] = h0[j]; h[H + j] = h1[j]; end
      relu(h);
      for (int i = 0; i < M; i++) v[i] = (i < D) ? h[i] : 8'sd0;
      fork
        half(2, v, h0);
        half(3, v, h1);
      join
      for (int j = 0; j < H; j++) begin y[j] = h0[j]; y[H + j] = h1[j]; end
      compare("case4", k, y);
    end
  endtask

  initial begin
    int p1, p2;
    for (int c = 0; c < C; c++) begin
      issue_valid[c] = 0; issue_instr[c] = 0; rn_val[c] = 0; rm_val[c] = 0; ra_val[c] = 0;
      n_proc[c] = 0;
    end
    for (int i = 0; i < D; i++) for (int j = 0; j < D; j++) begin
      w1[i][j] = 8'($urandom); w2[i][j] = 8'($urandom);
    end
    for (int k = 0; k < NINF; k++) for (int i = 0; i < D; i++) xin[k][i] = 8'($urandom);
    for (int k = 0; k < NINF; k++) begin
      for (int j = 0; j < D; j++) begin
        int s;
        s = 0;
        for (int i = 0; i < D; i++) s += int'(xin[k][i]) * int'(w1[i][j]);
        h_ref[k][j] = q8(s);
        if (h_ref[k][j] < 0) h_ref[k][j] = 0;
      end
      for (int j = 0; j < D; j++) begin
        int s;
        s = 0;
        for (int i = 0; i < D; i++) s += int'(h_ref[k][i]) * int'(w2[i][j]);
        y_ref[k][j] = q8(s);
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork case1; case2; join
    p1 = n_proc[0]; p2 = n_proc[1];
    check(p1 == NINF + 1, $sformatf("case1 CM_PROCESS count %0d", p1));
    check(p2 == 2 * NINF, $sformatf("case2 CM_PROCESS count %0d", p2));
    case3;
    case4;
    $display("CM_PROCESS per %0d inferences: case1=%0d case2=%0d case3=%0d+%0d",
             NINF, p1, p2, n_proc[2] - NINF, n_proc[3] - NINF);
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
