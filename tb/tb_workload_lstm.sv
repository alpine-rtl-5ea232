// tb_workload_lstm -- the LSTM workload: a recurrent cell plus a dense
// output layer, run over several time steps.
// Core 0's tile holds the cell. Its rows are [x ; h ; 1] (NX inputs, NH
// recurrent inputs, and a constant-1 input whose row carries the biases).
// Its 4*NH columns are the four gate pre-activations i, f, g, o. One
// CM_PROCESS per time step gives all four gates. Core 1's tile holds the
// dense layer (NH x NY). The activations run on the core; here the bench
// plays the core. The core code keeps the cell state c as a Q7 integer and
// uses piecewise-linear activations on the int8 ADC codes:
//   sig(a)  = clamp(64 + a/2, 0, 127)   (Q7, 127 ~ 1.0)
//   tanh(a) = clamp(a, -127, 127)
//   c' = clamp16((sig(f)*c + sig(i)*tanh(g)) >>> 7)
//   h' = (sig(o) * tanh(clamp(c', -127, 127))) >>> 7
// The mapping (cell on one tile, dense layer on a further core) follows the
// LSTM study's multi-core case. The sizes here (NX = 4, NH = 4, NY = 4, so
// the cell needs 9 x 16) are small stand-ins for its n_h = 256..750
// networks. The activation approximations are this bench's choices. The
// reference recomputes the whole sequence from the weights with plain
// integer sums, and every gate code, every h and every output is compared.
module tb_workload_lstm;
  import alpine_pkg::*;
  localparam int C = 2, NX = 4, NH = 4, NY = 4, T = 6;
  localparam int ROWS = NX + NH + 1, COLS = 4 * NH;
  localparam int M = 16, N = 16;
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

  // Queue v[0..len-1] (len a multiple of 4 or the remainder as a partial group).
  task automatic queue_vec(input int c, input logic signed [7:0] v [M], input int len);
    logic [63:0] d;
    for (int i = 0; i < len; i += 4) begin
      logic [31:0] p = '0;
      int cnt;
      cnt = (len - i < 4) ? len - i : 4;
      for (int b = 0; b < cnt; b++) p[8*b +: 8] = v[i + b];
      exec(c, CM_QUEUE, 64'(p), 64'(cnt), 64'(i), d);
    end
  endtask

  task automatic mvm(input int c, input logic signed [7:0] v [M], input int len,
                     input int nout, output logic signed [7:0] o [N]);
    logic [63:0] d;
    queue_vec(c, v, len);
    exec(c, CM_PROCESS, 0, 0, 0, d);
    for (int j = 0; j < nout; j += 4) begin
      exec(c, CM_DEQUEUE, 64'(j), 64'd4, 0, d);
      for (int b = 0; b < 4; b++) o[j + b] = d[8*b +: 8];
    end
  endtask

  function automatic logic signed [7:0] q8(input int s);
    s = s >>> 7;
    return (s > 127) ? 8'sd127 : (s < -128) ? -8'sd128 : 8'(s);
  endfunction
  function automatic int clampi(input int v, input int lo, input int hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction
  function automatic int sig(input int a);
    return clampi(64 + (a >>> 1), 0, 127);
  endfunction
  function automatic int tnh(input int a);
    return clampi(a, -127, 127);
  endfunction

  logic signed [7:0] wc [ROWS][COLS], wd [NH][NY];
  logic signed [7:0] xs [T][NX];

  initial begin
    logic [63:0] d;
    logic signed [7:0] v [M], o [N];
    int c_dut [NH], c_ref [NH];
    logic signed [7:0] h_dut [NH], h_ref [NH];
    for (int k = 0; k < C; k++) begin
      issue_valid[k] = 0; issue_instr[k] = 0; rn_val[k] = 0; rm_val[k] = 0; ra_val[k] = 0;
    end
    for (int i = 0; i < ROWS; i++) for (int j = 0; j < COLS; j++) wc[i][j] = 8'($urandom);
    for (int i = 0; i < NH; i++) for (int j = 0; j < NY; j++) wd[i][j] = 8'($urandom);
    for (int t = 0; t < T; t++) for (int i = 0; i < NX; i++) xs[t][i] = 8'($urandom);
    for (int j = 0; j < NH; j++) begin c_dut[j] = 0; c_ref[j] = 0; h_dut[j] = 0; h_ref[j] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      for (int i = 0; i < ROWS; i++) for (int j = 0; j < COLS; j++)
        exec(0, CM_INITIALIZE, 64'(8'(wc[i][j])), 64'(j), 64'(i), d);
      for (int i = 0; i < NH; i++) for (int j = 0; j < NY; j++)
        exec(1, CM_INITIALIZE, 64'(8'(wd[i][j])), 64'(j), 64'(i), d);
    join
    for (int t = 0; t < T; t++) begin
      logic signed [7:0] gref [COLS];
      logic signed [7:0] y [N];
      // reference: plain integer sums over [x ; h ; 1]
      for (int j = 0; j < COLS; j++) begin
        int s;
        s = 0;
        for (int i = 0; i < NX; i++) s += int'(xs[t][i]) * int'(wc[i][j]);
        for (int i = 0; i < NH; i++) s += int'(h_ref[i]) * int'(wc[NX + i][j]);
        s += int'(wc[NX + NH][j]);
        gref[j] = q8(s);
      end
      for (int j = 0; j < NH; j++) begin
        c_ref[j] = clampi((sig(gref[NH + j]) * c_ref[j] + sig(gref[j]) * tnh(gref[2*NH + j])) >>> 7,
                          -32768, 32767);
        h_ref[j] = 8'((sig(gref[3*NH + j]) * tnh(clampi(c_ref[j], -127, 127))) >>> 7);
      end
      // core 0 software: one MVM for all four gates
      for (int i = 0; i < M; i++) v[i] = 0;
      for (int i = 0; i < NX; i++) v[i] = xs[t][i];
      for (int i = 0; i < NH; i++) v[NX + i] = h_dut[i];
      v[NX + NH] = 8'sd1;
      mvm(0, v, ROWS, COLS, o);
      for (int j = 0; j < COLS; j++)
        check(o[j] == gref[j], $sformatf("t=%0d gate code %0d: %0d exp %0d", t, j, o[j], gref[j]));
      for (int j = 0; j < NH; j++) begin
        c_dut[j] = clampi((sig(o[NH + j]) * c_dut[j] + sig(o[j]) * tnh(o[2*NH + j])) >>> 7,
                          -32768, 32767);
        h_dut[j] = 8'((sig(o[3*NH + j]) * tnh(clampi(c_dut[j], -127, 127))) >>> 7);
        check(h_dut[j] == h_ref[j], $sformatf("t=%0d h[%0d]=%0d exp %0d", t, j, h_dut[j], h_ref[j]));
      end
      // core 1: dense output layer on h
      for (int i = 0; i < M; i++) v[i] = (i < NH) ? h_dut[i] : 8'sd0;
      mvm(1, v, NH, NY, y);
      for (int j = 0; j < NY; j++) begin
        int s;
        s = 0;
        for (int i = 0; i < NH; i++) s += int'(h_ref[i]) * int'(wd[i][j]);
        check(y[j] == q8(s), $sformatf("t=%0d y[%0d]=%0d exp %0d", t, j, y[j], q8(s)));
      end
    end
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
