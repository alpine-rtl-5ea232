// pcm_crossbar -- behavioural model of the M x N phase-change-memory
// crossbar of an AIMC tile (analog; not synthesizable logic in a real chip).
//
// Each cell holds a signed 8-bit weight, standing for the conductance
// difference of the pair of PCM devices that encodes one signed weight. While
// word line i is pulsed (pulse[i]) with polarity neg[i], every cell on it
// adds its conductance times +-V to the current of its bit line; the bit
// line integrates that current over time. The model does this once per clock
// cycle: charge[j] += sum over pulsed rows i of (neg[i] ? -w[i][j] : w[i][j]).
// With pulse durations equal to |x_i| cycles, charge[j] ends as the exact
// dot product sum_i x_i * w[i][j] (Ohm's and Kirchhoff's laws, ideal
// devices: no noise, drift or IR drop).
//
// Interface/timing: prog_we writes one weight at the clock edge (out-of-range
// addresses are ignored). clear zeroes the integrators at the next edge.
// charge is registered; reset (synchronous here) also zeroes it. Weights are not touched by reset: PCM is
// non-volatile, so a cell holds whatever was last programmed.
//
// acc is assigned with '=' inside the clocked process on purpose: it is a
// per-edge scratch sum, never read outside that process.
module pcm_crossbar #(
  parameter int unsigned M     = 2048,
  parameter int unsigned N     = 2048,
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    prog_we,
  input  logic [31:0]             prog_row,
  input  logic [31:0]             prog_col,
  input  logic signed [7:0]       prog_w,
  input  logic                    clear,
  input  logic [M-1:0]            pulse,
  input  logic [M-1:0]            neg,
  output logic signed [ACC_W-1:0] charge [N]
);
  logic signed [7:0] w [M][N];

  always_ff @(posedge clk) begin
    if (prog_we && prog_row < M && prog_col < N)
      w[prog_row][prog_col] <= prog_w;
  end

  logic signed [ACC_W-1:0] acc [N];

  // Integrators are cleared synchronously by reset or by clear. acc is a
  // scratch copy used to sum all pulsed rows within one clock edge.
  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      for (int j = 0; j < int'(N); j++) charge[j] <= '0;
    end else if (|pulse) begin
      acc = charge;
      for (int i = 0; i < int'(M); i++) begin
        if (pulse[i]) begin
          for (int j = 0; j < int'(N); j++)
            acc[j] = neg[i] ? acc[j] - ACC_W'(w[i][j]) : acc[j] + ACC_W'(w[i][j]);
        end
      end
      charge <= acc;
    end
  end
endmodule
