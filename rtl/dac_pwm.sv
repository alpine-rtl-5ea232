// dac_pwm -- the tile's bank of word-line DACs, one per crossbar row.
//
// Each signed 8-bit input is applied to its word line as a voltage pulse
// whose polarity is the sign of the input (+V or -V) and whose duration is
// proportional to its magnitude: here |x| clock cycles, so -128 gives the
// longest pulse, 128 cycles. This time encoding follows the architecture;
// one cycle per LSB is this design's choice. The voltage itself is analog;
// this module is the digital pulse-width modulator that times it, with
// pulse[i] meaning "row i is driven this cycle" and neg[i] its polarity.
//
// Timing: a start pulse opens a window of PULSE_WINDOW cycles beginning the
// next cycle (busy high). In window cycle t (0-based), pulse[i] = (t < |x_i|).
// done is a one-cycle pulse in the cycle right after the window. x must stay
// stable while busy.
module dac_pwm #(
  parameter int unsigned M            = 2048,
  parameter int unsigned PULSE_WINDOW = 128
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic signed [7:0] x [M],
  output logic [M-1:0]      pulse,
  output logic [M-1:0]      neg,
  output logic              busy,
  output logic              done
);
  logic [7:0] t_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_q  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        t_q  <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        if (32'(t_q) == PULSE_WINDOW - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        t_q <= t_q + 8'd1;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < int'(M); i++) begin
      automatic logic [7:0] mag = x[i][7] ? 8'(-x[i]) : 8'(x[i]);
      pulse[i] = busy && (t_q < mag);
      neg[i]   = x[i][7];
    end
  end
endmodule
