// cemux_delay_line: the tap memory of the stochastic FIR filter.
//
// An M-stage shift register of N-bit samples. On shift, the newest sample enters tap 0
// and every tap k moves to tap k+1, so tap k holds X_{i-k} for the filter sum
// Z_i = sum_k h_k X_{i-k}. All taps are read in parallel by the comparator array and
// stay unchanged between shifts. The original work leaves this storage unspecified
// (it is the same for every filter it compares); a flip-flop shift register is this
// implementation's choice.
//
// Samples are unsigned N-bit stochastic probabilities: value 2 s / 2^N - 1. Reset
// fills every tap with 2^(N-1), the bipolar value 0, so the filter starts from silence.
//
// Interface: clk, rst_n (asynchronous, active low), shift, din; taps are registered
// and change one cycle after a shift.
module cemux_delay_line #(
  parameter int unsigned N = cemux_pkg::DEFAULT_N,
  parameter int unsigned M = cemux_pkg::DEFAULT_M
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                shift,
  input  logic [N-1:0]        din,
  output logic [M-1:0][N-1:0] taps
);

  localparam logic [N-1:0] ZERO = N'(1) << (N - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      taps <= {M{ZERO}};
    end else if (shift) begin
      taps[0] <= din;
      for (int k = 1; k < M; k++) taps[k] <= taps[k-1];
    end
  end

endmodule
