// cemux_output_estimator: the output value estimator of CeMux.
//
// An up-down counter: on every enabled cycle it adds +1 if the stochastic output bit z
// is 1 and -1 if it is 0. After a frame of 2^N bits the count equals
// (#ones - #zeros), so count / 2^N is the bipolar estimate 2 (#ones / 2^N) - 1 of the
// stream's value; the fraction point sits implicitly N bits from the right.
// The original design calls for an N-bit up-down counter. A full frame can however
// reach +-2^N, so this counter is N+2 bits wide (two's complement) and never wraps;
// that width is this implementation's choice.
//
// Interface: clk, rst_n (asynchronous, active low), clear (synchronous load of 0,
// priority over en), en (count z this cycle), z (stream bit). count is registered.
module cemux_output_estimator #(
  parameter int unsigned N = cemux_pkg::DEFAULT_N
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                en,
  input  logic                z,
  output logic signed [N+1:0] count
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      count <= '0;
    else if (clear)  count <= '0;
    else if (en)     count <= z ? count + 1'b1 : count - 1'b1;
  end

endmodule
