// cemux_precise_sampler: the select-line source of the CeMux hardwired mux tree.
//
// A single N-bit up counter whose state drives all N select lines at once: bit N-1
// (the MSB) selects at the root of the tree (level 1), bit N-2 at level 2, and so on
// down to the LSB at level N. Because the state visits every value of [0, 2^N - 1]
// exactly once per 2^N cycles, every one of the 2^N tree slots is sampled exactly
// once per frame, so an input wired to q slots is sampled exactly q times ("precise
// sampling"): the number of times an input is chosen no longer fluctuates. With the
// MSB at the root, the output stream is made of runs taken from one input at a time.
// The counter and the MSB-at-root wiring follow the original design; the clear input,
// the last flag and reset to 0 are this implementation's choices.
//
// Interface: clk, rst_n (asynchronous, active low), clear (synchronous return to 0,
// priority over en), en (advance). sel is the registered state; last is high while
// sel is all ones, i.e. during the final cycle of a 2^N-cycle frame.
module cemux_precise_sampler #(
  parameter int unsigned N = cemux_pkg::DEFAULT_N
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         en,
  output logic [N-1:0] sel,
  output logic         last
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      sel <= '0;
    else if (clear)  sel <= '0;
    else if (en)     sel <= sel + 1'b1;
  end

  assign last = &sel;

endmodule
