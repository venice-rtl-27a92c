// venice_lfsr2: the 2-bit linear-feedback shift register each router uses
// to choose randomly between candidate output ports.
//
// The paper names a simple 2-bit LFSR as the router's pseudo-random source;
// the polynomial and seed are this design's choice: Fibonacci form, new bit
// q[1]^q[0] shifted in at q[0], seed 2'b01, giving the period-3 sequence
// 01 -> 11 -> 10 -> 01. The all-zero state is never entered.
//
// Interface: `step` advances the register at the next rising clock edge;
// `q` is the current state (registered output, no combinational path).
module venice_lfsr2 (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       step,
  output logic [1:0] q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    q <= 2'b01;
    else if (step) q <= {q[0], q[1] ^ q[0]};
  end
endmodule
