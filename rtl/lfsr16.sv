// lfsr16: 16-bit maximal-length Galois LFSR (taps 16,14,13,11; polynomial
// 0xB400) used as the pseudo-random source for cache replacement. It advances
// by one step in every cycle in which 'step' is high; 'value' is the current
// state, never zero. The seed is a parameter so several instances differ.
module lfsr16 #(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        step,
  output logic [15:0] value
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    value <= (SEED == '0) ? 16'h1 : SEED;
    else if (step) value <= {1'b0, value[15:1]} ^ (value[0] ? 16'hB400 : 16'h0);
  end

endmodule
