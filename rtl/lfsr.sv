// lfsr: 32-bit Galois linear-feedback shift register used as the random source
// of the SHB entry selection, the random line within the window and the random
// replacement victim. Polynomial x^32+x^22+x^2+x+1 (taps 0x80200003), period
// 2^32-1. The state advances every cycle when en is high; rnd is the current
// state. The paper asks for random choices but names no generator; the LFSR
// is this design's choice.
module lfsr #(
  parameter logic [31:0] SEED = 32'h1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [31:0] rnd
);
  logic [31:0] state_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  state_q <= (SEED == '0) ? 32'h1 : SEED;
    else if (en) state_q <= state_q[0] ? ((state_q >> 1) ^ 32'h8020_0003) : (state_q >> 1);
  end

  assign rnd = state_q;
endmodule
