// prbs15_gen: PRBS15 pattern generator, x^15 + x^14 + 1.
//
// A 15-bit Fibonacci shift register. bit_o is the next pattern bit,
// state[14] ^ state[13], available combinationally; when en is high the bit
// is shifted in at state[0], so the register always holds the last 15 bits
// produced, newest at bit 0. Loading a register of 15 received bits (newest
// at bit 0) therefore makes bit_o predict the next received bit, which is
// how the receiver's checker synchronises.
//
// The proposal only names "PRBS15"; the ITU-T O.150 polynomial, the seed and
// the register layout are this design's choice. Period: 32767 bits.
module prbs15_gen #(
  parameter logic [14:0] SEED = 15'h7FFF
) (
  input  logic        clk,
  input  logic        rst,       // synchronous, loads SEED
  input  logic        en,        // advance by one bit
  input  logic        load,      // load load_val (has priority over en)
  input  logic [14:0] load_val,
  output logic        bit_o,     // bit produced by the next advance
  output logic [14:0] state_o
);
  logic [14:0] state;

  assign bit_o   = state[14] ^ state[13];
  assign state_o = state;

  always_ff @(posedge clk) begin
    if (rst)       state <= SEED;
    else if (load) state <= load_val;
    else if (en)   state <= {state[13:0], bit_o};
  end
endmodule
