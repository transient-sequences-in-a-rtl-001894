// noise_lfsr: additive noise source for one node.
//
// The paper adds noise to each node's input but gives neither its distribution
// nor its amplitude. This block uses a 32-bit Galois LFSR (feedback mask
// 0x80200003, taps 32,22,2,1, maximal length) advanced once per time step; its
// low NOISE_BITS bits, read as a signed number, form a uniform noise sample of
// amplitude 2^(NOISE_BITS-1-FRAC) (2^-12 by default). Each node gets its own
// SEED so the five sequences differ.
//
// Interface: 'step' advances the register; 'noise' is registered and valid for
// the whole step. Reset loads SEED (which must be non-zero).
module noise_lfsr
  import hn_pkg::*;
#(
  parameter logic [31:0] SEED       = 32'hACE1_0001,
  parameter int          NOISE_BITS = 13
) (
  input  logic clk,
  input  logic rst_n,
  input  logic step,
  output fx_t  noise
);
  localparam logic [31:0] MASK = 32'h8020_0003;
  logic [31:0] lfsr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    lfsr <= SEED;
    else if (step) lfsr <= (lfsr >> 1) ^ (lfsr[0] ? MASK : 32'h0);
  end

  assign noise = fx_t'($signed(lfsr[NOISE_BITS-1:0]));
endmodule
