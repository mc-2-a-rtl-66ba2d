// urng: uniform pseudo-random number source of one sampler element.
//
// A 32-bit Galois LFSR (polynomial x^32 + x^22 + x^2 + x + 1, maximal length)
// that advances STEPS steps per cycle while en is high (a leap-forward
// LFSR). The Gumbel table is addressed by the low 4 bits, and four shifts
// per draw make those 4 bits new in every draw; with one shift per draw,
// three of them would repeat from the previous draw and the noise of
// consecutive categories would be correlated. Every sampler element
// has its own generator, started from a distinct nonzero SEED so that the
// noise of parallel lanes is not identical. The paper only names a URNG at
// the sampler input; the generator type is this design's choice.
// rnd is the register state; it changes on the clock edge after en.
module urng #(
  parameter logic [31:0] SEED  = 32'h1,
  parameter int unsigned STEPS = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [31:0] rnd
);
  localparam logic [31:0] TAPS = 32'h8020_0003;
  localparam logic [31:0] SEED_NZ = (SEED == 32'h0) ? 32'h1 : SEED;

  logic [31:0] nxt;
  always_comb begin
    nxt = rnd;
    for (int i = 0; i < STEPS; i++) nxt = nxt[0] ? ((nxt >> 1) ^ TAPS) : (nxt >> 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rnd <= SEED_NZ;
    else if (en) rnd <= nxt;
  end
endmodule
