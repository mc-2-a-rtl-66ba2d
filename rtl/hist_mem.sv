// hist_mem: the banked histogram memory that counts how often each RV took
// each value over the Markov chain.
//
// B banks of DEPTH counters of W bits (default 320 x 1024 x 20 bits, enough
// for a chain of 10^6 steps). Every stored sample raises one counter by one
// (the "+1" drawn at this memory in the paper's block diagram); the store unit gives the row,
// which is the RV's row plus the sampled value, so a program reserves one
// row per possible value after each RV. That layout is this design's choice.
// Increment is a read-modify-write within one cycle; counters wrap at 2^W.
// clear starts a sweep that zeroes one row of all banks per cycle (DEPTH
// cycles, clearing high meanwhile); increments during a sweep are dropped.
// The host reads one counter per request, data the next cycle.
module hist_mem
  import mc2a_pkg::*;
#(
  parameter int unsigned B     = P_B,
  parameter int unsigned DEPTH = P_DEPTH,
  parameter int unsigned W     = HIST_W,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned BW   = (B > 1) ? $clog2(B) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [B-1:0]          inc,
  input  logic [B-1:0][AW-1:0]  inc_addr,
  input  logic                  clear,
  output logic                  clearing,
  input  logic                  host_re,
  input  logic [BW-1:0]         host_bank,
  input  logic [AW-1:0]         host_addr,
  output logic [W-1:0]          host_rdata
);
  logic [AW-1:0] crow;
  logic [W-1:0]  hrd [B];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing <= 1'b0;
      crow     <= '0;
    end else if (clear && !clearing) begin
      clearing <= 1'b1;
      crow     <= '0;
    end else if (clearing) begin
      crow <= crow + 1'b1;
      if (crow == AW'(DEPTH-1)) clearing <= 1'b0;
    end
  end

  for (genvar b = 0; b < B; b++) begin : g_bank
    logic [W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (clearing)    mem[crow] <= '0;
      else if (inc[b]) mem[inc_addr[b]] <= mem[inc_addr[b]] + 1'b1;
      if (host_re && host_bank == BW'(b)) hrd[b] <= mem[host_addr];
    end
  end

  logic [BW-1:0] hbank_q;
  always_ff @(posedge clk) if (host_re) hbank_q <= host_bank;
  assign host_rdata = hrd[hbank_q];
endmodule
