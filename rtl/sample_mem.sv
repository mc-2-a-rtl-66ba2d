// sample_mem: the banked sample memory holding the current state of every
// random variable (RV).
//
// B banks of DEPTH samples of W bits (default 320 x 1024 x 8 bits: values of
// up to 256 categories, as sized in the paper). Per bank: one synchronous
// read port for the load unit (neighbour / parent states feed the register
// file or address the conditional tables), one write port for the store
// unit (new samples). The host writes initial states and reads results
// through a separate port. Written as an array.
// Timing: read data one cycle after the request; a write is visible to reads
// from the next cycle on. Host writes take priority over store writes to the
// same word.
module sample_mem
  import mc2a_pkg::*;
#(
  parameter int unsigned B     = P_B,
  parameter int unsigned DEPTH = P_DEPTH,
  parameter int unsigned W     = SAMPLE_W,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned BW   = (B > 1) ? $clog2(B) : 1
) (
  input  logic                  clk,
  input  logic [B-1:0]          re,
  input  logic [B-1:0][AW-1:0]  raddr,
  output logic [B-1:0][W-1:0]   rdata,
  input  logic [B-1:0]          we,
  input  logic [B-1:0][AW-1:0]  waddr,
  input  logic [B-1:0][W-1:0]   wdata,
  input  logic                  host_we,
  input  logic                  host_re,
  input  logic [BW-1:0]         host_bank,
  input  logic [AW-1:0]         host_addr,
  input  logic [W-1:0]          host_wdata,
  output logic [W-1:0]          host_rdata
);
  logic [W-1:0] hrd [B];

  for (genvar b = 0; b < B; b++) begin : g_bank
    logic [W-1:0] mem [DEPTH];
    logic         hsel;
    assign hsel = (host_bank == BW'(b));
    always_ff @(posedge clk) begin
      if (we[b]) mem[waddr[b]] <= wdata[b];
      if (host_we && hsel) mem[host_addr] <= host_wdata;
      if (re[b]) rdata[b] <= mem[raddr[b]];
      if (host_re && hsel) hrd[b] <= mem[host_addr];
    end
  end

  // host read data of the bank addressed in the previous cycle
  logic [BW-1:0] hbank_q;
  always_ff @(posedge clk) if (host_re) hbank_q <= host_bank;
  assign host_rdata = hrd[hbank_q];
endmodule
