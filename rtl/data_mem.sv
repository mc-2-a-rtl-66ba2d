// data_mem: the banked input-data / weight memory (conditional distribution
// tables, couplings, features).
//
// B independent banks of DEPTH words of W bits (default 320 banks of 1024 x
// 32 bits, the size of one compiled SRAM macro per bank as in the paper).
// Each bank has one synchronous read port driven by the load unit, so the
// memory delivers B words per cycle, and the host fills it through a single
// write port. Written as an array so that any simulator or synthesis tool can
// map it; a taped-out version would use the SRAM macros.
// Timing: rdata[b] is valid the cycle after re[b]; it holds otherwise.
module data_mem
  import mc2a_pkg::*;
#(
  parameter int unsigned B     = P_B,
  parameter int unsigned DEPTH = P_DEPTH,
  parameter int unsigned W     = DATA_W,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned BW   = (B > 1) ? $clog2(B) : 1
) (
  input  logic                  clk,
  input  logic [B-1:0]          re,
  input  logic [B-1:0][AW-1:0]  raddr,
  output logic [B-1:0][W-1:0]   rdata,
  input  logic                  host_we,
  input  logic [BW-1:0]         host_bank,
  input  logic [AW-1:0]         host_addr,
  input  logic [W-1:0]          host_wdata
);
  for (genvar b = 0; b < B; b++) begin : g_bank
    logic [W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (host_we && host_bank == BW'(b)) mem[host_addr] <= host_wdata;
      if (re[b]) rdata[b] <= mem[raddr[b]];
    end
  end
endmodule
