// instr_mem: the instruction memory of the VLIW program.
//
// DEPTH entries of IW bits (the densely packed instruction). The host writes
// an entry 32 bits at a time (host_word selects the slice, word 0 holding
// bits 31:0); the fetch stage reads one full entry per cycle, synchronously,
// so the instruction is available the cycle after its PC. Written as an array.
module instr_mem #(
  parameter int unsigned IW    = 64,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned NW   = (IW + 31) / 32,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned WW   = (NW > 1) ? $clog2(NW) : 1
) (
  input  logic          clk,
  input  logic          host_we,
  input  logic [AW-1:0] host_addr,
  input  logic [WW-1:0] host_word,
  input  logic [31:0]   host_wdata,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [IW-1:0] rd_data
);
  logic [NW*32-1:0] mem [DEPTH];
  logic [NW*32-1:0] rd_q;

  always_ff @(posedge clk) begin
    if (host_we && int'(host_word) < NW) mem[host_addr][host_word*32 +: 32] <= host_wdata;
    if (rd_en) rd_q <= mem[rd_addr];
  end
  assign rd_data = rd_q[IW-1:0];
endmodule
