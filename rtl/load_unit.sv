// load_unit: address generation for the per-bank loads of an instruction.
//
// The MemSel field holds, for each of the B banks, {enable, source, indirect,
// row}. An enabled bank reads its data memory (source 0: weights, tables) or
// its sample memory (source 1: current RV states). A direct load uses the row
// as given; an indirect load adds the latest sample produced by sampler
// element (bank mod S), so the row of a conditional probability table can
// follow a value just sampled (the data-dependent "Addr" input of the paper's
// memory). One cycle later the unit returns, per bank, the word read (sample
// values zero-extended) and a write enable for the register file.
// The sub-field layout is this design's choice; the paper gives MemSel as
// B*N bits.
module load_unit
  import mc2a_pkg::*;
#(
  parameter int unsigned B      = P_B,
  parameter int unsigned S      = P_S,
  parameter int unsigned AW     = $clog2(P_DEPTH),
  parameter int unsigned W      = DATA_W,
  parameter int unsigned SW     = SAMPLE_W,
  localparam int unsigned N     = AW + 3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  valid,                 // instruction loads
  input  logic [B-1:0][N-1:0]   memsel,
  input  logic [S-1:0][SW-1:0]  last_sample,
  output logic [B-1:0]          dmem_re,
  output logic [B-1:0]          smem_re,
  output logic [B-1:0][AW-1:0]  addr,
  input  logic [B-1:0][W-1:0]   dmem_rdata,
  input  logic [B-1:0][SW-1:0]  smem_rdata,
  output logic [B-1:0]          ld_we,
  output logic [B-1:0][W-1:0]   ld_data
);
  logic [B-1:0] src_q;

  for (genvar b = 0; b < B; b++) begin : g_bank
    logic          en, src, ind;
    logic [AW-1:0] row;
    assign {en, src, ind, row} = memsel[b];
    assign addr[b]    = ind ? row + AW'(last_sample[b % S]) : row;
    assign dmem_re[b] = valid && en && !src;
    assign smem_re[b] = valid && en &&  src;
    assign ld_data[b] = src_q[b] ? W'(smem_rdata[b]) : dmem_rdata[b];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_we <= '0;
      src_q <= '0;
    end else begin
      ld_we <= dmem_re | smem_re;
      src_q <= smem_re;
    end
  end
endmodule
