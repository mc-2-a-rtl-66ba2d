// regfile: the multi-bank register file between the memories and the
// crossbar.
//
// B banks of D registers of W bits. Per bank and cycle, the RFCtrl field of
// the instruction names one register (log2(D) bits per bank, as in the
// paper's ISA). If the instruction loaded a word for this bank, the word is
// written into that register and, in the same cycle, passed on (write-through
// bypass); otherwise the register's stored value is read. A loaded value can
// therefore be used at once and kept for reuse by later instructions (for
// instance the samples of shared neighbours in a grid). A second write port
// takes results written back by the compute unit (multi-cycle energies such
// as the PAS score vector); a write-back and a load to the same register in
// one cycle leave the write-back value. The one-index-per-bank rule and the
// write-back port are this design's reading of the paper.
// Timing: rd_data registered, valid the cycle after the request.
module regfile
  import mc2a_pkg::*;
#(
  parameter int unsigned B  = P_B,
  parameter int unsigned D  = P_D,
  parameter int unsigned W  = DATA_W,
  localparam int unsigned DW = (D > 1) ? $clog2(D) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  rd_valid,
  input  logic [B-1:0][DW-1:0]  idx,
  input  logic [B-1:0]          ld_we,
  input  logic [B-1:0][W-1:0]   ld_data,
  input  logic [B-1:0]          wb_we,
  input  logic [B-1:0][DW-1:0]  wb_idx,
  input  logic [B-1:0][W-1:0]   wb_data,
  output logic [B-1:0][W-1:0]   rd_data,
  output logic                  out_valid
);
  for (genvar b = 0; b < B; b++) begin : g_bank
    logic [W-1:0] r [D];
    always_ff @(posedge clk) begin
      if (ld_we[b]) r[idx[b]] <= ld_data[b];
      if (wb_we[b]) r[wb_idx[b]] <= wb_data[b];
      rd_data[b] <= ld_we[b] ? ld_data[b] : r[idx[b]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= rd_valid;
  end
endmodule
