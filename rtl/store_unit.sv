// store_unit: writes the results of an instruction back.
//
// StoreCtrl holds S lane enables, a base bank and a row. Lane j maps to bank
// (base + j) mod B, so a contiguous group of RVs can be written by
// consecutive samplers wherever the group starts. Per instruction type:
//   OP_S, OP_CSS  sample j (when valid and enabled) goes to the sample
//                 memory at that bank and row;
//   OP_CSS        in addition, the histogram counter at row + sample value
//                 of that bank is raised;
//   OP_C          compute-unit result j (when valid and enabled) is written
//                 back into register (row mod D) of that bank.
// Purely combinational: the requests are applied by the memories and the
// register file at the next clock edge. The lane-to-bank rotation and the
// field layout are this design's choices (the paper prints the field as S').
module store_unit
  import mc2a_pkg::*;
#(
  parameter int unsigned B     = P_B,
  parameter int unsigned S     = P_S,
  parameter int unsigned D     = P_D,
  parameter int unsigned AW    = $clog2(P_DEPTH),
  parameter int unsigned W     = DATA_W,
  parameter int unsigned SW    = SAMPLE_W,
  parameter int unsigned IDX_W = 16,
  localparam int unsigned BW   = (B > 1) ? $clog2(B) : 1,
  localparam int unsigned DW   = (D > 1) ? $clog2(D) : 1
) (
  // sample path (stage after the sample unit)
  input  opcode_e                 s_opcode,
  input  logic                    s_valid,
  input  logic [S-1:0]            s_en,
  input  logic [BW-1:0]           s_base,
  input  logic [AW-1:0]           s_row,
  input  logic [S-1:0][IDX_W-1:0] sample,
  input  logic [S-1:0]            sample_valid,
  output logic [B-1:0]            smem_we,
  output logic [B-1:0][AW-1:0]    smem_waddr,
  output logic [B-1:0][SW-1:0]    smem_wdata,
  output logic [B-1:0]            hist_inc,
  output logic [B-1:0][AW-1:0]    hist_addr,
  // write-back path (stage after the compute unit)
  input  opcode_e                 c_opcode,
  input  logic                    c_valid,
  input  logic [S-1:0]            c_en,
  input  logic [BW-1:0]           c_base,
  input  logic [AW-1:0]           c_row,
  input  logic [S-1:0][W-1:0]     cu_out,
  input  logic [S-1:0]            cu_valid,
  output logic [B-1:0]            rf_we,
  output logic [B-1:0][DW-1:0]    rf_idx,
  output logic [B-1:0][W-1:0]     rf_data
);
  logic s_store, s_hist, c_wb;
  assign s_store = s_valid && (s_opcode == OP_S || s_opcode == OP_CSS);
  assign s_hist  = s_valid && (s_opcode == OP_CSS);
  assign c_wb    = c_valid && (c_opcode == OP_C);

  for (genvar b = 0; b < B; b++) begin : g_bank
    int unsigned js, jc;   // lane that maps onto this bank
    assign js = (b + B - int'(s_base) % B) % B;
    assign jc = (b + B - int'(c_base) % B) % B;
    always_comb begin
      smem_we[b]    = 1'b0;
      hist_inc[b]   = 1'b0;
      smem_waddr[b] = s_row;
      smem_wdata[b] = '0;
      hist_addr[b]  = s_row;
      rf_we[b]      = 1'b0;
      rf_idx[b]     = DW'(c_row);
      rf_data[b]    = '0;
      if (js < S) begin
        smem_wdata[b] = SW'(sample[js]);
        hist_addr[b]  = s_row + AW'(sample[js]);
        smem_we[b]    = s_store && s_en[js] && sample_valid[js];
        hist_inc[b]   = s_hist  && s_en[js] && sample_valid[js];
      end
      if (jc < S) begin
        rf_data[b] = cu_out[jc];
        rf_we[b]   = c_wb && c_en[jc] && cu_valid[jc];
      end
    end
  end
endmodule
