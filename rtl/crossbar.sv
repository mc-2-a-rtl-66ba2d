// crossbar: the interconnect from the B register-file banks to the T*2^K
// compute-unit operands.
//
// A full crossbar: every CU operand o selects any bank with its own
// log2(B)-bit field of InSel, so one bank value can feed many trees in the
// same cycle (data reuse across trees, e.g. a neighbour shared by several
// RVs) and irregular graphs need no particular data placement. Output
// registered; one cycle of latency.
module crossbar
  import mc2a_pkg::*;
#(
  parameter int unsigned B  = P_B,
  parameter int unsigned NO = P_T * (2**P_K),   // T * 2^K outputs
  parameter int unsigned W  = DATA_W,
  localparam int unsigned BW = (B > 1) ? $clog2(B) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [B-1:0][W-1:0]   in,
  input  logic [NO-1:0][BW-1:0] sel,
  output logic [NO-1:0][W-1:0]  out,
  output logic                  out_valid
);
  always_ff @(posedge clk) begin
    for (int o = 0; o < NO; o++)
      out[o] <= (int'(sel[o]) < B) ? in[sel[o]] : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
