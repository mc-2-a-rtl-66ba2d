// compute_unit: the compute unit (CU), T tree PEs side by side.
//
// Each of the T trees receives 2^K operands from the crossbar and forms one
// energy score per cycle (see pe_tree). The CUCtrl field of the instruction
// gives a 2-bit mode per tree and one shared 32-bit immediate, the inverse
// temperature beta (width T*2+32 as in the paper's ISA table). What a tree
// does with its result depends on the instruction type:
//   OP_C          accumulate only (multi-cycle energy); a tree whose
//                 write-back enable is set issues acc+result instead, for
//                 writing back into the register file;
//   OP_CS, OP_CSS issue acc+result to the sample unit and clear the
//                 accumulator;
//   OP_S          every tree in bypass: operand 0 goes to the sample unit;
//   others        trees idle.
// Timing: outputs appear K+1 cycles after the operands (pe_tree).
module compute_unit
  import mc2a_pkg::*;
#(
  parameter int unsigned T = P_T,
  parameter int unsigned K = P_K,
  parameter int unsigned W = DATA_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  opcode_e                       opcode,
  input  logic [T-1:0][1:0]             pe_mode,  // CUCtrl per tree
  input  logic [W-1:0]                  beta,     // CUCtrl immediate
  input  logic [T-1:0]                  wb_en,    // C: issue for write-back
  input  logic [T-1:0][2**K-1:0][W-1:0] in,
  output logic [T-1:0][W-1:0]           out,
  output logic [T-1:0]                  out_valid
);
  logic is_c, is_cs, is_s;
  assign is_c  = (opcode == OP_C);
  assign is_cs = (opcode == OP_CS) || (opcode == OP_CSS);
  assign is_s  = (opcode == OP_S);

  for (genvar t = 0; t < T; t++) begin : g_pe
    pe_op_e op;
    logic   fl;
    assign op = is_s ? PE_BYPASS : pe_op_e'(pe_mode[t]);
    assign fl = is_c ? wb_en[t] : 1'b1;
    pe_tree #(.K(K), .W(W)) u_pe (
      .clk, .rst_n,
      .in_valid (in_valid && (is_c || is_cs || is_s)),
      .op       (op),
      .flush    (fl),
      .beta     (beta),
      .in       (in[t]),
      .out      (out[t]),
      .out_valid(out_valid[t])
    );
  end
endmodule
