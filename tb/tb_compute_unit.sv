// tb_compute_unit: a 4-tree, depth-2 compute unit under random instruction
// types. The model applies the unit's rules: S forces bypass, C only
// accumulates unless the tree's write-back enable is set, CS/CSS issue
// acc + beta*result and clear; Load/NOP leave the trees idle. Results are
// checked per tree, K+1 = 3 cycles after the operands.
module tb_compute_unit;
  import mc2a_pkg::*;
  localparam int unsigned T = 4, K = 2, W = 32, N = 2**K;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  opcode_e opcode = OP_NOP;
  logic [T-1:0][1:0] pe_mode = '0;
  logic [W-1:0] beta = '0;
  logic [T-1:0] wb_en = '0;
  logic [T-1:0][N-1:0][W-1:0] in = '0;
  logic [T-1:0][W-1:0] out;
  logic [T-1:0] out_valid;
  int checks = 0, failures = 0, n_op [6];

  compute_unit #(.T(T), .K(K), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NC = 2000;
  logic         ev [NC + 8][T];
  logic [W-1:0] eo [NC + 8][T];
  logic [W-1:0] acc [T];

  initial begin
    for (int c = 0; c < NC + 8; c++) for (int t = 0; t < T; t++) ev[c][t] = 0;
    for (int t = 0; t < T; t++) acc[t] = '0;
    for (int i = 0; i < 6; i++) n_op[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < NC + 8; c++) begin
      @(negedge clk);
      if (c >= int'(K) + 1)
        for (int t = 0; t < T; t++) begin
          checks++;
          if (out_valid[t] != ev[c][t] || (ev[c][t] && out[t] != eo[c][t])) begin
            failures++;
            if (failures < 10) $display("cycle %0d tree %0d: %0b/%0b %0d/%0d", c, t, out_valid[t], ev[c][t], out[t], eo[c][t]);
          end
        end
      in_valid = (c < NC);
      opcode   = opcode_e'($urandom_range(0, 5));
      beta     = W'($urandom_range(0, 32'h0003_0000));
      wb_en    = T'($urandom);
      for (int t = 0; t < T; t++) begin
        pe_mode[t] = 2'($urandom_range(0, 3));
        for (int i = 0; i < N; i++) in[t][i] = W'($urandom_range(0, 200)) - 100;
      end
      if (in_valid) begin
        n_op[opcode]++;
        for (int t = 0; t < T; t++) begin
          pe_op_e o;
          logic [W-1:0] r;
          logic fl;
          o = (opcode == OP_S) ? PE_BYPASS : pe_op_e'(pe_mode[t]);
          fl = (opcode == OP_C) ? wb_en[t] : 1'b1;
          r = '0;
          for (int i = 0; i < N/2; i++)
            r += (o == PE_DOT) ? in[t][2*i] * in[t][2*i+1] : in[t][2*i] + in[t][2*i+1];
          if (opcode inside {OP_C, OP_S, OP_CS, OP_CSS}) begin
            if (o == PE_BYPASS) begin ev[c+K+1][t] = 1; eo[c+K+1][t] = in[t][0]; end
            else if (o != PE_IDLE) begin
              if (fl) begin ev[c+K+1][t] = 1; eo[c+K+1][t] = acc[t] + beta * r; acc[t] = '0; end
              else acc[t] = acc[t] + beta * r;
            end
          end
        end
      end
    end
    for (int i = 0; i < 6; i++) begin
      checks++;
      if (n_op[i] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
