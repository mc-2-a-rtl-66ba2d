// tb_pe_tree: random operand sets, modes, flush flags and beta values into a
// depth-3 tree PE; a reference model computes bypass, dot-product and
// reduced-sum results with the beta multiply and the accumulator, and each
// result must appear exactly K+1 = 4 cycles after its operands.
module tb_pe_tree;
  import mc2a_pkg::*;
  localparam int unsigned K = 3, W = 32, N = 2**K;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, flush = 0;
  pe_op_e op = PE_IDLE;
  logic [W-1:0] beta = '0;
  logic [N-1:0][W-1:0] in = '0;
  logic [W-1:0] out;
  logic out_valid;
  int checks = 0, failures = 0;
  int n_mode [4];
  int n_partial = 0;

  pe_tree #(.K(K), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NC = 3000;
  logic          ev [NC + 8];
  logic [W-1:0]  eo [NC + 8];
  logic [W-1:0]  acc = '0;

  initial begin
    for (int c = 0; c < NC + 8; c++) ev[c] = 0;
    for (int i = 0; i < 4; i++) n_mode[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < NC + 8; c++) begin
      @(negedge clk);
      // check the output produced by the operands of cycle c-K-1
      if (c >= int'(K) + 1) begin
        checks++;
        if (out_valid != ev[c] || (ev[c] && out != eo[c])) begin
          failures++;
          if (failures < 10) $display("cycle %0d: valid %0b/%0b out %0d/%0d", c, out_valid, ev[c], out, eo[c]);
        end
      end
      in_valid = (c < NC) && ($urandom_range(0, 4) != 0);
      op       = pe_op_e'($urandom_range(0, 3));
      flush    = ($urandom_range(0, 2) != 0);
      beta     = (c % 3 == 0) ? 32'h0001_0000 : W'($urandom_range(0, 32'h0004_0000));
      for (int i = 0; i < N; i++) in[i] = W'($urandom_range(0, 2000)) - 1000;
      if (in_valid) begin
        logic [W-1:0] t;
        t = '0;
        for (int i = 0; i < N/2; i++)
          t += (op == PE_DOT) ? in[2*i] * in[2*i+1] : in[2*i] + in[2*i+1];
        n_mode[op]++;
        case (op)
          PE_BYPASS: begin ev[c+K+1] = 1; eo[c+K+1] = in[0]; end
          PE_DOT, PE_RSUM: begin
            if (flush) begin ev[c+K+1] = 1; eo[c+K+1] = acc + beta * t; acc = '0; end
            else begin acc = acc + beta * t; n_partial++; end
          end
          default: ;
        endcase
      end
    end
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (n_mode[i] == 0) failures++;
    end
    $display("bypass %0d dot %0d rsum %0d idle %0d partial %0d", n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_partial);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
