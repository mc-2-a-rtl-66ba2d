// tb_crossbar: 10 banks to 16 operands; random selections (including
// broadcast of one bank to all operands) are checked one cycle later
// against the bank values.
module tb_crossbar;
  localparam int unsigned B = 10, NO = 16, W = 32, BW = 4;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [B-1:0][W-1:0] in = '0;
  logic [NO-1:0][BW-1:0] sel = '0;
  logic [NO-1:0][W-1:0] out;
  logic out_valid;
  int checks = 0, failures = 0;

  crossbar #(.B(B), .NO(NO), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NO-1:0][W-1:0] exp_o;
    logic exp_v;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 1000; c++) begin
      in_valid = $urandom_range(0, 1);
      for (int b = 0; b < B; b++) in[b] = $urandom;
      for (int o = 0; o < NO; o++) sel[o] = (c % 10 == 0) ? BW'(c % B) : BW'($urandom_range(0, B-1));
      for (int o = 0; o < NO; o++) exp_o[o] = in[sel[o]];
      exp_v = in_valid;
      @(negedge clk);
      checks++;
      if (out != exp_o || out_valid != exp_v) begin
        failures++;
        if (failures < 5) $display("cycle %0d mismatch", c);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
