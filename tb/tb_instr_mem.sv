// tb_instr_mem: 100-bit instructions, 8 entries. Every entry is written 32
// bits at a time in random word order, then read back whole, one cycle after
// the address; a rewrite of one word must leave the other words intact.
module tb_instr_mem;
  localparam int unsigned IW = 100, DEPTH = 8, NW = 4;
  logic clk = 0, host_we = 0, rd_en = 0;
  logic [2:0] host_addr = '0, rd_addr = '0;
  logic [1:0] host_word = '0;
  logic [31:0] host_wdata = '0;
  logic [IW-1:0] rd_data;
  int checks = 0, failures = 0;
  logic [NW*32-1:0] model [DEPTH];

  instr_mem #(.IW(IW), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int a, input int w, input logic [31:0] d);
    host_we = 1; host_addr = 3'(a); host_word = 2'(w); host_wdata = d;
    model[a][w*32 +: 32] = d;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic check_all();
    for (int a = 0; a < DEPTH; a++) begin
      rd_en = 1; rd_addr = 3'(a);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data != model[a][IW-1:0]) begin
        failures++;
        $display("entry %0d: %h expected %h", a, rd_data, model[a][IW-1:0]);
      end
    end
  endtask

  initial begin
    @(negedge clk);
    for (int a = DEPTH-1; a >= 0; a--)
      for (int w = NW-1; w >= 0; w--) wr(a, w, $urandom);
    check_all();
    for (int i = 0; i < 40; i++) wr($urandom_range(0, DEPTH-1), $urandom_range(0, NW-1), $urandom);
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
