// tb_data_mem: 6 banks of 64 words: the host fills every word, then random
// per-bank reads are checked one cycle later; a bank that is not read keeps
// its last output.
module tb_data_mem;
  localparam int unsigned B = 6, DEPTH = 64, W = 32, AW = 6, BW = 3;
  logic clk = 0;
  logic [B-1:0] re = '0;
  logic [B-1:0][AW-1:0] raddr = '0;
  logic [B-1:0][W-1:0] rdata;
  logic host_we = 0;
  logic [BW-1:0] host_bank = '0;
  logic [AW-1:0] host_addr = '0;
  logic [W-1:0] host_wdata = '0;
  int checks = 0, failures = 0;
  logic [W-1:0] model [B][DEPTH];

  data_mem #(.B(B), .DEPTH(DEPTH), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [B-1:0][W-1:0] exp_d;
    @(negedge clk);
    for (int b = 0; b < B; b++)
      for (int a = 0; a < DEPTH; a++) begin
        host_we = 1; host_bank = BW'(b); host_addr = AW'(a); host_wdata = $urandom;
        model[b][a] = host_wdata;
        @(negedge clk);
      end
    host_we = 0;
    re = '1; raddr = '0;
    @(negedge clk);
    exp_d = rdata;
    for (int c = 0; c < 1000; c++) begin
      for (int b = 0; b < B; b++) begin
        re[b] = $urandom_range(0, 1); raddr[b] = AW'($urandom);
        if (re[b]) exp_d[b] = model[b][raddr[b]];
      end
      @(negedge clk);
      checks++;
      if (rdata != exp_d) begin
        failures++;
        if (failures < 5) $display("cycle %0d mismatch", c);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
