// tb_sample_mem: 5 banks of 32 samples. Host writes, store-port writes,
// load-port reads and host reads run at random against a model; read data
// is checked one cycle after the request.
module tb_sample_mem;
  localparam int unsigned B = 5, DEPTH = 32, W = 8, AW = 5, BW = 3;
  logic clk = 0;
  logic [B-1:0] re = '0, we = '0;
  logic [B-1:0][AW-1:0] raddr = '0, waddr = '0;
  logic [B-1:0][W-1:0] rdata, wdata = '0;
  logic host_we = 0, host_re = 0;
  logic [BW-1:0] host_bank = '0;
  logic [AW-1:0] host_addr = '0;
  logic [W-1:0] host_wdata = '0, host_rdata;
  int checks = 0, failures = 0;
  logic [W-1:0] model [B][DEPTH];

  sample_mem #(.B(B), .DEPTH(DEPTH), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [B-1:0][W-1:0] exp_d;
    logic [W-1:0] exp_h;
    logic [B-1:0] exp_re;
    logic h;
    @(negedge clk);
    for (int b = 0; b < B; b++)
      for (int a = 0; a < DEPTH; a++) begin
        host_we = 1; host_bank = BW'(b); host_addr = AW'(a); host_wdata = W'($urandom);
        model[b][a] = host_wdata;
        @(negedge clk);
      end
    host_we = 0;
    for (int c = 0; c < 2000; c++) begin
      for (int b = 0; b < B; b++) begin
        re[b] = $urandom_range(0, 1); raddr[b] = AW'($urandom);
        we[b] = $urandom_range(0, 1); waddr[b] = AW'($urandom); wdata[b] = W'($urandom);
        exp_d[b] = model[b][raddr[b]];
      end
      exp_re = re;
      h = $urandom_range(0, 1);
      host_re = h; host_bank = BW'($urandom_range(0, B-1)); host_addr = AW'($urandom);
      exp_h = model[host_bank][host_addr];
      for (int b = 0; b < B; b++) if (we[b]) model[b][waddr[b]] = wdata[b];
      @(negedge clk);
      for (int b = 0; b < B; b++) if (exp_re[b]) begin
        checks++;
        if (rdata[b] != exp_d[b]) failures++;
      end
      if (h) begin
        checks++;
        if (host_rdata != exp_h) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
