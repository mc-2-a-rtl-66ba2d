// tb_hist_mem: 4 banks of 16 counters of 6 bits (so that wrap-around is
// reached). Clears all counters, applies random increments and reads every
// counter back against a model; a second clear must zero them again and
// take DEPTH cycles.
module tb_hist_mem;
  localparam int unsigned B = 4, DEPTH = 16, W = 6, AW = 4, BW = 2;
  logic clk = 0, rst_n = 0;
  logic [B-1:0] inc = '0;
  logic [B-1:0][AW-1:0] inc_addr = '0;
  logic clear = 0, clearing;
  logic host_re = 0;
  logic [BW-1:0] host_bank = '0;
  logic [AW-1:0] host_addr = '0;
  logic [W-1:0] host_rdata;
  int checks = 0, failures = 0;
  int model [B][DEPTH];

  hist_mem #(.B(B), .DEPTH(DEPTH), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_clear();
    int n = 0;
    clear = 1;
    @(negedge clk);
    clear = 0;
    while (clearing) begin n++; @(negedge clk); end
    checks++;
    if (n != DEPTH) begin failures++; $display("clear took %0d cycles", n); end
    for (int b = 0; b < B; b++) for (int a = 0; a < DEPTH; a++) model[b][a] = 0;
  endtask

  task automatic read_all();
    for (int b = 0; b < B; b++)
      for (int a = 0; a < DEPTH; a++) begin
        host_re = 1; host_bank = BW'(b); host_addr = AW'(a);
        @(negedge clk);
        host_re = 0;
        checks++;
        if (int'(host_rdata) != model[b][a] % (1 << W)) begin
          failures++;
          if (failures < 5) $display("bank %0d row %0d: %0d expected %0d", b, a, host_rdata, model[b][a] % (1 << W));
        end
      end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    do_clear();
    read_all();
    for (int c = 0; c < 3000; c++) begin
      for (int b = 0; b < B; b++) begin
        inc[b] = $urandom_range(0, 1); inc_addr[b] = AW'($urandom_range(0, 5));
        if (inc[b]) model[b][inc_addr[b]]++;
      end
      @(negedge clk);
    end
    inc = '0;
    read_all();
    do_clear();
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
