// tb_load_unit: 6 banks, 4 sampler elements, 16-row memories modelled in the
// testbench with one-cycle reads. Random MemSel fields (enable, source,
// indirect, row) and latest samples; checks the request of every bank, the
// indirect row (row + sample of element bank mod 4), and the word and write
// enable handed to the register file one cycle later.
module tb_load_unit;
  localparam int unsigned B = 6, S = 4, AW = 4, W = 32, SW = 8, N = AW + 3;
  logic clk = 0, rst_n = 0, valid = 0;
  logic [B-1:0][N-1:0] memsel = '0;
  logic [S-1:0][SW-1:0] last_sample = '0;
  logic [B-1:0] dmem_re, smem_re, ld_we;
  logic [B-1:0][AW-1:0] addr;
  logic [B-1:0][W-1:0] dmem_rdata, ld_data;
  logic [B-1:0][SW-1:0] smem_rdata;
  int checks = 0, failures = 0, n_ind = 0, n_src = 0;
  logic [W-1:0]  dm [B][16];
  logic [SW-1:0] sm [B][16];

  load_unit #(.B(B), .S(S), .AW(AW), .W(W), .SW(SW)) dut (.*);
  always #5 clk = ~clk;

  // memories: synchronous read
  always_ff @(posedge clk)
    for (int b = 0; b < B; b++) begin
      if (dmem_re[b]) dmem_rdata[b] <= dm[b][addr[b]];
      if (smem_re[b]) smem_rdata[b] <= sm[b][addr[b]];
    end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [B-1:0] exp_we;
    logic [B-1:0][W-1:0] exp_d;
    for (int b = 0; b < B; b++) for (int a = 0; a < 16; a++) begin dm[b][a] = $urandom; sm[b][a] = SW'($urandom); end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      valid = $urandom_range(0, 3) != 0;
      for (int j = 0; j < S; j++) last_sample[j] = SW'($urandom_range(0, 7));
      for (int b = 0; b < B; b++) begin
        logic en, src, ind;
        logic [AW-1:0] row, ea;
        en = $urandom_range(0, 1); src = $urandom_range(0, 1); ind = $urandom_range(0, 1);
        row = AW'($urandom);
        memsel[b] = {en, src, ind, row};
        ea = ind ? AW'(row + last_sample[b % S]) : row;
        exp_we[b] = valid && en;
        exp_d[b]  = src ? W'(sm[b][ea]) : dm[b][ea];
        #0;
        #1;
        checks++;
        if (dmem_re[b] != (valid && en && !src) || smem_re[b] != (valid && en && src) ||
            ((valid && en) && addr[b] != ea)) begin
          failures++;
          if (failures < 5) $display("cycle %0d bank %0d request mismatch", c, b);
        end
        if (valid && en && ind) n_ind++;
        if (valid && en && src) n_src++;
      end
      @(negedge clk);
      for (int b = 0; b < B; b++) begin
        checks++;
        if (ld_we[b] != exp_we[b] || (exp_we[b] && ld_data[b] != exp_d[b])) begin
          failures++;
          if (failures < 5) $display("cycle %0d bank %0d: we %0b/%0b data %h/%h", c, b, ld_we[b], exp_we[b], ld_data[b], exp_d[b]);
        end
      end
    end
    checks++;
    if (n_ind == 0 || n_src == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
