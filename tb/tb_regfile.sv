// tb_regfile: 4 banks of 4 registers under random loads, reads and
// write-backs, compared with a model of the banks: a loaded word is passed
// straight to the read output, a write-back wins over a load to the same
// register, reads are registered.
module tb_regfile;
  localparam int unsigned B = 4, D = 4, W = 32, DW = 2;
  logic clk = 0, rst_n = 0, rd_valid = 0;
  logic [B-1:0][DW-1:0] idx = '0, wb_idx = '0;
  logic [B-1:0] ld_we = '0, wb_we = '0;
  logic [B-1:0][W-1:0] ld_data = '0, wb_data = '0, rd_data;
  logic out_valid;
  int checks = 0, failures = 0;
  logic [W-1:0] model [B][D];

  regfile #(.B(B), .D(D), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [B-1:0][W-1:0] exp_r;
    logic exp_v;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // fill every register first
    for (int d = 0; d < D; d++) begin
      ld_we = '1;
      for (int b = 0; b < B; b++) begin idx[b] = DW'(d); ld_data[b] = $urandom; model[b][d] = ld_data[b]; end
      @(negedge clk);
    end
    for (int c = 0; c < 2000; c++) begin
      rd_valid = $urandom_range(0, 1);
      for (int b = 0; b < B; b++) begin
        idx[b] = DW'($urandom); ld_we[b] = $urandom_range(0, 1); ld_data[b] = $urandom;
        wb_we[b] = ($urandom_range(0, 3) == 0); wb_idx[b] = DW'($urandom); wb_data[b] = $urandom;
        exp_r[b] = ld_we[b] ? ld_data[b] : model[b][idx[b]];
      end
      exp_v = rd_valid;
      for (int b = 0; b < B; b++) begin
        if (ld_we[b]) model[b][idx[b]] = ld_data[b];
        if (wb_we[b]) model[b][wb_idx[b]] = wb_data[b];
      end
      @(negedge clk);
      checks++;
      if (rd_data != exp_r || out_valid != exp_v) begin
        failures++;
        if (failures < 5) $display("cycle %0d mismatch", c);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
