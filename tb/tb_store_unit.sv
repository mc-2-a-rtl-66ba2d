// tb_store_unit: 7 banks, 4 lanes. Random instruction types, lane enables,
// base banks (so the lane-to-bank mapping wraps around), rows, samples and
// CU results; every bank's sample write, histogram increment and register
// write-back request is compared with a model of the mapping bank =
// (base + lane) mod B.
module tb_store_unit;
  import mc2a_pkg::*;
  localparam int unsigned B = 7, S = 4, D = 4, AW = 5, W = 32, SW = 8, IDX_W = 16, BW = 3, DW = 2;
  opcode_e s_opcode = OP_NOP, c_opcode = OP_NOP;
  logic s_valid = 0, c_valid = 0;
  logic [S-1:0] s_en = '0, c_en = '0, sample_valid = '0, cu_valid = '0;
  logic [BW-1:0] s_base = '0, c_base = '0;
  logic [AW-1:0] s_row = '0, c_row = '0;
  logic [S-1:0][IDX_W-1:0] sample = '0;
  logic [S-1:0][W-1:0] cu_out = '0;
  logic [B-1:0] smem_we, hist_inc, rf_we;
  logic [B-1:0][AW-1:0] smem_waddr, hist_addr;
  logic [B-1:0][SW-1:0] smem_wdata;
  logic [B-1:0][DW-1:0] rf_idx;
  logic [B-1:0][W-1:0] rf_data;
  int checks = 0, failures = 0, n_s = 0, n_h = 0, n_wb = 0;
  logic clk = 0;

  store_unit #(.B(B), .S(S), .D(D), .AW(AW), .W(W), .SW(SW), .IDX_W(IDX_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 3000; c++) begin
      s_opcode = opcode_e'($urandom_range(0, 5)); c_opcode = opcode_e'($urandom_range(0, 5));
      s_valid = $urandom_range(0, 1); c_valid = $urandom_range(0, 1);
      s_en = S'($urandom); c_en = S'($urandom); sample_valid = S'($urandom); cu_valid = S'($urandom);
      s_base = BW'($urandom_range(0, B-1)); c_base = BW'($urandom_range(0, B-1));
      s_row = AW'($urandom_range(0, 20)); c_row = AW'($urandom);
      for (int j = 0; j < S; j++) begin sample[j] = IDX_W'($urandom_range(0, 9)); cu_out[j] = $urandom; end
      #1;
      for (int b = 0; b < B; b++) begin
        logic e_s, e_h, e_w;
        int js, jc;
        js = (b - int'(s_base) + B) % B;
        jc = (b - int'(c_base) + B) % B;
        e_s = js < S && s_valid && (s_opcode == OP_S || s_opcode == OP_CSS) && s_en[js] && sample_valid[js];
        e_h = js < S && s_valid && s_opcode == OP_CSS && s_en[js] && sample_valid[js];
        e_w = jc < S && c_valid && c_opcode == OP_C && c_en[jc] && cu_valid[jc];
        n_s += e_s; n_h += e_h; n_wb += e_w;
        checks++;
        if (smem_we[b] != e_s || hist_inc[b] != e_h || rf_we[b] != e_w) begin
          failures++;
          if (failures < 5) $display("case %0d bank %0d enables %0b%0b%0b / %0b%0b%0b", c, b, smem_we[b], hist_inc[b], rf_we[b], e_s, e_h, e_w);
        end
        if (e_s) begin
          checks++;
          if (smem_waddr[b] != s_row || smem_wdata[b] != SW'(sample[js])) failures++;
        end
        if (e_h) begin
          checks++;
          if (hist_addr[b] != AW'(s_row + sample[js])) failures++;
        end
        if (e_w) begin
          checks++;
          if (rf_idx[b] != DW'(c_row) || rf_data[b] != cu_out[jc]) failures++;
        end
      end
      @(negedge clk);
    end
    checks++;
    if (n_s == 0 || n_h == 0 || n_wb == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
