// tb_mc2a_sampling: statistical test of the sampling accuracy of the whole
// core (reduced configuration: B=12, D=4, T=S=4, K=3, 64-word banks), on
// random distributions of 8 categories, the kind of test the paper uses to
// size the Gumbel table.
//
// Phase A (temporal mode): each of the 4 sampler elements owns one random
// distribution; one loop iteration is 8 instructions (CS for categories
// 0..6, CSS for category 7), the reduced-sum tree scales the stored
// log-probability by beta = 1/64, and the histogram memory counts the
// samples over L iterations of the hardware loop.
// Phase B (spatial mode): one distribution of 8 categories held as Q16.16
// scores in the register file, sampled by two S instructions of 4 lanes
// each (trees in bypass); the samples of element 0 are counted by watching
// the sample unit's output.
//
// Expected probabilities are computed from the 16-level noise table with
// the comparison rule of the hardware (a later category must be strictly
// larger), assuming independent uniform table addresses. Every count must
// lie within 4.5 standard deviations (+2) of its expectation; the total
// variation distance to the exact softmax distribution must be below 0.1.
module tb_mc2a_sampling;
  import mc2a_pkg::*;
  localparam int unsigned B = 12, D = 4, T = 4, K = 3, S = 4, DEPTH = 64, IMEM_DEPTH = 64;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned BW    = clog2_1(B);
  localparam int unsigned DW    = clog2_1(D);
  localparam int unsigned NOP2  = 2**K;
  localparam int unsigned N     = AW + 3;
  localparam int unsigned IW    = field_offset(F_END, B, D, T, K, S, AW);
  localparam int unsigned NWORD = (IW + 31) / 32;
  localparam int unsigned WW    = clog2_1(NWORD);
  localparam int unsigned O_MS  = field_offset(F_MEMSEL, B, D, T, K, S, AW);
  localparam int unsigned O_RF  = field_offset(F_RFCTRL, B, D, T, K, S, AW);
  localparam int unsigned O_IN  = field_offset(F_INSEL,  B, D, T, K, S, AW);
  localparam int unsigned O_CU  = field_offset(F_CUCTRL, B, D, T, K, S, AW);
  localparam int unsigned O_SU  = field_offset(F_SUCTRL, B, D, T, K, S, AW);
  localparam int unsigned O_ST  = field_offset(F_STORE,  B, D, T, K, S, AW);
  localparam int unsigned ZSEL  = 2**BW - 1;
  localparam int unsigned NC    = 8;       // categories
  localparam int unsigned L     = 2000;    // samples per distribution
  localparam int unsigned R_H   = 32;      // histogram rows R_H .. R_H+7
  localparam int unsigned R_SC  = 8;       // phase B score row

  logic        clk = 0, rst_n = 0;
  logic        cfg_we = 0;
  cfg_sel_e    cfg_sel = CFG_IMEM;
  logic [31:0] cfg_addr = '0, cfg_wdata = '0;
  logic        start = 0, busy, done, hist_clear = 0, hist_clearing;
  logic [31:0] iter;
  logic        rd_en = 0, rd_sel = 0;
  logic [31:0] rd_addr = '0, rd_data;

  mc2a_top #(.B(B), .D(D), .T(T), .K(K), .S(S), .DEPTH(DEPTH), .IMEM_DEPTH(IMEM_DEPTH)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- instruction building ----------------
  logic [IW-1:0] prog [IMEM_DEPTH];
  logic [IW-1:0] ins;
  int            npc;
  task automatic i_new(input opcode_e op);
    for (int i = 0; i < IW; i++) ins[i] = 1'b0;
    ins[OP_W-1:0] = op;
    for (int o = 0; o < T * NOP2; o++) ins[O_IN + o*BW +: BW] = BW'(ZSEL);
  endtask
  task automatic i_put();
    prog[npc] = ins;
    npc++;
  endtask
  task automatic write_program();
    for (int i = 0; i < npc; i++)
      for (int w = 0; w < NWORD; w++) begin
        logic [31:0] word;
        word = '0;
        for (int k = 0; k < 32; k++) if (w*32 + k < IW) word[k] = prog[i][w*32 + k];
        cfg(CFG_IMEM, (32'(i) << WW) | 32'(w), word);
      end
  endtask

  task automatic cfg(input cfg_sel_e sel, input logic [31:0] a, input logic [31:0] d);
    cfg_we = 1; cfg_sel = sel; cfg_addr = a; cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask
  function automatic logic [31:0] baddr(input int bank, input int row);
    return (32'(bank) << AW) | 32'(row);
  endfunction
  task automatic run_program();
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
  endtask

  // ---------------- expected distribution ----------------
  int gtab [16];
  // probability that category c wins, scores in Q16.16
  function automatic real p_win(input int sc [NC], input int c);
    real p, q;
    int cnt;
    p = 0.0;
    for (int k = 0; k < 16; k++) begin
      longint v;
      v = longint'(sc[c]) + longint'(gtab[k]) * 2048;
      q = 1.0;
      for (int d = 0; d < NC; d++) if (d != c) begin
        cnt = 0;
        for (int k2 = 0; k2 < 16; k2++) begin
          longint u;
          u = longint'(sc[d]) + longint'(gtab[k2]) * 2048;
          if (d < c ? (u < v) : (u <= v)) cnt++;
        end
        q *= real'(cnt) / 16.0;
      end
      p += q / 16.0;
    end
    return p;
  endfunction

  function automatic real fabs(input real a);
    return (a < 0.0) ? -a : a;
  endfunction

  task automatic judge(input int sc [NC], input int cnt [NC], input string what);
    real pe, ps [NC], z, tv, sd;
    z = 0.0;
    for (int c = 0; c < NC; c++) begin ps[c] = $exp(real'(sc[c]) / 65536.0); z += ps[c]; end
    tv = 0.0;
    for (int c = 0; c < NC; c++) begin
      pe = p_win(sc, c);
      sd = $sqrt(real'(L) * pe * (1.0 - pe));
      chk(fabs(real'(cnt[c]) - real'(L) * pe) <= 4.5 * sd + 2.0,
          $sformatf("%s category %0d: %0d samples, expected %0.1f", what, c, cnt[c], real'(L) * pe));
      tv += fabs(real'(cnt[c]) / real'(L) - ps[c] / z) / 2.0;
    end
    $display("%s: total variation to the exact distribution %0.3f", what, tv);
    chk(tv < 0.1, $sformatf("%s total variation %0.3f", what, tv));
  endtask

  // phase B: count element 0's samples
  int  sp_cnt [NC];
  logic count_sp = 0;
  always @(negedge clk)
    if (count_sp && dut.sample_valid[0]) sp_cnt[dut.sample[0]]++;

  initial begin
    int x [S][NC];
    int sc [NC], cnt [NC];
    for (int k = 0; k < 16; k++) gtab[k] = int'($floor(-32.0 * $ln(-$ln((real'(k) + 0.5) / 16.0)) + 0.5));
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    hist_clear = 1; @(negedge clk); hist_clear = 0;
    while (hist_clearing) @(negedge clk);

    // ---------- phase A: temporal ----------
    npc = 0;
    for (int c = 0; c < NC; c++) begin
      i_new(c == NC - 1 ? OP_CSS : OP_CS);
      for (int b = 0; b < B; b++) begin
        ins[O_MS + b*N +: N] = {1'b1, 1'b0, 1'b0, AW'(c)};
        ins[O_RF + b*DW +: DW] = '0;
      end
      for (int t = 0; t < T; t++) begin
        ins[O_CU + t*2 +: 2] = 2'(PE_RSUM);
        ins[O_IN + (t*NOP2)*BW +: BW] = BW'(t);
      end
      ins[O_CU + T*2 +: 32] = 32'd1024;                      // beta = 1/64
      ins[O_SU +: S] = (c == NC - 1) ? '1 : '0;
      ins[O_SU + S] = SU_TEMPORAL;
      ins[O_ST +: S + BW + AW] = {AW'(R_H), BW'(0), {S{1'b1}}};
      i_put();
    end
    write_program();
    cfg(CFG_CSR, CSR_LOOP_START, 0);
    cfg(CFG_CSR, CSR_LOOP_END, NC - 1);
    cfg(CFG_CSR, CSR_LOOP_COUNT, L);
    cfg(CFG_CSR, CSR_PROG_END, NC - 1);
    for (int j = 0; j < S; j++)
      for (int c = 0; c < NC; c++) begin
        x[j][c] = -$urandom_range(0, 192);                   // log p in [-3, 0]
        cfg(CFG_DMEM, baddr(j, c), x[j][c]);
      end
    run_program();
    chk(iter == L, "phase A iterations");
    for (int j = 0; j < S; j++) begin
      for (int c = 0; c < NC; c++) begin
        rd_en = 1; rd_sel = 1; rd_addr = baddr(j, R_H + c);
        @(negedge clk);
        rd_en = 0;
        cnt[c] = rd_data;
        sc[c] = x[j][c] * 1024;
      end
      judge(sc, cnt, $sformatf("temporal lane %0d", j));
    end

    // ---------- phase B: spatial ----------
    npc = 0;
    i_new(OP_LOAD);
    for (int b = 0; b < 2*S; b++) begin
      ins[O_MS + b*N +: N] = {1'b1, 1'b0, 1'b0, AW'(R_SC)};
      ins[O_RF + b*DW +: DW] = DW'(1);
    end
    i_put();
    for (int h = 0; h < 2; h++) begin
      i_new(OP_S);
      for (int b = 0; b < B; b++) ins[O_RF + b*DW +: DW] = DW'(1);
      for (int t = 0; t < T; t++) begin
        ins[O_CU + t*2 +: 2] = 2'(PE_BYPASS);
        ins[O_IN + (t*NOP2)*BW +: BW] = BW'(h*S + t);
      end
      ins[O_SU +: S] = (h == 1) ? S'(1) : '0;
      ins[O_SU + S] = SU_SPATIAL;
      ins[O_ST +: S + BW + AW] = {AW'(R_H), BW'(0), S'(1)};
      i_put();
    end
    write_program();
    cfg(CFG_CSR, CSR_LOOP_START, 1);
    cfg(CFG_CSR, CSR_LOOP_END, 2);
    cfg(CFG_CSR, CSR_PROG_END, 2);
    for (int c = 0; c < NC; c++) begin
      sc[c] = -$urandom_range(0, 3 * 65536);                 // Q16.16 log p in [-3, 0]
      cfg(CFG_DMEM, baddr(c, R_SC), sc[c]);
      sp_cnt[c] = 0;
    end
    count_sp = 1;
    run_program();
    count_sp = 0;
    chk(iter == L, "phase B iterations");
    begin
      int tot;
      tot = 0;
      for (int c = 0; c < NC; c++) tot += sp_cnt[c];
      chk(tot == L, $sformatf("phase B produced %0d samples", tot));
    end
    judge(sc, sp_cnt, "spatial");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
