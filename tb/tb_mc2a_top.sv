// tb_mc2a_top: end-to-end test of mc2a_top in a reduced configuration (B=12
// banks of 64 words, D=4, T=S=4, K=3, 64 instructions), the size of the
// paper's Fig. 10 example apart from the tree depth.
//
// The testbench acts as the host: it writes a program and data through the
// configuration port, starts the accelerator, waits for done and reads the
// sample and histogram memories back. The program exercises every mechanism
// of the datapath, with score gaps (>= 10 in log units) much larger than the
// Gumbel noise range (< 5), so every sample is known in advance:
//   1. loop body (PC 0..4, run 3 times by the hardware loop): per lane j a
//      5-category distribution, one category per instruction (temporal
//      mode); each instruction loads 3 banks, the PE sums them (reduced sum),
//      CS for categories 0..3, CSS for category 4 stores the sample and
//      increments the histogram. Expected: sample = argmax, counter = 3.
//   2. LOAD; C (dot product, accumulate only); C with write-back into
//      register 2 of banks S..2S-1; NOPs; S in spatial mode with the PEs in
//      bypass, sampling over the S written-back scores in one instruction.
//   3. NOPs; LOAD with indirect addressing (row + latest sample of element
//      bank mod S); CS/CSS comparing the loaded words with a constant, so
//      sample 0 means every indirect address was right. The store base is
//      B-3, so the lanes wrap around the last bank.
//   4. CS loading the samples of step 1 back from the sample memory and
//      computing (v - v_expected)^2 as three dot-product pairs (needs K >= 3) and beta = -100;
//      CSS with a constant; sample 0 means the stored samples are right.
// Three runs with new random data and a histogram clear between them.
// Internal strobes are counted to show each mechanism happened; a mechanism
// that never occurs counts as a failure.
module tb_mc2a_top;
  import mc2a_pkg::*;
  localparam int unsigned B = 12, D = 4, T = 4, K = 3, S = 4, DEPTH = 64, IMEM_DEPTH = 64;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned BW    = clog2_1(B);
  localparam int unsigned DW    = clog2_1(D);
  localparam int unsigned NOP2  = 2**K;          // operands per PE
  localparam int unsigned N     = AW + 3;
  localparam int unsigned PC_W  = clog2_1(IMEM_DEPTH);
  localparam int unsigned IW    = field_offset(F_END, B, D, T, K, S, AW);
  localparam int unsigned NWORD = (IW + 31) / 32;
  localparam int unsigned WW    = clog2_1(NWORD);
  localparam int unsigned O_MS  = field_offset(F_MEMSEL, B, D, T, K, S, AW);
  localparam int unsigned O_RF  = field_offset(F_RFCTRL, B, D, T, K, S, AW);
  localparam int unsigned O_IN  = field_offset(F_INSEL,  B, D, T, K, S, AW);
  localparam int unsigned O_CU  = field_offset(F_CUCTRL, B, D, T, K, S, AW);
  localparam int unsigned O_SU  = field_offset(F_SUCTRL, B, D, T, K, S, AW);
  localparam int unsigned O_ST  = field_offset(F_STORE,  B, D, T, K, S, AW);
  localparam int unsigned ZSEL  = 2**BW - 1;     // crossbar select giving 0
  localparam int unsigned NCAT  = 5;
  // data rows
  localparam int unsigned R2 = 8, ROWC = 9, R4 = 10, ROWC2 = 11, ROWI = 16;
  // sample / histogram rows
  localparam int unsigned R_S = DEPTH - 24, R_I = DEPTH - 16, R_4 = DEPTH - 8, R_SP = DEPTH - 2;
  localparam logic [31:0] ONE = 32'h0001_0000;   // 1.0 in Q16.16
  localparam int unsigned NRUN = 3, LOOPS = 3;

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

  // ---------------- mechanism counters ----------------
  typedef enum int {
    M_NOP, M_LOAD, M_C, M_S, M_CS, M_CSS, M_TEMPORAL, M_SPATIAL, M_INDIRECT,
    M_SMEM_LOAD, M_ACCUM, M_WRITEBACK, M_DOT, M_RSUM, M_BYPASS, M_SAMPLE,
    M_SMEM_STORE, M_HIST_INC, M_LOOP_JUMP, M_HIST_CLEAR, M_HOST_READ, M_NUM
  } mech_e;
  int mcount [M_NUM];
  logic [PC_W-1:0] prev_pc;
  logic            prev_re = 0;

  always @(negedge clk) if (rst_n) begin
    if (dut.u_ctrl.v0)
      unique case (dut.u_ctrl.op0)
        OP_NOP:  mcount[M_NOP]++;
        OP_LOAD: mcount[M_LOAD]++;
        OP_C:    mcount[M_C]++;
        OP_S:    mcount[M_S]++;
        OP_CS:   mcount[M_CS]++;
        default: mcount[M_CSS]++;
      endcase
    if (dut.su_valid && dut.su_mode == SU_TEMPORAL) mcount[M_TEMPORAL]++;
    if (dut.su_valid && dut.su_mode == SU_SPATIAL)  mcount[M_SPATIAL]++;
    if (dut.ld_valid)
      for (int b = 0; b < B; b++)
        if (dut.memsel[b][N-1] && dut.memsel[b][AW]) begin mcount[M_INDIRECT]++; break; end
    if (|dut.smem_re) mcount[M_SMEM_LOAD]++;
    if (dut.cu_valid && dut.cu_opcode == OP_C && !dut.cu_wb_en[0]) mcount[M_ACCUM]++;
    if (|dut.rf_wb_we) mcount[M_WRITEBACK]++;
    if (dut.cu_valid && dut.pe_mode[0] == 2'(PE_DOT))    mcount[M_DOT]++;
    if (dut.cu_valid && dut.pe_mode[0] == 2'(PE_RSUM))   mcount[M_RSUM]++;
    if (dut.cu_valid && (dut.pe_mode[0] == 2'(PE_BYPASS) || dut.cu_opcode == OP_S)) mcount[M_BYPASS]++;
    if (|dut.sample_valid) mcount[M_SAMPLE]++;
    if (|dut.smem_we) mcount[M_SMEM_STORE]++;
    if (|dut.hist_inc) mcount[M_HIST_INC]++;
    if (dut.imem_re && prev_re && dut.imem_addr != PC_W'(prev_pc + 1)) mcount[M_LOOP_JUMP]++;
    if (hist_clear) mcount[M_HIST_CLEAR]++;
    if (rd_en) mcount[M_HOST_READ]++;
    prev_re = dut.imem_re;
    prev_pc = dut.imem_addr;
  end

  // ---------------- instruction building ----------------
  logic [IW-1:0] prog [IMEM_DEPTH];
  logic [IW-1:0] ins;
  int            npc = 0;

  task automatic i_new(input opcode_e op);
    for (int i = 0; i < IW; i++) ins[i] = 1'b0;
    ins[OP_W-1:0] = op;
    // unused crossbar outputs give 0
    for (int o = 0; o < T * NOP2; o++) ins[O_IN + o*BW +: BW] = BW'(ZSEL);
  endtask
  task automatic i_mem(input int b, input logic src, input logic ind, input int row);
    ins[O_MS + b*N +: N] = {1'b1, src, ind, AW'(row)};
  endtask
  task automatic i_rf(input int b, input int r);
    ins[O_RF + b*DW +: DW] = DW'(r);
  endtask
  task automatic i_in(input int t, input int k, input int bank);
    ins[O_IN + (t*NOP2 + k)*BW +: BW] = BW'(bank);
  endtask
  task automatic i_pe(input int t, input pe_op_e m);
    ins[O_CU + t*2 +: 2] = 2'(m);
  endtask
  task automatic i_beta(input logic [31:0] beta);
    ins[O_CU + T*2 +: 32] = beta;
  endtask
  task automatic i_su(input logic [S-1:0] last, input su_mode_e mode);
    ins[O_SU +: S] = last;
    ins[O_SU + S] = mode;
  endtask
  task automatic i_st(input logic [S-1:0] en, input int base, input int row);
    ins[O_ST +: S + BW + AW] = {AW'(row), BW'(base), en};
  endtask
  task automatic i_put();
    prog[npc] = ins;
    npc++;
  endtask
  task automatic i_nops(input int n);
    for (int i = 0; i < n; i++) begin i_new(OP_NOP); i_put(); end
  endtask

  task automatic build_program();
    npc = 0;
    // 1. temporal loop body: category c of lane j = sum of banks j, S+j, 2S+j
    for (int c = 0; c < NCAT; c++) begin
      i_new(c == NCAT - 1 ? OP_CSS : OP_CS);
      for (int b = 0; b < B; b++) begin i_mem(b, 0, 0, c); i_rf(b, 0); end
      for (int t = 0; t < T; t++) begin
        i_pe(t, PE_RSUM);
        for (int k = 0; k < 3; k++) i_in(t, k, k*S + t);
      end
      i_beta(ONE);
      i_su(c == NCAT - 1 ? '1 : '0, SU_TEMPORAL);
      i_st('1, 0, R_S);
      i_put();
    end
    // 2. write-back and spatial sampling
    i_new(OP_LOAD);
    for (int b = 0; b < B; b++) begin i_mem(b, 0, 0, R2); i_rf(b, 1); end
    i_put();
    i_new(OP_C);                         // acc = x[t] * x[S+t]
    for (int b = 0; b < B; b++) i_rf(b, 1);
    for (int t = 0; t < T; t++) begin i_pe(t, PE_DOT); i_in(t, 0, t); i_in(t, 1, S + t); end
    i_beta(ONE);
    i_st('0, 0, 0);
    i_put();
    i_new(OP_C);                         // + x[2S+t]^2, written back
    for (int b = 0; b < B; b++) i_rf(b, 1);
    for (int t = 0; t < T; t++) begin i_pe(t, PE_DOT); i_in(t, 0, 2*S + t); i_in(t, 1, 2*S + t); end
    i_beta(ONE);
    i_st('1, S, 2);
    i_put();
    i_nops(3 + K);
    i_new(OP_S);                         // spatial sampling over the S results
    for (int b = 0; b < B; b++) i_rf(b, 2);
    for (int t = 0; t < T; t++) begin i_pe(t, PE_BYPASS); i_in(t, 0, S + t); end
    i_su(S'(1), SU_SPATIAL);
    i_st(S'(1), 0, R_SP);
    i_put();
    // 3. indirect load
    i_nops(5 + K);
    i_new(OP_LOAD);
    for (int b = 0; b < B; b++) begin i_mem(b, 0, 1, ROWI); i_rf(b, 3); end
    i_put();
    i_new(OP_CS);
    for (int b = 0; b < B; b++) i_rf(b, 3);
    for (int t = 0; t < T; t++) begin
      i_pe(t, PE_RSUM);
      for (int k = 0; k < 3; k++) i_in(t, k, k*S + t);
    end
    i_beta(ONE);
    i_su('0, SU_TEMPORAL);
    i_put();
    i_new(OP_CSS);
    for (int b = 0; b < B; b++) begin i_mem(b, 0, 0, ROWC); i_rf(b, 0); end
    for (int t = 0; t < T; t++) begin i_pe(t, PE_RSUM); i_in(t, 0, t); end
    i_beta(ONE);
    i_su('1, SU_TEMPORAL);
    i_st('1, B - 3, R_I);
    i_put();
    // 4. sample-memory load
    i_new(OP_CS);
    for (int b = 0; b < B; b++) begin i_mem(b, b < S, 0, b < S ? R_S : R4); i_rf(b, 2); end
    for (int t = 0; t < T; t++) begin
      i_pe(t, PE_DOT);
      i_in(t, 0, t);         i_in(t, 1, t);
      i_in(t, 2, t);         i_in(t, 3, S + t);
      i_in(t, 4, 2*S + t);   i_in(t, 5, 2*S + t);
    end
    i_beta(-32'sd100 * 32'sh0001_0000);
    i_su('0, SU_TEMPORAL);
    i_put();
    i_new(OP_CSS);
    for (int b = 0; b < B; b++) begin i_mem(b, 0, 0, ROWC2); i_rf(b, 0); end
    for (int t = 0; t < T; t++) begin i_pe(t, PE_RSUM); i_in(t, 0, t); end
    i_beta(ONE);
    i_su('1, SU_TEMPORAL);
    i_st('1, 0, R_4);
    i_put();
  endtask

  // ---------------- host access ----------------
  task automatic cfg(input cfg_sel_e sel, input logic [31:0] a, input logic [31:0] d);
    cfg_we = 1; cfg_sel = sel; cfg_addr = a; cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask
  function automatic logic [31:0] baddr(input int bank, input int row);
    return (32'(bank) << AW) | 32'(row);
  endfunction
  task automatic host_read(input logic sel, input int bank, input int row, output logic [31:0] d);
    rd_en = 1; rd_sel = sel; rd_addr = baddr(bank, row);
    @(negedge clk);
    rd_en = 0;
    d = rd_data;
  endtask

  // ---------------- data and expected results ----------------
  int x1 [NCAT][B];          // step 1 data
  int v1 [S];                // step 1 expected samples
  int x2 [B];                // step 2 data
  int vsp;                   // step 2 expected sample
  int ls [S];                // latest sample per element before step 3

  task automatic make_data();
    // step 1: random scores, the winner of each lane 10..30 above the rest
    for (int j = 0; j < S; j++) begin
      int w, sc;
      w = $urandom_range(0, NCAT - 1);
      v1[j] = w;
      for (int c = 0; c < NCAT; c++) begin
        sc = (c == w) ? $urandom_range(30, 50) : $urandom_range(0, 20);
        sc -= 25;
        x1[c][j]       = $urandom_range(0, 20) - 10;
        x1[c][S + j]   = $urandom_range(0, 20) - 10;
        x1[c][2*S + j] = sc - x1[c][j] - x1[c][S + j];
      end
    end
    for (int c = 0; c < NCAT; c++)
      for (int b = 3*S; b < B; b++) x1[c][b] = $urandom;
    // step 2: r[t] = x[t]*x[S+t] + x[2S+t]^2, the maximum 10 above the rest
    forever begin
      int best, second, r;
      for (int b = 0; b < B; b++) x2[b] = $urandom_range(0, 18) - 9;
      best = -1000000; second = -1000000; vsp = 0;
      for (int t = 0; t < S; t++) begin
        r = x2[t] * x2[S + t] + x2[2*S + t] * x2[2*S + t];
        if (r > best) begin second = best; best = r; vsp = t; end
        else if (r > second) second = r;
      end
      if (best - second >= 10) break;
    end
    for (int j = 0; j < S; j++) ls[j] = v1[j];
    ls[0] = vsp;
  endtask

  task automatic load_data();
    for (int c = 0; c < NCAT; c++)
      for (int b = 0; b < B; b++) cfg(CFG_DMEM, baddr(b, c), x1[c][b]);
    for (int b = 0; b < B; b++) begin
      cfg(CFG_DMEM, baddr(b, R2), x2[b]);
      // step 3: indirect rows, 0 at the expected address, -1000 elsewhere
      for (int v = 0; v < S + NCAT; v++)
        cfg(CFG_DMEM, baddr(b, ROWI + v), (v == ls[b % S]) ? 0 : -1000);
      cfg(CFG_DMEM, baddr(b, ROWC), -20);
      cfg(CFG_DMEM, baddr(b, ROWC2), -50);
      // step 4: -2*v and v of the expected samples
      if (b >= S && b < 2*S) cfg(CFG_DMEM, baddr(b, R4), -2 * v1[b - S]);
      if (b >= 2*S && b < 3*S) cfg(CFG_DMEM, baddr(b, R4), v1[b - 2*S]);
    end
  endtask

  // ---------------- main ----------------
  initial begin
    logic [31:0] d;
    int t_start;
    for (int m = 0; m < M_NUM; m++) mcount[m] = 0;
    build_program();
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < npc; i++)
      for (int w = 0; w < NWORD; w++) begin
        logic [31:0] word;
        word = '0;
        for (int k = 0; k < 32; k++) if (w*32 + k < IW) word[k] = prog[i][w*32 + k];
        cfg(CFG_IMEM, (32'(i) << WW) | 32'(w), word);
      end
    cfg(CFG_CSR, CSR_LOOP_START, 0);
    cfg(CFG_CSR, CSR_LOOP_END, NCAT - 1);
    cfg(CFG_CSR, CSR_LOOP_COUNT, LOOPS);
    cfg(CFG_CSR, CSR_PROG_END, npc - 1);

    for (int run = 0; run < NRUN; run++) begin
      make_data();
      load_data();
      hist_clear = 1;
      @(negedge clk);
      hist_clear = 0;
      @(negedge clk);
      chk(hist_clearing, "histogram clear sweep running");
      while (hist_clearing) @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      chk(busy, "busy after start");
      t_start = 0;
      while (!done && t_start < 100 * IMEM_DEPTH) begin @(negedge clk); t_start++; end
      chk(done, "done");
      chk(iter == LOOPS, $sformatf("iterations %0d", iter));
      @(negedge clk);
      chk(!busy, "idle after done");

      // step 1: samples and histogram counters
      for (int j = 0; j < S; j++) begin
        host_read(0, j, R_S, d);
        chk(d == 32'(v1[j]), $sformatf("run %0d step 1 lane %0d sample %0d, expected %0d", run, j, d, v1[j]));
        for (int c = 0; c < NCAT; c++) begin
          host_read(1, j, R_S + c, d);
          chk(d == ((c == v1[j]) ? LOOPS : 0), $sformatf("run %0d step 1 lane %0d histogram[%0d] = %0d", run, j, c, d));
        end
      end
      // step 2: spatial sample
      host_read(0, 0, R_SP, d);
      chk(d == 32'(vsp), $sformatf("run %0d step 2 spatial sample %0d, expected %0d", run, d, vsp));
      // step 3: indirect loads (lanes stored from bank B-3 on, wrapping)
      for (int j = 0; j < S; j++) begin
        host_read(0, (B - 3 + j) % B, R_I, d);
        chk(d == 0, $sformatf("run %0d step 3 lane %0d indirect check gave %0d", run, j, d));
        host_read(1, (B - 3 + j) % B, R_I, d);
        chk(d == 1, $sformatf("run %0d step 3 lane %0d histogram %0d", run, j, d));
      end
      // step 4: samples loaded back from the sample memory
      for (int j = 0; j < S; j++) begin
        host_read(0, j, R_4, d);
        chk(d == 0, $sformatf("run %0d step 4 lane %0d sample-memory check gave %0d", run, j, d));
      end
      // a bank no lane writes stays unwritten
      if (B > S + 3) begin
        host_read(1, S + 1, R_I, d);
        chk(d == 0, "histogram of an unused bank");
      end
    end

    for (int m = 0; m < M_NUM; m++) begin
      mech_e me;
      me = mech_e'(m);
      $display("mechanism %-13s %0d", me.name(), mcount[m]);
      chk(mcount[m] > 0, $sformatf("mechanism %s never happened", me.name()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
