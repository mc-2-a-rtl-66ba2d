// tb_pipeline_ctrl: small configuration (B=4, D=4, T=2, K=1, S=2, 16-entry
// program). A random program of all instruction types is run with a hardware
// loop. The testbench models the instruction memory (one-cycle read), keeps
// the instruction that entered I0 in every cycle, and checks each cycle that
// every stage output carries the field of the instruction that is in that
// stage (I0 MemSel, I1 RFCtrl, I2 InSel, I3 CUCtrl and write-back enables,
// I4+K SUCtrl and write-back target, I5+K store target) with the valid
// flags of the instruction type, plus the fetched PC sequence, busy, done
// and the iteration count.
module tb_pipeline_ctrl;
  import mc2a_pkg::*;
  localparam int unsigned B = 4, D = 4, T = 2, K = 1, S = 2, AW = 4, PC_W = 4;
  localparam int unsigned IW = field_offset(F_END, B, D, T, K, S, AW);
  localparam int unsigned BW = clog2_1(B), DW = clog2_1(D), NO = T * (2**K), N = AW + 3;
  localparam int unsigned LAST = 5 + K;
  localparam int unsigned O_MS = field_offset(F_MEMSEL, B, D, T, K, S, AW);
  localparam int unsigned O_RF = field_offset(F_RFCTRL, B, D, T, K, S, AW);
  localparam int unsigned O_IN = field_offset(F_INSEL,  B, D, T, K, S, AW);
  localparam int unsigned O_CU = field_offset(F_CUCTRL, B, D, T, K, S, AW);
  localparam int unsigned O_SU = field_offset(F_SUCTRL, B, D, T, K, S, AW);
  localparam int unsigned O_ST = field_offset(F_STORE,  B, D, T, K, S, AW);

  logic clk = 0, rst_n = 0, start = 0;
  logic [PC_W-1:0] loop_start, loop_end, prog_end;
  logic [31:0] loop_count, iter;
  logic busy, done, imem_re;
  logic [PC_W-1:0] imem_addr;
  logic [IW-1:0] instr;
  logic ld_valid, rf_valid, cu_valid, su_valid, c_valid, s_valid;
  logic [B-1:0][N-1:0] memsel;
  logic [B-1:0][DW-1:0] rfctrl;
  logic [NO-1:0][BW-1:0] insel;
  opcode_e cu_opcode, c_opcode, s_opcode;
  logic [T-1:0][1:0] pe_mode;
  logic [31:0] beta;
  logic [T-1:0] cu_wb_en;
  logic [S-1:0] su_last, c_en, s_en;
  su_mode_e su_mode;
  logic [BW-1:0] c_base, s_base;
  logic [AW-1:0] c_row, s_row;

  pipeline_ctrl #(.B(B), .D(D), .T(T), .K(K), .S(S), .AW(AW), .PC_W(PC_W)) dut (.*);
  always #5 clk = ~clk;

  logic [IW-1:0] prog [16];
  always_ff @(posedge clk) if (imem_re) instr <= prog[imem_addr];

  // instruction in I0 per cycle (valid flag, word); index = cycle number
  logic          hv [4096];
  logic [IW-1:0] hw [4096];
  int cyc = 0;
  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic opcode_e opc(input logic v, input logic [IW-1:0] w);
    return v ? opcode_e'(w[OP_W-1:0]) : OP_NOP;
  endfunction

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("cycle %0d: %s", cyc, what);
    end
  endtask

  // checks, sampled just before the rising edge
  task automatic check_stages();
    opcode_e o;
    logic [IW-1:0] w;
    // I0
    o = opc(hv[cyc], hw[cyc]); w = hw[cyc];
    chk(ld_valid == (o inside {OP_LOAD, OP_C, OP_CS, OP_CSS}), "ld_valid");
    if (ld_valid) chk(memsel == w[O_MS +: B*N], "memsel");
    // I1
    if (cyc >= 1) begin
      o = opc(hv[cyc-1], hw[cyc-1]); w = hw[cyc-1];
      chk(rf_valid == (o inside {OP_C, OP_S, OP_CS, OP_CSS}), "rf_valid");
      if (o != OP_NOP) chk(rfctrl == w[O_RF +: B*DW], "rfctrl");
    end
    if (cyc >= 2) begin
      o = opc(hv[cyc-2], hw[cyc-2]); w = hw[cyc-2];
      if (o != OP_NOP) chk(insel == w[O_IN +: NO*BW], "insel");
    end
    if (cyc >= 3) begin
      o = opc(hv[cyc-3], hw[cyc-3]); w = hw[cyc-3];
      chk(cu_valid == (o inside {OP_C, OP_S, OP_CS, OP_CSS}), "cu_valid");
      if (cu_valid) begin
        chk(cu_opcode == o, "cu_opcode");
        chk({beta, pe_mode} == w[O_CU +: T*2+32], "cuctrl");
        chk(cu_wb_en == w[O_ST +: S], "cu_wb_en");
      end
    end
    if (cyc >= 4 + K) begin
      o = opc(hv[cyc-4-K], hw[cyc-4-K]); w = hw[cyc-4-K];
      chk(su_valid == (o inside {OP_S, OP_CS, OP_CSS}), "su_valid");
      chk(c_valid == (o == OP_C), "c_valid");
      if (su_valid) chk({su_mode, su_last} == w[O_SU +: S+1], "suctrl");
      if (c_valid) chk({c_row, c_base, c_en} == w[O_ST +: S+BW+AW], "c store");
    end
    if (cyc >= LAST) begin
      o = opc(hv[cyc-LAST], hw[cyc-LAST]); w = hw[cyc-LAST];
      chk(s_valid == (o inside {OP_S, OP_CSS}), "s_valid");
      if (s_valid) begin
        chk(s_opcode == o, "s_opcode");
        chk({s_row, s_base, s_en} == w[O_ST +: S+BW+AW], "s store");
      end
    end
  endtask

  initial begin
    int pcs [$];
    int run_pcs [$];
    int n_runs = 0, n_done = 0;
    loop_start = 2; loop_end = 5; prog_end = 9;
    for (int i = 0; i < 4096; i++) begin hv[i] = 0; hw[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 40; run++) begin
      int t0;
      loop_start = PC_W'($urandom_range(0, 4)); loop_end = PC_W'($urandom_range(loop_start, 9));
      prog_end = PC_W'($urandom_range(loop_end, 15)); loop_count = $urandom_range(0, 4);
      for (int i = 0; i < 16; i++) begin
        for (int k = 0; k < IW; k += 32) prog[i][k +: 32] = $urandom;
        prog[i][OP_W-1:0] = OP_W'($urandom_range(0, 5));
      end
      // expected PC sequence
      pcs.delete();
      begin
        int p, it;
        p = 0; it = 0;
        forever begin
          pcs.push_back(p);
          if (p == loop_end) begin
            it++;
            if (it < loop_count) begin p = loop_start; continue; end
          end
          if (p == prog_end) break;
          p++;
        end
      end
      for (int i = 0; i < 4096; i++) hv[i] = 0;
      cyc = 0; run_pcs.delete();
      start = 1;
      @(posedge clk); #1 start = 0;
      // cycle 0 is the first fetch cycle
      while (cyc < 4000) begin
        @(negedge clk);
        if (imem_re) begin run_pcs.push_back(imem_addr); hv[cyc + 1] = 1; hw[cyc + 1] = prog[imem_addr]; end
        check_stages();
        if (done) begin n_done++; break; end
        chk(busy, "busy while running");
        cyc++;
      end
      chk(run_pcs.size() == pcs.size(), "pc count");
      for (int i = 0; i < pcs.size() && i < run_pcs.size(); i++) chk(run_pcs[i] == pcs[i], "pc sequence");
      // busy ends when fetching has ended and the last non-NOP instruction
      // has left the store stage
      begin
        int busy_end;
        busy_end = pcs.size();
        for (int i = 0; i < pcs.size(); i++)
          if (prog[pcs[i]][OP_W-1:0] != OP_NOP && i + 1 + LAST > busy_end) busy_end = i + 1 + LAST;
        chk(cyc == busy_end + 1, $sformatf("done cycle %0d, expected %0d", cyc, busy_end + 1));
      end
      chk(iter == ((loop_count < 1) ? 1 : loop_count), "iter");
      n_runs++;
      @(negedge clk);
      chk(!busy && !done, "idle after done");
    end
    chk(n_done == n_runs, "every run done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
