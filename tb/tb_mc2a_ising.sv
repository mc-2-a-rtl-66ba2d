// tb_mc2a_ising: block Gibbs sampling of a small Ising / MRF model on the
// whole core (reduced configuration: B=12, D=4, T=S=4, K=3, 64-word banks),
// the image-segmentation style workload at toy size.
//
// The model is a 2 x 4 grid of binary labels x in {0,1} with a field h_i
// per node and a coupling J between grid neighbours:
//   log p(x) = sum_i h_i x_i + J * sum_(i,j) [x_i == x_j]   (+ const).
// The grid is coloured like a chessboard; the 4 black and the 4 white nodes
// are each updated in parallel, node t of a colour on sampler element t.
// The conditional scores of node i are
//   label 0:  J * (n_i - sum_j x_j)      label 1:  h_i + J * sum_j x_j,
// computed as dot products of the neighbours' labels (loaded from the
// sample memory) with -J or +J, plus one product (constant, 1). One chain
// step is: CS (label 0) and CSS (label 1, stores the labels and counts them
// in the histogram) for the black nodes, NOPs until the new labels are in
// the sample memory, the same for the white nodes, NOPs. The hardware loop
// runs L steps. Scores use beta = 1/16, so J = 12 means 0.75.
//
// The testbench enumerates all 256 states to get the exact marginals
// P(x_i = 1) and checks that the histogram counts of every node are within
// 0.08 of them (the statistical error of the chain is about 0.02, the
// 16-entry Gumbel table adds a small bias). The sample memory must hold the
// last labels and the counts of every node must add up to L.
module tb_mc2a_ising;
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
  localparam int unsigned L     = 3000;          // chain steps
  localparam int          J     = 12;            // coupling, in 1/16
  // sample / histogram rows of the two colours; data rows
  localparam int unsigned R_COL [2] = '{40, 48};
  localparam int unsigned R_C0 [2] = '{0, 2};    // per colour: label-0 constant, label-1 constant
  localparam int unsigned R_NJ = 4, R_PJ = 5, R_ONE = 6;
  localparam int unsigned BK_C = 4, BK_J = 8, BK_ONE = 9;   // constant banks

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

  // ---------------- the grid ----------------
  // node (r, c), r = 0..1, c = 0..3; colour (r + c) % 2; index within colour
  int col_of [8], lane_of [8], node_of [2][4];
  int h [8];
  function automatic int nid(input int r, input int c);
    return r * 4 + c;
  endfunction
  function automatic logic adjacent(input int a, input int b);
    int ra, ca, rb, cb;
    ra = a / 4; ca = a % 4; rb = b / 4; cb = b % 4;
    return (ra == rb && (ca - cb == 1 || cb - ca == 1)) || (ca == cb && ra != rb);
  endfunction

  // ---------------- program ----------------
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

  // update of colour k, label v (0: CS, 1: CSS)
  task automatic i_update(input int k, input int v);
    int other;
    other = 1 - k;
    i_new(v == 0 ? OP_CS : OP_CSS);
    for (int b = 0; b < S; b++) ins[O_MS + b*N +: N] = {1'b1, 1'b1, 1'b0, AW'(R_COL[other])};
    for (int t = 0; t < T; t++) ins[O_MS + (BK_C + t)*N +: N] = {1'b1, 1'b0, 1'b0, AW'(R_C0[k] + v)};
    ins[O_MS + BK_J*N +: N]   = {1'b1, 1'b0, 1'b0, AW'(v == 0 ? R_NJ : R_PJ)};
    ins[O_MS + BK_ONE*N +: N] = {1'b1, 1'b0, 1'b0, AW'(R_ONE)};
    for (int b = 0; b < B; b++) ins[O_RF + b*DW +: DW] = '0;
    for (int t = 0; t < T; t++) begin
      int me, p;
      me = node_of[k][t];
      p = 0;
      ins[O_CU + t*2 +: 2] = 2'(PE_DOT);
      for (int n = 0; n < 8; n++)
        if (adjacent(me, n)) begin
          ins[O_IN + (t*NOP2 + 2*p)*BW +: BW]     = BW'(lane_of[n]);
          ins[O_IN + (t*NOP2 + 2*p + 1)*BW +: BW] = BW'(BK_J);
          p++;
        end
      ins[O_IN + (t*NOP2 + 6)*BW +: BW] = BW'(BK_C + t);
      ins[O_IN + (t*NOP2 + 7)*BW +: BW] = BW'(BK_ONE);
    end
    ins[O_CU + T*2 +: 32] = 32'h0000_1000;     // beta = 1/16
    ins[O_SU +: S] = (v == 1) ? '1 : '0;
    ins[O_SU + S] = SU_TEMPORAL;
    ins[O_ST +: S + BW + AW] = {AW'(R_COL[k]), BW'(0), {S{1'b1}}};
    i_put();
  endtask

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

  initial begin
    int cnt [2][4];
    real pm [8], z;
    logic [31:0] d;
    // grid bookkeeping
    begin
      int nk [2];
      nk[0] = 0; nk[1] = 0;
      for (int r = 0; r < 2; r++)
        for (int c = 0; c < 4; c++) begin
          int n, k;
          n = nid(r, c); k = (r + c) % 2;
          col_of[n] = k; lane_of[n] = nk[k]; node_of[k][nk[k]] = n; nk[k]++;
          h[n] = $urandom_range(0, 32) - 16;     // -1.0 .. 1.0
        end
    end
    // exact marginals
    z = 0.0;
    for (int i = 0; i < 8; i++) pm[i] = 0.0;
    for (int s = 0; s < 256; s++) begin
      int e;
      real w;
      e = 0;
      for (int i = 0; i < 8; i++) begin
        if (s[i]) e += h[i];
        for (int j = i + 1; j < 8; j++) if (adjacent(i, j) && s[i] == s[j]) e += J;
      end
      w = $exp(real'(e) / 16.0);
      z += w;
      for (int i = 0; i < 8; i++) if (s[i]) pm[i] += w;
    end
    for (int i = 0; i < 8; i++) pm[i] /= z;

    // program: one chain step per loop iteration
    npc = 0;
    for (int k = 0; k < 2; k++) begin
      i_update(k, 0);
      i_update(k, 1);
      for (int i = 0; i < 5 + K; i++) begin i_new(OP_NOP); i_put(); end
    end

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
    cfg(CFG_CSR, CSR_LOOP_END, npc - 1);
    cfg(CFG_CSR, CSR_LOOP_COUNT, L);
    cfg(CFG_CSR, CSR_PROG_END, npc - 1);
    // constants: per colour and lane the label-0 constant J*n_i and h_i
    for (int k = 0; k < 2; k++)
      for (int t = 0; t < T; t++) begin
        int me, nn;
        me = node_of[k][t];
        nn = 0;
        for (int n = 0; n < 8; n++) if (adjacent(me, n)) nn++;
        cfg(CFG_DMEM, baddr(BK_C + t, R_C0[k]), J * nn);
        cfg(CFG_DMEM, baddr(BK_C + t, R_C0[k] + 1), h[me]);
      end
    cfg(CFG_DMEM, baddr(BK_J, R_NJ), -J);
    cfg(CFG_DMEM, baddr(BK_J, R_PJ), J);
    cfg(CFG_DMEM, baddr(BK_ONE, R_ONE), 1);
    // initial labels 0
    for (int k = 0; k < 2; k++) for (int t = 0; t < T; t++) cfg(CFG_SMEM, baddr(t, R_COL[k]), 0);
    hist_clear = 1; @(negedge clk); hist_clear = 0;
    while (hist_clearing) @(negedge clk);

    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    chk(iter == L, $sformatf("%0d chain steps", iter));

    for (int k = 0; k < 2; k++)
      for (int t = 0; t < T; t++) begin
        logic [31:0] c0, c1, last;
        real pe;
        int me;
        me = node_of[k][t];
        host_read(1, t, R_COL[k], c0);
        host_read(1, t, R_COL[k] + 1, c1);
        host_read(0, t, R_COL[k], last);
        chk(c0 + c1 == L, $sformatf("node %0d: %0d + %0d samples", me, c0, c1));
        chk(last <= 1, $sformatf("node %0d: stored label %0d", me, last));
        pe = real'(c1) / real'(L);
        $display("node %0d (h = %0d/16): P(x=1) measured %0.3f, exact %0.3f", me, h[me], pe, pm[me]);
        chk(pe - pm[me] < 0.08 && pm[me] - pe < 0.08, $sformatf("node %0d marginal %0.3f vs %0.3f", me, pe, pm[me]));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
