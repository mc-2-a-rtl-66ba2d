// tb_sample_element: drives random distributions into one sampler element
// and compares every sample with a reference Gumbel-max model that
// recomputes the element's random stream (same LFSR polynomial and seed) and
// the noise table from its formula. Checks the temporal mode (one category
// per cycle, idle gaps allowed), the spatial mode (candidate from the lane
// tree, category counter advancing by S) and the one-cycle sample latency.
module tb_sample_element;
  localparam int unsigned W = 32, S = 4, IDX_W = 16;
  localparam logic [31:0] SEED = 32'h1234_5678;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, noise_en = 0, last = 0, spatial = 0;
  logic signed [W-1:0] score = '0;
  logic signed [W:0]   tree_val = '0;
  logic [IDX_W-1:0]    tree_idx = '0;
  logic signed [W:0]   noisy;
  logic [IDX_W-1:0]    sample;
  logic                sample_valid;
  int checks = 0, failures = 0;

  sample_element #(.W(W), .S(S), .IDX_W(IDX_W), .SEED(SEED)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] step(input logic [31:0] s);
    logic [31:0] n;
    n = s >> 1;
    if (s[0]) n = n ^ 32'h8020_0003;
    return n;
  endfunction
  // Gumbel table from its formula: round(32 * -ln(-ln((k+0.5)/16))) << 11
  longint gtab [16];
  initial begin
    for (int k = 0; k < 16; k++) begin
      real e;
      e = -$ln(-$ln((k + 0.5) / 16.0)) * 32.0;
      gtab[k] = ((e >= 0.0) ? longint'($floor(e + 0.5)) : -longint'($floor(-e + 0.5))) * 2048;
    end
  end

  logic [31:0] m;
  longint      best;
  int          best_i, cnt;
  int          n_samples = 0;
  logic        expect_valid = 0;
  int          expect_idx;

  // one cycle: apply inputs at negedge, check outputs of the previous cycle
  task automatic cycle(input logic v, input logic l, input longint sc, input logic sp,
                       input longint tv, input int ti);
    in_valid = v; noise_en = v; last = l; spatial = sp;
    score = W'(sc); tree_val = (W+1)'(tv); tree_idx = IDX_W'(ti);
    #1;
    if (v) begin
      longint cand;
      int     ci;
      checks++;
      if (longint'(noisy) != sc + gtab[m[3:0]]) begin
        failures++;
        $display("noisy %0d expected %0d", noisy, sc + gtab[m[3:0]]);
      end
      cand = sp ? tv : sc + gtab[m[3:0]];
      ci   = sp ? cnt + ti : cnt;
      if (cnt == 0 || best < cand) begin best = cand; best_i = ci; end
      m = step(step(step(step(m))));
      cnt += sp ? S : 1;
    end
    @(negedge clk);
    checks++;
    if (sample_valid !== (v && l)) begin
      failures++;
      $display("sample_valid %0b expected %0b", sample_valid, v && l);
    end
    if (v && l) begin
      checks++;
      n_samples++;
      if (int'(sample) != best_i) begin
        failures++;
        $display("sample %0d expected %0d", sample, best_i);
      end
      cnt = 0;
    end
  endtask

  initial begin
    m = SEED; cnt = 0; best = 0; best_i = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // temporal mode: scores within a few units so the noise decides often
    for (int d = 0; d < 300; d++) begin
      int n = $urandom_range(1, 12);
      for (int c = 0; c < n; c++) begin
        if ($urandom_range(0, 4) == 0) cycle(0, 0, 0, 0, 0, 0);
        cycle(1, c == n-1, longint'($urandom_range(0, 8 * 65536)) - 4 * 65536, 0, 0, 0);
      end
    end
    // a dominant category must always win
    for (int d = 0; d < 50; d++) begin
      int n = $urandom_range(2, 9), win = $urandom_range(0, n-1);
      for (int c = 0; c < n; c++)
        cycle(1, c == n-1, (c == win) ? 100 * 65536 : -longint'($urandom_range(0, 65536)), 0, 0, 0);
      checks++;
      if (int'(sample) != win) failures++;
    end
    // spatial mode: the candidate comes from the lane tree
    for (int d = 0; d < 100; d++) begin
      int n = $urandom_range(1, 6);
      for (int c = 0; c < n; c++)
        cycle(1, c == n-1, 0, 1, longint'($urandom_range(0, 1 << 20)), $urandom_range(0, S-1));
    end
    $display("samples drawn: %0d", n_samples);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
