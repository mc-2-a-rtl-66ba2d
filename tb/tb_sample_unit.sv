// tb_sample_unit: an 8-element sample unit against a reference model of
// every lane (per-lane LFSR streams with the unit's seeds, the noise table
// from its formula, Gumbel-max selection). Temporal mode: each lane closes
// its own distributions at random points. Spatial mode: the 8 lanes of a
// cycle form categories 8c..8c+7 of one distribution sampled by element 0.
// Also checks that a sample appears exactly one cycle after its last input,
// and counts the samples and mode switches seen.
module tb_sample_unit;
  import mc2a_pkg::*;
  localparam int unsigned S = 8, W = 32, IDX_W = 16;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [S-1:0][W-1:0] score = '0;
  logic [S-1:0] last = '0;
  su_mode_e mode = SU_TEMPORAL;
  logic [S-1:0][IDX_W-1:0] sample;
  logic [S-1:0] sample_valid;
  int checks = 0, failures = 0, n_temporal = 0, n_spatial = 0;

  sample_unit #(.S(S), .W(W), .IDX_W(IDX_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint gtab [16];
  logic [31:0] m [S];
  longint best [S];
  int bi [S], cnt [S];

  function automatic logic [31:0] step(input logic [31:0] s);
    logic [31:0] n;
    n = s >> 1;
    if (s[0]) n = n ^ 32'h8020_0003;
    return n;
  endfunction

  task automatic cycle(input logic v, input logic [S-1:0] l, input su_mode_e md);
    logic [S-1:0] exp_v;
    int exp_s [S];
    exp_v = '0;
    in_valid = v; last = l; mode = md;
    if (v) begin
      longint nz [S];
      for (int j = 0; j < S; j++) begin
        nz[j] = longint'(signed'(score[j])) + gtab[m[j][3:0]];
        m[j] = step(step(step(step(m[j]))));
      end
      if (md == SU_TEMPORAL) begin
        for (int j = 0; j < S; j++) begin
          if (cnt[j] == 0 || best[j] < nz[j]) begin best[j] = nz[j]; bi[j] = cnt[j]; end
          cnt[j]++;
          if (l[j]) begin exp_v[j] = 1; exp_s[j] = bi[j]; cnt[j] = 0; end
        end
      end else begin
        longint tv = nz[0];
        int ti = 0;
        for (int j = 1; j < S; j++) if (tv < nz[j]) begin tv = nz[j]; ti = j; end
        if (cnt[0] == 0 || best[0] < tv) begin best[0] = tv; bi[0] = cnt[0] + ti; end
        cnt[0] += S;
        if (l[0]) begin exp_v[0] = 1; exp_s[0] = bi[0]; cnt[0] = 0; end
      end
    end
    @(negedge clk);
    for (int j = 0; j < S; j++) begin
      checks++;
      if (sample_valid[j] != exp_v[j]) begin
        failures++;
        $display("lane %0d valid %0b expected %0b", j, sample_valid[j], exp_v[j]);
      end else if (exp_v[j]) begin
        checks++;
        if (md == SU_TEMPORAL) n_temporal++; else n_spatial++;
        if (int'(sample[j]) != exp_s[j]) begin
          failures++;
          $display("lane %0d sample %0d expected %0d", j, sample[j], exp_s[j]);
        end
      end
    end
  endtask

  task automatic rand_scores();
    for (int j = 0; j < S; j++) score[j] = W'(longint'($urandom_range(0, 6 * 65536)) - 3 * 65536);
  endtask

  initial begin
    for (int k = 0; k < 16; k++) begin
      real e;
      e = -$ln(-$ln((k + 0.5) / 16.0)) * 32.0;
      gtab[k] = ((e >= 0.0) ? longint'($floor(e + 0.5)) : -longint'($floor(-e + 0.5))) * 2048;
    end
    for (int j = 0; j < S; j++) begin
      m[j] = (32'h9E37_79B9 * (j + 1)) ^ 32'h0000_ACE1;
      cnt[j] = 0; best[j] = 0; bi[j] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int phase = 0; phase < 6; phase++) begin
      if (phase % 2 == 0) begin
        for (int c = 0; c < 200; c++) begin
          logic [S-1:0] l;
          for (int j = 0; j < S; j++) l[j] = ($urandom_range(0, 3) == 0);
          if (c == 199) l = '1;
          rand_scores();
          cycle($urandom_range(0, 5) != 0 || c == 199, l, SU_TEMPORAL);
        end
      end else begin
        for (int d = 0; d < 40; d++) begin
          int n = $urandom_range(1, 5);
          for (int c = 0; c < n; c++) begin
            rand_scores();
            cycle(1, (c == n-1) ? S'(1) : '0, SU_SPATIAL);
          end
        end
      end
    end
    checks++;
    if (n_temporal < 100 || n_spatial < 100) failures++;
    $display("temporal samples %0d, spatial samples %0d", n_temporal, n_spatial);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
