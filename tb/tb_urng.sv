// tb_urng: compares the generator (four LFSR shifts per enabled cycle) with
// a bit-serial model of the
// polynomial x^32 + x^22 + x^2 + x + 1 (Galois form), checks that it holds
// while disabled, never reaches zero, and that its low nibble (used by the
// Gumbel table) is close to uniform.
module tb_urng;
  logic clk = 0, rst_n = 0, en = 0;
  logic [31:0] rnd;
  int checks = 0, failures = 0;
  int hist [16];

  urng #(.SEED(32'hDEAD_BEEF)) dut (.clk, .rst_n, .en, .rnd);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] model_step(input logic [31:0] s);
    logic [31:0] n;
    logic fb;
    fb = s[0];
    for (int i = 0; i < 31; i++) n[i] = s[i+1];
    n[31] = fb;
    // taps of x^22, x^2, x^1 feed back into bits 21, 1, 0
    n[21] ^= fb;
    n[1]  ^= fb;
    n[0]  ^= fb;
    return n;
  endfunction

  initial begin
    logic [31:0] m;
    for (int i = 0; i < 16; i++) hist[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (rnd != 32'hDEAD_BEEF) failures++;
    m = 32'hDEAD_BEEF;
    for (int i = 0; i < 16000; i++) begin
      en = ($urandom_range(0, 3) != 0);
      @(negedge clk);
      if (en) m = model_step(model_step(model_step(model_step(m))));
      checks++;
      if (rnd != m || rnd == 0) begin
        failures++;
        if (failures < 5) $display("step %0d: got %h expected %h", i, rnd, m);
      end
      if (en) hist[rnd[3:0]]++;
    end
    for (int i = 0; i < 16; i++) begin
      checks++;
      // about 12000 draws, 750 per bin expected
      if (hist[i] < 600 || hist[i] > 900) begin
        failures++;
        $display("bin %0d count %0d", i, hist[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
