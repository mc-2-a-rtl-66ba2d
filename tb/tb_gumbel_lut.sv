// tb_gumbel_lut: checks every entry of the Gumbel noise table against
// round(32 * -ln(-ln((k+0.5)/16))) computed here in floating point.
module tb_gumbel_lut;
  import mc2a_pkg::*;
  logic [3:0] idx;
  logic signed [LUT_W-1:0] g;
  int checks = 0, failures = 0;

  gumbel_lut dut (.idx, .g);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 16; k++) begin
      real u, e;
      int  exp_g;
      idx = 4'(k);
      #1;
      u = (k + 0.5) / 16.0;
      e = -$ln(-$ln(u)) * 32.0;
      exp_g = (e >= 0.0) ? int'($floor(e + 0.5)) : -int'($floor(-e + 0.5));
      checks++;
      if (int'(g) != exp_g) begin
        failures++;
        $display("entry %0d: got %0d expected %0d", k, g, exp_g);
      end
    end
    // the table must be strictly increasing (a quantile function)
    for (int k = 1; k < 16; k++) begin
      logic signed [LUT_W-1:0] a;
      idx = 4'(k-1); #1; a = g;
      idx = 4'(k);   #1;
      checks++;
      if (!(g > a)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
