// tb_hwloop: random programs (loop_start <= loop_end <= prog_end, 0..5
// iterations); the PC issued in every cycle is compared with the sequence
// prologue, loop body repeated, epilogue, and the iteration count with the
// loop count. start while running must be ignored.
module tb_hwloop;
  localparam int unsigned PC_W = 6;
  logic clk = 0, rst_n = 0, start = 0;
  logic [PC_W-1:0] loop_start = '0, loop_end = '0, prog_end = '0;
  logic [31:0] loop_count = '0;
  logic [PC_W-1:0] pc;
  logic fetch;
  logic [31:0] iter;
  int checks = 0, failures = 0, n_jumps = 0;

  hwloop #(.PC_W(PC_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 100; p++) begin
      int ls, le, pe, lc, seq[$], reps;
      pe = $urandom_range(0, 40);
      le = $urandom_range(0, pe);
      ls = $urandom_range(0, le);
      lc = $urandom_range(0, 5);
      loop_start = PC_W'(ls); loop_end = PC_W'(le); prog_end = PC_W'(pe); loop_count = lc;
      reps = (lc < 1) ? 1 : lc;
      seq = {};
      for (int i = 0; i < ls; i++) seq.push_back(i);
      for (int r = 0; r < reps; r++) for (int i = ls; i <= le; i++) seq.push_back(i);
      for (int i = le + 1; i <= pe; i++) seq.push_back(i);
      n_jumps += reps - 1;
      start = 1;
      @(negedge clk);
      start = 0;
      foreach (seq[k]) begin
        checks++;
        if (!fetch || int'(pc) != seq[k]) begin
          failures++;
          if (failures < 5) $display("prog %0d step %0d: fetch %0b pc %0d expected %0d", p, k, fetch, pc, seq[k]);
        end
        if (k == 2) start = 1;   // ignored while running
        @(negedge clk);
        start = 0;
      end
      checks++;
      if (fetch || int'(iter) != reps) begin
        failures++;
        $display("prog %0d: fetch %0b iter %0d expected %0d", p, fetch, iter, reps);
      end
      @(negedge clk);
    end
    checks++;
    if (n_jumps == 0) failures++;
    $display("loop jumps %0d", n_jumps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
