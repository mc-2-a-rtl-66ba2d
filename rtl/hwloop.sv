// hwloop: program counter sequencing with a hardware loop, in the fetch
// stage.
//
// An MCMC program is a prologue, a loop body that performs one step t of the
// chain, and an epilogue. After start the unit issues PC 0, 1, 2, ... one per
// cycle; when the PC reaches loop_end and fewer than loop_count iterations
// have been completed it jumps back to loop_start, with no bubble, so the
// chain runs loop_count steps without any branch instructions. Fetching ends
// after the instruction at prog_end. One loop level, as the paper uses it for
// the step loop; a loop_count of 0 or 1 runs the body once. iter counts
// completed iterations. start is ignored while active.
module hwloop #(
  parameter int unsigned PC_W = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [PC_W-1:0] loop_start,
  input  logic [PC_W-1:0] loop_end,
  input  logic [31:0]     loop_count,
  input  logic [PC_W-1:0] prog_end,
  output logic [PC_W-1:0] pc,
  output logic            fetch,    // pc is fetched this cycle
  output logic [31:0]     iter
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc    <= '0;
      fetch <= 1'b0;
      iter  <= '0;
    end else if (!fetch) begin
      if (start) begin
        pc    <= '0;
        fetch <= 1'b1;
        iter  <= '0;
      end
    end else begin
      if (pc == loop_end) iter <= iter + 1;
      if (pc == loop_end && iter + 1 < loop_count) pc <= loop_start;
      else if (pc == prog_end)                      fetch <= 1'b0;
      else                                          pc <= pc + 1'b1;
    end
  end
endmodule
