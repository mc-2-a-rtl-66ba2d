// pe_tree: one tree-structured processing element (PE) of the compute unit.
//
// Forms an energy score from 2^K operands per cycle. The first level combines
// operand pairs (product for a dot-product, sum for a reduced sum), K-1 adder
// levels reduce the 2^(K-1) pair results to one value, which is multiplied by
// the inverse temperature beta and added to an in-place accumulator. The
// accumulator is the "one reused intermediate result" that lets an energy
// longer than 2^K terms be built over several cycles without going back to
// the register file. This structure is the paper's; the number formats are
// this design's choice: operands are int32, beta is Q16.16, so the score
// beta*sum comes out in Q16.16 (the 32-bit product is kept, wrapping on
// overflow).
//
// Modes (op): PE_BYPASS passes operand 0 unchanged (sampling from scores
// already in the register file); PE_DOT and PE_RSUM compute as above;
// PE_IDLE does nothing. With flush=0 the result is only accumulated (the
// "partial" mode used by Compute-type instructions); with flush=1 the result
// acc + beta*sum is issued and the accumulator cleared.
//
// Timing: K+1 pipeline stages, one operand set per cycle; out_valid rises
// K+1 cycles after in_valid.
module pe_tree
  import mc2a_pkg::*;
#(
  parameter int unsigned K = P_K,
  parameter int unsigned W = DATA_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  pe_op_e                op,
  input  logic                  flush,
  input  logic [W-1:0]          beta,
  input  logic [2**K-1:0][W-1:0] in,
  output logic [W-1:0]          out,
  output logic                  out_valid
);
  localparam int unsigned N = 2**K;
  localparam int unsigned H = N/2;

  typedef struct packed {
    logic         valid;
    pe_op_e       op;
    logic         flush;
    logic [W-1:0] beta;
    logic [W-1:0] byp;
  } ctl_t;

  logic [W-1:0] v   [K][H];  // v[l][i]: level l, entries 0 .. (H>>l)-1 used
  ctl_t         ctl [K];
  logic [W-1:0] acc;
  logic [W-1:0] prod;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < K; l++) ctl[l] <= '0;
    end else begin
      ctl[0] <= '{valid: in_valid, op: op, flush: flush, beta: beta, byp: in[0]};
      for (int l = 1; l < K; l++) ctl[l] <= ctl[l-1];
    end
  end

  // datapath registers carry no reset
  always_ff @(posedge clk) begin
    for (int i = 0; i < H; i++)
      v[0][i] <= (op == PE_DOT) ? in[2*i] * in[2*i+1] : in[2*i] + in[2*i+1];
    for (int l = 1; l < K; l++)
      for (int i = 0; i < (H >> l); i++)
        v[l][i] <= v[l-1][2*i] + v[l-1][2*i+1];
  end

  assign prod = ctl[K-1].beta * v[K-1][0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (ctl[K-1].valid) begin
        unique case (ctl[K-1].op)
          PE_BYPASS: begin
            out       <= ctl[K-1].byp;
            out_valid <= 1'b1;
          end
          PE_DOT, PE_RSUM: begin
            if (ctl[K-1].flush) begin
              out       <= acc + prod;
              out_valid <= 1'b1;
              acc       <= '0;
            end else begin
              acc <= acc + prod;
            end
          end
          default: ;
        endcase
      end
    end
  end
endmodule
