// sample_unit: the reconfigurable Gumbel sample unit (SU) of S elements.
//
// Temporal mode: element j takes the score stream of CU tree j and samples
// its own distribution, one category per cycle, so S distributions (for S
// random variables) are sampled side by side; a distribution of N categories
// takes N cycles. Spatial mode: the S noisy scores of one cycle are reduced
// by a comparator tree of M = log2(S) levels to the largest value and its
// lane; element 0 compares that winner with its running maximum, so one
// distribution of N categories takes N/S cycles (the PAS index-sampling step
// of the paper). The tree is combinational and sits in the same cycle as the
// element comparators.
//
// Control per instruction (SUCtrl): one "last category" flag per element plus
// a mode bit (the mode bit is this design's addition to the S-bit field).
// Samples appear one cycle after the input flagged last. In spatial mode only
// element 0 produces samples, and its last flag closes the distribution.
module sample_unit
  import mc2a_pkg::*;
#(
  parameter int unsigned S     = P_S,
  parameter int unsigned W     = DATA_W,
  parameter int unsigned IDX_W = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [S-1:0][W-1:0]        score,
  input  logic [S-1:0]               last,
  input  su_mode_e                   mode,
  output logic [S-1:0][IDX_W-1:0]    sample,
  output logic [S-1:0]               sample_valid
);
  logic signed [W:0]  noisy [S];
  logic signed [W:0]  tv [2*S];      // heap-ordered tree, leaves at S..2S-1
  logic [IDX_W-1:0]   ti [2*S];
  logic               spatial;

  assign spatial = (mode == SU_SPATIAL);

  // comparator tree, ties keep the lower lane
  always_comb begin
    tv[0] = '0;
    ti[0] = '0;
    for (int j = 0; j < S; j++) begin
      tv[S+j] = noisy[j];
      ti[S+j] = IDX_W'(j);
    end
    for (int n = S-1; n >= 1; n--) begin
      if (tv[2*n] < tv[2*n+1]) begin
        tv[n] = tv[2*n+1];
        ti[n] = ti[2*n+1];
      end else begin
        tv[n] = tv[2*n];
        ti[n] = ti[2*n];
      end
    end
  end

  for (genvar j = 0; j < S; j++) begin : g_se
    logic se_valid;
    // in spatial mode only element 0 keeps state; the others only add noise
    assign se_valid = in_valid && (!spatial || j == 0);
    sample_element #(
      .W(W), .S(S), .IDX_W(IDX_W),
      .SEED(32'h9E37_79B9 * (j + 1) ^ 32'h0000_ACE1)
    ) u_se (
      .clk, .rst_n,
      .in_valid    (se_valid),
      .noise_en    (in_valid),
      .score       (signed'(score[j])),
      .last        (last[j]),
      .spatial     (spatial && j == 0),
      .tree_val    ((S > 1) ? tv[1] : noisy[0]),
      .tree_idx    ((S > 1) ? ti[1] : '0),
      .noisy       (noisy[j]),
      .sample      (sample[j]),
      .sample_valid(sample_valid[j])
    );
  end

endmodule
