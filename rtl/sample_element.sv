// sample_element: one Gumbel-max sampler element (SE) of the sample unit.
//
// Draws one category from an unnormalised log-probability distribution that
// arrives one category per cycle, without exponentials or normalisation: each
// incoming score (a log-probability, Q16.16) gets Gumbel noise from a 16-entry
// table addressed by the element's own uniform generator, and a comparator
// keeps the largest noisy score and its category index. When the input is
// flagged as the last category ("category finished") the index of the maximum
// is issued as the sample, and the element restarts for the next
// distribution. This follows the paper's Gumbel sampler (noise LUT, adder,
// '<' comparator, max register, index register).
//
// In spatial mode the candidate is not the element's own noisy score but the
// winner (value and lane) of the sample unit's comparator tree over all S
// lanes; the category counter then advances by S per cycle, so S categories
// are consumed per cycle. Only element 0 is used that way.
//
// Timing: a sample is presented in the cycle after the input marked last
// (sample_valid is a one-cycle pulse). One input per cycle, no stalls. Ties
// keep the earlier category. The internal category counter replaces the
// paper's "category i" input; this is this design's choice.
module sample_element
  import mc2a_pkg::*;
#(
  parameter int unsigned W     = DATA_W,
  parameter int unsigned S     = P_S,
  parameter int unsigned IDX_W = 16,
  parameter logic [31:0] SEED  = 32'h1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic                noise_en,  // advance the generator (a score is present)
  input  logic signed [W-1:0] score,     // log-probability, Q16.16
  input  logic                last,      // category finished
  input  logic                spatial,   // use tree candidate
  input  logic signed [W:0]   tree_val,  // spatial-mode winner value
  input  logic [IDX_W-1:0]    tree_idx,  // spatial-mode winner lane
  output logic signed [W:0]   noisy,     // score + Gumbel noise, to the tree
  output logic [IDX_W-1:0]    sample,
  output logic                sample_valid
);
  logic [31:0]              rnd;
  logic signed [LUT_W-1:0]  g;
  logic signed [W:0]        max_q, cand_val, new_max;
  logic [IDX_W-1:0]         idx_q, cnt_q, cand_idx, new_idx;
  logic                     take;

  urng #(.SEED(SEED)) u_rng (.clk, .rst_n, .en(noise_en), .rnd);
  gumbel_lut u_lut (.idx(rnd[3:0]), .g);

  // noise is Q2.5, scores Q16.16: align the binary points
  assign noisy = W'(score) + ((W+1)'(g) <<< (BETA_FRAC - LUT_FRAC));

  always_comb begin
    cand_val = spatial ? tree_val : noisy;
    cand_idx = spatial ? (cnt_q + tree_idx) : cnt_q;
    take     = (cnt_q == '0) || (max_q < cand_val);
    new_max  = take ? cand_val : max_q;
    new_idx  = take ? cand_idx : idx_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      max_q        <= '0;
      idx_q        <= '0;
      cnt_q        <= '0;
      sample       <= '0;
      sample_valid <= 1'b0;
    end else begin
      sample_valid <= 1'b0;
      if (in_valid) begin
        if (last) begin
          sample       <= new_idx;
          sample_valid <= 1'b1;
          cnt_q        <= '0;
        end else begin
          max_q <= new_max;
          idx_q <= new_idx;
          cnt_q <= cnt_q + (spatial ? IDX_W'(S) : IDX_W'(1));
        end
      end
    end
  end
endmodule
