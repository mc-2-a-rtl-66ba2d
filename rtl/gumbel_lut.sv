// gumbel_lut: uniform-to-Gumbel noise table of a sampler element.
//
// The Gumbel-max trick draws category argmax_j (log p_j + g_j) with
// g_j = -ln(-ln u_j), u_j uniform. Instead of computing the double logarithm,
// a 4-bit uniform number selects one of 16 precomputed noise values of 8 bits
// (table size and precision as chosen in the paper's accuracy study). Entry k
// holds round(32 * -ln(-ln((k+0.5)/16))): the Gumbel quantile at the centre of
// the k-th uniform bin, signed, with 5 fraction bits (range -1.25 .. +3.44).
// The bin-centre rule and the number format are this design's choice.
// Purely combinational.
module gumbel_lut
  import mc2a_pkg::*;
(
  input  logic [3:0]              idx,  // uniform random index
  output logic signed [LUT_W-1:0] g     // Gumbel noise, Q2.5
);
  always_comb begin
    unique case (idx)
      4'd0:  g = -8'sd40;
      4'd1:  g = -8'sd28;
      4'd2:  g = -8'sd20;
      4'd3:  g = -8'sd13;
      4'd4:  g = -8'sd8;
      4'd5:  g = -8'sd2;
      4'd6:  g =  8'sd3;
      4'd7:  g =  8'sd9;
      4'd8:  g =  8'sd15;
      4'd9:  g =  8'sd21;
      4'd10: g =  8'sd28;
      4'd11: g =  8'sd35;
      4'd12: g =  8'sd45;
      4'd13: g =  8'sd57;
      4'd14: g =  8'sd74;
      default: g = 8'sd110;
    endcase
  end
endmodule
