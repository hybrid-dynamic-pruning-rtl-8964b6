// score_adder: the ADDER of an HDP core, combining partial products.
//
// Combinational. Two independent outputs:
//
//  * Attention scores of one kept 2x2 block. The integer product IQ x IK^T
//    (from the integer pass) is worth 2^16 units, the fractions Frac1 =
//    IQ x FK^T and Frac2 = FQ x IK^T are worth 2^8; FQ x FK^T is omitted, which
//    is the paper's approximation. The sum is taken back to 8 fraction bits
//    and divided by sqrt(d_h) as a right shift by SCALE_SHIFT (3 for d_h = 64,
//    the head size of both evaluated BERT models):
//        score = (I*2^8 + F1 + F2) >>> SCALE_SHIFT       (Q.8)
//    Frac1 is lane l of acc[0] and Frac2 lane l of acc[4]; the core routes
//    the two PEs that hold the chosen block to these inputs.
//
//  * Attention outputs of one 2 x 4 prob x V tile, from the four products the
//    paper assigns to the PE array (Int_P x Int_V, Int_P x Frac_V, Frac_P x
//    Int_V, Frac_P x Frac_V):
//        out = sat16((II*2^16 + (IF+FI)*2^8 + FF) >>> 8)  (Q8.8)
//
// The weights of the partial products follow from the fixed-point split; the
// shift for sqrt(d_h) and the saturation are this design's choices.
module score_adder
  import hdp_pkg::*;
#(
  parameter int SCALE_SHIFT = 3
) (
  input  logic signed [ACC_W-1:0]   int_blk [4],   // IQ x IK^T of the block
  input  logic signed [ACC_W-1:0]   acc [8][4],    // PE array accumulators
  output logic signed [SCORE_W-1:0] score [4],     // [row*2+col] of the block
  output fx_t                       out_tile [8]   // [row*4+dim] of the PV tile
);

  always_comb begin
    for (int l = 0; l < 4; l++) begin
      logic signed [47:0] s;
      s = (48'(int_blk[l]) <<< FRAC_BITS) + 48'(acc[0][l]) + 48'(acc[4][l]);
      score[l] = SCORE_W'(s >>> SCALE_SHIFT);
    end
    for (int r = 0; r < 2; r++) begin
      for (int d = 0; d < 4; d++) begin
        logic signed [47:0] ii, i_f, f_i, ff, t;
        ii  = 48'(acc[0 + d/2][r*2 + d%2]);
        i_f = 48'(acc[2 + d/2][r*2 + d%2]);
        f_i = 48'(acc[4 + d/2][r*2 + d%2]);
        ff  = 48'(acc[6 + d/2][r*2 + d%2]);
        t   = (ii <<< (2*FRAC_BITS)) + ((i_f + f_i) <<< FRAC_BITS) + ff;
        out_tile[r*4 + d] = sat_fx(t >>> FRAC_BITS);
      end
    end
  end

endmodule
