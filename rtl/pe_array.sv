// pe_array: the 2 x 4 array of processing elements in one HDP core.
//
// Eight PEs (two rows of four, as in the paper's core diagram) share one set
// of operand buses; the mode input decides which operand each PE sees.
//
//   PM_QK   integer pass of Q x K^T. a_in[0..3] carry the integer parts of
//           four Q rows at one feature dimension, b_in[0..7] those of eight K
//           rows. PE(r,c) accumulates the 2x2 block of rows 2r,2r+1 and
//           columns 2c,2c+1, so the array covers the paper's 4x8 output tile
//           and each PE's importance output is that block's theta.
//   PM_FRAC fraction pass of up to four 2x2 blocks of one block row, whose
//           eight K columns come from one memory word. a_in[0..1] = integer
//           Q of the two rows, a_in[2..3] = fractional Q, b_in[0..7] =
//           fractional K of the eight columns, b_in[8..15] = integer K.
//           PE(0,c) forms Frac1 = IQ x FK^T and PE(1,c) Frac2 = FQ x IK^T of
//           block c (columns 2c, 2c+1), both in the same cycles, as the paper
//           asks.
//   PM_PV   prob x V for two rows and four dimensions. a_in[0..1] = integer
//           parts of the two probabilities, a_in[2..3] = their fractions,
//           b_in[0..3] = integer V, b_in[4..7] = fractional V. Following the
//           paper, PEs 0,1 of row 0 form Int_P x Int_V, PEs 2,3 of row 0
//           Int_P x Frac_V, PEs 0,1 of row 1 Frac_P x Int_V and PEs 2,3 of
//           row 1 Frac_P x Frac_V.
//
// b_in[8..15] are used in PM_FRAC only. Timing: one operand set per enabled
// cycle; the accumulators are read the cycle after the last one. The operand mapping is this design's own; the
// paper gives the tile sizes and the PV assignment only.
module pe_array
  import hdp_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    enable,
  input  logic                    acc_clr,
  input  pe_mode_e                mode,
  input  comp_t                   a_in [4],
  input  comp_t                   b_in [16],
  output logic signed [ACC_W-1:0] acc [8][4],   // [pe = r*4+c][lane]
  output logic [IMP_W-1:0]        importance [8]
);

  comp_t pa [8][2];
  comp_t pb [8][4];

  always_comb begin
    for (int r = 0; r < 2; r++) begin
      for (int c = 0; c < 4; c++) begin
        int p;
        p = r * 4 + c;
        unique case (mode)
          PM_QK: begin
            pa[p][0] = a_in[2*r];
            pa[p][1] = a_in[2*r+1];
            pb[p][0] = b_in[2*c];
            pb[p][1] = b_in[2*c+1];
            pb[p][2] = b_in[2*c];
            pb[p][3] = b_in[2*c+1];
          end
          PM_FRAC: begin
            // row 0: IQ x FK, row 1: FQ x IK; column c: block c
            pa[p][0] = a_in[2*r];
            pa[p][1] = a_in[2*r+1];
            pb[p][0] = b_in[8*r + 2*c];
            pb[p][1] = b_in[8*r + 2*c + 1];
            pb[p][2] = b_in[8*r + 2*c];
            pb[p][3] = b_in[8*r + 2*c + 1];
          end
          default: begin  // PM_PV
            // row r uses the integer (r=0) or fractional (r=1) probability;
            // columns 0,1 use integer V, columns 2,3 fractional V; the two
            // PEs of a pair cover dims 0,1 and 2,3.
            pa[p][0] = a_in[2*r];
            pa[p][1] = a_in[2*r+1];
            pb[p][0] = b_in[4*(c/2) + 2*(c%2)];
            pb[p][1] = b_in[4*(c/2) + 2*(c%2) + 1];
            pb[p][2] = b_in[4*(c/2) + 2*(c%2)];
            pb[p][3] = b_in[4*(c/2) + 2*(c%2) + 1];
          end
        endcase
      end
    end
  end

  for (genvar p = 0; p < 8; p++) begin : g_pe
    pe u_pe (
      .clk, .rst_n, .enable, .acc_clr,
      .import_flag (mode == PM_QK),
      .a           (pa[p]),
      .b           (pb[p]),
      .acc         (acc[p]),
      .importance  (importance[p])
    );
  end

endmodule
