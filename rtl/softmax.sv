// softmax: row-wise softmax unit of an HDP core.
//
// Input phase: one attention score per cycle (Q.8 signed, in_valid), with
// in_masked for entries of pruned blocks and in_last on the row's final
// entry. Each score is turned into an exponent, stored in the internal
// exponent memory and added to the row sum. Pruned entries get exponent 0,
// i.e. probability 0, so no later work is spent on them.
// At the end of the row the reciprocal of the sum is formed with a linear
// approximation, and the output phase streams one probability per cycle
// (out_valid, unsigned Q8.8, 256 = 1.0) in input order, with out_last on the
// final one. busy is high from in_last until the last output.
//
// Exponent (2nd-order polynomial, as the paper asks): e^s = 2^t with
// t = s*log2(e); t is split into an integer z and a fraction f in [0,1), and
// 2^f ~= 1 + f*(0.65625 + 0.34375*f), exact at f = 0 and f = 1. The result is
// 2^f shifted by z, with t clamped to [-16, 16). Scores are not reduced by the
// row maximum first (the paper does not mention it); the clamp bounds the range.
// Reciprocal (linear, as the paper asks): the sum is normalised to m*2^(e)
// with m in [0.5, 1), and 1/m ~= 48/17 - 32/17*m.
// The polynomial coefficients, the clamp and all widths are this design's.
//
// Latency for a row of n entries: n input cycles, one cycle for the
// reciprocal, n output cycles.
module softmax
  import hdp_pkg::*;
#(
  parameter int MAX_L = 128
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic signed [SCORE_W-1:0] in_score,
  input  logic                      in_masked,
  input  logic                      in_last,
  output logic                      busy,
  output logic                      out_valid,
  output logic [PROB_W-1:0]         out_prob,
  output logic [$clog2(MAX_L)-1:0]  out_idx,
  output logic                      out_last
);

  localparam int AW    = $clog2(MAX_L);
  localparam int EXP_W = 32;
  localparam int SUM_W = 48;
  localparam logic [17:0] LOG2E_Q8 = 18'd369;     // 1.4427 * 256
  localparam logic [17:0] K0_Q16   = 18'd185042;  // 48/17 * 2^16
  localparam logic [17:0] K1_Q16   = 18'd123362;  // 32/17 * 2^16

  typedef enum logic [1:0] {SM_IN, SM_RECIP, SM_OUT} sm_state_e;
  sm_state_e state;

  logic [EXP_W-1:0] exp_mem [MAX_L];
  logic [AW-1:0]    wr_idx, rd_idx, last_idx;
  logic [SUM_W-1:0] sum_r;
  logic [17:0]      recip_r;
  logic [5:0]       shift_r;

  // ---- exponent ----
  function automatic logic [EXP_W-1:0] exp_approx(logic signed [SCORE_W-1:0] s);
    logic signed [SCORE_W+18:0] t;
    logic signed [5:0]          z;
    logic [7:0]                 f;
    logic [17:0]                inner;
    logic [25:0]                fi;
    logic [17:0]                p;
    t = ((SCORE_W+19)'(s) * (SCORE_W+19)'(signed'({1'b0, LOG2E_Q8}))) >>> 8;
    if (t < -(SCORE_W+19)'(16*256))     t = -(SCORE_W+19)'(16*256);
    else if (t > (SCORE_W+19)'(16*256-1)) t = (SCORE_W+19)'(16*256-1);
    z     = 6'(t >>> 8);
    f     = t[7:0];
    inner = 18'(168 * 256) + 18'(18'(88) * 18'(f));
    fi    = 26'(f) * 26'(inner);
    p     = 18'(65536) + 18'(fi >> 8);
    if (!z[5]) return EXP_W'(p) << z;
    else       return EXP_W'(p) >> (-z);
  endfunction

  // ---- reciprocal of the row sum ----
  logic [5:0]  msb;
  logic [15:0] m16;
  logic [17:0] recip;
  always_comb begin
    logic [SUM_W-1:0] norm;
    msb = '0;
    for (int i = 0; i < SUM_W; i++) if (sum_r[i]) msb = 6'(i);
    if (msb >= 6'd15) norm = sum_r >> (msb - 6'd15);
    else              norm = sum_r << (6'd15 - msb);
    m16   = norm[15:0];
    recip = K0_Q16 - 18'((36'(K1_Q16) * 36'(m16)) >> 16);
  end

  // ---- output multiply ----
  logic [EXP_W+17:0] prod;
  logic [EXP_W+17:0] pscaled;
  always_comb begin
    prod    = (EXP_W+18)'(exp_mem[rd_idx]) * (EXP_W+18)'(recip_r);
    pscaled = prod >> shift_r;
  end

  always_ff @(posedge clk) begin
    if (state == SM_IN && in_valid)
      exp_mem[wr_idx] <= in_masked ? '0 : exp_approx(in_score);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= SM_IN; wr_idx <= '0; rd_idx <= '0; last_idx <= '0;
      sum_r <= '0; recip_r <= '0; shift_r <= '0;
      out_valid <= 1'b0; out_prob <= '0; out_idx <= '0; out_last <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      unique case (state)
        SM_IN: if (in_valid) begin
          sum_r  <= sum_r + (in_masked ? '0 : SUM_W'(exp_approx(in_score)));
          wr_idx <= wr_idx + 1'b1;
          if (in_last) begin
            last_idx <= wr_idx;
            state    <= SM_RECIP;
          end
        end
        SM_RECIP: begin
          recip_r <= recip;
          shift_r <= msb + 6'd9;
          rd_idx  <= '0;
          state   <= SM_OUT;
        end
        SM_OUT: begin
          out_valid <= 1'b1;
          out_idx   <= rd_idx;
          out_prob  <= (pscaled > (EXP_W+18)'(256)) ? PROB_W'(256) : PROB_W'(pscaled);
          if (rd_idx == last_idx) begin
            out_last <= 1'b1;
            state    <= SM_IN;
            wr_idx   <= '0;
            sum_r    <= '0;
          end else begin
            rd_idx <= rd_idx + 1'b1;
          end
        end
        default: state <= SM_IN;
      endcase
    end
  end

  assign busy = (state != SM_IN);

endmodule
