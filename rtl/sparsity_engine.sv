// sparsity_engine: decides which 2x2 blocks of the attention matrix and which
// heads are pruned (the paper's Sparsity Engine, SE).
//
// Block importances theta arrive one per cycle (theta_valid) for one row of
// blocks at a time. Each is written to the importance memory (2 KB: 512
// entries of 32 bits, the size printed in the paper) and folded into the
// row's running min, max and sum, and into theta_Head. end_r marks the end of
// the row: the engine divides the sum by the number of blocks n_blk (the
// paper's L/2) with a sequential divider, forms the threshold Theta in
// se_threshold, and then reads the row back from the memory, streaming one
// mask bit per cycle: mask = 0 (prune) when theta < Theta, else 1. end_h
// marks the end of the head's integer pass: one cycle later prune_valid
// pulses with prune_head = (theta_Head < tau_H) and theta_Head is cleared.
//
// Timing: after end_r the engine is busy for about 50 + n_blk cycles (divide,
// threshold, mask stream); row_done pulses with the last mask bit. theta
// values and end_r must not be sent while busy (assertion below). end_h may
// come in any cycle where the engine is not busy.
//
// Follows the paper: the min / max / sum / theta_Head registers, the divide
// by L/2, the threshold equation and the head comparator. The paper's text
// says a block is pruned when theta - Theta is negative, the SE figure draws
// the sign of (Theta - theta_i); they differ only at theta == Theta, where this
// design keeps the block, as the algorithm's (theta < Theta) ? 0 : 1 does.
// Handshakes and cycle counts are this design's choice.
module sparsity_engine
  import hdp_pkg::*;
#(
  parameter int IMP_DEPTH = 512               // 2 KB of 32-bit importances
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    theta_valid,
  input  logic [IMP_W-1:0]        theta,
  input  logic                    end_r,
  input  logic                    end_h,
  input  logic [$clog2(IMP_DEPTH+1)-1:0] n_blk,
  input  logic signed [RHO_W-1:0] rho_b,
  input  logic [HEAD_W-1:0]       tau_h,
  output logic                    busy,
  output logic                    mask_valid,
  output logic                    mask_bit,
  output logic [$clog2(IMP_DEPTH)-1:0] mask_idx,
  output logic                    row_done,
  output logic                    prune_valid,
  output logic                    prune_head,
  output logic [HEAD_W-1:0]       theta_head
);

  localparam int AW    = $clog2(IMP_DEPTH);
  localparam int NW    = $clog2(IMP_DEPTH+1);
  localparam int SUM_W = 48;

  typedef enum logic [1:0] {S_ACC, S_DIV, S_THR, S_MASK} se_state_e;
  se_state_e state;

  logic [IMP_W-1:0] imp_mem [IMP_DEPTH];
  logic [AW-1:0]    wr_idx, rd_idx;
  logic [IMP_W-1:0] min_r, max_r, thr_r;
  logic [SUM_W-1:0] sum_r;
  logic             first_r;

  logic             div_start, div_done;
  logic             div_busy;   // mirrors state S_DIV, kept for waveforms
  logic [SUM_W-1:0] div_q;
  logic [IMP_W-1:0] mean_v, thr_v;

  seq_divider #(.N(SUM_W), .D(NW)) u_div (
    .clk, .rst_n, .start(div_start), .dividend(sum_r), .divisor(n_blk),
    .busy(div_busy), .done(div_done), .quotient(div_q)
  );

  assign mean_v = (div_q > SUM_W'({IMP_W{1'b1}})) ? '1 : IMP_W'(div_q);

  se_threshold u_thr (
    .min_v(min_r), .max_v(max_r), .mean_v(mean_v), .rho_b, .theta_thr(thr_v)
  );

  assign busy      = (state != S_ACC);
  assign div_start = (state == S_ACC) && end_r;

  // Mask generator: sign of theta - Theta.
  logic [IMP_W:0] diff;
  always_comb diff = {1'b0, imp_mem[rd_idx]} - {1'b0, thr_r};

  always_ff @(posedge clk) begin
    if (state == S_ACC && theta_valid) imp_mem[wr_idx] <= theta;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_ACC; wr_idx <= '0; rd_idx <= '0;
      min_r <= '0; max_r <= '0; sum_r <= '0; thr_r <= '0; first_r <= 1'b1;
      theta_head <= '0; mask_valid <= 1'b0; mask_bit <= 1'b0; mask_idx <= '0;
      row_done <= 1'b0; prune_valid <= 1'b0; prune_head <= 1'b0;
    end else begin
      mask_valid  <= 1'b0;
      row_done    <= 1'b0;
      prune_valid <= 1'b0;
      unique case (state)
        S_ACC: begin
          if (theta_valid) begin
            wr_idx     <= wr_idx + 1'b1;
            sum_r      <= sum_r + SUM_W'(theta);
            theta_head <= theta_head + HEAD_W'(theta);
            if (first_r || theta < min_r) min_r <= theta;
            if (first_r || theta > max_r) max_r <= theta;
            first_r    <= 1'b0;
          end
          if (end_r) state <= S_DIV;
          if (end_h) begin
            prune_valid <= 1'b1;
            prune_head  <= (theta_head < tau_h);
            theta_head  <= '0;
          end
        end
        S_DIV: if (div_done) state <= S_THR;
        S_THR: begin
          thr_r  <= thr_v;
          rd_idx <= '0;
          state  <= S_MASK;
        end
        S_MASK: begin
          mask_valid <= 1'b1;
          mask_bit   <= ~diff[IMP_W];
          mask_idx   <= rd_idx;
          if (NW'(rd_idx) == n_blk - 1'b1) begin
            row_done <= 1'b1;
            state    <= S_ACC;
            wr_idx   <= '0;
            sum_r    <= '0;
            first_r  <= 1'b1;
          end else begin
            rd_idx <= rd_idx + 1'b1;
          end
        end
        default: state <= S_ACC;
      endcase
    end
  end

  // theta and end_r are only accepted while the engine is idle.
  assert property (@(posedge clk) disable iff (!rst_n)
                   busy |-> !(theta_valid || end_r));

endmodule
