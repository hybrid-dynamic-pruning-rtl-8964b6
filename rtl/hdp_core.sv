// hdp_core: one HDP core. Runs one attention head at a time with hybrid
// dynamic pruning: integer-only scores decide which 2x2 blocks and whether the
// whole head are worth computing, and only the kept blocks are refined and
// used.
//
// Contents: the 2x4 PE array, the sparsity engine (SE), the ADDER
// (score_adder), the softmax unit and the sequencer below, plus the core's
// buffers: the integer results of the head (int_buf), the block mask
// (mask_mem), the importances of the second block row of a tile (stage_theta),
// two rows of scores and two rows of probabilities.
//
// Per head (start pulse with head number and configuration):
//  1. Integer pass. For each 4-row band t of Q and each 8-column tile u, the
//     PE array accumulates IQ x IK^T over the D_H feature dimensions (one
//     memory word of each per cycle) into a 4x8 tile; every PE holds one 2x2
//     block and its importance theta. The tile's integer results go to
//     int_buf; the four thetas of block row 2t go straight to the SE, those
//     of block row 2t+1 wait in stage_theta. At the end of a band the SE gets
//     END_R for row 2t, returns that row's mask, then receives row 2t+1 and
//     returns its mask.
//  2. Head decision. END_H to the SE; if theta_Head < tau_H the head is pruned:
//     done pulses with head_pruned = 1 and nothing else is computed or
//     written for it (its output is zero by definition).
//  3. Fetch Upon Mask fraction pass, per block row i, in groups of four
//     blocks (the eight K rows of one memory word). A group whose four
//     blocks are all pruned costs one cycle and no memory read. Otherwise
//     IQ, FQ (rows 2i, 2i+1) and IK, FK (the group's eight rows) are read for
//     D_H cycles while PE(0,c) forms IQ x FK^T and PE(1,c) FQ x IK^T of block
//     c of the group; then, one block per cycle, the ADDER adds the stored
//     integer result and scales by 1/sqrt(d_h).
//  4. Softmax of rows 2i and 2i+1 (pruned entries get probability 0).
//  5. prob x V, per group of four dimensions: for every token j of a kept
//     block, one V word of each kind is read (V of pruned blocks is never
//     fetched) and the PE array forms the four Int/Frac products; the ADDER
//     combines them into a 2x4 output tile, offered on out_valid/out_ready.
//     The core stalls while out_ready is low.
//
// Memory address maps (words of 8 components; base = head * MAX_L*D_H/8):
//   Q, K : base + (token/8)*D_H + dim       element = token % 8
//   V    : base + token*(D_H/8) + dim/8      element = dim % 8
// The read ports are synchronous; the sequencer issues an address in one
// cycle and the PE array uses the word in the next.
//
// The phase order, the integer pass with tiling, the SE protocol (END_R,
// END_H), Fetch Upon Mask and the PV product split follow the paper. Fetching
// K for the fraction pass a word (four blocks) at a time, so that a pruned
// block next to a kept one is fetched but not used, the buffer organisation,
// the address maps and the handshakes are this design's choices.
module hdp_core
  import hdp_pkg::*;
#(
  parameter int MAX_L       = 128,
  parameter int D_H         = 64,
  parameter int MEM_DEPTH   = 12288,
  parameter int SCALE_SHIFT = 3,
  parameter int IMP_DEPTH   = 512
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // control
  input  logic                          start,
  input  logic [4:0]                    head,
  input  hdp_cfg_t                      cfg,
  output logic                          busy,
  output logic                          done,
  output logic                          head_pruned,
  output logic [15:0]                   blocks_kept,
  // component memory read ports, indexed by mem_id_e
  output logic [$clog2(MEM_DEPTH)-1:0]  mem_addr [6],
  input  logic [WORD_W-1:0]             mem_data [6],
  // result tiles
  output logic                          out_valid,
  input  logic                          out_ready,
  output out_tile_t                     out_tile
);

  localparam int AW   = $clog2(MEM_DEPTH);
  localparam int NB   = MAX_L / 2;            // max blocks per row
  localparam int HEAD_WORDS = MAX_L * D_H / WORD_ELEMS;
  localparam int KW   = $clog2(D_H + 1);
  localparam int LW   = $clog2(MAX_L + 1);

  typedef enum logic [4:0] {
    C_IDLE, C_QK_RUN, C_QK_PUSH, C_QK_ENDR0, C_QK_MASK0, C_QK_STAGE,
    C_QK_ENDR1, C_QK_MASK1, C_QK_ENDH, C_QK_HEAD, C_FR_SEL, C_FR_RUN,
    C_FR_ADD, C_SM_FEED, C_SM_WAIT, C_PV_RUN, C_PV_OUT, C_DONE
  } core_state_e;
  core_state_e state;

  // ---------------------------------------------------------------- config
  hdp_cfg_t           cfg_r;
  logic [4:0]         head_r;
  logic [LW-1:0]      seq_l;
  logic [LW-1:0]      n_blk;
  logic [AW-1:0]      base;
  assign seq_l = LW'(cfg_r.seq_len);
  assign n_blk = LW'(cfg_r.seq_len >> 1);
  assign base  = AW'(head_r) * AW'(HEAD_WORDS);

  // ---------------------------------------------------------------- buffers
  logic signed [ACC_W-1:0] int_buf  [NB*NB][4];
  logic [NB-1:0]           mask_mem [NB];
  logic [IMP_W-1:0]        stage_theta [NB];
  logic signed [SCORE_W-1:0] score_row [2][MAX_L];
  logic [PROB_W-1:0]       prob_buf [2][MAX_L];
  logic [IMP_W-1:0]        theta_tile [8];

  // ---------------------------------------------------------------- counters
  logic [LW-1:0] t_r, u_r, c_r, i_r, j_r, x_r;
  logic [KW-1:0] k_r;
  logic [KW-1:0] dg_r;
  logic          ro_r;
  logic          vld_d, clr_d, first_r;
  logic [LW-1:0] j_d;

  // ---------------------------------------------------------------- PE array
  logic      pe_en, pe_clr;
  pe_mode_e  pe_mode;
  comp_t     a_in [4];
  comp_t     b_in [16];
  logic signed [ACC_W-1:0] acc [8][4];
  logic [IMP_W-1:0]        importance [8];

  pe_array u_pe_array (
    .clk, .rst_n, .enable(pe_en), .acc_clr(pe_clr), .mode(pe_mode),
    .a_in, .b_in, .acc, .importance
  );

  // ---------------------------------------------------------------- SE
  logic        se_tv, se_endr, se_endh, se_busy;
  logic [IMP_W-1:0] se_theta;
  logic        se_mvalid, se_mbit, se_rdone, se_pvalid, se_prune;
  logic [$clog2(IMP_DEPTH)-1:0] se_midx;
  logic [HEAD_W-1:0] se_thead;

  sparsity_engine #(.IMP_DEPTH(IMP_DEPTH)) u_se (
    .clk, .rst_n, .theta_valid(se_tv), .theta(se_theta), .end_r(se_endr),
    .end_h(se_endh), .n_blk(($clog2(IMP_DEPTH+1))'(n_blk)), .rho_b(cfg_r.rho_b),
    .tau_h(cfg_r.tau_h), .busy(se_busy), .mask_valid(se_mvalid),
    .mask_bit(se_mbit), .mask_idx(se_midx), .row_done(se_rdone),
    .prune_valid(se_pvalid), .prune_head(se_prune), .theta_head(se_thead)
  );

  // ---------------------------------------------------------------- ADDER
  logic signed [SCORE_W-1:0] blk_score [4];
  fx_t                       pv_tile [8];
  logic signed [ACC_W-1:0]   int_sel [4];
  logic signed [ACC_W-1:0]   acc_add [8][4];

  // In the fraction pass the ADDER takes block c_r of the group: its Frac1
  // from PE(0,c_r) and Frac2 from PE(1,c_r), moved to the PE 0 / PE 4 inputs.
  always_comb begin
    for (int l = 0; l < 4; l++) int_sel[l] = int_buf[int'(i_r)*NB + int'(j_r) + int'(c_r)][l];
    acc_add = acc;
    if (state == C_FR_ADD) begin
      acc_add[0] = acc[{1'b0, c_r[1:0]}];
      acc_add[4] = acc[{1'b1, c_r[1:0]}];
    end
  end

  score_adder #(.SCALE_SHIFT(SCALE_SHIFT)) u_adder (
    .int_blk(int_sel), .acc(acc_add), .score(blk_score), .out_tile(pv_tile)
  );

  // ---------------------------------------------------------------- softmax
  logic                      sm_valid, sm_masked, sm_last, sm_busy;
  logic signed [SCORE_W-1:0] sm_score;
  logic                      sm_ovalid, sm_olast;
  logic [PROB_W-1:0]         sm_prob;
  logic [$clog2(MAX_L)-1:0]  sm_oidx;

  softmax #(.MAX_L(MAX_L)) u_softmax (
    .clk, .rst_n, .in_valid(sm_valid), .in_score(sm_score),
    .in_masked(sm_masked), .in_last(sm_last), .busy(sm_busy),
    .out_valid(sm_ovalid), .out_prob(sm_prob), .out_idx(sm_oidx),
    .out_last(sm_olast)
  );

  // ---------------------------------------------------------------- datapath
  function automatic comp_t elem(logic [WORD_W-1:0] w, int e);
    return comp_t'(w[e*COMP_W +: COMP_W]);
  endfunction

  logic issuing;
  logic pv_kept;
  logic [3:0] grp_mask;   // mask bits of the fraction pass's group of blocks
  assign grp_mask = mask_mem[i_r][j_r +: 4];
  assign pv_kept = mask_mem[i_r][j_r >> 1];

  always_comb begin
    for (int m = 0; m < 6; m++) mem_addr[m] = '0;
    for (int a = 0; a < 4; a++) a_in[a] = '0;
    for (int b = 0; b < 16; b++) b_in[b] = '0;
    issuing   = 1'b0;
    pe_mode   = PM_QK;
    se_tv     = 1'b0;
    se_theta  = '0;
    se_endr   = 1'b0;
    se_endh   = 1'b0;
    sm_valid  = 1'b0;
    sm_score  = '0;
    sm_masked = 1'b0;
    sm_last   = 1'b0;
    unique case (state)
      C_QK_RUN: begin
        pe_mode = PM_QK;
        issuing = (k_r < KW'(D_H));
        mem_addr[MEM_IQ] = base + AW'(((t_r * 4) >> 3) * D_H) + AW'(k_r);
        mem_addr[MEM_IK] = base + AW'(u_r * D_H) + AW'(k_r);
        for (int a = 0; a < 4; a++) a_in[a] = elem(mem_data[MEM_IQ], int'(t_r[0]) * 4 + a);
        for (int b = 0; b < 8; b++) b_in[b] = elem(mem_data[MEM_IK], b);
      end
      C_QK_PUSH: begin
        se_tv    = 1'b1;
        se_theta = theta_tile[c_r[1:0]];
      end
      C_QK_STAGE: begin
        se_tv    = 1'b1;
        se_theta = stage_theta[c_r];
      end
      C_QK_ENDR0, C_QK_ENDR1: se_endr = 1'b1;
      C_QK_ENDH:              se_endh = 1'b1;
      C_FR_RUN: begin
        pe_mode = PM_FRAC;
        issuing = (k_r < KW'(D_H));
        mem_addr[MEM_IQ] = base + AW'(((i_r * 2) >> 3) * D_H) + AW'(k_r);
        mem_addr[MEM_FQ] = mem_addr[MEM_IQ];
        mem_addr[MEM_IK] = base + AW'(((j_r * 2) >> 3) * D_H) + AW'(k_r);
        mem_addr[MEM_FK] = mem_addr[MEM_IK];
        a_in[0] = elem(mem_data[MEM_IQ], int'((i_r * 2) % 8));
        a_in[1] = elem(mem_data[MEM_IQ], int'((i_r * 2) % 8) + 1);
        a_in[2] = elem(mem_data[MEM_FQ], int'((i_r * 2) % 8));
        a_in[3] = elem(mem_data[MEM_FQ], int'((i_r * 2) % 8) + 1);
        for (int e = 0; e < 8; e++) begin
          b_in[e]     = elem(mem_data[MEM_FK], e);
          b_in[8 + e] = elem(mem_data[MEM_IK], e);
        end
      end
      C_SM_FEED: begin
        sm_valid  = 1'b1;
        sm_score  = score_row[ro_r][x_r];
        sm_masked = !mask_mem[i_r][x_r >> 1];
        sm_last   = (x_r == seq_l - 1'b1);
      end
      C_PV_RUN: begin
        pe_mode = PM_PV;
        issuing = (j_r < seq_l) && pv_kept;
        mem_addr[MEM_IV] = base + AW'(j_r * (D_H / 8)) + AW'(dg_r >> 1);
        mem_addr[MEM_FV] = mem_addr[MEM_IV];
        a_in[0] = comp_t'(prob_buf[0][j_d] >> FRAC_BITS);
        a_in[1] = comp_t'(prob_buf[1][j_d] >> FRAC_BITS);
        a_in[2] = comp_t'(prob_buf[0][j_d][FRAC_BITS-1:0]);
        a_in[3] = comp_t'(prob_buf[1][j_d][FRAC_BITS-1:0]);
        for (int d = 0; d < 4; d++) begin
          b_in[d]     = elem(mem_data[MEM_IV], int'(dg_r[0]) * 4 + d);
          b_in[4 + d] = elem(mem_data[MEM_FV], int'(dg_r[0]) * 4 + d);
        end
      end
      default: ;
    endcase
  end

  assign pe_en  = vld_d;
  assign pe_clr = clr_d;

  // Tile of results, held while waiting for out_ready.
  always_comb begin
    out_tile.head = head_r;
    out_tile.row  = 11'(i_r * 2);
    out_tile.dim  = 8'(dg_r * 4);
    for (int e = 0; e < 8; e++) out_tile.data[e] = pv_tile[e];
  end
  assign out_valid = (state == C_PV_OUT);
  assign busy      = (state != C_IDLE);

  // ---------------------------------------------------------------- buffers
  always_ff @(posedge clk) begin
    if (state == C_QK_RUN && !issuing && !vld_d) begin
      for (int r = 0; r < 2; r++)
        for (int c = 0; c < 4; c++)
          for (int l = 0; l < 4; l++)
            int_buf[(2 * t_r + r) * NB + 4 * u_r + c][l] <= acc[r * 4 + c][l];
      for (int p = 0; p < 8; p++) theta_tile[p] <= importance[p];
    end
    if (state == C_QK_PUSH) stage_theta[4 * u_r + c_r] <= theta_tile[4 + c_r[1:0]];
    if (se_mvalid) mask_mem[(state == C_QK_MASK0) ? 2 * t_r : 2 * t_r + 1][se_midx] <= se_mbit;
    if (state == C_FR_ADD) begin
      score_row[0][2 * (j_r + c_r)]     <= blk_score[0];
      score_row[0][2 * (j_r + c_r) + 1] <= blk_score[1];
      score_row[1][2 * (j_r + c_r)]     <= blk_score[2];
      score_row[1][2 * (j_r + c_r) + 1] <= blk_score[3];
    end
    if (sm_ovalid) prob_buf[ro_r][sm_oidx] <= sm_prob;
  end

  // ---------------------------------------------------------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; cfg_r <= '0; head_r <= '0;
      t_r <= '0; u_r <= '0; c_r <= '0; i_r <= '0; j_r <= '0; x_r <= '0;
      k_r <= '0; dg_r <= '0; ro_r <= 1'b0; vld_d <= 1'b0; clr_d <= 1'b0;
      first_r <= 1'b0; j_d <= '0;
      done <= 1'b0; head_pruned <= 1'b0; blocks_kept <= '0;
    end else begin
      done  <= 1'b0;
      vld_d <= issuing;
      clr_d <= issuing && first_r;
      if (issuing) begin
        first_r <= 1'b0;
        j_d     <= j_r;
      end
      unique case (state)
        C_IDLE: if (start) begin
          cfg_r <= cfg; head_r <= head;
          t_r <= '0; u_r <= '0; k_r <= '0; first_r <= 1'b1;
          blocks_kept <= '0; head_pruned <= 1'b0;
          state <= C_QK_RUN;
        end
        // ---- integer pass ----
        C_QK_RUN: begin
          if (issuing) k_r <= k_r + 1'b1;
          else if (!vld_d) begin
            c_r   <= '0;
            state <= C_QK_PUSH;
          end
        end
        C_QK_PUSH: begin
          c_r <= c_r + 1'b1;
          if (c_r == 3) begin
            if (u_r == LW'((seq_l >> 3) - 1)) state <= C_QK_ENDR0;
            else begin
              u_r <= u_r + 1'b1; k_r <= '0; first_r <= 1'b1;
              state <= C_QK_RUN;
            end
          end
        end
        C_QK_ENDR0: state <= C_QK_MASK0;
        C_QK_MASK0: if (se_rdone) begin
          c_r   <= '0;
          state <= C_QK_STAGE;
        end
        C_QK_STAGE: begin
          c_r <= c_r + 1'b1;
          if (c_r == n_blk - 1'b1) state <= C_QK_ENDR1;
        end
        C_QK_ENDR1: state <= C_QK_MASK1;
        C_QK_MASK1: if (se_rdone) begin
          if (t_r == LW'((seq_l >> 2) - 1)) state <= C_QK_ENDH;
          else begin
            t_r <= t_r + 1'b1; u_r <= '0; k_r <= '0; first_r <= 1'b1;
            state <= C_QK_RUN;
          end
        end
        C_QK_ENDH: state <= C_QK_HEAD;
        C_QK_HEAD: if (se_pvalid) begin
          if (se_prune) begin
            head_pruned <= 1'b1;
            state       <= C_DONE;
          end else begin
            i_r <= '0; j_r <= '0;
            state <= C_FR_SEL;
          end
        end
        // ---- Fetch Upon Mask fraction pass ----
        C_FR_SEL: begin
          if (j_r == n_blk) begin
            x_r <= '0; ro_r <= 1'b0;
            state <= C_SM_FEED;
          end else if (|grp_mask) begin
            k_r <= '0; c_r <= '0; first_r <= 1'b1;
            blocks_kept <= blocks_kept + 16'(grp_mask[0]) + 16'(grp_mask[1])
                           + 16'(grp_mask[2]) + 16'(grp_mask[3]);
            state <= C_FR_RUN;
          end else begin
            j_r <= j_r + LW'(4);
          end
        end
        C_FR_RUN: begin
          if (issuing) k_r <= k_r + 1'b1;
          else if (!vld_d) state <= C_FR_ADD;
        end
        C_FR_ADD: begin
          c_r <= c_r + 1'b1;
          if (c_r == 3) begin
            c_r   <= '0;
            j_r   <= j_r + LW'(4);
            state <= C_FR_SEL;
          end
        end
        // ---- softmax of rows 2i, 2i+1 ----
        C_SM_FEED: begin
          x_r <= x_r + 1'b1;
          if (x_r == seq_l - 1'b1) state <= C_SM_WAIT;
        end
        C_SM_WAIT: if (sm_olast) begin
          if (!ro_r) begin
            ro_r <= 1'b1; x_r <= '0;
            state <= C_SM_FEED;
          end else begin
            dg_r <= '0; j_r <= '0; first_r <= 1'b1;
            state <= C_PV_RUN;
          end
        end
        // ---- prob x V ----
        C_PV_RUN: begin
          if (j_r < seq_l) begin
            j_r <= pv_kept ? j_r + 1'b1 : j_r + LW'(2);
          end else if (!vld_d) state <= C_PV_OUT;
        end
        C_PV_OUT: if (out_ready) begin
          if (dg_r == KW'(D_H / 4 - 1)) begin
            if (i_r == n_blk - 1'b1) state <= C_DONE;
            else begin
              i_r <= i_r + 1'b1; j_r <= '0;
              state <= C_FR_SEL;
            end
          end else begin
            dg_r <= dg_r + 1'b1; j_r <= '0; first_r <= 1'b1;
            state <= C_PV_RUN;
          end
        end
        C_DONE: begin
          done  <= 1'b1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  // A result tile stays stable until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_tile));
  // The SE is never handed an importance while it is generating a mask.
  assert property (@(posedge clk) disable iff (!rst_n)
                   se_busy |-> !(se_tv || se_endr));
  // The softmax unit is never fed while it is emitting a row.
  assert property (@(posedge clk) disable iff (!rst_n)
                   sm_busy |-> !sm_valid);

endmodule
