// tb_hdp_core: end-to-end test of one HDP core at reduced size
// (MAX_L = 16 tokens, D_H = 8 dims, 6 heads in memory).
// The testbench models the six component memories (one-cycle read) with the
// core's documented address maps, runs heads with random Q, K, V, rho_B and
// sequence lengths 8 and 16, and compares every result tile with the
// reference attention of hdp_ref_pkg; a pruned head must produce no tile.
// out_ready is random, so the core must stall. Counted mechanisms, each of
// which must occur: pruned blocks, kept blocks, pruned heads, kept heads,
// output stalls.
module tb_hdp_core;
  import hdp_pkg::*;
  import hdp_ref_pkg::*;
  localparam int MAX_L = 16, D_H = 8, NH = 6;
  localparam int HW = MAX_L * D_H / 8;
  localparam int DEPTH = NH * HW;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0, rst_n = 0, start = 0;
  logic [4:0] head = 0;
  hdp_cfg_t cfg;
  logic busy, done, head_pruned;
  logic [15:0] blocks_kept;
  logic [AW-1:0] mem_addr [6];
  logic [WORD_W-1:0] mem_data [6];
  logic out_valid, out_ready;
  out_tile_t out_tile;
  int checks = 0, failures = 0;
  int n_blk_pruned = 0, n_blk_kept = 0, n_head_pruned = 0, n_head_kept = 0, n_stall = 0;

  hdp_core #(.MAX_L(MAX_L), .D_H(D_H), .MEM_DEPTH(DEPTH), .SCALE_SHIFT(1)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [WORD_W-1:0] mem [6][DEPTH];
  always @(posedge clk) for (int m = 0; m < 6; m++) mem_data[m] <= mem[m][mem_addr[m]];

  longint q [], k [], v [], ref_out [];
  bit     msk [];
  bit     seen [];
  int     ntiles;

  task automatic load(int h, int L);
    for (int t = 0; t < L; t++)
      for (int d = 0; d < D_H; d++) begin
        int aq, av;
        aq = h * HW + (t / 8) * D_H + d;
        av = h * HW + t * (D_H / 8) + d / 8;
        mem[MEM_IQ][aq][(t%8)*COMP_W +: COMP_W] = COMP_W'(ip(q[t*D_H+d]));
        mem[MEM_FQ][aq][(t%8)*COMP_W +: COMP_W] = COMP_W'(fp(q[t*D_H+d]));
        mem[MEM_IK][aq][(t%8)*COMP_W +: COMP_W] = COMP_W'(ip(k[t*D_H+d]));
        mem[MEM_FK][aq][(t%8)*COMP_W +: COMP_W] = COMP_W'(fp(k[t*D_H+d]));
        mem[MEM_IV][av][(d%8)*COMP_W +: COMP_W] = COMP_W'(ip(v[t*D_H+d]));
        mem[MEM_FV][av][(d%8)*COMP_W +: COMP_W] = COMP_W'(fp(v[t*D_H+d]));
      end
  endtask

  always @(posedge clk) begin
    out_ready <= ($urandom_range(0, 2) != 0);
    if (out_valid && !out_ready) n_stall++;
    if (out_valid && out_ready) begin
      ntiles++;
      for (int r = 0; r < 2; r++)
        for (int d = 0; d < 4; d++) begin
          int row, dim;
          row = out_tile.row + r; dim = out_tile.dim + d;
          checks++;
          if (longint'(signed'(out_tile.data[r*4+d])) != ref_out[row*D_H+dim]) begin
            failures++;
            if (failures < 20)
              $display("head %0d out[%0d][%0d] = %0d expected %0d", out_tile.head, row, dim,
                       signed'(out_tile.data[r*4+d]), ref_out[row*D_H+dim]);
          end
        end
    end
  end

  initial begin
    cfg = '0;
    out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 10; run++) begin
      int L, h, kind, kept;
      longint rho, tau;
      bit pr;
      L    = (run % 3 == 2) ? 8 : 16;
      h    = run % NH;
      kind = (run % 4 == 1) ? 1 : 0;
      rho  = (run == 0) ? 0 : longint'($urandom_range(0, 480)) - 240;
      tau  = 1;
      gen_head(L, D_H, kind, q, k, v);
      load(h, L);
      attention_head(L, D_H, rho, tau, 1, q, k, v, ref_out, msk, pr, kept);
      ntiles = 0;
      @(negedge clk);
      cfg.seq_len = 11'(L); cfg.rho_b = RHO_W'(rho); cfg.tau_h = HEAD_W'(tau);
      head = 5'(h); start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      checks++;
      if (head_pruned != pr || int'(blocks_kept) != kept) begin
        failures++;
        $display("run %0d: pruned %0d/%0d kept %0d/%0d", run, head_pruned, pr, blocks_kept, kept);
      end
      checks++;
      if (ntiles != (pr ? 0 : (L / 2) * (D_H / 4))) begin
        failures++;
        $display("run %0d: %0d tiles", run, ntiles);
      end
      if (pr) n_head_pruned++; else begin
        n_head_kept++;
        n_blk_kept += kept;
        n_blk_pruned += (L / 2) * (L / 2) - kept;
      end
    end
    $display("blocks kept %0d pruned %0d; heads kept %0d pruned %0d; output stalls %0d",
             n_blk_kept, n_blk_pruned, n_head_kept, n_head_pruned, n_stall);
    checks++;
    if (n_blk_pruned == 0 || n_blk_kept == 0 || n_head_pruned == 0 || n_head_kept == 0 || n_stall == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
