// tb_hdp_top_full: test of the HDP co-processor at its default size: one
// BERT-Base attention layer, 12 heads of 128 tokens x 64 dims, 4 cores,
// rho_B = 0.25, tau_H = 1.
// The testbench plays DRAM: it generates Q, K, V for every head, writes them
// through the load port (the top splits them into components), starts the
// layer and collects the result tiles, with a random out_ready so that the
// output path stalls. Every output value is compared with the reference
// attention of hdp_ref_pkg; a pruned head must produce no tile, and the
// pruned-head and kept-block totals must match. Counted mechanisms, each of
// which must occur: pruned and kept blocks, pruned and kept heads, output
// stalls, cores working at the same time, two cores offering a tile at once.
module tb_hdp_top_full;
  import hdp_pkg::*;
  import hdp_ref_pkg::*;
  localparam int MAX_L = 128, D_H = 64, NH = 12, NC = 4;
  localparam int HW = MAX_L * D_H / 8;
  localparam int DEPTH = NH * HW;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0, rst_n = 0, start = 0;
  logic ld_valid = 0;
  ld_sel_e ld_sel = LD_Q;
  logic [AW-1:0] ld_addr = 0;
  fx_t ld_data [8];
  logic [4:0] n_heads = 0;
  hdp_cfg_t cfg;
  logic busy, done;
  logic [4:0] heads_pruned;
  logic [31:0] blocks_kept;
  logic out_valid, out_ready;
  out_tile_t out_tile;
  int checks = 0, failures = 0;
  int n_stall = 0, n_parallel = 0, n_contend = 0;

  hdp_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef longint arr_t [];
  arr_t q [NH], k [NH], v [NH], ref_out [NH];
  bit   msk [];
  bit   pr [NH];
  int   kept [NH];
  int   ntiles [NH];

  always @(posedge clk) begin
    int nbusy, nvalid;
    out_ready <= ($urandom_range(0, 3) != 0);
    nbusy = 0; nvalid = 0;
    for (int c = 0; c < NC; c++) begin
      nbusy  += dut.core_busy[c];
      nvalid += dut.c_out_valid[c];
    end
    if (nbusy > 1) n_parallel++;
    if (nvalid > 1) n_contend++;
    if (out_valid && !out_ready) n_stall++;
    if (out_valid && out_ready) begin
      int h;
      h = out_tile.head;
      ntiles[h]++;
      for (int r = 0; r < 2; r++)
        for (int d = 0; d < 4; d++) begin
          int row, dim;
          row = out_tile.row + r; dim = out_tile.dim + d;
          checks++;
          if (longint'(signed'(out_tile.data[r*4+d])) != ref_out[h][row*D_H+dim]) begin
            failures++;
            if (failures < 20)
              $display("head %0d out[%0d][%0d] = %0d expected %0d", h, row, dim,
                       signed'(out_tile.data[r*4+d]), ref_out[h][row*D_H+dim]);
          end
        end
    end
  end

  task automatic load_word(ld_sel_e sel, int addr, longint vals [8]);
    @(negedge clk);
    ld_valid = 1; ld_sel = sel; ld_addr = AW'(addr);
    for (int e = 0; e < 8; e++) ld_data[e] = fx_t'(vals[e]);
  endtask

  initial begin
    int L, tot_kept, tot_pruned, nb_kept, nb_pruned, nh_kept;
    longint rho, tau;
    longint w [8];
    cfg = '0;
    out_ready = 0;
    ld_data = '{default: 0};
    L   = 128;
    rho = 64;
    tau = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int h = 0; h < NH; h++) begin
      gen_head(L, D_H, (h % 4 == 1) ? 1 : 0, q[h], k[h], v[h]);
      attention_head(L, D_H, rho, tau, 3, q[h], k[h], v[h], ref_out[h], msk, pr[h], kept[h]);
      for (int t = 0; t < L; t += 8)
        for (int d = 0; d < D_H; d++) begin
          for (int e = 0; e < 8; e++) w[e] = q[h][(t+e)*D_H + d];
          load_word(LD_Q, h * HW + (t / 8) * D_H + d, w);
          for (int e = 0; e < 8; e++) w[e] = k[h][(t+e)*D_H + d];
          load_word(LD_K, h * HW + (t / 8) * D_H + d, w);
        end
      for (int t = 0; t < L; t++)
        for (int d = 0; d < D_H; d += 8) begin
          for (int e = 0; e < 8; e++) w[e] = v[h][t*D_H + d + e];
          load_word(LD_V, h * HW + t * (D_H / 8) + d / 8, w);
        end
      ntiles[h] = 0;
    end
    @(negedge clk);
    ld_valid = 0;
    cfg.seq_len = 11'(L); cfg.rho_b = RHO_W'(rho); cfg.tau_h = HEAD_W'(tau);
    n_heads = 5'(NH); start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    tot_kept = 0; tot_pruned = 0; nb_kept = 0; nb_pruned = 0; nh_kept = 0;
    for (int h = 0; h < NH; h++) begin
      checks++;
      if (ntiles[h] != (pr[h] ? 0 : (L / 2) * (D_H / 4))) begin
        failures++;
        $display("head %0d: %0d tiles (pruned %0d)", h, ntiles[h], pr[h]);
      end
      tot_kept += kept[h];
      tot_pruned += pr[h];
      if (!pr[h]) begin
        nh_kept++;
        nb_kept += kept[h];
        nb_pruned += (L / 2) * (L / 2) - kept[h];
      end
    end
    checks++;
    if (int'(heads_pruned) != tot_pruned || int'(blocks_kept) != tot_kept) begin
      failures++;
      $display("totals: heads pruned %0d/%0d, blocks kept %0d/%0d", heads_pruned, tot_pruned,
               blocks_kept, tot_kept);
    end
    $display("blocks kept %0d pruned %0d; heads kept %0d pruned %0d; stalls %0d; cycles with >1 core busy %0d; with >1 tile offered %0d",
             nb_kept, nb_pruned, nh_kept, tot_pruned, n_stall, n_parallel, n_contend);
    checks++;
    if (nb_kept == 0 || nb_pruned == 0 || nh_kept == 0 || tot_pruned == 0 || n_stall == 0 ||
        n_parallel == 0 || n_contend == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
