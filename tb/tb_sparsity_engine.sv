// tb_sparsity_engine: self-checking test of the sparsity engine.
// For each head: several rows of random block importances (some rows with
// equal values, one row at the full 512-entry memory), random rho_B of both
// signs. The reference works out min, max, floor(mean), the threshold of the
// paper's equation and every mask bit, and theta_Head against tau_H (chosen
// just above and just below the total so that both outcomes and the equality
// case occur).
module tb_sparsity_engine;
  import hdp_pkg::*;
  localparam int DEPTH = 512;
  logic clk = 0, rst_n = 0;
  logic theta_valid = 0, end_r = 0, end_h = 0;
  logic [IMP_W-1:0] theta = 0;
  logic [9:0] n_blk = 0;
  logic signed [RHO_W-1:0] rho_b = 0;
  logic [HEAD_W-1:0] tau_h = 0;
  logic busy, mask_valid, mask_bit, row_done, prune_valid, prune_head;
  logic [8:0] mask_idx;
  logic [HEAD_W-1:0] theta_head;
  int checks = 0, failures = 0;
  int n_pruned_blocks = 0, n_kept_blocks = 0, n_pruned_heads = 0, n_kept_heads = 0;

  sparsity_engine #(.IMP_DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint th [DEPTH];
  bit     exp_mask [DEPTH];
  bit     got_mask [DEPTH];
  int     got_cnt;

  always @(posedge clk) if (mask_valid) begin
    got_mask[mask_idx] <= mask_bit;
    got_cnt <= got_cnt + 1;
  end

  task automatic do_row(int n, int kind, longint rho, output longint rowsum);
    longint mn, mx, sm, mean, thr;
    for (int j = 0; j < n; j++) begin
      case (kind)
        0: th[j] = $urandom_range(0, 1000000);
        1: th[j] = 777;                        // all equal
        default: th[j] = $urandom_range(0, 4194303);
      endcase
    end
    mn = th[0]; mx = th[0]; sm = 0;
    for (int j = 0; j < n; j++) begin
      if (th[j] < mn) mn = th[j];
      if (th[j] > mx) mx = th[j];
      sm += th[j];
    end
    mean = sm / n;
    if (rho >= 0) thr = (rho * mx + (256 - rho) * mean) / 256;
    else          thr = ((-rho) * mn + (256 + rho) * mean) / 256;
    for (int j = 0; j < n; j++) exp_mask[j] = !(th[j] < thr);
    rowsum = sm;
    rho_b = RHO_W'(rho);
    n_blk = 10'(n);
    got_cnt = 0;
    for (int j = 0; j < n; j++) begin
      @(negedge clk);
      theta_valid = 1; theta = IMP_W'(th[j]);
    end
    @(negedge clk);
    theta_valid = 0; end_r = 1;
    @(negedge clk);
    end_r = 0;
    while (!row_done) @(negedge clk);
    @(negedge clk);
    checks++;
    if (got_cnt != n) begin
      failures++;
      $display("row: %0d mask bits for %0d blocks", got_cnt, n);
    end
    for (int j = 0; j < n; j++) begin
      checks++;
      if (got_mask[j] != exp_mask[j]) begin
        failures++;
        $display("mask[%0d] = %0d expected %0d (theta %0d thr %0d)", j, got_mask[j], exp_mask[j], th[j], thr);
      end
      if (exp_mask[j]) n_kept_blocks++; else n_pruned_blocks++;
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int h = 0; h < 6; h++) begin
      longint total, rs;
      int rows;
      longint rho;
      rows = $urandom_range(2, 4);
      total = 0;
      for (int r = 0; r < rows; r++) begin
        int n, kind;
        n    = (h == 0 && r == 0) ? DEPTH : $urandom_range(2, 64);
        kind = (h == 1 && r == 0) ? 1 : (h == 0 ? 2 : 0);
        rho  = longint'($urandom_range(0, 510)) - 255;
        do_row(n, kind, rho, rs);
        total += rs;
      end
      case (h % 3)
        0: tau_h = HEAD_W'(total + 1);   // prune
        1: tau_h = HEAD_W'(total);       // equal: keep
        default: tau_h = HEAD_W'(total - 1);
      endcase
      @(negedge clk);
      checks++;
      if (theta_head != HEAD_W'(total)) begin
        failures++;
        $display("theta_head %0d expected %0d", theta_head, total);
      end
      end_h = 1;
      @(negedge clk);
      end_h = 0;
      checks++;
      if (!prune_valid || prune_head != (h % 3 == 0)) begin
        failures++;
        $display("head %0d: prune_valid %0d prune_head %0d", h, prune_valid, prune_head);
      end
      if (prune_head) n_pruned_heads++; else n_kept_heads++;
      checks++;
      if (theta_head != 0) begin
        failures++;
        $display("theta_head not cleared");
      end
    end
    $display("blocks kept %0d pruned %0d, heads kept %0d pruned %0d",
             n_kept_blocks, n_pruned_blocks, n_kept_heads, n_pruned_heads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
