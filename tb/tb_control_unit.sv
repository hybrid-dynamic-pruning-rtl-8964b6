// tb_control_unit: self-checking test of the head dispatcher.
// Four modelled cores take a random number of cycles per head and report
// random pruned / kept-block results. Checks: every head is handed out
// exactly once, never to a core that is still working, the lowest idle core
// is chosen, done comes only after the last core finished, and the pruned
// head and kept block totals match.
module tb_control_unit;
  localparam int NC = 4;
  logic clk = 0, rst_n = 0, start = 0;
  logic [4:0] n_heads = 0;
  logic busy, done;
  logic core_start [NC];
  logic [4:0] core_head [NC];
  logic core_done [NC];
  logic core_pruned [NC];
  logic [15:0] core_kept [NC];
  logic [4:0] heads_pruned;
  logic [31:0] blocks_kept;
  int checks = 0, failures = 0;

  control_unit #(.N_CORES(NC)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int remaining [NC];
  int given [32];
  int exp_pruned, exp_kept, outstanding;

  always @(posedge clk) begin
    if (!rst_n) for (int c = 0; c < NC; c++) remaining[c] <= 0;
    else for (int c = 0; c < NC; c++) begin
      core_done[c] <= 1'b0;
      if (core_start[c]) begin
        bit lower_idle;
        lower_idle = 0;
        for (int k = 0; k < c; k++) if (remaining[k] == 0 && !core_done[k] && !core_start[k]) lower_idle = 1;
        checks++;
        if (remaining[c] != 0 || lower_idle) begin
          failures++;
          $display("%0t head %0d started on core %0d (busy %0d, lower idle %0d)", $time, core_head[c], c, remaining[c], lower_idle);
        end
        given[core_head[c]]++;
        remaining[c] <= $urandom_range(2, 40);
        outstanding++;
      end else if (remaining[c] == 1) begin
        bit pr;
        logic [15:0] kp;
        pr = $urandom_range(0, 2) == 0;
        kp = pr ? 16'd0 : 16'($urandom_range(1, 4000));
        core_done[c]   <= 1'b1;
        core_pruned[c] <= pr;
        core_kept[c]   <= kp;
        exp_pruned += pr;
        exp_kept   += kp;
        remaining[c] <= 0;
        outstanding--;
      end else if (remaining[c] > 1) remaining[c] <= remaining[c] - 1;
    end
  end

  initial begin
    for (int c = 0; c < NC; c++) begin
      remaining[c] = 0; core_done[c] = 0; core_pruned[c] = 0; core_kept[c] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 5; r++) begin
      int nh;
      nh = (r == 0) ? 12 : (r == 1 ? 1 : $urandom_range(2, 31));
      for (int h = 0; h < 32; h++) given[h] = 0;
      exp_pruned = 0; exp_kept = 0; outstanding = 0;
      @(negedge clk);
      start = 1; n_heads = 5'(nh);
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      $display("%0t round %0d done", $time, r);
      checks++;
      if (outstanding != 0) begin
        failures++;
        $display("done with %0d heads still running", outstanding);
      end
      for (int h = 0; h < 32; h++) begin
        checks++;
        if (given[h] != (h < nh ? 1 : 0)) begin
          failures++;
          $display("head %0d given %0d times", h, given[h]);
        end
      end
      checks++;
      if (heads_pruned != 5'(exp_pruned) || blocks_kept != 32'(exp_kept)) begin
        failures++;
        $display("totals: pruned %0d/%0d kept %0d/%0d", heads_pruned, exp_pruned, blocks_kept, exp_kept);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
