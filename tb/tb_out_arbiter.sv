// tb_out_arbiter: self-checking test of the output arbiter.
// Four producers each send 60 numbered tiles with random gaps and hold each
// tile until it is taken; the consumer's out_ready is random (so the output
// stalls). Checks: every tile arrives exactly once and in order per
// producer, the offered tile does not change during a stall, and while all
// four producers wait no producer is passed over more than three times.
module tb_out_arbiter;
  import hdp_pkg::*;
  localparam int N = 4, PER = 60;
  logic clk = 0, rst_n = 0;
  logic in_valid [N];
  logic in_ready [N];
  out_tile_t in_tile [N];
  logic out_valid, out_ready;
  out_tile_t out_tile;
  int checks = 0, failures = 0, stalls = 0;

  out_arbiter #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sent [N], recv [N], skipped [N];
  out_tile_t prev;
  logic prev_stall;

  // producers
  always @(posedge clk) begin
    if (!rst_n) begin
      for (int c = 0; c < N; c++) begin
        in_valid[c] <= 0; sent[c] <= 0;
      end
    end else begin
      for (int c = 0; c < N; c++) begin
        if (in_valid[c] && in_ready[c]) begin
          in_valid[c] <= 0;
          sent[c] <= sent[c] + 1;
        end else if (!in_valid[c] && sent[c] < PER && $urandom_range(0, 2) != 0) begin
          in_valid[c] <= 1;
          in_tile[c].head <= 5'(c);
          in_tile[c].row  <= 11'(sent[c]);
          in_tile[c].dim  <= 8'($urandom);
          in_tile[c].data <= {$urandom, $urandom, $urandom, $urandom};
        end
      end
    end
  end

  // consumer
  always @(posedge clk) begin
    if (!rst_n) begin
      out_ready <= 0; prev_stall <= 0;
      for (int c = 0; c < N; c++) begin recv[c] <= 0; skipped[c] <= 0; end
    end else begin
      if (prev_stall) begin
        checks++;
        if (!out_valid || out_tile !== prev) begin
          failures++;
          $display("%0t: tile changed during a stall", $time);
        end
      end
      if (out_valid && out_ready) begin
        int c;
        c = out_tile.head;
        checks++;
        if (out_tile.row != 11'(recv[c])) begin
          failures++;
          $display("core %0d: tile %0d arrived, expected %0d", c, out_tile.row, recv[c]);
        end
        recv[c] <= recv[c] + 1;
        for (int k = 0; k < N; k++) begin
          if (k == c) skipped[k] <= 0;
          else if (in_valid[k]) begin
            skipped[k] <= skipped[k] + 1;
            checks++;
            if (skipped[k] + 1 > N - 1) begin
              failures++;
              $display("core %0d passed over %0d times", k, skipped[k] + 1);
            end
          end
        end
      end
      prev_stall <= out_valid && !out_ready;
      if (out_valid && !out_ready) stalls++;
      prev <= out_tile;
      out_ready <= ($urandom_range(0, 3) != 0);
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (!(recv[0] == PER && recv[1] == PER && recv[2] == PER && recv[3] == PER)) @(posedge clk);
    checks++;
    if (stalls == 0) begin
      failures++;
      $display("no stall exercised");
    end
    $display("stalls %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
