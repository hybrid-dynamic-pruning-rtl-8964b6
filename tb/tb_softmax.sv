// tb_softmax: self-checking test of the softmax unit.
// Rows of random Q.8 scores (lengths 8..128, some entries masked, some
// scores far outside the clamp range) are streamed in; every probability is
// compared bit for bit with the reference arithmetic of hdp_ref_pkg, masked
// entries must give 0, the probabilities must sum to 1 within 8%, and the
// last output must be on the port n+1 clock edges after the edge that takes
// in_last (the monitor below sees it one edge later, hence n+2).
module tb_softmax;
  import hdp_pkg::*;
  import hdp_ref_pkg::*;
  localparam int MAX_L = 128;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_masked = 0, in_last = 0;
  logic signed [SCORE_W-1:0] in_score = 0;
  logic busy, out_valid, out_last;
  logic [PROB_W-1:0] out_prob;
  logic [6:0] out_idx;
  int checks = 0, failures = 0;

  softmax #(.MAX_L(MAX_L)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint sc [MAX_L];
  bit     mk [MAX_L];
  longint got [MAX_L];
  int     ngot, cyc, last_in_cyc, last_out_cyc;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (out_valid) begin
      got[out_idx] <= out_prob;
      ngot <= ngot + 1;
      if (out_last) last_out_cyc <= cyc;
    end
  end

  initial begin
    cyc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int row = 0; row < 30; row++) begin
      int n;
      longint sum, rc, psum;
      int sh;
      n = 8 * $urandom_range(1, MAX_L / 8);
      for (int j = 0; j < n; j++) begin
        sc[j] = longint'($urandom_range(0, 1536)) - 768;       // -3 .. +3
        if (row % 5 == 4 && j == 0) sc[j] = 20000;             // clamps
        if (row % 5 == 3 && j == 1) sc[j] = -20000;
        mk[j] = (row % 2 == 1) && ($urandom_range(0, 3) == 0) && j != 0;
      end
      sum = 0;
      for (int j = 0; j < n; j++) if (!mk[j]) sum += exp_q16(sc[j]);
      recip_of(sum, rc, sh);
      ngot = 0;
      for (int j = 0; j < n; j++) begin
        @(negedge clk);
        in_valid = 1; in_score = SCORE_W'(sc[j]); in_masked = mk[j]; in_last = (j == n - 1);
      end
      last_in_cyc = cyc;
      @(negedge clk);
      in_valid = 0; in_last = 0;
      while (!(out_valid && out_last)) @(negedge clk);
      @(negedge clk);
      checks++;
      if (ngot != n || last_out_cyc - last_in_cyc != n + 2) begin
        failures++;
        $display("row %0d: %0d outputs, latency %0d (expected %0d, %0d)", row, ngot,
                 last_out_cyc - last_in_cyc, n, n + 2);
      end
      psum = 0;
      for (int j = 0; j < n; j++) begin
        longint e;
        e = mk[j] ? 0 : prob_of(exp_q16(sc[j]), rc, sh);
        psum += got[j];
        checks++;
        if (got[j] != e) begin
          failures++;
          $display("row %0d entry %0d: prob %0d expected %0d", row, j, got[j], e);
        end
      end
      checks++;
      if (psum < 256 - 20 - n / 2 || psum > 256 + 20) begin
        failures++;
        $display("row %0d: probabilities sum to %0d/256", row, psum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
