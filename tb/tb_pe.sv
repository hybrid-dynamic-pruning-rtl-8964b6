// tb_pe: self-checking test of one processing element.
// Drives random 9-bit operands for several accumulation runs of random
// length, keeps its own 64-bit sums of the four lane products and compares
// the accumulators and the importance (sum of absolute values) after every
// run, with import_flag both high and low. Also checks that a disabled
// cycle leaves the accumulators alone (one-cycle MAC latency).
module tb_pe;
  import hdp_pkg::*;
  logic clk = 0, rst_n = 0, enable = 0, acc_clr = 0, import_flag = 0;
  comp_t a [2];
  comp_t b [4];
  logic signed [ACC_W-1:0] acc [4];
  logic [IMP_W-1:0] importance;
  int checks = 0, failures = 0;

  pe dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic comp_t rnd();
    return comp_t'($urandom_range(0, 510) - 255);
  endfunction

  initial begin
    longint ref_acc [4];
    longint s;
    a[0] = 0; a[1] = 0; b = '{default: 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 40; run++) begin
      int n;
      n = $urandom_range(1, 70);
      for (int l = 0; l < 4; l++) ref_acc[l] = 0;
      for (int k = 0; k < n; k++) begin
        @(negedge clk);
        a[0] = rnd(); a[1] = rnd();
        for (int l = 0; l < 4; l++) b[l] = rnd();
        enable = 1; acc_clr = (k == 0);
        ref_acc[0] += longint'(a[0]) * longint'(b[0]);
        ref_acc[1] += longint'(a[0]) * longint'(b[1]);
        ref_acc[2] += longint'(a[1]) * longint'(b[2]);
        ref_acc[3] += longint'(a[1]) * longint'(b[3]);
      end
      @(negedge clk);
      enable = 0; acc_clr = 0;
      // an idle cycle with different operands must not change anything
      a[0] = rnd(); b[0] = rnd();
      @(negedge clk);
      import_flag = 1;
      #1;
      s = 0;
      for (int l = 0; l < 4; l++) begin
        checks++;
        if (longint'(acc[l]) != ref_acc[l]) begin
          failures++;
          $display("run %0d lane %0d: acc %0d expected %0d", run, l, acc[l], ref_acc[l]);
        end
        s += (ref_acc[l] < 0) ? -ref_acc[l] : ref_acc[l];
      end
      checks++;
      if (longint'(importance) != s) begin
        failures++;
        $display("run %0d: importance %0d expected %0d", run, importance, s);
      end
      import_flag = 0;
      #1;
      checks++;
      if (importance != 0) begin
        failures++;
        $display("importance not gated by import_flag");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
