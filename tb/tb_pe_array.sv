// tb_pe_array: self-checking test of the 2x4 PE array in its three modes.
//  PM_QK   random 4 x D and 8 x D integer operands; every PE's four
//          accumulators must equal its 2x2 block of A x B^T and its
//          importance the block's sum of absolute values.
//  PM_FRAC for each of four 2x2 blocks c, PE(0,c) must hold IQ x FK^T and
//          PE(1,c) FQ x IK^T.
//  PM_PV   for a 2 x 4 output tile, the PE pairs must hold Int_P x Int_V,
//          Int_P x Frac_V, Frac_P x Int_V and Frac_P x Frac_V.
// References are plain nested loops over the stored operands.
module tb_pe_array;
  import hdp_pkg::*;
  localparam int D = 16;
  logic clk = 0, rst_n = 0, enable = 0, acc_clr = 0;
  pe_mode_e mode = PM_QK;
  comp_t a_in [4];
  comp_t b_in [16];
  logic signed [ACC_W-1:0] acc [8][4];
  logic [IMP_W-1:0] importance [8];
  int checks = 0, failures = 0;

  pe_array dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  comp_t A [D][4];
  comp_t B [D][16];

  function automatic comp_t rnd();
    return comp_t'($urandom_range(0, 510) - 255);
  endfunction

  task automatic run(pe_mode_e m);
    for (int k = 0; k < D; k++) begin
      for (int i = 0; i < 4; i++) A[k][i] = rnd();
      for (int j = 0; j < 16; j++) B[k][j] = rnd();
    end
    for (int k = 0; k < D; k++) begin
      @(negedge clk);
      mode = m; enable = 1; acc_clr = (k == 0);
      for (int i = 0; i < 4; i++) a_in[i] = A[k][i];
      for (int j = 0; j < 16; j++) b_in[j] = B[k][j];
    end
    @(negedge clk);
    enable = 0;
    #1;
  endtask

  function automatic longint dot(int ai, int bj);
    longint s;
    s = 0;
    for (int k = 0; k < D; k++) s += longint'(A[k][ai]) * longint'(B[k][bj]);
    return s;
  endfunction

  task automatic expect_eq(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    a_in = '{default: 0}; b_in = '{default: 0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 5; rep++) begin
      // ---- QK: 4x8 tile ----
      run(PM_QK);
      for (int r = 0; r < 2; r++)
        for (int c = 0; c < 4; c++) begin
          longint s;
          s = 0;
          for (int l = 0; l < 4; l++) begin
            longint e;
            e = dot(2*r + l/2, 2*c + l%2);
            expect_eq(acc[r*4+c][l], e, $sformatf("QK pe%0d lane%0d", r*4+c, l));
            s += (e < 0) ? -e : e;
          end
          expect_eq(importance[r*4+c], s, $sformatf("QK importance pe%0d", r*4+c));
        end
      // ---- FRAC: A = {IQ0, IQ1, FQ0, FQ1}, B = {FK0..FK7, IK0..IK7} ----
      run(PM_FRAC);
      for (int c = 0; c < 4; c++)
        for (int l = 0; l < 4; l++) begin
          expect_eq(acc[c][l], dot(l/2, 2*c + l%2), $sformatf("Frac1 block%0d lane%0d", c, l));
          expect_eq(acc[4+c][l], dot(2 + l/2, 8 + 2*c + l%2),
                    $sformatf("Frac2 block%0d lane%0d", c, l));
        end
      expect_eq(importance[0], 0, "importance off outside QK");
      // ---- PV: A = {PI0, PI1, PF0, PF1}, B = {VI d0..3, VF d0..3} ----
      run(PM_PV);
      for (int r = 0; r < 2; r++)
        for (int d = 0; d < 4; d++) begin
          int l;
          l = r*2 + d%2;
          expect_eq(acc[0 + d/2][l], dot(r,     d),     "II");
          expect_eq(acc[2 + d/2][l], dot(r,     4 + d), "IF");
          expect_eq(acc[4 + d/2][l], dot(2 + r, d),     "FI");
          expect_eq(acc[6 + d/2][l], dot(2 + r, 4 + d), "FF");
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
