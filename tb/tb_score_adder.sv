// tb_score_adder: self-checking test of the ADDER.
// Random integer block results and fraction accumulators; the attention
// score must be (I*256 + F1 + F2) >> 3 and each output of the 2x4 PV tile
// (II*2^16 + (IF+FI)*2^8 + FF) >> 8, saturated to 16 bits, with the
// products taken from the PE/lane positions the PE array uses.
module tb_score_adder;
  import hdp_pkg::*;
  logic signed [ACC_W-1:0]   int_blk [4];
  logic signed [ACC_W-1:0]   acc [8][4];
  logic signed [SCORE_W-1:0] score [4];
  fx_t                       out_tile [8];
  int checks = 0, failures = 0, n_sat = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  score_adder #(.SCALE_SHIFT(3)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 300; it++) begin
      int big;
      big = (it % 4 == 0);
      for (int l = 0; l < 4; l++) int_blk[l] = $signed($urandom_range(0, 2097152)) - 1048576;
      for (int p = 0; p < 8; p++)
        for (int l = 0; l < 4; l++)
          acc[p][l] = big ? $signed($urandom_range(0, 40000)) - 20000
                          : $signed($urandom_range(0, 400)) - 200;
      #1;
      for (int l = 0; l < 4; l++) begin
        longint e;
        e = (longint'(int_blk[l]) * 256 + longint'(acc[0][l]) + longint'(acc[4][l])) >>> 3;
        checks++;
        if (longint'(score[l]) != e) begin
          failures++;
          $display("score[%0d] = %0d expected %0d", l, score[l], e);
        end
      end
      for (int r = 0; r < 2; r++)
        for (int d = 0; d < 4; d++) begin
          longint ii, i_f, f_i, ff, e;
          int pe_pair, lane;
          pe_pair = d / 2; lane = r * 2 + d % 2;
          ii  = acc[pe_pair][lane];     i_f = acc[2 + pe_pair][lane];
          f_i = acc[4 + pe_pair][lane]; ff  = acc[6 + pe_pair][lane];
          e = (ii * 65536 + (i_f + f_i) * 256 + ff) >>> 8;
          if (e > 32767) begin e = 32767; n_sat++; end
          if (e < -32768) begin e = -32768; n_sat++; end
          checks++;
          if (longint'(out_tile[r*4+d]) != e) begin
            failures++;
            $display("out[%0d][%0d] = %0d expected %0d", r, d, out_tile[r*4+d], e);
          end
        end
    end
    checks++;
    if (n_sat == 0) begin
      failures++;
      $display("saturation never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
