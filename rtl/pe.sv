// pe: output-stationary processing element of the HDP PE array.
//
// Four multiply-accumulate lanes, as drawn in the paper's PE diagram: inputs
// A_i and A_i+1 from the first matrix and B_j .. B_j+3 from the second; lane 0
// forms A_i*B_j, lane 1 A_i*B_j+1, lane 2 A_i+1*B_j+2 and lane 3 A_i+1*B_j+3,
// each summed into its accumulator Acc1..Acc4. The array drives B_j+2 = B_j and
// B_j+3 = B_j+1 for a Q x K^T block, so the four accumulators hold one 2x2
// block of the result matrix. With import_flag high the importance output is
// |Acc1|+|Acc2|+|Acc3|+|Acc4|, the block importance theta used for pruning.
//
// Timing: one multiply-accumulate per lane in each cycle where enable is
// high; acc_clr (this design's addition, the paper draws no clear input)
// loads the products instead of adding them, starting a new output block. The
// accumulators and importance are visible the cycle after the last enable.
// rst_n is the active-low reset drawn as "_reset".
module pe
  import hdp_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    enable,
  input  logic                    acc_clr,
  input  logic                    import_flag,
  input  comp_t                   a [2],
  input  comp_t                   b [4],
  output logic signed [ACC_W-1:0] acc [4],
  output logic [IMP_W-1:0]        importance
);

  logic signed [ACC_W-1:0] prod [4];

  always_comb begin
    prod[0] = ACC_W'(a[0] * b[0]);
    prod[1] = ACC_W'(a[0] * b[1]);
    prod[2] = ACC_W'(a[1] * b[2]);
    prod[3] = ACC_W'(a[1] * b[3]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 4; i++) acc[i] <= '0;
    end else if (enable) begin
      for (int i = 0; i < 4; i++) acc[i] <= acc_clr ? prod[i] : acc[i] + prod[i];
    end
  end

  function automatic logic [ACC_W-1:0] absv(logic signed [ACC_W-1:0] v);
    return v[ACC_W-1] ? ACC_W'(-v) : ACC_W'(v);
  endfunction

  always_comb begin
    logic [IMP_W+1:0] s;
    s = (IMP_W+2)'(absv(acc[0])) + (IMP_W+2)'(absv(acc[1]));
    s = s + (IMP_W+2)'(absv(acc[2])) + (IMP_W+2)'(absv(acc[3]));
    importance = import_flag ? IMP_W'(s) : '0;
  end

endmodule
