// se_threshold: the "Threshold Calculator" of the sparsity engine.
//
// Combinational. From the minimum, maximum and mean importance of one row of
// blocks and the block pruning ratio rho_B it forms the row threshold
//   Theta = rho*max + (1-rho)*mean     for 0 <= rho < 1
//   Theta = -rho*min + (1+rho)*mean    for -1 < rho < 0
// exactly as the paper's pruning algorithm writes it. rho_B is a signed
// fixed-point number with 8 fraction bits (this design's encoding), so
// 1.0 = 256; the weighted sum is truncated back to an integer importance.
module se_threshold
  import hdp_pkg::*;
(
  input  logic [IMP_W-1:0]       min_v,
  input  logic [IMP_W-1:0]       max_v,
  input  logic [IMP_W-1:0]       mean_v,
  input  logic signed [RHO_W-1:0] rho_b,
  output logic [IMP_W-1:0]       theta_thr
);

  localparam int PW = IMP_W + RHO_W + 1;

  always_comb begin
    logic [RHO_W-1:0] w_ext, w_mean;
    logic [PW-1:0]    acc;
    if (!rho_b[RHO_W-1]) begin
      w_ext  = RHO_W'(rho_b);
      w_mean = RHO_W'(256) - RHO_W'(rho_b);
      acc    = PW'(max_v) * PW'(w_ext) + PW'(mean_v) * PW'(w_mean);
    end else begin
      w_ext  = RHO_W'(-rho_b);
      w_mean = RHO_W'(256) + RHO_W'(rho_b);
      acc    = PW'(min_v) * PW'(w_ext) + PW'(mean_v) * PW'(w_mean);
    end
    theta_thr = IMP_W'(acc >> 8);
  end

endmodule
