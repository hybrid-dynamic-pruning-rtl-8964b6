// seq_divider: unsigned restoring divider, one quotient bit per cycle.
//
// Used by the sparsity engine for the "/ (L/2)" of the row mean, where the
// number of blocks in a row is a run-time value. A start pulse latches the
// operands; done pulses N cycles later with quotient = floor(dividend /
// divisor). A zero divisor gives an all-ones quotient. The divider itself is
// this design's choice: the paper only draws a divide-by-L/2 operator.
module seq_divider #(
  parameter int N = 48,   // dividend and quotient width
  parameter int D = 10    // divisor width
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [N-1:0] dividend,
  input  logic [D-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [N-1:0] quotient
);

  logic [N-1:0]        q;
  logic [D:0]          rem;
  logic [D-1:0]        dvs;
  logic [$clog2(N+1)-1:0] cnt;

  logic [D+1:0] trial;
  always_comb trial = {rem, q[N-1]} - {2'b00, dvs};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0; rem <= '0; dvs <= '0; cnt <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        q    <= dividend;
        rem  <= '0;
        dvs  <= divisor;
        cnt  <= ($clog2(N+1))'(N);
        busy <= 1'b1;
      end else if (busy) begin
        if (!trial[D+1]) begin
          rem <= trial[D:0];
          q   <= {q[N-2:0], 1'b1};
        end else begin
          rem <= {rem[D-1:0], q[N-1]};
          q   <= {q[N-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign quotient = q;

endmodule
