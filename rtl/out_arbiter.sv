// out_arbiter: merges the result tiles of the cores onto the single DRAM
// write port.
//
// Valid/ready on every side. The grant rotates (round robin, starting after
// the core served last) so that no core is starved; once a tile is offered on
// the output it is held, grant included, until out_ready takes it. A core is
// told in_ready only in the cycle its tile is taken. The paper only says that
// each tile's results are written to DRAM as soon as they are ready; the
// arbitration is this design's choice.
module out_arbiter
  import hdp_pkg::*;
#(
  parameter int N = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid [N],
  output logic      in_ready [N],
  input  out_tile_t in_tile  [N],
  output logic      out_valid,
  input  logic      out_ready,
  output out_tile_t out_tile
);

  localparam int GW = (N > 1) ? $clog2(N) : 1;

  logic [GW-1:0] ptr, gnt, gnt_r;
  logic          locked;
  logic          any;

  always_comb begin
    logic [GW-1:0] cand;
    any = 1'b0;
    gnt = ptr;
    for (int k = N - 1; k >= 0; k--) begin
      cand = GW'((int'(ptr) + k) % N);
      if (in_valid[cand]) begin
        any = 1'b1;
        gnt = cand;
      end
    end
    if (locked) begin
      gnt = gnt_r;
      any = 1'b1;
    end
    out_valid = any;
    out_tile  = in_tile[gnt];
    for (int c = 0; c < N; c++) in_ready[c] = any && out_ready && (gnt == GW'(c));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '0; gnt_r <= '0; locked <= 1'b0;
    end else begin
      if (out_valid && out_ready) begin
        ptr    <= GW'((int'(gnt) + 1) % N);
        locked <= 1'b0;
      end else if (out_valid) begin
        locked <= 1'b1;
        gnt_r  <= gnt;
      end
    end
  end

  // An offered tile is held until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_tile));

endmodule
