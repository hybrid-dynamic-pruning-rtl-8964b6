// control_unit: hands the attention heads of a layer to the HDP cores.
//
// A start pulse latches the number of heads. Every cycle the lowest-numbered
// idle core, if any, is given the next head (core_start pulse with core_head);
// a core stays claimed until its done pulse. done pulses once every head has
// been handed out and every core has finished. The unit also counts pruned
// heads (core_pruned is sampled with core_done) and the blocks the cores kept.
//
// The paper draws a Control Unit above the cores and says the heads are
// processed one after another, but not how work is shared between cores;
// giving each free core the next whole head is this design's choice, which
// needs no data exchange between cores since heads are independent.
module control_unit #(
  parameter int N_CORES = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [4:0]         n_heads,
  output logic               busy,
  output logic               done,
  output logic               core_start [N_CORES],
  output logic [4:0]         core_head  [N_CORES],
  input  logic               core_done  [N_CORES],
  input  logic               core_pruned [N_CORES],
  input  logic [15:0]        core_kept  [N_CORES],
  output logic [4:0]         heads_pruned,
  output logic [31:0]        blocks_kept
);

  logic [4:0]         n_heads_r, next_head;
  logic [N_CORES-1:0] active;
  logic               any_pick;
  int                 pick;

  always_comb begin
    pick     = 0;
    any_pick = 1'b0;
    for (int c = N_CORES - 1; c >= 0; c--) begin
      if (!active[c]) begin
        pick     = c;
        any_pick = 1'b1;
      end
    end
    for (int c = 0; c < N_CORES; c++) begin
      core_start[c] = busy && any_pick && (pick == c) && (next_head < n_heads_r);
      core_head[c]  = next_head;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; n_heads_r <= '0; next_head <= '0;
      active <= '0; heads_pruned <= '0; blocks_kept <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1; n_heads_r <= n_heads; next_head <= '0;
          heads_pruned <= '0; blocks_kept <= '0;
        end
      end else begin
        logic [4:0]  np;
        logic [31:0] bk;
        logic [N_CORES-1:0] act;
        act = active;
        np = heads_pruned;
        bk = blocks_kept;
        for (int c = 0; c < N_CORES; c++) begin
          if (core_done[c]) begin
            act[c] = 1'b0;
            np = np + 5'(core_pruned[c]);
            bk = bk + 32'(core_kept[c]);
          end
          if (core_start[c]) act[c] = 1'b1;
        end
        active       <= act;
        heads_pruned <= np;
        blocks_kept  <= bk;
        if (any_pick && next_head < n_heads_r) next_head <= next_head + 1'b1;
        if (next_head == n_heads_r && active == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
