// hdp_top: the HDP attention co-processor.
//
// A host accelerator produces Q, K and V of one transformer layer as 16-bit
// fixed-point numbers and writes them, 8 values per word, through the DRAM
// load port. Each word is split on the way in into integer and fraction
// components, which go to the matching pair of on-chip memories (MEM0..MEM5
// = IQ, FQ, IK, FK, IV, FV). A start pulse then runs all n_heads heads of the
// layer: the control unit gives each free core the next head, every core
// prunes blocks and heads and computes the attention output of the heads it
// keeps, and the output arbiter writes the result tiles (2 rows x 4 dims of
// Q8.8 values) to DRAM through the out_* port. A pruned head produces no
// tiles; its output is zero. done pulses when every head is finished;
// heads_pruned and blocks_kept then summarise what was skipped.
//
// Load-port addressing (word = 8 values):
//   Q, K : addr = head*MAX_L*D_H/8 + (token/8)*D_H + dim,   value e = token 8*(token/8)+e
//   V    : addr = head*MAX_L*D_H/8 + token*(D_H/8) + dim/8, value e = dim 8*(dim/8)+e
//
// Four cores, eight PEs per core, six memories and the 2 KB importance
// memory follow the paper's architecture figure. The memory sizes (one
// BERT-Base layer: 12 heads of 128 tokens and 64 dims), the load port and the
// output port are this design's. The paper's register files and the DRAM
// itself are not part of this RTL.
module hdp_top
  import hdp_pkg::*;
#(
  parameter int N_CORES     = 4,
  parameter int MAX_L       = 128,
  parameter int D_H         = 64,
  parameter int MAX_HEADS   = 12,
  parameter int SCALE_SHIFT = 3,
  parameter int IMP_DEPTH   = 512,
  parameter int MEM_DEPTH   = MAX_HEADS * MAX_L * D_H / WORD_ELEMS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // DRAM load port
  input  logic                          ld_valid,
  input  ld_sel_e                       ld_sel,
  input  logic [$clog2(MEM_DEPTH)-1:0]  ld_addr,
  input  fx_t                           ld_data [WORD_ELEMS],
  // run control
  input  logic                          start,
  input  logic [4:0]                    n_heads,
  input  hdp_cfg_t                      cfg,
  output logic                          busy,
  output logic                          done,
  output logic [4:0]                    heads_pruned,
  output logic [31:0]                   blocks_kept,
  // DRAM result port
  output logic                          out_valid,
  input  logic                          out_ready,
  output out_tile_t                     out_tile
);

  localparam int AW = $clog2(MEM_DEPTH);

  // ---------------------------------------------------------------- load split
  logic [WORD_W-1:0] int_word, frac_word;
  always_comb begin
    for (int e = 0; e < WORD_ELEMS; e++) begin
      int_word[e*COMP_W +: COMP_W]  = int_part(ld_data[e]);
      frac_word[e*COMP_W +: COMP_W] = frac_part(ld_data[e]);
    end
  end

  // ---------------------------------------------------------------- memories
  logic [AW-1:0]     core_addr [N_CORES][6];
  logic [WORD_W-1:0] core_data [N_CORES][6];

  for (genvar m = 0; m < 6; m++) begin : g_mem
    logic [AW-1:0]     rd_addr [N_CORES];
    logic [WORD_W-1:0] rd_data [N_CORES];
    logic              wr_en;
    assign wr_en = ld_valid && (ld_sel == ld_sel_e'(m / 2));
    for (genvar c = 0; c < N_CORES; c++) begin : g_port
      assign rd_addr[c]      = core_addr[c][m];
      assign core_data[c][m] = rd_data[c];
    end
    onchip_mem #(.DEPTH(MEM_DEPTH), .N_PORTS(N_CORES)) u_mem (
      .clk, .wr_en, .wr_addr(ld_addr),
      .wr_data((m % 2 == 0) ? int_word : frac_word),
      .rd_addr, .rd_data
    );
  end

  // ---------------------------------------------------------------- control
  logic        core_start  [N_CORES];
  logic [4:0]  core_head   [N_CORES];
  logic        core_done   [N_CORES];
  logic        core_pruned [N_CORES];
  logic [15:0] core_kept   [N_CORES];
  logic        core_busy   [N_CORES];
  hdp_cfg_t    cfg_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                cfg_r <= '0;
    else if (start && !busy)   cfg_r <= cfg;
  end

  control_unit #(.N_CORES(N_CORES)) u_ctrl (
    .clk, .rst_n, .start, .n_heads, .busy, .done,
    .core_start, .core_head, .core_done, .core_pruned, .core_kept,
    .heads_pruned, .blocks_kept
  );

  // ---------------------------------------------------------------- cores
  logic      c_out_valid [N_CORES];
  logic      c_out_ready [N_CORES];
  out_tile_t c_out_tile  [N_CORES];

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    hdp_core #(
      .MAX_L(MAX_L), .D_H(D_H), .MEM_DEPTH(MEM_DEPTH),
      .SCALE_SHIFT(SCALE_SHIFT), .IMP_DEPTH(IMP_DEPTH)
    ) u_core (
      .clk, .rst_n,
      .start       (core_start[c]),
      .head        (core_head[c]),
      .cfg         (cfg_r),
      .busy        (core_busy[c]),
      .done        (core_done[c]),
      .head_pruned (core_pruned[c]),
      .blocks_kept (core_kept[c]),
      .mem_addr    (core_addr[c]),
      .mem_data    (core_data[c]),
      .out_valid   (c_out_valid[c]),
      .out_ready   (c_out_ready[c]),
      .out_tile    (c_out_tile[c])
    );
  end

  // ---------------------------------------------------------------- output
  out_arbiter #(.N(N_CORES)) u_arb (
    .clk, .rst_n,
    .in_valid(c_out_valid), .in_ready(c_out_ready), .in_tile(c_out_tile),
    .out_valid, .out_ready, .out_tile
  );

  // A core is only started when it is idle.
  for (genvar c = 0; c < N_CORES; c++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     core_start[c] |-> !core_busy[c]);
  end

endmodule
