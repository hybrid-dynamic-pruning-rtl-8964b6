// onchip_mem: one of the six on-chip component memories MEM0..MEM5.
//
// Holds WORD_ELEMS = 8 components (9-bit integer or fraction parts) per word.
// One write port is filled from DRAM; each core has its own read port, so the
// four cores read the memory concurrently without arbitration. Reads are
// synchronous: the word addressed in one cycle appears in the next.
//
// The paper names the six memories and says that the components of Q and K
// are brought from DRAM into on-chip memory; it gives neither their sizes nor
// their ports. This design assigns MEM0..MEM5 to integer Q, fraction Q,
// integer K, fraction K, integer V and fraction V, and sizes them (DEPTH) for
// one BERT-Base layer: 12 heads x 128 tokens x 64 dims / 8 per word = 12288.
module onchip_mem
  import hdp_pkg::*;
#(
  parameter int DEPTH   = 12288,
  parameter int N_PORTS = 4
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic [$clog2(DEPTH)-1:0]  wr_addr,
  input  logic [WORD_W-1:0]         wr_data,
  input  logic [$clog2(DEPTH)-1:0]  rd_addr [N_PORTS],
  output logic [WORD_W-1:0]         rd_data [N_PORTS]
);

  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  for (genvar p = 0; p < N_PORTS; p++) begin : g_rd
    always_ff @(posedge clk) rd_data[p] <= mem[rd_addr[p]];
  end

endmodule
