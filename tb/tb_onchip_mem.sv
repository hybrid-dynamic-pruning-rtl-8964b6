// tb_onchip_mem: self-checking test of a component memory.
// Writes random words to random addresses, keeps a copy, and reads them back
// on all four ports at once with different addresses; data must appear one
// cycle after the address, and a write must not disturb other words.
module tb_onchip_mem;
  import hdp_pkg::*;
  localparam int DEPTH = 1024, NP = 4;
  logic clk = 0, wr_en = 0;
  logic [9:0] wr_addr = 0;
  logic [WORD_W-1:0] wr_data = 0;
  logic [9:0] rd_addr [NP];
  logic [WORD_W-1:0] rd_data [NP];
  int checks = 0, failures = 0;
  logic [WORD_W-1:0] model [DEPTH];
  bit written [DEPTH];

  onchip_mem #(.DEPTH(DEPTH), .N_PORTS(NP)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WORD_W-1:0] rword();
    logic [WORD_W-1:0] w;
    for (int i = 0; i < WORD_W; i += 32) w[i +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    rd_addr = '{default: 0};
    for (int i = 0; i < 3000; i++) begin
      logic [WORD_W-1:0] expd [NP];
      bit valid [NP];
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        int a;
        do a = $urandom_range(0, DEPTH - 1); while (!written[a] && i > 10 && $urandom_range(0, 9) != 0);
        rd_addr[p] = 10'(a);
        // a read in the cycle of a write to the same word returns the old word
        expd[p] = model[a]; valid[p] = written[a];
      end
      if ($urandom_range(0, 1)) begin
        wr_en = 1; wr_addr = 10'($urandom_range(0, DEPTH - 1)); wr_data = rword();
        model[wr_addr] = wr_data; written[wr_addr] = 1;
      end else wr_en = 0;
      @(negedge clk);
      wr_en = 0;
      for (int p = 0; p < NP; p++) begin
        if (valid[p]) begin
          checks++;
          if (rd_data[p] !== expd[p]) begin
            failures++;
            $display("port %0d addr %0d mismatch", p, rd_addr[p]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
